// chamber_reco: local segment reconstruction for one drift-tube chamber.
//
// The chain follows the block diagram of the algorithm:
//   hit stream -> initial grouping -> filtering NN -> disambiguation NN
//              -> t0 finder (mean-timer) -> track intercept and slope -> segment
// The macro-cell leaving the grouping stage also feeds the t0 finder and the
// fitter directly; here that path is a chain of delay registers that keeps the
// macro-cell aligned with the network results. All 7 macro-cells of the chamber
// share this chain, one macro-cell per clock (II = 1).
//
// Latency from a macro-cell leaving the grouping stage (mc valid in cycle n):
// filter decision n+2, laterality n+4, t0 n+5, segment_o n+7. The two network
// weight sets are written through the cfg ports (address map in mlp_dense).
// Segments are produced only for solvable patterns; nothing is removed from the
// hit stream, which the top sends out unchanged.
module chamber_reco
  import dtreco_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  hit_t              hit_i,
  output segment_t             segment_o,
  output logic              drop_o,
  input  logic              cfg_filt_we,
  input  logic              cfg_lat_we,
  input  logic [8:0]        cfg_addr,
  input  logic signed [7:0] cfg_data
);

  mcell_t mc_g;
  hit_grouping u_group (.clk, .rst_n, .hit_i, .mc_o(mc_g), .drop_o);

  // Filtering network.
  logic                filt_v;
  logic [MC_CELLS-1:0] filt_keep;
  hit_filter_nn u_filter (
    .clk, .rst_n, .mc_i(mc_g), .valid_o(filt_v), .keep_o(filt_keep),
    .cfg_we(cfg_filt_we), .cfg_addr, .cfg_data
  );

  // Macro-cell delay line (grouping -> disambiguation / t0 finder / fitter).
  mcell_t mc_d [5];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mc_d <= '{default: '0};
    end else begin
      mc_d[0] <= mc_g;
      for (int i = 1; i < 5; i++) mc_d[i] <= mc_d[i-1];
    end
  end

  // Disambiguation network (input aligned with the filter decision).
  mcell_t mc_at_filt;
  always_comb begin
    mc_at_filt       = mc_d[1];
    mc_at_filt.valid = filt_v;
  end

  logic                lat_v;
  logic [MC_CELLS-1:0] lat, lat_keep;
  laterality_nn u_lat (
    .clk, .rst_n, .mc_i(mc_at_filt), .keep_i(filt_keep),
    .valid_o(lat_v), .lat_o(lat), .keep_o(lat_keep),
    .cfg_we(cfg_lat_we), .cfg_addr, .cfg_data
  );

  // Mean-timer.
  logic                    t0_v, t0_ok;
  logic [TIME_W-1:0]       t0;
  logic signed [15:0]      tau;
  sel_hit_t [N_LAYERS-1:0] sel;
  t0_finder u_t0 (
    .clk, .rst_n, .valid_i(lat_v), .mc_i(mc_d[3]), .keep_i(lat_keep), .lat_i(lat),
    .valid_o(t0_v), .ok_o(t0_ok), .t0_o(t0), .tau_o(tau), .sel_o(sel)
  );

  // Intercept and slope.
  track_fitter u_fit (
    .clk, .rst_n, .valid_i(t0_v), .ok_i(t0_ok), .mc_idx_i(mc_d[4].mc_idx),
    .t0_i(t0), .tau_i(tau), .sel_i(sel), .segment_o
  );

endmodule
