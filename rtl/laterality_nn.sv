// laterality_nn: the "disambiguation" network of the local reconstruction.
//
// A drift time tells how far from the wire the muon passed, not on which side.
// This network predicts the side (laterality) of every hit kept by the filter:
// lat_o[c] = 1 means right of the wire (larger x), 0 means left. Its inputs are
// the same per-cell time features as the filter's, with cells the filter
// rejected set to 0. Timing: mc_i/keep_i presented in cycle n give valid_o,
// lat_o and the matching keep_o in cycle n+2, one macro-cell per cycle. Weights
// are written through the cfg port (see mlp_dense for the address map).
//
// The task, the two-cycle latency and II = 1 follow the algorithm description;
// the feature encoding, the sign convention and the network shape are this
// design's choices.
module laterality_nn
  import dtreco_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  mcell_t              mc_i,
  input  logic [MC_CELLS-1:0] keep_i,
  output logic                valid_o,
  output logic [MC_CELLS-1:0] lat_o,
  output logic [MC_CELLS-1:0] keep_o,
  input  logic                cfg_we,
  input  logic [8:0]          cfg_addr,
  input  logic signed [7:0]   cfg_data
);

  function automatic logic [6:0] feature(input logic [RT_W-1:0] rt);
    logic [7:0] f;
    f = {1'b0, rt[RT_W-1:4]} + 8'd1;
    return (f > 8'd127) ? 7'd127 : f[6:0];
  endfunction

  logic [MC_CELLS-1:0][6:0] feat;
  logic [MC_CELLS-1:0]      use_c;
  always_comb begin
    for (int c = 0; c < MC_CELLS; c++) begin
      use_c[c] = mc_i.valid && keep_i[c] && mc_i.cells[c].valid;
      feat[c]  = use_c[c] ? feature(mc_i.cells[c].rtime) : 7'd0;
    end
  end

  logic signed [23:0] score [MC_CELLS];
  mlp_dense #(.N_IN(MC_CELLS), .N_HID(8), .N_OUT(MC_CELLS)) u_net (
    .clk, .rst_n, .in_i(feat), .out_o(score),
    .cfg_we, .cfg_addr, .cfg_data
  );

  logic [1:0]          v_d;
  logic [MC_CELLS-1:0] k_d [2];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_d <= '0;
      k_d <= '{default: '0};
    end else begin
      v_d    <= {v_d[0], mc_i.valid};
      k_d[0] <= use_c;
      k_d[1] <= k_d[0];
    end
  end

  always_comb begin
    valid_o = v_d[1];
    keep_o  = k_d[1];
    for (int c = 0; c < MC_CELLS; c++) lat_o[c] = k_d[1][c] && (score[c] > 0);
  end

endmodule
