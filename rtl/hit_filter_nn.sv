// hit_filter_nn: the "filtering" network of the local reconstruction.
//
// For every macro-cell it decides, cell by cell, whether the hit there belongs
// to the muon (keep) or is noise. Each of the 16 cells gives one input feature:
// 0 for an empty cell, otherwise 1 + (relative time >> 4), saturated at 127, so
// the network sees both which channels fired and when. The network (mlp_dense)
// gives one score per cell; a cell is kept when it holds a hit and its score is
// positive. Timing: mc_i presented in cycle n gives valid_o/keep_o in cycle n+2;
// a new macro-cell may be presented every cycle. Weights are written through the
// cfg port (see mlp_dense for the address map).
//
// The task of the network, its two-cycle latency and II = 1 follow the
// algorithm description; the feature encoding and network shape are this
// design's choices.
module hit_filter_nn
  import dtreco_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  mcell_t              mc_i,
  output logic                valid_o,
  output logic [MC_CELLS-1:0] keep_o,
  input  logic                cfg_we,
  input  logic [8:0]          cfg_addr,
  input  logic signed [7:0]   cfg_data
);

  logic [MC_CELLS-1:0][6:0] feat;
  logic [MC_CELLS-1:0]      present;
  always_comb begin
    for (int c = 0; c < MC_CELLS; c++) begin
      present[c] = mc_i.valid && mc_i.cells[c].valid;
      feat[c]    = present[c] ? feature(mc_i.cells[c].rtime) : 7'd0;
    end
  end

  function automatic logic [6:0] feature(input logic [RT_W-1:0] rt);
    logic [7:0] f;
    f = {1'b0, rt[RT_W-1:4]} + 8'd1;
    return (f > 8'd127) ? 7'd127 : f[6:0];
  endfunction

  logic signed [23:0] score [MC_CELLS];
  mlp_dense #(.N_IN(MC_CELLS), .N_HID(8), .N_OUT(MC_CELLS)) u_net (
    .clk, .rst_n, .in_i(feat), .out_o(score),
    .cfg_we, .cfg_addr, .cfg_data
  );

  logic [1:0]               v_d;
  logic [MC_CELLS-1:0]      p_d [2];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_d <= '0;
      p_d <= '{default: '0};
    end else begin
      v_d <= {v_d[0], mc_i.valid};
      p_d[0] <= present;
      p_d[1] <= p_d[0];
    end
  end

  always_comb begin
    valid_o = v_d[1];
    for (int c = 0; c < MC_CELLS; c++) keep_o[c] = p_d[1][c] && (score[c] > 0);
  end

endmodule
