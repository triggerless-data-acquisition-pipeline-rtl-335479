// mlp_dense: small quantized dense neural network, fully pipelined.
//
// Topology: N_IN unsigned 7-bit input features -> N_HID hidden neurons with ReLU
// -> N_OUT linear output scores. Weights and biases are signed W_W-bit integers.
//   hidden_h = sat7( max(0, B1_h + sum_i W1_hi * in_i) >>> HID_SHIFT )
//   out_o    = B2_o + sum_h W2_oh * hidden_h
// Every multiply of a layer runs in parallel (the unrolled form an HLS tool
// produces for an initiation interval of 1), with one register after each layer:
// an input presented in cycle n gives its scores in cycle n+2, a new input can be
// presented every cycle. A pruned weight is simply zero.
//
// The weights are trained offline, so they are written at run time through
// cfg_we/cfg_addr/cfg_data; after reset all weights are zero. Address map:
//   [0, N_HID*N_IN)              W1, address h*N_IN + i
//   next N_HID                   B1
//   next N_OUT*N_HID             W2, address o*N_HID + h
//   next N_OUT                   B2
// The two-cycle latency and II = 1 are those of the networks described for the
// reconstruction; the topology and number formats are this design's own choice,
// since the trained models themselves are not published.
module mlp_dense #(
  parameter int N_IN      = 16,
  parameter int N_HID     = 8,
  parameter int N_OUT     = 16,
  parameter int W_W       = 8,
  parameter int HID_SHIFT = 4,
  parameter int ACC_W     = 24,
  localparam int N_PAR    = N_HID*N_IN + N_HID + N_OUT*N_HID + N_OUT,
  localparam int A_W      = $clog2(N_PAR)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [N_IN-1:0][6:0]         in_i,
  output logic signed [ACC_W-1:0]      out_o [N_OUT],
  input  logic                         cfg_we,
  input  logic [A_W-1:0]               cfg_addr,
  input  logic signed [W_W-1:0]        cfg_data
);

  localparam int B1_BASE = N_HID*N_IN;
  localparam int W2_BASE = B1_BASE + N_HID;
  localparam int B2_BASE = W2_BASE + N_OUT*N_HID;

  logic signed [W_W-1:0] par [N_PAR];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < N_PAR; p++) par[p] <= '0;
    end else if (cfg_we && int'(cfg_addr) < N_PAR) begin
      par[cfg_addr] <= cfg_data;
    end
  end

  // Layer 1.
  logic [6:0] hid_c [N_HID];
  logic [6:0] hid_q [N_HID];
  always_comb begin
    for (int h = 0; h < N_HID; h++) begin
      logic signed [ACC_W-1:0] acc;
      acc = ACC_W'(par[B1_BASE + h]);
      for (int i = 0; i < N_IN; i++)
        acc += ACC_W'(par[h*N_IN + i]) * ACC_W'(signed'({1'b0, in_i[i]}));
      acc = acc >>> HID_SHIFT;
      if (acc < 0)        hid_c[h] = '0;
      else if (acc > 127) hid_c[h] = 7'd127;
      else                hid_c[h] = acc[6:0];
    end
  end

  // Layer 2.
  logic signed [ACC_W-1:0] out_c [N_OUT];
  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      logic signed [ACC_W-1:0] acc;
      acc = ACC_W'(par[B2_BASE + o]);
      for (int h = 0; h < N_HID; h++)
        acc += ACC_W'(par[W2_BASE + o*N_HID + h]) * ACC_W'(signed'({1'b0, hid_q[h]}));
      out_c[o] = acc;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int h = 0; h < N_HID; h++) hid_q[h] <= '0;
      for (int o = 0; o < N_OUT; o++) out_o[o] <= '0;
    end else begin
      hid_q <= hid_c;
      out_o <= out_c;
    end
  end

endmodule
