// track_fitter: "track intercept and slope" of the local reconstruction.
//
// Once the crossing time is known every chosen hit has a definite position:
//     x_l = w_l + s_l * (rt_l - tau)       (s_l = +1 right of wire, -1 left)
// The fitter puts a straight line x = x0 + m*z through these points by least
// squares over the layers used (z = l * LAYER_H). With the layer index l as
// abscissa,
//     den  = n*S(l^2) - S(l)^2             (depends only on the layer mask)
//     m    = (n*S(l*x) - S(l)*S(x)) / (den * LAYER_H)
//     x0   = (S(x)*S(l^2) - S(l)*S(l*x)) / den
// The divisions become multiplications by reciprocals that a constant function
// computes at elaboration for each of the 16 layer masks (K extra bits).
// x0 is given at layer 0 in the chamber frame (macro-cell offset added), in
// drift units; m = dx/dz with M_FRAC fraction bits, saturated to +-(2^15-1)
// (|m| < 8, steeper than any track contained in a macro-cell); t0 is passed on.
//
// Timing: two clocks (sums, then products), one macro-cell per cycle; segment_o is
// valid only when the t0 finder flagged a solvable pattern.
// Computing intercept and slope from t0 and the hits follows the algorithm
// description; the least-squares form and all formats are this design's
// choices.
module track_fitter
  import dtreco_pkg::*;
#(
  parameter int K = 20
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    valid_i,
  input  logic                    ok_i,
  input  logic [2:0]              mc_idx_i,
  input  logic [TIME_W-1:0]       t0_i,
  input  logic signed [15:0]      tau_i,
  input  sel_hit_t [N_LAYERS-1:0] sel_i,
  output segment_t                   segment_o
);

  typedef struct packed {
    logic signed [7:0]  n, sl, sll;
    logic signed [39:0] rec_m, rec_x;
  } mrec_t;
  typedef mrec_t [15:0] mtab_t;

  function automatic longint rdiv(input longint num, input longint den);
    if (den <= 0) return 0;
    return (num + den / 2) / den;
  endfunction

  function automatic mtab_t build_mtab();
    mtab_t t;
    for (int msk = 0; msk < 16; msk++) begin
      longint n, sl, sll, den;
      n = 0; sl = 0; sll = 0;
      for (int l = 0; l < N_LAYERS; l++)
        if (msk[l]) begin
          n += 1; sl += longint'(l); sll += longint'(l * l);
        end
      den = n * sll - sl * sl;
      t[msk].n     = 8'(n);
      t[msk].sl    = 8'(sl);
      t[msk].sll   = 8'(sll);
      t[msk].rec_m = 40'(rdiv(longint'(1) << (M_FRAC + K), den * LAYER_H));
      t[msk].rec_x = 40'(rdiv(longint'(1) << K, den));
    end
    return t;
  endfunction

  localparam mtab_t MTAB = build_mtab();
  localparam longint M_MAX = (longint'(1) << (M_W - 1)) - 1;   // slope saturates at +-M_MAX

  // Stage 1: hit positions and sums.
  logic [N_LAYERS-1:0] mask_c, lat_c;
  logic signed [31:0]  sx_c, slx_c;
  always_comb begin
    sx_c  = '0;
    slx_c = '0;
    for (int l = 0; l < N_LAYERS; l++) begin
      logic signed [31:0] x, d;
      mask_c[l] = sel_i[l].valid;
      lat_c[l]  = sel_i[l].valid && sel_i[l].right;
      d = signed'({21'd0, sel_i[l].rtime}) - 32'(tau_i);
      x = 32'(wire_pos(l, int'(sel_i[l].col))) + (sel_i[l].right ? d : -d);
      if (sel_i[l].valid) begin
        sx_c  += x;
        slx_c += x * l;
      end
    end
  end

  logic                v1;
  logic [2:0]          mc1;
  logic [TIME_W-1:0]   t01;
  logic [N_LAYERS-1:0] mask1, lat1;
  logic signed [31:0]  sx1, slx1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; mc1 <= '0; t01 <= '0; mask1 <= '0; lat1 <= '0; sx1 <= '0; slx1 <= '0;
    end else begin
      v1    <= valid_i && ok_i;
      mc1   <= mc_idx_i;
      t01   <= t0_i;
      mask1 <= mask_c;
      lat1  <= lat_c;
      sx1   <= sx_c;
      slx1  <= slx_c;
    end
  end

  // Stage 2: slope and intercept.
  mrec_t r;
  logic signed [63:0] num_m, num_x, m_full, x_full;
  always_comb begin
    r      = MTAB[mask1];
    num_m  = 64'(r.n) * 64'(slx1) - 64'(r.sl) * 64'(sx1);
    num_x  = 64'(sx1) * 64'(r.sll) - 64'(r.sl) * 64'(slx1);
    m_full = (num_m * 64'(r.rec_m) + (64'sd1 <<< (K - 1))) >>> K;
    x_full = (num_x * 64'(r.rec_x) + (64'sd1 <<< (K - 1))) >>> K;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      segment_o <= '0;
    end else begin
      segment_o.valid      <= v1;
      segment_o.mc_idx     <= mc1;
      segment_o.layer_mask <= mask1;
      segment_o.lat        <= lat1;
      segment_o.t0         <= t01;
      segment_o.x0         <= POS_W'(x_full + 64'(int'(mc1) * MC_STRIDE * CELL_W));
      if (m_full > M_MAX)      segment_o.m <= M_W'(M_MAX);
      else if (m_full < -M_MAX) segment_o.m <= M_W'(-M_MAX);
      else                     segment_o.m <= M_W'(m_full);
    end
  end

endmodule
