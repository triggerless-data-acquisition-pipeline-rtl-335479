// t0_finder: generalized mean-timer, the "t0 finder" of the local reconstruction.
//
// Inputs are a macro-cell, the filter's keep mask and the predicted laterality.
// In every layer the kept hit with the lowest column is chosen (at most one hit
// per layer is used); at least 3 layers are needed. For a straight track and a
// known laterality s_l (+1 right, -1 left) every chosen hit satisfies
//     y_l = w_l + s_l * rt_l = x0 + m * l + s_l * tau
// where w_l is the wire position, rt_l the hit time relative to the macro-cell
// reference t_ref, l the layer index and tau = t0 - t_ref (drift velocity is 1
// in the units of dtreco_pkg). The pattern (layer mask, laterality) therefore
// fixes a linear equation for tau, tau = sum_l c_l * y_l: the least-squares
// solution of the system above, which for 3 hits is the exact mean-timer
// relation. The coefficients c_l of all 256 patterns are computed at
// elaboration time (Cramer's rule with integer cofactors, FRAC fraction bits)
// and stored as a constant table. Patterns with fewer than 3 hits, or with all
// hits on the same side (tau undetermined), give ok_o = 0.
//
// Timing: one clock, inputs in cycle n give outputs in cycle n+1, one
// macro-cell per cycle. t0_o = t_ref + round(tau) in TDC counts.
// Using one equation per laterality pattern follows the algorithm description;
// the least-squares form, the hit selection and the number formats are this
// design's choices.
module t0_finder
  import dtreco_pkg::*;
#(
  parameter int FRAC = 14
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                valid_i,
  input  mcell_t              mc_i,
  input  logic [MC_CELLS-1:0] keep_i,
  input  logic [MC_CELLS-1:0] lat_i,
  output logic                valid_o,
  output logic                ok_o,
  output logic [TIME_W-1:0]   t0_o,
  output logic signed [15:0]  tau_o,
  output sel_hit_t [N_LAYERS-1:0] sel_o
);

  localparam int CW = FRAC + 4;                 // coefficient width, signed
  typedef logic signed [CW-1:0] coef_t;
  typedef struct packed {
    logic                       ok;
    coef_t [N_LAYERS-1:0]       c;
  } entry_t;
  typedef entry_t [255:0] table_t;

  // Round-half-away-from-zero of num * 2^FRAC / den.
  function automatic longint rdiv(input longint num, input longint den);
    longint n, q;
    n = num * (longint'(1) << FRAC);
    if (den < 0) begin n = -n; den = -den; end
    if (n >= 0) q = (n + den / 2) / den;
    else        q = -((-n + den / 2) / den);
    return q;
  endfunction

  // Pattern index p = {lat[3:0], mask[3:0]}.
  function automatic table_t build_table();
    table_t t;
    for (int p = 0; p < 256; p++) begin
      // Normal matrix of the rows [1, l, s_l]:
      //   | n    sl   ss  |
      //   | sl   sll  sls |
      //   | ss   sls  n   |
      longint n, sl, ss, sll, sls;
      longint c20, c21, c22, det;
      int     nh;
      n = 0; sl = 0; ss = 0; sll = 0; sls = 0;
      nh = 0;
      for (int l = 0; l < N_LAYERS; l++) begin
        if (p[l]) begin
          longint lv, sv;
          lv = longint'(l);
          sv = p[4+l] ? 1 : -1;
          n   += 1;
          sl  += lv;
          ss  += sv;
          sll += lv * lv;
          sls += lv * sv;
          nh++;
        end
      end
      // cofactors of the third row, and the determinant
      c20 =   sl * sls - ss * sll;
      c21 = -(n * sls - ss * sl);
      c22 =   n * sll - sl * sl;
      det = ss * c20 + sls * c21 + n * c22;
      t[p].ok = (nh >= 3) && (det != 0);
      for (int l = 0; l < N_LAYERS; l++) begin
        longint s;
        s = p[4+l] ? 1 : -1;
        if (t[p].ok && p[l]) t[p].c[l] = CW'(rdiv(c20 + c21 * longint'(l) + c22 * s, det));
        else                 t[p].c[l] = '0;
      end
    end
    return t;
  endfunction

  localparam table_t TAB = build_table();

  // Hit selection: lowest kept column in each layer.
  sel_hit_t [N_LAYERS-1:0] sel_c;
  always_comb begin
    for (int l = 0; l < N_LAYERS; l++) begin
      sel_c[l] = '0;
      for (int col = MC_SIZE - 1; col >= 0; col--) begin
        if (keep_i[l*MC_SIZE + col] && mc_i.cells[l*MC_SIZE + col].valid) begin
          sel_c[l].valid = 1'b1;
          sel_c[l].col   = 2'(col);
          sel_c[l].right = lat_i[l*MC_SIZE + col];
          sel_c[l].rtime = mc_i.cells[l*MC_SIZE + col].rtime;
        end
      end
    end
  end

  logic [7:0] pat;
  entry_t     ent;
  logic signed [47:0] acc, tau_r;
  always_comb begin
    for (int l = 0; l < N_LAYERS; l++) begin
      pat[l]     = sel_c[l].valid;
      pat[4 + l] = sel_c[l].valid && sel_c[l].right;
    end
    ent = TAB[pat];
    acc = '0;
    for (int l = 0; l < N_LAYERS; l++) begin
      logic signed [15:0] y;
      y = 16'(wire_pos(l, int'(sel_c[l].col)));
      if (sel_c[l].right) y = y + signed'({5'd0, sel_c[l].rtime});
      else                y = y - signed'({5'd0, sel_c[l].rtime});
      if (sel_c[l].valid) acc += 48'(ent.c[l]) * 48'(y);
    end
    // round to nearest integer TDC count
    tau_r = (acc + (48'sd1 <<< (FRAC - 1))) >>> FRAC;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_o <= 1'b0;
      ok_o    <= 1'b0;
      t0_o    <= '0;
      tau_o   <= '0;
      sel_o   <= '0;
    end else begin
      valid_o <= valid_i;
      ok_o    <= valid_i && ent.ok;
      tau_o   <= 16'(tau_r);
      t0_o    <= mc_i.t_ref + TIME_W'(tau_r);
      sel_o   <= sel_c;
    end
  end

endmodule
