// tb_track_fitter: self-checking test of the intercept and slope fit.
//
// Random chosen-hit sets (3 or 4 layers, random columns, times, laterality
// and tau) are fed to the fitter; x0 and m are compared with a floating-point
// least-squares line through the hit positions (within 1 drift unit and 2 slope
// LSBs). Straight tracks with known x0 and slope check the physics end to end
// (x0 within 3 units, slope within 0.01). Vectors with ok_i = 0 must give no
// segment. The two-clock latency is checked on every vector.
module tb_track_fitter;
  import dtreco_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #12.5 clk = ~clk;

  logic                    valid_i, ok_i;
  logic [2:0]              mc_idx_i;
  logic [TIME_W-1:0]       t0_i;
  logic signed [15:0]      tau_i;
  sel_hit_t [N_LAYERS-1:0] sel_i;
  segment_t                   segment_o;

  track_fitter dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input int mask, input int lat, input int col[4], input int rt[4],
                       input int tau, input int mc, input bit ok, input bit phys,
                       input real tx0, input real tm);
    real sz, sx, szz, szx, n, den, m_ref, x0_ref;
    int  t0v, m_exp;
    valid_i = 1; ok_i = ok; mc_idx_i = 3'(mc); tau_i = 16'(tau);
    t0v = $urandom; t0_i = TIME_W'(t0v);
    sel_i = '0;
    sz = 0; sx = 0; szz = 0; szx = 0; n = 0;
    for (int l = 0; l < 4; l++) if (mask[l]) begin
      real x, z;
      sel_i[l] = '{valid: 1'b1, col: 2'(col[l]), right: lat[l], rtime: RT_W'(rt[l])};
      x = wire_x(l, col[l]) + (lat[l] ? 1.0 : -1.0) * (rt[l] - tau) + mc * 2 * CELL;
      z = l * PITCH;
      n += 1; sz += z; sx += x; szz += z * z; szx += z * x;
    end
    den = n * szz - sz * sz;
    m_ref  = (n * szx - sz * sx) / den;
    x0_ref = (sx - m_ref * sz) / n;
    @(posedge clk); #1;
    valid_i = 0;
    check(segment_o.valid == 0, "no segment after one clock");
    @(posedge clk); #1;
    check(segment_o.valid == ok, "segment valid two clocks after input iff ok");
    if (ok) begin
      check(segment_o.layer_mask == 4'(mask) && segment_o.lat == 4'(lat & mask) &&
            segment_o.mc_idx == 3'(mc) && segment_o.t0 == TIME_W'(t0v), "passed-on fields");
      check(iabs(int'($signed(segment_o.x0)) - rnd(x0_ref)) <= 1,
            $sformatf("x0 got %0d exp %f", segment_o.x0, x0_ref));
      m_exp = rnd(m_ref * 4096.0);
      if (m_exp > 32767) m_exp = 32767;
      if (m_exp < -32767) m_exp = -32767;
      check(iabs(int'($signed(segment_o.m)) - m_exp) <= 2,
            $sformatf("m got %0d exp %f", segment_o.m, m_ref * 4096.0));
      if (phys) begin
        check(iabs(int'($signed(segment_o.x0)) - rnd(tx0)) <= 3, $sformatf("track x0 got %0d true %f", segment_o.x0, tx0));
        check(iabs(int'($signed(segment_o.m)) - rnd(tm * 4096.0)) <= 41, $sformatf("track m got %0d true %f", segment_o.m, tm * 4096.0));
      end
    end
  endtask

  initial begin
    int col[4], rt[4];
    valid_i = 0; ok_i = 0; mc_idx_i = 0; t0_i = 0; tau_i = 0; sel_i = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int n = 0; n < 3000; n++) begin
      int mask;
      case ($urandom_range(0, 4))
        0: mask = 4'b0111; 1: mask = 4'b1011; 2: mask = 4'b1101; 3: mask = 4'b1110;
        default: mask = 4'b1111;
      endcase
      for (int l = 0; l < 4; l++) begin col[l] = $urandom_range(0, 3); rt[l] = $urandom_range(0, 1000); end
      apply(mask, $urandom_range(0, 15), col, rt, $urandom_range(0, 400) - 300,
            $urandom_range(0, 6), (n % 10) != 0, 0, 0.0, 0.0);
    end
    for (int n = 0; n < 2000; n++) begin
      real x0, sl;
      int cellno[4], drift[4], lat, mc, tau;
      bit right[4];
      mc = $urandom_range(0, 6);
      x0 = mc * 2 * CELL + 984.0 + $urandom_range(0, 984);
      sl = ($urandom_range(0, 1600) - 800) / 1000.0;
      track(x0, sl, cellno, drift, right);
      tau = -$urandom_range(0, 200);       // t0 - t_ref
      lat = 0;
      for (int l = 0; l < 4; l++) begin
        col[l] = cellno[l] - 2 * mc;
        rt[l]  = drift[l] + tau;
        if (right[l]) lat |= 1 << l;
      end
      // skip the rare track leaving the macro-cell
      if (col[0] >= 0 && col[0] <= 3 && col[1] >= 0 && col[1] <= 3 &&
          col[2] >= 0 && col[2] <= 3 && col[3] >= 0 && col[3] <= 3 &&
          rt[0] >= 0 && rt[1] >= 0 && rt[2] >= 0 && rt[3] >= 0)
        apply(4'b1111, lat, col, rt, tau, mc, 1, 1, x0, sl);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
