// tb_t0_finder: self-checking test of the mean-timer.
//
// Part 1 drives random macro-cells: random layer masks (some with fewer than
// 3 layers), extra kept hits in higher columns and rejected hits, random
// laterality. t0 is compared with a floating-point least-squares solution
// (tb_ref_pkg::meantimer) to within 1 TDC count, the chosen hits with the
// lowest kept column of each layer, and ok with solvability.
// Part 2 generates straight tracks and checks that t0 comes back within 2 counts
// of the true crossing time when the true laterality is supplied.
// The one-clock latency is checked on every vector.
module tb_t0_finder;
  import dtreco_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #12.5 clk = ~clk;

  logic                valid_i;
  mcell_t              mc_i;
  logic [MC_CELLS-1:0] keep_i, lat_i;
  logic                valid_o, ok_o;
  logic [TIME_W-1:0]   t0_o;
  logic signed [15:0]  tau_o;
  sel_hit_t [N_LAYERS-1:0] sel_o;

  t0_finder dut (.*);

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

  // Apply one vector and check the outputs a clock later.
  task automatic apply(input int mask, input int lat, input int col[4], input int rt[4],
                       input bit extra, input int tref, input bit phys, input int true_tau);
    int  exp_tau;
    real tau, x0, ml;
    bit  ok;
    mc_i = '0; keep_i = '0; lat_i = '0;
    mc_i.valid = 1'b1;
    mc_i.t_ref = TIME_W'(tref);
    for (int l = 0; l < 4; l++) begin
      if (mask[l]) begin
        mc_i.cells[l*4 + col[l]] = '{valid: 1'b1, rtime: RT_W'(rt[l])};
        keep_i[l*4 + col[l]] = 1'b1;
        lat_i[l*4 + col[l]]  = lat[l];
        // a later column that is also kept must not be chosen
        if (extra && col[l] < 3) begin
          mc_i.cells[l*4 + 3] = '{valid: 1'b1, rtime: RT_W'($urandom_range(0, 900))};
          keep_i[l*4 + 3] = 1'b1;
          lat_i[l*4 + 3]  = $urandom_range(0, 1);
        end
      end else if (extra) begin
        // a hit rejected by the filter must not be used
        mc_i.cells[l*4 + 1] = '{valid: 1'b1, rtime: RT_W'($urandom_range(0, 900))};
      end
    end
    valid_i = 1'b1;
    ok = meantimer(mask, lat, col, rt, tau, x0, ml);
    exp_tau = rnd(tau);
    @(posedge clk); #1;
    valid_i = 1'b0;
    check(valid_o == 1'b1, "valid one clock after input");
    check(ok_o == ok, $sformatf("ok mask=%b lat=%b got %0d exp %0d", mask[3:0], lat[3:0], ok_o, ok));
    for (int l = 0; l < 4; l++) begin
      check(sel_o[l].valid == mask[l], "selected layer mask");
      if (mask[l]) check(sel_o[l].col == col[l] && sel_o[l].rtime == rt[l] && sel_o[l].right == lat[l],
                         $sformatf("selected hit layer %0d", l));
    end
    if (ok) begin
      check(iabs(int'(tau_o) - exp_tau) <= 1,
            $sformatf("tau got %0d exp %f (mask %b lat %b)", tau_o, tau, mask[3:0], lat[3:0]));
      check(t0_o == TIME_W'(tref + int'(tau_o)), "t0 = t_ref + tau");
      if (phys) check(iabs(int'(tau_o) - true_tau) <= 2,
                      $sformatf("track tau got %0d true %0d", tau_o, true_tau));
    end
  endtask

  initial begin
    int col[4], rt[4];
    valid_i = 0; mc_i = '0; keep_i = '0; lat_i = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // Part 1: random patterns
    for (int n = 0; n < 3000; n++) begin
      int mask, lat;
      mask = $urandom_range(0, 15);
      lat  = $urandom_range(0, 15);
      for (int l = 0; l < 4; l++) begin
        col[l] = $urandom_range(0, 3);
        rt[l]  = $urandom_range(0, 1200);
      end
      apply(mask, lat, col, rt, n % 2 == 1, $urandom_range(0, 1 << 30), 0, 0);
    end
    // Part 2: physical tracks, all 4 layers or one layer missing
    for (int n = 0; n < 2000; n++) begin
      real x0, sl;
      int cellno[4], drift[4], mask, lat, mind, miss;
      bit right[4];
      x0 = 984.0 + $urandom_range(0, 984);
      sl = ($urandom_range(0, 1600) - 800) / 1000.0;
      track(x0, sl, cellno, drift, right);
      miss = (n % 3 == 0) ? $urandom_range(0, 3) : -1;
      mask = 0; lat = 0; mind = 100000;
      for (int l = 0; l < 4; l++) if (l != miss) begin
        mask |= 1 << l;
        if (right[l]) lat |= 1 << l;
        if (drift[l] < mind) mind = drift[l];
      end
      for (int l = 0; l < 4; l++) begin
        col[l] = cellno[l];
        rt[l]  = drift[l] - mind;       // t_ref = earliest hit
        if (col[l] < 0 || col[l] > 3) mask &= ~(1 << l);
      end
      apply(mask, lat, col, rt, 0, 5000 + n * 1000, 1, -mind);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
