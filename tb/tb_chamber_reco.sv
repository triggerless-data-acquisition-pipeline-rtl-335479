// tb_chamber_reco: end-to-end test of one chamber's reconstruction chain.
//
// Hand-made weights are loaded (tb_ref_pkg::filter_weights keeps every hit
// unless a macro-cell is flooded; lat_weights predicts left in layers 0 and 2,
// right in layers 1 and 3). Straight tracks whose true laterality is exactly
// left-right-left-right are generated, so the predicted laterality is correct
// and every segment must reproduce the true track: t0 within 2 TDC counts, x0
// within 3 drift units, slope within 0.01. Each track must give at least one
// segment, at most three (overlapping macro-cells), within 28..40 clocks of its
// first hit (window 20 + grouping 2 + chain 7 + queueing). A burst of 16 hits
// flooding macro-cell 1 must be rejected by the filter: no segment from
// macro-cell 1. Mechanisms seen are counted and each must occur.
module tb_chamber_reco;
  import dtreco_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #12.5 clk = ~clk;

  hit_t              hit_i;
  segment_t             segment_o;
  logic              drop_o;
  logic              cfg_filt_we, cfg_lat_we;
  logic [8:0]        cfg_addr;
  logic signed [7:0] cfg_data;

  chamber_reco dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // truth of the current track
  real tx0, tm;
  int  tt0, tfirst;
  bit  burst_mode = 0;
  int  n_segment = 0, n_multi = 0, n_burst_segment_mc1 = 0, n_3hit = 0, n_4hit = 0;
  int  segments_this = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #1;
    if (rst_n && segment_o.valid) begin
      n_segment++;
      if (burst_mode) begin
        if (segment_o.mc_idx == 3'd1) n_burst_segment_mc1++;
      end else begin
        segments_this++;
        if ($countones(segment_o.layer_mask) == 4) n_4hit++; else n_3hit++;
        check($countones(segment_o.layer_mask) >= 3, "at least 3 layers");
        check(segment_o.lat == (4'b1010 & segment_o.layer_mask), "laterality pattern");
        check(iabs(int'(segment_o.t0) - tt0) <= 2, $sformatf("t0 got %0d true %0d", segment_o.t0, tt0));
        check(iabs(int'($signed(segment_o.x0)) - rnd(tx0)) <= 3,
              $sformatf("x0 got %0d true %f", $signed(segment_o.x0), tx0));
        check(iabs(int'($signed(segment_o.m)) - rnd(tm * 4096.0)) <= 41,
              $sformatf("m got %0d true %f", $signed(segment_o.m), tm * 4096.0));
        check(cyc - tfirst >= 28 && cyc - tfirst <= 40, $sformatf("segment latency %0d", cyc - tfirst));
      end
    end
  end

  task automatic load(input bit lat, input int par[NPAR]);
    for (int p = 0; p < NPAR; p++) begin
      @(negedge clk);
      cfg_filt_we = !lat; cfg_lat_we = lat; cfg_addr = 9'(p); cfg_data = 8'(par[p]);
    end
    @(negedge clk);
    cfg_filt_we = 0; cfg_lat_we = 0;
  endtask

  task automatic send_sorted(input int n, input int ly[16], input int cl[16], input int tm_[16], input int base);
    int hc[16], start;
    start = cyc;
    for (int k = 0; k < n; k++) begin
      hc[k] = start + 1 + tm_[k] / 32;
      if (k > 0 && hc[k] <= hc[k-1]) hc[k] = hc[k-1] + 1;
    end
    tfirst = hc[0];
    for (int k = 0; k < n; k++) begin
      while (cyc < hc[k]) begin @(posedge clk); #1; end
      hit_i = '{valid: 1'b1, layer: 2'(ly[k]), cellno: 4'(cl[k]), time_tdc: TIME_W'(base + tm_[k])};
      @(posedge clk); #1;
      hit_i = '0;
    end
  endtask

  initial begin
    int pf[NPAR], pl[NPAR];
    int n_tracks;
    hit_i = '0; cfg_filt_we = 0; cfg_lat_we = 0; cfg_addr = 0; cfg_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    filter_weights(pf); lat_weights(pl);
    load(0, pf); load(1, pl);
    n_tracks = 0;
    while (n_tracks < 200) begin
      int cellno[4], drift[4], ly[16], cl[16], tmv[16], base, off, nh, miss;
      bit right[4], okt;
      real x0, sl;
      x0 = $urandom_range(600, 15000);
      sl = ($urandom_range(0, 1400) - 700) / 1000.0;
      track(x0, sl, cellno, drift, right);
      okt = !right[0] && right[1] && !right[2] && right[3];
      for (int l = 0; l < 4; l++) if (cellno[l] < 0 || cellno[l] > 15) okt = 0;
      if (!okt) continue;
      n_tracks++;
      // true crossing time: base + off; hits at base + off + drift
      base = (cyc + 2) * 32;
      off  = $urandom_range(0, 31);
      // one track in five loses a hit (cell inefficiency)
      miss = ($urandom_range(0, 4) == 0) ? $urandom_range(0, 3) : -1;
      nh = 0;
      for (int l = 0; l < 4; l++) if (l != miss) begin
        ly[nh] = l; cl[nh] = cellno[l]; tmv[nh] = off + drift[l]; nh++;
      end
      for (int i = 0; i < nh; i++) for (int j = i + 1; j < nh; j++) if (tmv[j] < tmv[i]) begin
        int t; t = tmv[i]; tmv[i] = tmv[j]; tmv[j] = t; t = ly[i]; ly[i] = ly[j]; ly[j] = t;
        t = cl[i]; cl[i] = cl[j]; cl[j] = t;
      end
      tx0 = x0; tm = sl; tt0 = base + off;
      segments_this = 0;
      send_sorted(nh, ly, cl, tmv, base);
      repeat (45) @(posedge clk);
      #1;
      check(segments_this >= 1 && segments_this <= 3, $sformatf("track gave %0d segments", segments_this));
      if (segments_this > 1) n_multi++;
    end
    // noise burst flooding macro-cell 1 (cells 2..5)
    begin
      int ly[16], cl[16], tmv[16], base;
      burst_mode = 1;
      base = (cyc + 2) * 32;
      for (int k = 0; k < 16; k++) begin ly[k] = k % 4; cl[k] = 2 + k / 4; tmv[k] = 38 * k; end
      send_sorted(16, ly, cl, tmv, base);
      repeat (60) @(posedge clk);
      burst_mode = 0;
    end
    check(n_burst_segment_mc1 == 0, "flooded macro-cell rejected by the filter");
    check(n_multi > 0, "overlapping macro-cells gave duplicate segments at least once");
    check(n_3hit > 0 && n_4hit > 0, "3-hit and 4-hit segments both seen");
    $display("tracks %0d segments %0d (4-hit %0d, 3-hit %0d, multi %0d)", n_tracks, n_segment, n_4hit, n_3hit, n_multi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
