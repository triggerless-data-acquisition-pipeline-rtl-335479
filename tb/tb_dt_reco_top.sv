// tb_dt_reco_top: end-to-end test of the whole back end at its default size
// (two TDC links, four chambers).
//
// Hand-made network weights are loaded through the configuration port (see
// tb_ref_pkg). Muon tracks with left-right-left-right laterality are sent on
// both links at once, on randomly chosen chambers, so hits and segments of several
// chambers meet in the merger. Checks:
//  * every raw hit comes out of the DMA stream exactly once, unchanged and
//    tagged with its chamber, unless the merger reported dropping it;
//  * every segment matches a track sent to that chamber: t0 within 2 TDC counts,
//    x0 within 3 drift units, slope within 0.01;
//  * every chamber and both links are used.
// Mechanisms that must each happen at least once (counted): segments in every
// chamber, duplicate segments from overlapping macro-cells, DMA back-pressure
// (stall), merger FIFO overflow, a hit lost in the grouping stage while its
// macro-cell waits, and the filter rejecting a flooded macro-cell.
module tb_dt_reco_top;
  import dtreco_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #12.5 clk = ~clk;

  link_hit_t [1:0]   link_hit_i;
  logic              cfg_we, cfg_sel;
  logic [8:0]        cfg_addr;
  logic signed [7:0] cfg_data;
  logic [127:0]      dma_word;
  logic              dma_valid, dma_ready;
  logic [3:0]        grp_drop_o;
  logic [5:0]        fifo_drop_o;

  dt_reco_top dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected raw hit words and track truth per chamber
  int  hit_expect [logic [127:0]];
  int  hits_sent = 0, hits_recv = 0;
  typedef struct { int t0; real x0; real m; } truth_t;
  truth_t truths [4][$];
  bit  unchecked = 0;            // segments of artificial patterns are not checked
  int  segments_ch [4];
  int  n_stall = 0, n_fifo_drop = 0, n_hit_drop = 0, n_grp_drop = 0, n_segment_bad = 0;
  int  n_burst_mc1 = 0, n_dup = 0;
  int  last_segment_t0 [4];
  bit  link_used [2];

  // DMA side monitor
  always @(posedge clk) begin
    if (rst_n) begin
      if (dma_valid && !dma_ready) n_stall++;
      for (int i = 0; i < 6; i++) if (fifo_drop_o[i]) begin
        n_fifo_drop++;
        if (i < 2) n_hit_drop++;
      end
      for (int c = 0; c < 4; c++) if (grp_drop_o[c]) n_grp_drop++;
      if (dma_valid && dma_ready) begin
        if (dma_word[127:126] == 2'b01) begin
          hits_recv++;
          checks++;
          if (!hit_expect.exists(dma_word) || hit_expect[dma_word] == 0) begin
            failures++; $display("FAIL: unexpected hit word %h", dma_word);
          end else hit_expect[dma_word]--;
        end else if (dma_word[127:126] == 2'b10) begin
          int ch, t0, x0, m;
          bit found;
          ch = int'(dma_word[121:120]);
          t0 = int'(dma_word[95:64]);
          x0 = int'($signed(dma_word[49:32]));
          m  = int'($signed(dma_word[15:0]));
          segments_ch[ch]++;
          if (t0 == last_segment_t0[ch]) n_dup++;
          last_segment_t0[ch] = t0;
          if (unchecked) begin
            if (ch == 0 && dma_word[118:116] == 3'd1) n_burst_mc1++;
          end else begin
            found = 0;
            foreach (truths[ch][i])
              if (iabs(truths[ch][i].t0 - t0) <= 2 && iabs(rnd(truths[ch][i].x0) - x0) <= 3 &&
                  iabs(rnd(truths[ch][i].m * 4096.0) - m) <= 41) found = 1;
            checks++;
            if (!found) begin
              failures++; n_segment_bad++;
              $display("FAIL: segment ch %0d t0 %0d x0 %0d m %0d matches no track", ch, t0, x0, m);
            end
          end
        end else begin
          checks++; failures++; $display("FAIL: bad tag %h", dma_word);
        end
      end
    end
  end

  task automatic put_hit(input int link, input int ch_in_link, input int layer, input int cellno, input int t);
    link_hit_t h;
    hit_t      hh;
    h = '{valid: 1'b1, channel: {1'(ch_in_link), 2'(layer), 4'(cellno)}, time_tdc: TIME_W'(t)};
    hh = '{valid: 1'b1, layer: 2'(layer), cellno: 4'(cellno), time_tdc: TIME_W'(t)};
    link_hit_i[link] = h;
    link_used[link] = 1;
    hit_expect[pack_hit(2'(2 * link + ch_in_link), hh)]++;
    hits_sent++;
  endtask

  // Send one LRLR track on a link; hits one per clock in time order.
  task automatic send_track(input int link);
    int cellno[4], drift[4], ly[4], cl[4], tmv[4], hc[4], base, off, ch, start;
    bit right[4], okt;
    real x0, sl;
    okt = 0;
    while (!okt) begin
      x0 = $urandom_range(600, 15000);
      sl = ($urandom_range(0, 1400) - 700) / 1000.0;
      track(x0, sl, cellno, drift, right);
      okt = !right[0] && right[1] && !right[2] && right[3];
      for (int l = 0; l < 4; l++) if (cellno[l] < 0 || cellno[l] > 15) okt = 0;
    end
    ch = $urandom_range(0, 1);
    base = (cyc + 2) * 32;
    off  = $urandom_range(0, 31);
    for (int l = 0; l < 4; l++) begin ly[l] = l; cl[l] = cellno[l]; tmv[l] = off + drift[l]; end
    for (int i = 0; i < 4; i++) for (int j = i + 1; j < 4; j++) if (tmv[j] < tmv[i]) begin
      int t; t = tmv[i]; tmv[i] = tmv[j]; tmv[j] = t; t = ly[i]; ly[i] = ly[j]; ly[j] = t;
      t = cl[i]; cl[i] = cl[j]; cl[j] = t;
    end
    truths[2 * link + ch].push_back('{t0: base + off, x0: x0, m: sl});
    start = cyc;
    for (int k = 0; k < 4; k++) begin
      hc[k] = start + 1 + tmv[k] / 32;
      if (k > 0 && hc[k] <= hc[k-1]) hc[k] = hc[k-1] + 1;
    end
    for (int k = 0; k < 4; k++) begin
      while (cyc < hc[k]) begin @(posedge clk); #1; end
      put_hit(link, ch, ly[k], cl[k], base + tmv[k]);
      @(posedge clk); #1;
      link_hit_i[link] = '0;
    end
  endtask

  task automatic load(input bit sel, input int par[NPAR]);
    for (int p = 0; p < NPAR; p++) begin
      @(negedge clk);
      cfg_we = 1; cfg_sel = sel; cfg_addr = 9'(p); cfg_data = 8'(par[p]);
    end
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic run_tracks(input int n, input int ready_pct);
    for (int i = 0; i < n; i++) begin
      fork
        send_track(0);
        send_track(1);
        begin
          for (int c = 0; c < 45; c++) begin
            @(negedge clk);
            dma_ready = ($urandom_range(0, 99) < ready_pct);
          end
        end
      join
    end
    dma_ready = 1;
    repeat (100) @(posedge clk);
    #1;
  endtask

  initial begin
    int pf[NPAR], pl[NPAR];
    link_hit_i = '0; cfg_we = 0; cfg_sel = 0; cfg_addr = 0; cfg_data = 0; dma_ready = 1;
    for (int c = 0; c < 4; c++) begin segments_ch[c] = 0; last_segment_t0[c] = -1; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    filter_weights(pf); lat_weights(pl);
    load(0, pf); load(1, pl);
    // 1: normal running with some back-pressure
    run_tracks(150, 90);
    check(n_fifo_drop == 0, "no FIFO loss under normal running");
    // 2: DMA side stalled hard: merger FIFOs overflow
    run_tracks(60, 5);
    // 3: grouping loss: macro-cells 0 and 1 of chamber 0 wait while a hit arrives
    unchecked = 1;
    begin
      int a, base;
      @(posedge clk); #1;
      base = cyc * 32;
      a = cyc;
      put_hit(0, 0, 0, 2, base);      @(posedge clk); #1;
      put_hit(0, 0, 1, 2, base + 10); @(posedge clk); #1;
      put_hit(0, 0, 2, 2, base + 20); @(posedge clk); #1;
      link_hit_i[0] = '0;
      while (cyc < a + 20 + 1) begin @(posedge clk); #1; end
      put_hit(0, 0, 3, 4, base + 600); @(posedge clk); #1;
      link_hit_i[0] = '0;
      repeat (60) @(posedge clk); #1;
    end
    // 4: a noise burst floods macro-cell 1 of chamber 0
    begin
      int base, start;
      base = (cyc + 2) * 32;
      start = cyc;
      n_burst_mc1 = 0;
      for (int k = 0; k < 16; k++) begin
        while (cyc < start + 1 + (38 * k) / 32) begin @(posedge clk); #1; end
        put_hit(0, 0, k % 4, 2 + k / 4, base + 38 * k); @(posedge clk); #1;
        link_hit_i[0] = '0;
      end
      repeat (80) @(posedge clk); #1;
    end
    unchecked = 0;
    // every hit either delivered or reported lost
    begin
      int missing;
      missing = 0;
      foreach (hit_expect[w]) missing += hit_expect[w];
      check(missing == n_hit_drop, $sformatf("hits missing %0d, reported lost %0d", missing, n_hit_drop));
    end
    for (int c = 0; c < 4; c++) check(segments_ch[c] > 0, $sformatf("chamber %0d produced segments", c));
    check(link_used[0] && link_used[1], "both links used");
    check(n_dup > 0,       "duplicate segments from overlapping macro-cells");
    check(n_stall > 0,     "DMA back-pressure");
    check(n_fifo_drop > 0, "merger FIFO overflow");
    check(n_grp_drop > 0,  "grouping loss while a macro-cell waits");
    check(n_burst_mc1 == 0, "flooded macro-cell rejected by the filter");
    $display("hits sent %0d received %0d; segments per chamber %0d %0d %0d %0d; dup %0d stall %0d fifo drops %0d grouping drops %0d",
             hits_sent, hits_recv, segments_ch[0], segments_ch[1], segments_ch[2], segments_ch[3], n_dup, n_stall, n_fifo_drop, n_grp_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
