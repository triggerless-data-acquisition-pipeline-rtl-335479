// tb_hit_grouping: self-checking test of the initial grouping stage.
//
// Part 1 sends well-separated muon tracks (plus an occasional noise hit) as a
// time-ordered hit stream, one hit per clock at most. For every macro-cell the
// expected record is worked out from the track: which of its 16 cells saw a
// hit, their times relative to the macro-cell's first hit, and whether the
// 3-hit minimum is met. The expected output cycle is the first hit's cycle
// plus WINDOW_CYC + 1, delayed by one clock for every lower-index macro-cell
// leaving at the same time (fixed priority). Every record and its cycle are
// compared. Part 2 makes two macro-cells close together and sends a hit to the
// second while it waits: the hit must be lost and drop_o must pulse.
module tb_hit_grouping;
  import dtreco_pkg::*;
  import tb_ref_pkg::*;

  localparam int W = 20;

  logic clk = 0, rst_n = 0;
  always #12.5 clk = ~clk;

  hit_t   hit_i;
  mcell_t mc_o;
  logic   drop_o;

  hit_grouping #(.WINDOW_CYC(W)) dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // expected records
  typedef struct {
    int          cyc;
    int          idx;
    logic [TIME_W-1:0] tref;
    logic [15:0] v;
    int          rt[16];
  } rec_t;
  rec_t exp_q[$];
  int   drops = 0, emitted = 0;

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output monitor
  always @(posedge clk) begin
    #1;
    if (rst_n && drop_o) drops++;
    if (rst_n && mc_o.valid) begin
      emitted++;
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL: unexpected macro-cell %0d at cycle %0d", mc_o.mc_idx, cyc);
      end else begin
        rec_t e;
        bit bad;
        e = exp_q.pop_front();
        bad = (cyc != e.cyc) || (mc_o.mc_idx != 3'(e.idx)) || (mc_o.t_ref != e.tref);
        for (int c = 0; c < 16; c++) begin
          if (mc_o.cells[c].valid != e.v[c]) bad = 1;
          if (e.v[c] && mc_o.cells[c].rtime != RT_W'(e.rt[c])) bad = 1;
        end
        if (bad) begin
          failures++;
          $display("FAIL: got mc %0d cyc %0d tref %0d cells %h; exp mc %0d cyc %0d tref %0d",
                   mc_o.mc_idx, cyc, mc_o.t_ref, mc_o.cells, e.idx, e.cyc, e.tref);
        end
      end
    end
  end

  task automatic send(input int layer, input int cellno, input int t);
    hit_i = '{valid: 1'b1, layer: 2'(layer), cellno: 4'(cellno), time_tdc: TIME_W'(t)};
    @(posedge clk); #1;
    hit_i = '0;
  endtask

  initial begin
    hit_i = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // ---- Part 1: separated tracks
    for (int n = 0; n < 300; n++) begin
      int cellno[4], drift[4], ly[5], cl[5], tm[5], nh, t0, start, first_cyc[7];
      bit right[4];
      real x0, sl;
      int hc[5];
      rec_t recs[7];
      bit   used[7];
      x0 = $urandom_range(300, 15000);
      sl = ($urandom_range(0, 1200) - 600) / 1000.0;
      track(x0, sl, cellno, drift, right);
      nh = 0;
      for (int l = 0; l < 4; l++) if (cellno[l] >= 0 && cellno[l] < 16 && $urandom_range(0, 9) != 0) begin
        ly[nh] = l; cl[nh] = cellno[l]; tm[nh] = drift[l]; nh++;
      end
      if ($urandom_range(0, 3) == 0) begin   // noise hit
        ly[nh] = $urandom_range(0, 3); cl[nh] = $urandom_range(0, 15); tm[nh] = $urandom_range(0, 480);
        for (int k = 0; k < nh; k++) if (ly[k] == ly[nh] && cl[k] == cl[nh]) tm[nh] = -1;
        if (tm[nh] >= 0) nh++;
      end
      // sort by time
      for (int i = 0; i < nh; i++) for (int j = i + 1; j < nh; j++) if (tm[j] < tm[i]) begin
        int t; t = tm[i]; tm[i] = tm[j]; tm[j] = t; t = ly[i]; ly[i] = ly[j]; ly[j] = t;
        t = cl[i]; cl[i] = cl[j]; cl[j] = t;
      end
      t0 = (cyc + 2) * 32;
      // arrival cycle of hit k: cycle of its time, at least one after the previous
      start = cyc;
      for (int k = 0; k < nh; k++) begin
        hc[k] = start + 1 + tm[k] / 32;
        if (k > 0 && hc[k] <= hc[k-1]) hc[k] = hc[k-1] + 1;
      end
      // expected records
      for (int m = 0; m < 7; m++) begin
        int cnt;
        used[m] = 0; cnt = 0;
        recs[m].v = '0; recs[m].idx = m;
        for (int k = 0; k < nh; k++) begin
          int col;
          col = cl[k] - 2 * m;
          if (col >= 0 && col < 4) begin
            if (cnt == 0) begin first_cyc[m] = hc[k]; recs[m].tref = TIME_W'(t0 + tm[k]); end
            recs[m].v[ly[k]*4 + col] = 1'b1;
            recs[m].rt[ly[k]*4 + col] = t0 + tm[k] - int'(recs[m].tref);
            cnt++;
          end
        end
        if (cnt >= 3) begin used[m] = 1; recs[m].cyc = first_cyc[m] + W + 2; end
      end
      // fixed-priority arbitration of records leaving together
      begin
        automatic bit done[7];
        automatic rec_t tmp[$];
        automatic int c = 1 << 30;
        for (int m = 0; m < 7; m++) begin
          done[m] = !used[m];
          if (used[m] && recs[m].cyc < c) c = recs[m].cyc;
        end
        for (int step = 0; step < 64; step++, c++) begin
          for (int m = 0; m < 7; m++) if (!done[m] && recs[m].cyc <= c) begin
            recs[m].cyc = c; done[m] = 1; tmp.push_back(recs[m]);
            break;
          end
        end
        foreach (tmp[i]) exp_q.push_back(tmp[i]);
      end
      // drive the hits
      for (int k = 0; k < nh; k++) begin
        while (cyc < hc[k]) begin @(posedge clk); #1; end
        send(ly[k], cl[k], t0 + tm[k]);
      end
      repeat (W + 15) @(posedge clk);
      #1;
    end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d macro-cells missing", exp_q.size()); end
    checks++;
    if (drops != 0) begin failures++; $display("FAIL: drop without contention"); end
    // ---- Part 2: contention. Cells 2 and 3 belong to macro-cells 0 and 1.
    begin
      int a, base;
      rec_t r0, r1;
      base = cyc * 32;
      a = cyc;   // arrival cycle of the first hit
      r0.v = '0; r1.v = '0; r0.idx = 0; r1.idx = 1;
      r0.tref = TIME_W'(base); r1.tref = TIME_W'(base);
      for (int l = 0; l < 3; l++) begin
        r0.v[l*4 + 2] = 1; r0.rt[l*4 + 2] = 10 * l;
        r1.v[l*4 + 0] = 1; r1.rt[l*4 + 0] = 10 * l;
      end
      r0.cyc = a + W + 2; r1.cyc = a + W + 3;
      exp_q.push_back(r0); exp_q.push_back(r1);
      send(0, 2, base); send(1, 2, base + 10); send(2, 2, base + 20);
      while (cyc < a + W + 1) begin @(posedge clk); #1; end
      send(3, 4, base + 600);           // macro-cell 1 is waiting: lost
      repeat (40) @(posedge clk); #1;
    end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: contention records missing"); end
    checks++;
    if (drops != 1) begin failures++; $display("FAIL: expected 1 drop, saw %0d", drops); end
    $display("emitted %0d macro-cells, %0d drops", emitted, drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
