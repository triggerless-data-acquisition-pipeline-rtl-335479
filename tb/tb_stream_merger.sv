// tb_stream_merger: self-checking test of the hit/segment stream merger.
//
// Six sources write numbered words (source id and sequence number inside the
// word) at random, the DMA side takes words with a random ready. Every output
// word must be the next expected word of its source: nothing reordered,
// duplicated or invented; a word may be missing only where drop_o reported a
// loss. Phase 1 runs with ready mostly high (no loss expected), phase 2 holds
// ready low long enough to overflow the FIFOs, phase 3 checks round-robin order
// with all sources busy. The word must stay stable while ready is low (an
// assertion in the RTL also checks this). Stalls, drops and transfers are
// counted and each must occur.
module tb_stream_merger;

  localparam int N = 6;

  logic clk = 0, rst_n = 0;
  always #12.5 clk = ~clk;

  logic [N-1:0]  in_valid;
  logic [127:0]  in_word [N];
  logic [127:0]  out_word;
  logic          out_valid, out_ready;
  logic [N-1:0]  drop_o;

  stream_merger #(.N_IN(N)) dut (.*);

  int checks = 0, failures = 0;
  int sent_seq[N], next_seq[N], dropped[N];
  int stalls = 0, xfers = 0, drops = 0;
  int last_src = -1, rr_ok = 0, rr_bad = 0;
  bit rr_phase = 0;

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output checker.
  logic [127:0] held;
  bit           was_stalled = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      for (int i = 0; i < N; i++) if (drop_o[i]) begin dropped[i]++; drops++; end
      if (out_valid && !out_ready) begin
        stalls++;
        if (was_stalled) begin
          checks++;
          if (out_word !== held) begin failures++; $display("FAIL: word changed while stalled"); end
        end
        held = out_word; was_stalled = 1;
      end else was_stalled = 0;
      if (out_valid && out_ready) begin
        int src, seq;
        xfers++;
        src = int'(out_word[71:64]);
        seq = int'(out_word[31:0]);
        checks++;
        if (src >= N || seq < next_seq[src] || seq > next_seq[src] + dropped[src] + 1) begin
          failures++;
          $display("FAIL: src %0d seq %0d expected %0d (drops %0d)", src, seq, next_seq[src], dropped[src]);
        end else if (seq != next_seq[src] && dropped[src] == 0) begin
          failures++;
          $display("FAIL: src %0d skipped to %0d from %0d with no drop", src, seq, next_seq[src]);
        end
        if (src < N) next_seq[src] = seq + 1;
        if (rr_phase && last_src >= 0) begin
          if (src == (last_src + 1) % N) rr_ok++; else rr_bad++;
        end
        last_src = src;
      end
    end
  end

  task automatic drive(int cycles, int p_valid, int p_ready);
    for (int c = 0; c < cycles; c++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        in_valid[i] = ($urandom_range(0, 99) < p_valid);
        in_word[i]  = {56'd0, 8'(i), 32'd0, 32'(sent_seq[i])};
        if (in_valid[i]) sent_seq[i]++;
      end
      out_ready = ($urandom_range(0, 99) < p_ready);
    end
    @(negedge clk);
    in_valid = '0;
  endtask

  initial begin
    in_valid = '0; out_ready = 0;
    for (int i = 0; i < N; i++) begin in_word[i] = '0; sent_seq[i] = 0; next_seq[i] = 0; dropped[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1: light load
    drive(4000, 10, 80);
    out_ready = 1;
    repeat (100) @(negedge clk);
    checks++;
    if (drops != 0) begin failures++; $display("FAIL: drops under light load"); end
    for (int i = 0; i < N; i++) begin
      checks++;
      if (next_seq[i] != sent_seq[i]) begin failures++; $display("FAIL: src %0d lost words", i); end
    end
    // phase 2: overflow
    drive(200, 60, 0);
    drive(3000, 15, 100);
    out_ready = 1;
    repeat (200) @(negedge clk);
    // phase 3: round robin with every source busy
    for (int i = 0; i < N; i++) dropped[i] = 0;
    last_src = -1;
    begin
      int d0; d0 = drops;
      drive(20, 100, 0);          // fill all FIFOs
      rr_phase = 1;
      out_ready = 1;
      repeat (60) @(negedge clk);
      rr_phase = 0;
    end
    checks++;
    if (rr_bad != 0 || rr_ok < 50) begin failures++; $display("FAIL: round robin ok %0d bad %0d", rr_ok, rr_bad); end
    checks++;
    if (stalls == 0 || drops == 0 || xfers == 0) begin failures++; $display("FAIL: stall/drop/transfer never seen"); end
    $display("transfers %0d stalls %0d drops %0d", xfers, stalls, drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
