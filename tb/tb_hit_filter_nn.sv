// tb_hit_filter_nn: self-checking test of the filtering network.
//
// Random weights are loaded, then one random macro-cell (random occupancy and
// times, some invalid cycles) is applied per clock. keep_o is compared with a
// reference built from the feature encoding and the integer network model: a
// cell is kept when it has a hit and a positive score. valid_o and keep_o must
// follow their input by exactly two clocks with a new input every clock.
module tb_hit_filter_nn;
  import dtreco_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #12.5 clk = ~clk;

  mcell_t              mc_i;
  logic                valid_o;
  logic [MC_CELLS-1:0] keep_o;
  logic                cfg_we;
  logic [8:0]          cfg_addr;
  logic signed [7:0]   cfg_data;

  hit_filter_nn dut (.*);

  int checks = 0, failures = 0;
  int par[NPAR];
  int kept = 0, rejected = 0;

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int x[16], y[16];
    logic [15:0] exp_keep, prev_keep;
    bit exp_v, prev_v;
    mc_i = '0; cfg_we = 0; cfg_addr = 0; cfg_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      @(negedge clk);
      for (int p = 0; p < NPAR; p++) begin
        par[p] = int'($urandom_range(0, 255)) - 128;
        cfg_we = 1; cfg_addr = 9'(p); cfg_data = 8'(par[p]);
        @(negedge clk);
      end
      cfg_we = 0;
      prev_v = 0; prev_keep = '0;
      for (int n = 0; n < 1001; n++) begin
        exp_v = 0; exp_keep = '0;
        if (n < 1000) begin
          mc_i = '0;
          mc_i.valid = ($urandom_range(0, 7) != 0);
          for (int c = 0; c < 16; c++) begin
            int rt;
            rt = $urandom_range(0, 2047);
            if ($urandom_range(0, 2) == 0) mc_i.cells[c] = '{valid: 1'b1, rtime: RT_W'(rt)};
            x[c] = (mc_i.valid && mc_i.cells[c].valid) ? enc(rt) : 0;
          end
          mlp(par, x, y);
          exp_v = mc_i.valid;
          for (int c = 0; c < 16; c++) exp_keep[c] = (x[c] != 0) && (y[c] > 0);
        end else mc_i = '0;
        @(posedge clk); #1;
        if (n >= 1) begin
          checks++;
          if (valid_o !== prev_v || keep_o !== prev_keep) begin
            failures++;
            if (failures < 10) $display("FAIL n=%0d valid %b/%b keep %h exp %h", n, valid_o, prev_v, keep_o, prev_keep);
          end
          if (prev_v) begin kept += $countones(prev_keep); end
        end
        prev_v = exp_v; prev_keep = exp_keep;
        @(negedge clk);
      end
    end
    checks++;
    if (kept == 0) begin failures++; $display("FAIL: no hit was ever kept"); end
    $display("kept %0d hits", kept);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
