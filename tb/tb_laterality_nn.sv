// tb_laterality_nn: self-checking test of the disambiguation network.
//
// Random weights are loaded, then one random macro-cell with a random filter
// mask is applied per clock. lat_o is compared with a reference built from the
// feature encoding (cells the filter rejected give 0) and the integer network
// model: right when the score is positive, only for kept cells. valid_o, lat_o
// and keep_o must follow their input by exactly two clocks, one input per clock.
module tb_laterality_nn;
  import dtreco_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #12.5 clk = ~clk;

  mcell_t              mc_i;
  logic [MC_CELLS-1:0] keep_i;
  logic                valid_o;
  logic [MC_CELLS-1:0] lat_o, keep_o;
  logic                cfg_we;
  logic [8:0]          cfg_addr;
  logic signed [7:0]   cfg_data;

  laterality_nn dut (.*);

  int checks = 0, failures = 0;
  int par[NPAR];
  int rights = 0, lefts = 0;

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int x[16], y[16];
    logic [15:0] exp_lat, exp_keep, prev_lat, prev_keep;
    bit exp_v, prev_v;
    mc_i = '0; keep_i = '0; cfg_we = 0; cfg_addr = 0; cfg_data = 0;
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
      prev_v = 0; prev_lat = '0; prev_keep = '0;
      for (int n = 0; n < 1001; n++) begin
        exp_v = 0; exp_lat = '0; exp_keep = '0;
        if (n < 1000) begin
          mc_i = '0;
          mc_i.valid = ($urandom_range(0, 7) != 0);
          keep_i = 16'($urandom);
          for (int c = 0; c < 16; c++) begin
            int rt;
            rt = $urandom_range(0, 2047);
            if ($urandom_range(0, 1) == 0) mc_i.cells[c] = '{valid: 1'b1, rtime: RT_W'(rt)};
            exp_keep[c] = mc_i.valid && mc_i.cells[c].valid && keep_i[c];
            x[c] = exp_keep[c] ? enc(rt) : 0;
          end
          mlp(par, x, y);
          exp_v = mc_i.valid;
          for (int c = 0; c < 16; c++) exp_lat[c] = exp_keep[c] && (y[c] > 0);
        end else begin mc_i = '0; keep_i = '0; end
        @(posedge clk); #1;
        if (n >= 1) begin
          checks++;
          if (valid_o !== prev_v || lat_o !== prev_lat || keep_o !== prev_keep) begin
            failures++;
            if (failures < 10) $display("FAIL n=%0d valid %b/%b lat %h exp %h keep %h exp %h",
                                        n, valid_o, prev_v, lat_o, prev_lat, keep_o, prev_keep);
          end
          rights += $countones(prev_lat);
          lefts  += $countones(prev_keep & ~prev_lat);
        end
        prev_v = exp_v; prev_lat = exp_lat; prev_keep = exp_keep;
        @(negedge clk);
      end
    end
    checks++;
    if (rights == 0 || lefts == 0) begin failures++; $display("FAIL: one laterality never seen"); end
    $display("right %0d left %0d", rights, lefts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
