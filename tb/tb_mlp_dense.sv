// tb_mlp_dense: self-checking test of the quantized dense network.
//
// Random weights (with some zeros, as after pruning) are written through the
// configuration port, then a new random input vector is applied every clock.
// Each output vector is compared with an integer reference model exactly, two
// clocks after its input (latency 2, initiation interval 1). The weights are
// reloaded several times.
module tb_mlp_dense;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #12.5 clk = ~clk;

  logic [15:0][6:0]   in_i;
  logic signed [23:0] out_o [16];
  logic               cfg_we;
  logic [8:0]         cfg_addr;
  logic signed [7:0]  cfg_data;

  mlp_dense dut (.*);

  int checks = 0, failures = 0;
  int par[NPAR];

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int x[16], y[16];
    int hist_y[1][16];
    in_i = '0; cfg_we = 0; cfg_addr = 0; cfg_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      @(negedge clk);
      for (int p = 0; p < NPAR; p++) begin
        par[p] = ($urandom_range(0, 3) == 0) ? 0 : int'($urandom_range(0, 255)) - 128;
        cfg_we = 1; cfg_addr = 9'(p); cfg_data = 8'(par[p]);
        @(negedge clk);
      end
      cfg_we = 0;
      // stream 500 vectors, one per clock
      for (int n = 0; n < 501; n++) begin
        if (n < 500) begin
          for (int i = 0; i < 16; i++) begin
            x[i] = ($urandom_range(0, 3) == 0) ? 0 : $urandom_range(0, 127);
            in_i[i] = 7'(x[i]);
          end
          mlp(par, x, y);
        end
        @(posedge clk); #1;
        // the input of the previous iteration was sampled two rising edges ago
        if (n >= 1) begin
          for (int o = 0; o < 16; o++) begin
            checks++;
            if (int'(out_o[o]) != hist_y[0][o]) begin
              failures++;
              if (failures < 10) $display("FAIL out[%0d] got %0d exp %0d", o, out_o[o], hist_y[0][o]);
            end
          end
        end
        hist_y[0] = y;
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
