// stream_merger: merges hit and segment words into the single DMA stream.
//
// Each of the N_IN sources (raw-hit links and chamber segment outputs) writes
// tagged 128-bit words into its own FIFO of FIFO_DEPTH entries; sources cannot
// be stalled, so a word arriving at a full FIFO is lost and drop_o[i] pulses for
// one cycle. The output side is a valid/ready stream towards the DMA engine: a
// round-robin arbiter picks the next non-empty FIFO after the one served last,
// and the word is held stable while out_ready is low (back-pressure). A word is
// transferred in every cycle with out_valid and out_ready both high, so the
// merger moves up to one word per clock.
//
// Sending hits and reconstructed segments together in one stream follows the
// system description; FIFO sizes, arbitration and the drop policy are this
// design's choices.
module stream_merger #(
  parameter int N_IN       = 6,
  parameter int W          = 128,
  parameter int FIFO_DEPTH = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N_IN-1:0]     in_valid,
  input  logic [W-1:0]        in_word [N_IN],
  output logic [W-1:0]        out_word,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [N_IN-1:0]     drop_o
);

  localparam int IW = (N_IN > 1) ? $clog2(N_IN) : 1;

  logic [N_IN-1:0] empty, full, pop;
  logic [W-1:0]    dout [N_IN];

  for (genvar i = 0; i < N_IN; i++) begin : g_fifo
    sync_fifo #(.W(W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n, .push(in_valid[i]), .din(in_word[i]),
      .pop(pop[i]), .dout(dout[i]), .empty(empty[i]), .full(full[i])
    );
  end

  // Output register stage.
  logic [IW-1:0] last;        // source served last
  logic          sel_found;
  logic [IW-1:0] sel;
  logic          load;

  always_comb begin
    sel_found = 1'b0;
    sel       = '0;
    for (int k = 1; k <= N_IN; k++) begin
      int idx;
      idx = (int'(last) + k) % N_IN;
      if (!sel_found && !empty[idx]) begin
        sel_found = 1'b1;
        sel       = IW'(idx);
      end
    end
    load = sel_found && (!out_valid || out_ready);
    pop  = '0;
    if (load) pop[sel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_word  <= '0;
      last      <= IW'(N_IN - 1);
      drop_o    <= '0;
    end else begin
      drop_o <= in_valid & full;
      if (load) begin
        out_valid <= 1'b1;
        out_word  <= dout[sel];
        last      <= sel;
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  // A word offered to the DMA side stays stable until it is taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_word))
    else $error("stream_merger: output changed while stalled");

endmodule
