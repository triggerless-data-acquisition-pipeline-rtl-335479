// dt_reco_top: back-end reconstruction logic of the trigger-less drift-tube
// readout.
//
// Two TDC boards each send a deserialized hit stream covering 128 channels
// (two chambers of 4 x 16 cells). The top splits every stream by chamber
// (channel bit 6 selects the chamber of the board, bits 5:4 the layer, bits 3:0
// the cell) and feeds N_CHAMBERS chamber_reco chains, which add reconstructed
// segments (segments: t0, x0, m) to the data. Nothing is filtered away: every raw
// hit is forwarded as well. stream_merger combines the N_LINKS raw-hit streams
// and the N_CHAMBERS segment streams into one tagged 128-bit valid/ready stream
// for the DMA engine that moves the data to host memory.
//
// Interface: link_hit_i carries at most one hit per link per clock (40 MHz);
// cfg_* writes the weights of the filtering (cfg_sel = 0) or disambiguation
// (cfg_sel = 1) network, shared by all chambers; dma_* is the output stream;
// grp_drop_o and fifo_drop_o pulse when a hit or word is lost.
// Word formats are given by pack_hit/pack_segment in dtreco_pkg.
// Timing: a raw hit reaches the merger FIFO 1 clock after it arrives; a segment
// leaves its chamber 7 clocks after the macro-cell window closes.
// Board and chamber counts follow the detector setup; the channel map, the
// configuration port and the word formats are this design's choices.
module dt_reco_top
  import dtreco_pkg::*;
#(
  parameter int N_LINKS    = 2,
  parameter int N_CHAMBERS = 2 * N_LINKS
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  link_hit_t [N_LINKS-1:0]        link_hit_i,
  input  logic                           cfg_we,
  input  logic                           cfg_sel,
  input  logic [8:0]                     cfg_addr,
  input  logic signed [7:0]              cfg_data,
  output logic [WORD_W-1:0]              dma_word,
  output logic                           dma_valid,
  input  logic                           dma_ready,
  output logic [N_CHAMBERS-1:0]          grp_drop_o,
  output logic [N_LINKS+N_CHAMBERS-1:0]  fifo_drop_o
);

  localparam int N_SRC = N_LINKS + N_CHAMBERS;

  // Route link hits to chambers.
  hit_t  ch_hit  [N_CHAMBERS];
  segment_t ch_segment [N_CHAMBERS];
  always_comb begin
    for (int c = 0; c < N_CHAMBERS; c++) begin
      link_hit_t lh;
      lh = link_hit_i[c / 2];
      ch_hit[c].valid    = lh.valid && (int'(lh.channel[6]) == c % 2);
      ch_hit[c].layer    = lh.channel[5:4];
      ch_hit[c].cellno   = lh.channel[3:0];
      ch_hit[c].time_tdc = lh.time_tdc;
    end
  end

  for (genvar c = 0; c < N_CHAMBERS; c++) begin : g_ch
    chamber_reco u_reco (
      .clk, .rst_n, .hit_i(ch_hit[c]), .segment_o(ch_segment[c]), .drop_o(grp_drop_o[c]),
      .cfg_filt_we(cfg_we && !cfg_sel), .cfg_lat_we(cfg_we && cfg_sel),
      .cfg_addr, .cfg_data
    );
  end

  // Merge raw hits and segments.
  logic [N_SRC-1:0]  src_valid;
  logic [WORD_W-1:0] src_word [N_SRC];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      src_valid <= '0;
      src_word  <= '{default: '0};
    end else begin
      for (int k = 0; k < N_LINKS; k++) begin
        hit_t h;
        h.valid    = link_hit_i[k].valid;
        h.layer    = link_hit_i[k].channel[5:4];
        h.cellno   = link_hit_i[k].channel[3:0];
        h.time_tdc = link_hit_i[k].time_tdc;
        src_valid[k] <= h.valid;
        src_word[k]  <= pack_hit(2'(2 * k + int'(link_hit_i[k].channel[6])), h);
      end
      for (int c = 0; c < N_CHAMBERS; c++) begin
        src_valid[N_LINKS + c] <= ch_segment[c].valid;
        src_word[N_LINKS + c]  <= pack_segment(2'(c), ch_segment[c]);
      end
    end
  end

  stream_merger #(.N_IN(N_SRC), .W(WORD_W), .FIFO_DEPTH(16)) u_merge (
    .clk, .rst_n, .in_valid(src_valid), .in_word(src_word),
    .out_word(dma_word), .out_valid(dma_valid), .out_ready(dma_ready),
    .drop_o(fifo_drop_o)
  );

endmodule
