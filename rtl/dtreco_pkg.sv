// dtreco_pkg: constants and types shared by the drift-tube local reconstruction.
//
// Geometry: a chamber has 4 layers of 16 cells. Reconstruction works on 4x4
// macro-cells (4 layers x 4 neighbouring cells); a macro-cell starts every
// MC_STRIDE cells, so 7 overlapping macro-cells cover a chamber. Odd layers are
// shifted by half a cell (staggered layout).
//
// Units: times are TDC counts (32 counts per 40 MHz clock). Positions are in
// "drift units", the distance a drift electron covers in one TDC count, so the
// drift velocity is exactly 1 and a drift time converts to a distance without a
// multiplier. CELL_W and LAYER_H are the cell width and layer pitch in those
// units (42 mm and 13 mm cells at ~54.5 um/ns and 25/32 ns per count). The
// layer count and cells per layer follow the detector description; the cell
// size, drift velocity, TDC bin, the macro-cell stride and all word formats are
// this design's own choices.
package dtreco_pkg;

  localparam int N_LAYERS  = 4;
  localparam int N_CELLS   = 16;            // cells per layer
  localparam int MC_SIZE   = 4;             // macro-cell is MC_SIZE x N_LAYERS
  localparam int MC_CELLS  = MC_SIZE * N_LAYERS;  // 16 cells per macro-cell
  localparam int MC_STRIDE = 2;
  localparam int N_MC      = (N_CELLS - MC_SIZE) / MC_STRIDE + 1;  // 7

  localparam int CELL_W    = 984;           // cell width, drift units
  localparam int LAYER_H   = 305;           // layer pitch, drift units
  localparam int TDC_PER_CLK = 32;          // TDC counts per 40 MHz clock
  localparam int MAX_DRIFT = CELL_W / 2;    // 492 counts (~384 ns)

  localparam int TIME_W    = 32;            // absolute TDC time
  localparam int RT_W      = 11;            // time relative to macro-cell start
  localparam int POS_W     = 18;            // signed positions, drift units
  localparam int M_W       = 16;            // slope, signed, M_FRAC fraction bits
  localparam int M_FRAC    = 12;
  localparam int WORD_W    = 128;           // merged output word

  // Hit as delivered by the link deserializer for one chamber.
  typedef struct packed {
    logic              valid;
    logic [1:0]        layer;
    logic [3:0]        cellno;
    logic [TIME_W-1:0] time_tdc;
  } hit_t;

  // Hit as delivered by one TDC board link: 128 channels, channel c is
  // chamber c[6] of the board, layer c[5:4], cell c[3:0].
  typedef struct packed {
    logic              valid;
    logic [6:0]        channel;
    logic [TIME_W-1:0] time_tdc;
  } link_hit_t;

  // One cell of a macro-cell: hit present and its time relative to t_ref.
  typedef struct packed {
    logic            valid;
    logic [RT_W-1:0] rtime;
  } mc_cell_t;

  // A closed macro-cell. Cell index inside the macro-cell is layer*4 + column.
  typedef struct packed {
    logic              valid;
    logic [2:0]        mc_idx;               // which macro-cell of the chamber
    logic [TIME_W-1:0] t_ref;                // TDC time of the earliest hit
    mc_cell_t [MC_CELLS-1:0] cells;
  } mcell_t;

  // Hit chosen for the fit in one layer.
  typedef struct packed {
    logic            valid;
    logic [1:0]      col;                    // column inside the macro-cell
    logic            right;                  // laterality: 1 = right of wire
    logic [RT_W-1:0] rtime;
  } sel_hit_t;

  // Reconstructed segment ("segment").
  typedef struct packed {
    logic                    valid;
    logic [2:0]              mc_idx;
    logic [N_LAYERS-1:0]     layer_mask;     // layers used in the fit
    logic [N_LAYERS-1:0]     lat;            // laterality of those hits
    logic [TIME_W-1:0]       t0;             // crossing time, TDC counts
    logic signed [POS_W-1:0] x0;             // position at layer 0, chamber frame
    logic signed [M_W-1:0]   m;              // dx/dz, M_FRAC fraction bits
  } segment_t;

  typedef enum logic [1:0] {TAG_NONE = 2'b00, TAG_HIT = 2'b01, TAG_SEG = 2'b10} tag_e;

  // Wire position of a macro-cell column in a layer, relative to the macro-cell's
  // left edge (column 0, layer 0 wire sits at CELL_W/2).
  function automatic int wire_pos(input int layer, input int col);
    return col * CELL_W + CELL_W / 2 + ((layer % 2 != 0) ? CELL_W / 2 : 0);
  endfunction

  // Output word formats (tag in the top two bits).
  function automatic logic [WORD_W-1:0] pack_hit(input logic [1:0] chamber, input hit_t h);
    logic [WORD_W-1:0] w;
    w = '0;
    w[127:126] = TAG_HIT;
    w[121:120] = chamber;
    w[41:40]   = h.layer;
    w[35:32]   = h.cellno;
    w[31:0]    = h.time_tdc;
    return w;
  endfunction

  function automatic logic [WORD_W-1:0] pack_segment(input logic [1:0] chamber, input segment_t s);
    logic [WORD_W-1:0] w;
    w = '0;
    w[127:126] = TAG_SEG;
    w[121:120] = chamber;
    w[118:116] = s.mc_idx;
    w[115:112] = s.layer_mask;
    w[111:108] = s.lat;
    w[95:64]   = s.t0;
    w[49:32]   = s.x0;
    w[15:0]    = s.m;
    return w;
  endfunction

endpackage
