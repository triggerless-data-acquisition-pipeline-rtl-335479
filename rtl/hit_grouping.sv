// hit_grouping: the "initial grouping" stage of one chamber.
//
// Hits of one chamber arrive as a continuous stream, at most one per clock, in
// non-decreasing TDC time. Each of the N_MC overlapping 4x4 macro-cells owns a
// small window register. The first hit falling in a macro-cell opens its time
// window and becomes the reference time t_ref; further hits in the macro-cell
// arriving during the next WINDOW_CYC clocks are stored with their time relative
// to t_ref (11 bits, saturating); a cell keeps the first hit it sees. WINDOW_CYC
// (default 20 clocks = 640 TDC counts: the maximum drift time rounded up to whole
// clocks, 16, plus 4 clocks for hits queued on the link) exceeds the drift time, so
// the hits of one muon land in one window. When the window ends, a macro-cell
// holding at least MIN_HITS hits becomes pending; otherwise it is cleared.
// Pending macro-cells are sent out one per clock, lowest index first, as mc_o
// (registered, one clock after the grant). While a macro-cell is pending it
// cannot open a new window: a hit for it is lost and drop_o pulses.
//
// The grouping into time-coherent 4x4 macro-cells and the 3-hit minimum follow
// the description of the algorithm; the window rule, the stride of 2 cells, the
// priority order and the drop policy are this design's choices.
module hit_grouping
  import dtreco_pkg::*;
#(
  parameter int WINDOW_CYC = (MAX_DRIFT + TDC_PER_CLK - 1) / TDC_PER_CLK + 4,  // 20
  parameter int MIN_HITS   = 3
) (
  input  logic   clk,
  input  logic   rst_n,
  input  hit_t   hit_i,
  output mcell_t mc_o,
  output logic   drop_o
);

  typedef enum logic [1:0] {W_IDLE, W_OPEN, W_PENDING} wstate_e;

  wstate_e                 st    [N_MC];
  logic [$clog2(WINDOW_CYC+1)-1:0] cnt [N_MC];
  logic [TIME_W-1:0]       tref  [N_MC];
  mc_cell_t [MC_CELLS-1:0] cells [N_MC];
  logic [4:0]              nhits [N_MC];

  // Which macro-cells contain the incoming hit, and at which column.
  logic [N_MC-1:0] in_mc;
  logic [1:0]      col_of [N_MC];
  always_comb begin
    for (int m = 0; m < N_MC; m++) begin
      int c;
      c = int'(hit_i.cellno) - m * MC_STRIDE;
      in_mc[m]  = hit_i.valid && (c >= 0) && (c < MC_SIZE);
      col_of[m] = 2'(c);
    end
  end

  // Fixed-priority grant among pending macro-cells.
  logic [N_MC-1:0] pend, grant;
  always_comb begin
    for (int m = 0; m < N_MC; m++) pend[m] = (st[m] == W_PENDING);
    grant = pend & (~pend + 1'b1);
  end

  function automatic logic [RT_W-1:0] rel_time(input logic [TIME_W-1:0] t,
                                               input logic [TIME_W-1:0] r);
    logic [TIME_W-1:0] d;
    d = t - r;
    if (t < r) return '0;
    if (d > TIME_W'((1 << RT_W) - 1)) return '1;
    return d[RT_W-1:0];
  endfunction

  logic drop_c;
  always_comb begin
    drop_c = 1'b0;
    for (int m = 0; m < N_MC; m++)
      if (in_mc[m] && st[m] == W_PENDING) drop_c = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int m = 0; m < N_MC; m++) begin
        st[m]    <= W_IDLE;
        cnt[m]   <= '0;
        tref[m]  <= '0;
        cells[m] <= '0;
        nhits[m] <= '0;
      end
      mc_o   <= '0;
      drop_o <= 1'b0;
    end else begin
      drop_o     <= drop_c;
      mc_o.valid <= 1'b0;
      for (int m = 0; m < N_MC; m++) begin
        int idx;
        idx = int'(hit_i.layer) * MC_SIZE + int'(col_of[m]);
        unique case (st[m])
          W_IDLE: if (in_mc[m]) begin
            st[m]    <= W_OPEN;
            cnt[m]   <= '0;
            tref[m]  <= hit_i.time_tdc;
            cells[m] <= '0;
            cells[m][idx] <= '{valid: 1'b1, rtime: '0};
            nhits[m] <= 5'd1;
          end
          W_OPEN: begin
            if (in_mc[m] && !cells[m][idx].valid) begin
              cells[m][idx] <= '{valid: 1'b1, rtime: rel_time(hit_i.time_tdc, tref[m])};
              nhits[m]      <= nhits[m] + 5'd1;
            end
            cnt[m] <= cnt[m] + 1'b1;
            if (int'(cnt[m]) == WINDOW_CYC - 1)
              st[m] <= (int'(nhits[m]) + ((in_mc[m] && !cells[m][idx].valid) ? 1 : 0) >= MIN_HITS)
                       ? W_PENDING : W_IDLE;
          end
          W_PENDING: if (grant[m]) begin
            mc_o.valid  <= 1'b1;
            mc_o.mc_idx <= 3'(m);
            mc_o.t_ref  <= tref[m];
            mc_o.cells  <= cells[m];
            st[m]       <= W_IDLE;
          end
          default: st[m] <= W_IDLE;
        endcase
      end
    end
  end

endmodule
