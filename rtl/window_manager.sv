// Sample-buffer memory logic of the Carrier firmware. The IRSX samples
// continuously into a circular buffer of 512 windows; this block picks the
// window each new 64-sample segment is written to. Every WIN_CLKS clocks it
// issues one window slot (smp_strobe) and advances the write pointer to the
// next window that is not locked. A window is locked while digitization of it
// is pending: lock_inc / lock_dec count references per window, so the same
// window may be claimed by several regions of interest. If every window is
// locked the slot is not written (stall pulse) and that segment is lost.
// slot is a free-running slot counter (timestamp); slot_wr / wr_win tell
// which window, if any, the current slot was stored in.
// From the paper: 512-window buffer, write blocking of triggered segments.
// Own choices: reference counts, skip-to-next-free policy, stall on full.
module window_manager
  import top_pkg::*;
#(
  parameter int NWIN   = N_WIN,
  parameter int CLKS   = WIN_CLKS,
  parameter int LOCK_W = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  output logic                    smp_strobe,
  output logic                    slot_wr,
  output logic [$clog2(NWIN)-1:0] wr_win,
  output logic [15:0]             slot,
  output logic                    stall,
  input  logic                    lock_inc,
  input  logic [$clog2(NWIN)-1:0] lock_inc_win,
  input  logic                    lock_dec,
  input  logic [$clog2(NWIN)-1:0] lock_dec_win,
  output logic [$clog2(NWIN):0]   n_locked
);
  localparam int AW = $clog2(NWIN);
  logic [LOCK_W-1:0]     lock_cnt [NWIN];
  logic [$clog2(CLKS):0] div;
  logic [AW-1:0]         ptr;      // last written window
  logic [AW-1:0]         nxt;
  logic                  found;

  // Next free window after ptr, in circular order
  always_comb begin
    found = 1'b0;
    nxt   = ptr;
    for (int i = 1; i <= NWIN; i++) begin
      logic [AW-1:0] w;
      w = ptr + AW'(i);
      if (!found && lock_cnt[w] == '0) begin
        found = 1'b1;
        nxt   = w;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      div <= '0; ptr <= AW'(NWIN - 1); slot <= '0;
      smp_strobe <= 1'b0; slot_wr <= 1'b0; wr_win <= '0; stall <= 1'b0;
    end else begin
      smp_strobe <= 1'b0; stall <= 1'b0;
      if (div == ($clog2(CLKS)+1)'(CLKS - 1)) begin
        div        <= '0;
        smp_strobe <= 1'b1;
        slot       <= slot + 1'b1;
        slot_wr    <= found;
        stall      <= !found;
        if (found) begin
          wr_win <= nxt;
          ptr    <= nxt;
        end
      end else begin
        div <= div + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < NWIN; i++) lock_cnt[i] <= '0;
    end else begin
      if (lock_inc && lock_dec && lock_inc_win == lock_dec_win) begin
        // net change zero
      end else begin
        if (lock_inc) lock_cnt[lock_inc_win] <= lock_cnt[lock_inc_win] + 1'b1;
        if (lock_dec) lock_cnt[lock_dec_win] <= lock_cnt[lock_dec_win] - 1'b1;
      end
    end
  end

  always_comb begin
    n_locked = '0;
    for (int i = 0; i < NWIN; i++) n_locked = n_locked + (AW+1)'(lock_cnt[i] != '0);
  end

  // A window is never released more often than it was locked
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
      lock_dec |-> lock_cnt[lock_dec_win] != '0 || (lock_inc && lock_inc_win == lock_dec_win));
endmodule
