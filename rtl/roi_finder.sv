// Region-of-interest finder of the Carrier firmware. It keeps a history ring
// with one entry per window slot: the window the slot was stored in and the
// channel trigger bits of the Carrier's 32 channels during that slot. A global
// trigger arrives a fixed latency (LAT slots, the 5 us of the Belle II trigger)
// after the collision; for every slot in the SEARCH slots ending LAT slots
// before the trigger that holds channel triggers, the finder emits a region
// of interest (window + channel mask + trigger number) and locks that window
// against overwriting. After the scan it emits an end-of-event marker so the
// SCROD knows this Carrier is complete for that trigger.
// Interface: rec_* records one slot (the cycle after the slot's strobe, when
// the IRSX trigger outputs are valid). gtrig is queued with the current slot
// and a local trigger number in a small FIFO; trig_lost pulses if it is full.
// ROIs leave on a valid/ready port, one per clock at most; lock_inc pulses on
// each accepted ROI that is not an end marker.
// From the paper: coincidence of channel triggers with the global trigger,
// 5 us latency, locking of triggered segments. Own choices: SEARCH width,
// one window per hit, end marker, queue depth.
module roi_finder
  import top_pkg::*;
#(
  parameter int HIST   = 512,   // history depth in slots (power of two)
  parameter int LAT    = 212,   // trigger latency in slots (5 us / 23.6 ns)
  parameter int SEARCH = 4,     // coincidence width in slots
  parameter int TQ     = 4      // pending trigger queue depth
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rec_valid,
  input  logic [15:0]       rec_slot,
  input  logic              rec_wr,
  input  logic [WIN_W-1:0]  rec_win,
  input  logic [N_CCH-1:0]  rec_mask,
  input  logic [15:0]       cur_slot,
  input  logic              gtrig,
  output logic              trig_lost,
  output logic              roi_valid,
  input  logic              roi_ready,
  output roi_t              roi,
  output logic              lock_inc,
  output logic [WIN_W-1:0]  lock_inc_win
);
  localparam int HW = $clog2(HIST);
  typedef struct packed { logic wr; logic [WIN_W-1:0] win; logic [N_CCH-1:0] mask; } hent_t;
  typedef struct packed { logic [15:0] slot; logic [15:0] trig; } tq_t;

  hent_t hist [HIST];
  logic [15:0] trig_cnt;

  tq_t   tq_in, tq_out;
  logic  tq_valid, tq_pop, tq_ready;

  typedef enum logic [1:0] {F_IDLE, F_SCAN, F_END} fst_t;
  fst_t        st;
  logic [15:0] scan_slot, cur_trig;
  logic [$clog2(SEARCH+1)-1:0] left;
  hent_t       h;

  always_ff @(posedge clk) if (rec_valid) hist[rec_slot[HW-1:0]] <= '{rec_wr, rec_win, rec_mask};

  assign tq_in = '{cur_slot, trig_cnt};
  sync_fifo #(.WIDTH($bits(tq_t)), .DEPTH(TQ)) u_tq (
    .clk, .rst_n, .in_valid(gtrig), .in_ready(tq_ready), .in_data(tq_in),
    .out_valid(tq_valid), .out_ready(tq_pop), .out_data(tq_out), .count());

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      trig_cnt <= '0; trig_lost <= 1'b0;
    end else begin
      trig_lost <= gtrig && !tq_ready;
      if (gtrig && tq_ready) trig_cnt <= trig_cnt + 1'b1;
    end
  end

  assign h      = hist[scan_slot[HW-1:0]];
  assign tq_pop = (st == F_IDLE) && tq_valid;

  always_comb begin
    roi_valid = 1'b0;
    roi       = '{1'b0, h.win, h.mask, cur_trig};
    if (st == F_SCAN && h.wr && h.mask != '0) roi_valid = 1'b1;
    if (st == F_END) begin
      roi_valid = 1'b1;
      roi       = '{1'b1, '0, '0, cur_trig};
    end
  end

  assign lock_inc     = (st == F_SCAN) && roi_valid && roi_ready;
  assign lock_inc_win = h.win;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= F_IDLE; scan_slot <= '0; cur_trig <= '0; left <= '0;
    end else begin
      case (st)
        F_IDLE: if (tq_valid) begin
          scan_slot <= tq_out.slot - 16'(LAT) - 16'(SEARCH - 1);
          cur_trig  <= tq_out.trig;
          left      <= ($clog2(SEARCH+1))'(SEARCH);
          st        <= F_SCAN;
        end
        F_SCAN: if (!roi_valid || roi_ready) begin
          scan_slot <= scan_slot + 1'b1;
          left      <= left - 1'b1;
          if (left == 1) st <= F_END;
        end
        F_END: if (roi_ready) st <= F_IDLE;
        default: st <= F_IDLE;
      endcase
    end
  end
endmodule
