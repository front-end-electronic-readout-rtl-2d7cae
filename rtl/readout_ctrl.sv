// Readout controller of the Carrier firmware. For each region of interest it
// selects the window on all four IRSX, starts their Wilkinson conversions
// together (the IRSX converts 64 samples of all 8 channels in parallel),
// waits for the conversion to finish, and then for every channel flagged in
// the ROI mask sends one waveform packet to the SCROD link:
//   HDR  trigger number
//   HDR  {asic[1:0], ch[2:0], window[8:0], 2'b00}
//   DATA x64  {4'b0, ADC code}   (Gray code + phase decoded to binary)
// After the last channel it releases the window lock. An end-of-event ROI is
// forwarded as one END word carrying the trigger number.
// Timing: one conversion is 4096 steps (+2 clocks); afterwards one word per
// clock whenever the link accepts it.
// From the paper: digitize-and-read of hit windows, release of the blocked
// segment after digitization. Own choices: packet format, readout order.
module readout_ctrl
  import top_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              roi_valid,
  output logic              roi_ready,
  input  roi_t              roi,
  output logic              ramp_start,
  output logic [WIN_W-1:0]  rd_win,
  input  logic              adc_done,
  output logic [2:0]        rd_ch,
  output logic [SMP_W-1:0]  rd_smp,
  input  adc_t              rd_raw [N_ASIC],
  output logic              lock_dec,
  output logic [WIN_W-1:0]  lock_dec_win,
  output logic              lw_valid,
  input  logic              lw_ready,
  output lword_t            lw
);
  typedef enum logic [2:0] {R_IDLE, R_CONV, R_SCAN, R_HDR0, R_HDR1, R_DATA, R_REL, R_END} rst_t;
  rst_t st;
  roi_t cur;
  logic [$clog2(N_CCH):0] idx;
  logic [1:0] asic;

  assign asic         = idx[4:3];
  assign rd_ch        = idx[2:0];
  assign roi_ready    = (st == R_IDLE);
  assign lock_dec     = (st == R_REL);
  assign lock_dec_win = cur.win;

  always_comb begin
    lw_valid = 1'b0;
    lw       = '{W_IDLE, 16'h0};
    case (st)
      R_HDR0: begin lw_valid = 1'b1; lw = '{W_HDR, cur.trig}; end
      R_HDR1: begin lw_valid = 1'b1; lw = '{W_HDR, {asic, rd_ch, cur.win, 2'b00}}; end
      R_DATA: begin lw_valid = 1'b1; lw = '{W_DATA, {4'b0, raw_to_code(rd_raw[asic])}}; end
      R_END:  begin lw_valid = 1'b1; lw = '{W_END, cur.trig}; end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= R_IDLE; ramp_start <= 1'b0; rd_win <= '0; idx <= '0; rd_smp <= '0; cur <= '0;
    end else begin
      ramp_start <= 1'b0;
      case (st)
        R_IDLE: if (roi_valid) begin
          cur <= roi;
          if (roi.is_end) st <= R_END;
          else begin
            rd_win     <= roi.win;
            ramp_start <= 1'b1;
            st         <= R_CONV;
          end
        end
        R_CONV: if (adc_done) begin idx <= '0; st <= R_SCAN; end
        R_SCAN: begin
          if (idx == ($clog2(N_CCH)+1)'(N_CCH)) st <= R_REL;
          else if (cur.mask[idx[4:0]]) st <= R_HDR0;
          else idx <= idx + 1'b1;
        end
        R_HDR0: if (lw_ready) st <= R_HDR1;
        R_HDR1: if (lw_ready) begin rd_smp <= '0; st <= R_DATA; end
        R_DATA: if (lw_ready) begin
          rd_smp <= rd_smp + 1'b1;
          if (rd_smp == '1) begin idx <= idx + 1'b1; st <= R_SCAN; end
        end
        R_REL: st <= R_IDLE;
        R_END: if (lw_ready) st <= R_IDLE;
        default: st <= R_IDLE;
      endcase
    end
  end
endmodule
