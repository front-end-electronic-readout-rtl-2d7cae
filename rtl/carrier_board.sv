// One ASIC Carrier Board: four IRSX ASICs (analog model + Wilkinson ADC
// logic) and the firmware of the Carrier's Zynq FPGA.
// Data path: window_manager chooses the storage window of every 64-sample
// slot; the IRSX channel trigger bits of each slot go into the roi_finder
// history; a global trigger turns coincident slots into regions of interest
// (queued in an ROI FIFO); readout_ctrl digitizes them and streams waveform
// packets to the SCROD over the data link. Independently of global triggers,
// every slot with channel triggers is sent to the SCROD over a second link as
// a trigger record: HDR slot[15:0], DATA mask[31:16], DATA mask[15:0]. A
// record that finds the trigger FIFO full is dropped (tdrop pulse).
// Interface: vin carries the 64 samples of the current slot of all 32
// channels; thr is the channel trigger threshold; gtrig the global trigger
// from the SCROD fan-out. Status pulses: stall (no free window), trig_lost
// (trigger queue full), tdrop.
// From the paper: the split of work between IRSX and Carrier FPGA, the
// continuous trigger stream. Own choices: queue sizes, record format, both
// streams on separate 8-bit links.
module carrier_board
  import top_pkg::*;
#(
  parameter int LAT    = 212,
  parameter int SEARCH = 4,
  parameter int ROIQ   = 16,
  parameter int TRQ    = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  volt_t       vin [N_ASIC][N_CH][N_SMP],
  input  volt_t       thr,
  input  logic        gtrig,
  output logic [7:0]  ser_data,
  output logic [7:0]  ser_trig,
  output logic        stall,
  output logic        trig_lost,
  output logic        tdrop
);
  logic             smp_strobe, slot_wr, rec_valid;
  logic [WIN_W-1:0] wr_win;
  logic [15:0]      slot;
  logic             lock_inc, lock_dec;
  logic [WIN_W-1:0] lock_inc_win, lock_dec_win;
  logic [N_CH-1:0]  trig [N_ASIC];
  logic [N_CCH-1:0] rec_mask;

  logic             ramp_start, adc_done;
  logic [WIN_W-1:0] rd_win;
  logic [2:0]       rd_ch;
  logic [SMP_W-1:0] rd_smp;
  adc_t             rd_raw [N_ASIC];
  logic             comp [N_ASIC][N_CH][N_SMP];
  logic [N_ASIC-1:0] done_v, busy_v;

  window_manager u_wm (
    .clk, .rst_n, .smp_strobe, .slot_wr, .wr_win, .slot, .stall,
    .lock_inc, .lock_inc_win, .lock_dec, .lock_dec_win, .n_locked());

  for (genvar a = 0; a < N_ASIC; a++) begin : g_asic
    irsx_sca u_sca (
      .clk, .vin(vin[a]), .smp_strobe, .wr_en(slot_wr), .wr_win, .thr, .trig(trig[a]),
      .ramp_start, .rd_win, .comp(comp[a]));
    wilkinson_adc u_adc (
      .clk, .rst_n, .start(ramp_start), .comp(comp[a]), .busy(busy_v[a]), .done(done_v[a]),
      .rd_ch, .rd_smp, .rd_raw(rd_raw[a]));
    assign rec_mask[a*N_CH +: N_CH] = trig[a];
  end
  assign adc_done = done_v[0];

  // The IRSX trigger outputs of a slot are valid one clock after its strobe
  always_ff @(posedge clk) begin
    if (!rst_n) rec_valid <= 1'b0;
    else        rec_valid <= smp_strobe;
  end

  logic roi_v, roi_r, roiq_v, roiq_r;
  roi_t roi_d, roiq_d;

  roi_finder #(.LAT(LAT), .SEARCH(SEARCH)) u_roi (
    .clk, .rst_n, .rec_valid, .rec_slot(slot), .rec_wr(slot_wr), .rec_win(wr_win),
    .rec_mask, .cur_slot(slot), .gtrig, .trig_lost,
    .roi_valid(roi_v), .roi_ready(roi_r), .roi(roi_d), .lock_inc, .lock_inc_win);

  sync_fifo #(.WIDTH($bits(roi_t)), .DEPTH(ROIQ)) u_roiq (
    .clk, .rst_n, .in_valid(roi_v), .in_ready(roi_r), .in_data(roi_d),
    .out_valid(roiq_v), .out_ready(roiq_r), .out_data(roiq_d), .count());

  logic   dlw_v, dlw_r;
  lword_t dlw;
  readout_ctrl u_ro (
    .clk, .rst_n, .roi_valid(roiq_v), .roi_ready(roiq_r), .roi(roiq_d),
    .ramp_start, .rd_win, .adc_done, .rd_ch, .rd_smp, .rd_raw,
    .lock_dec, .lock_dec_win, .lw_valid(dlw_v), .lw_ready(dlw_r), .lw(dlw));

  link_tx u_dtx (.clk, .rst_n, .in_valid(dlw_v), .in_ready(dlw_r), .in_word(dlw), .ser(ser_data));

  // Trigger stream: one record per slot that has channel triggers
  localparam int TRW = 16 + N_CCH;
  logic           tq_in_r, tq_v, tq_pop;
  logic [TRW-1:0] tq_d;
  logic [1:0]     tw;        // word of the record being sent
  logic           tlw_r;
  lword_t         tlw;

  sync_fifo #(.WIDTH(TRW), .DEPTH(TRQ)) u_tq (
    .clk, .rst_n, .in_valid(rec_valid && rec_mask != '0), .in_ready(tq_in_r),
    .in_data({slot, rec_mask}), .out_valid(tq_v), .out_ready(tq_pop), .out_data(tq_d), .count());

  always_comb begin
    case (tw)
      2'd0:    tlw = '{W_HDR,  tq_d[TRW-1 -: 16]};
      2'd1:    tlw = '{W_DATA, tq_d[31:16]};
      default: tlw = '{W_DATA, tq_d[15:0]};
    endcase
  end
  assign tq_pop = tq_v && tlw_r && (tw == 2'd2);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tw <= '0; tdrop <= 1'b0;
    end else begin
      tdrop <= rec_valid && rec_mask != '0 && !tq_in_r;
      if (tq_v && tlw_r) tw <= (tw == 2'd2) ? 2'd0 : tw + 1'b1;
    end
  end

  link_tx u_ttx (.clk, .rst_n, .in_valid(tq_v), .in_ready(tlw_r), .in_word(tlw), .ser(ser_trig));
endmodule
