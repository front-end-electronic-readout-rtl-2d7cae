// SCROD board firmware (Z-7045 FPGA part) of one readout module.
// - Fans the global trigger out to the four Carriers and numbers the
//   triggers (event number), queueing them for the event builder.
// - Receives the four waveform links into deep buffers (a word arriving at a
//   full buffer is lost, dovf pulse) and builds events with event_builder.
// - Extracts photon hits (feature_extractor) and frames them into DAQ
//   packets carrying the module address and trigger number (packet_builder).
// - Receives the four trigger links and merges them in slot order
//   (trigger_merger) for the trigger transceiver.
// Interface: ser_data / ser_trig from the Carriers; daq_* 32-bit packet
// words towards the data transceiver, trg_* sorted trigger records towards
// the trigger transceiver (both valid/ready); ped_* loads the pedestal table.
// Buffer depths are this design's choices; the paper buffers in DDR memory.
// gtrig_out is a plain wire from gtrig_in: the fan-out adds no delay.
module scrod
  import top_pkg::*;
#(
  parameter int DFIFO = 4096,
  parameter int EVQ   = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        gtrig_in,
  output logic        gtrig_out,
  input  logic [5:0]  module_addr,
  input  logic [7:0]  ser_data [N_CARRIER],
  input  logic [7:0]  ser_trig [N_CARRIER],
  input  logic        ped_we,
  input  logic [21:0] ped_addr,
  input  adc_t        ped_data,
  output logic        daq_valid,
  input  logic        daq_ready,
  output logic [31:0] daq_data,
  output logic        daq_last,
  output logic        trg_valid,
  input  logic        trg_ready,
  output trec_t       trg,
  output logic        mismatch,
  output logic        dovf,
  output logic        tovf,
  output logic        evq_lost,
  output logic        frame_err
);
  assign gtrig_out = gtrig_in;

  // Event numbering
  logic [15:0] ev_cnt, ev_trig;
  logic        evq_r, ev_valid, ev_pop;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ev_cnt <= '0; evq_lost <= 1'b0;
    end else begin
      evq_lost <= gtrig_in && !evq_r;
      if (gtrig_in && evq_r) ev_cnt <= ev_cnt + 1'b1;
    end
  end
  sync_fifo #(.WIDTH(16), .DEPTH(EVQ)) u_evq (
    .clk, .rst_n, .in_valid(gtrig_in), .in_ready(evq_r), .in_data(ev_cnt),
    .out_valid(ev_valid), .out_ready(ev_pop), .out_data(ev_trig), .count());

  // Link receivers
  logic [N_CARRIER-1:0] dv, tv, dfe, tfe, df_r, cw_valid, cw_pop;
  lword_t dw [N_CARRIER];
  lword_t tw [N_CARRIER];
  lword_t cw [N_CARRIER];
  for (genvar c = 0; c < N_CARRIER; c++) begin : g_rx
    link_rx u_drx (.clk, .rst_n, .ser(ser_data[c]), .out_valid(dv[c]), .out_word(dw[c]), .frame_err(dfe[c]));
    link_rx u_trx (.clk, .rst_n, .ser(ser_trig[c]), .out_valid(tv[c]), .out_word(tw[c]), .frame_err(tfe[c]));
    sync_fifo #(.WIDTH($bits(lword_t)), .DEPTH(DFIFO)) u_df (
      .clk, .rst_n, .in_valid(dv[c]), .in_ready(df_r[c]), .in_data(dw[c]),
      .out_valid(cw_valid[c]), .out_ready(cw_pop[c]), .out_data(cw[c]), .count());
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dovf <= 1'b0; frame_err <= 1'b0;
    end else begin
      dovf      <= |(dv & ~df_r);
      frame_err <= |(dfe | tfe);
    end
  end

  logic eb_v, eb_r;
  ev_t  eb;
  event_builder u_eb (
    .clk, .rst_n, .ev_valid, .ev_pop, .ev_trig, .cw_valid, .cw_pop, .cw,
    .o_valid(eb_v), .o_ready(eb_r), .o(eb), .mismatch);

  logic        fe_v, fe_r;
  skind_t      fe_kind;
  logic [15:0] fe_trig;
  hit_t        fe_hit;
  feature_extractor u_fe (
    .clk, .rst_n, .i_valid(eb_v), .i_ready(eb_r), .i(eb), .ped_we, .ped_addr, .ped_data,
    .o_valid(fe_v), .o_ready(fe_r), .o_kind(fe_kind), .o_trig(fe_trig), .o_hit(fe_hit));

  packet_builder u_pb (
    .clk, .rst_n, .module_addr, .i_valid(fe_v), .i_ready(fe_r), .i_kind(fe_kind),
    .i_trig(fe_trig), .i_hit(fe_hit), .o_valid(daq_valid), .o_ready(daq_ready),
    .o_data(daq_data), .o_last(daq_last));

  trigger_merger u_tm (
    .clk, .rst_n, .w_valid(tv), .w(tw), .o_valid(trg_valid), .o_ready(trg_ready), .o(trg), .ovf(tovf));
endmodule
