// One Subdetector Readout Module (SRM) of the TOP detector: four ASIC
// Carrier Boards, each with four 8-channel IRSX waveform samplers (128
// MCP-PMT channels in all), and one SCROD board that builds events, extracts
// photon hit times and charges, and sends packets to the DAQ; it also sends
// the sorted channel trigger stream to the trigger system.
// Ports: vin holds, per Carrier, IRSX and channel, the 64 samples of the
// current 23.6 ns window (analog values, 0.1 mV units); gtrig is the Belle II
// global trigger (arriving LAT slots after the photons); thr the channel
// trigger threshold. The optical transceivers are outside: daq_* is the
// packet stream for the DAQ transceiver, trg_* the trigger record stream.
// ped_* loads the SCROD pedestal table. Status pulses: per Carrier stall
// (buffer full), trig_lost, tdrop; SCROD mismatch, dovf, tovf, evq_lost,
// frame_err.
module srm_top
  import top_pkg::*;
#(
  parameter int LAT    = 212,
  parameter int SEARCH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        gtrig,
  input  volt_t       thr,
  input  volt_t       vin [N_CARRIER][N_ASIC][N_CH][N_SMP],
  input  logic [5:0]  module_addr,
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
  output logic [N_CARRIER-1:0] stall,
  output logic [N_CARRIER-1:0] trig_lost,
  output logic [N_CARRIER-1:0] tdrop,
  output logic        mismatch,
  output logic        dovf,
  output logic        tovf,
  output logic        evq_lost,
  output logic        frame_err
);
  logic       gtrig_c;
  logic [7:0] ser_data [N_CARRIER];
  logic [7:0] ser_trig [N_CARRIER];

  for (genvar c = 0; c < N_CARRIER; c++) begin : g_car
    carrier_board #(.LAT(LAT), .SEARCH(SEARCH)) u_cb (
      .clk, .rst_n, .vin(vin[c]), .thr, .gtrig(gtrig_c),
      .ser_data(ser_data[c]), .ser_trig(ser_trig[c]),
      .stall(stall[c]), .trig_lost(trig_lost[c]), .tdrop(tdrop[c]));
  end

  scrod u_scrod (
    .clk, .rst_n, .gtrig_in(gtrig), .gtrig_out(gtrig_c), .module_addr,
    .ser_data, .ser_trig, .ped_we, .ped_addr, .ped_data,
    .daq_valid, .daq_ready, .daq_data, .daq_last, .trg_valid, .trg_ready, .trg,
    .mismatch, .dovf, .tovf, .evq_lost, .frame_err);
endmodule
