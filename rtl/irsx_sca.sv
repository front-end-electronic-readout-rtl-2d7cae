// Behavioural model of the analog part of one IRSX waveform sampling ASIC.
// In the real chip the switched-capacitor storage, the comparators, the
// threshold DAC and the Wilkinson ramp are analog circuits; this model gives
// them integer voltages (0.1 mV units) so the digital readout can be run.
//
// Storage: 8 channels x 512 windows x 64 sample cells (16 rows x 32 columns,
// each addressing 64 consecutive samples, as in the IRSX). Each window slot
// (smp_strobe) the model receives the 64 samples just taken on each channel
// (vin); with wr_en high they are stored in window wr_win, otherwise that
// segment is left untouched because the Carrier firmware has locked it.
// Channel trigger: a comparator per channel against the DAC threshold thr;
// trig[c] is registered at smp_strobe, high when any sample of the window
// exceeded thr.
// Wilkinson ramp: ramp_start latches rd_win and starts a linear ramp from
// 0.5 V to 2.0 V over 4096 clocks; comp[c][s] is high once the ramp exceeds
// the stored voltage of cell (c, rd_win, s). The Gray counter and latches
// are in wilkinson_adc, started by the same ramp_start pulse.
// The ramp range and the 64-cell parallel conversion follow the paper; the
// one-window-per-strobe sampling interface is this model's simplification of
// continuous 2.7 GSa/s sampling.
module irsx_sca
  import top_pkg::*;
(
  input  logic             clk,
  input  volt_t            vin [N_CH][N_SMP],
  input  logic             smp_strobe,   // a new window of samples is on vin
  input  logic             wr_en,        // store it (window not locked)
  input  logic [WIN_W-1:0] wr_win,
  input  volt_t            thr,          // channel trigger threshold (DAC)
  output logic [N_CH-1:0]  trig,
  input  logic             ramp_start,
  input  logic [WIN_W-1:0] rd_win,
  output logic             comp [N_CH][N_SMP]
);
  volt_t            store [N_CH][N_WIN][N_SMP];
  logic [WIN_W-1:0] conv_win;
  logic [ADC_W-1:0] rk;
  logic             ramping;
  logic [N_CH-1:0]  over;

  always_ff @(posedge clk) begin
    if (smp_strobe && wr_en)
      for (int c = 0; c < N_CH; c++)
        for (int s = 0; s < N_SMP; s++)
          store[c][wr_win][s] <= vin[c][s];
  end

  always_comb begin
    for (int c = 0; c < N_CH; c++) begin
      over[c] = 1'b0;
      for (int s = 0; s < N_SMP; s++) if (vin[c][s] > thr) over[c] = 1'b1;
    end
  end

  always_ff @(posedge clk) if (smp_strobe) trig <= over;

  // Ramp generator: runs to full scale once started, restarted by ramp_start
  always_ff @(posedge clk) begin
    if (ramp_start) begin
      conv_win <= rd_win;
      rk       <= '0;
      ramping  <= 1'b1;
    end else if (ramping) begin
      if (rk == '1) ramping <= 1'b0;
      else          rk <= rk + 1'b1;
    end
  end

  always_comb begin
    for (int c = 0; c < N_CH; c++)
      for (int s = 0; s < N_SMP; s++)
        comp[c][s] = ramping && (ramp_volt(rk) > store[c][conv_win][s]);
  end
endmodule
