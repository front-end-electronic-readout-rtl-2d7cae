// Shared constants, types and helper functions of the TOP front-end readout
// (one Subdetector Readout Module, SRM: four ASIC Carrier Boards and one SCROD).
// Sizes follow the readout of the Belle II TOP detector: 8 channels per IRSX,
// 4 IRSX per Carrier, 4 Carriers per SRM, 512 storage windows (16 rows x 32
// columns) of 64 samples per channel, 12-bit Wilkinson ADC made of an 11-bit
// Gray counter plus the counter-clock phase.
// Choices of this implementation: analog voltages are carried as unsigned
// integers in units of 0.1 mV; one 64-sample window takes 3 cycles of the
// 127.216 MHz system clock (64 / 2.714 GSa/s = 23.6 ns); the word formats of
// the links and streams below.
package top_pkg;
  localparam int N_CH      = 8;    // channels per IRSX
  localparam int N_ASIC    = 4;    // IRSX per Carrier
  localparam int N_CARRIER = 4;    // Carriers per SRM
  localparam int N_CCH     = N_ASIC * N_CH;   // channels per Carrier (32)
  localparam int N_WIN     = 512;  // storage windows per channel (16 x 32)
  localparam int WIN_W     = 9;
  localparam int N_SMP     = 64;   // samples per window
  localparam int SMP_W     = 6;
  localparam int GRAY_W    = 11;   // Gray code counter width
  localparam int ADC_W     = 12;   // Gray counter plus clock phase bit
  localparam int WIN_CLKS  = 3;    // system clocks per 64-sample window
  localparam int VOLT_W    = 16;   // analog value, 0.1 mV units
  localparam int V_RAMP_MIN  = 5000;   // 0.5 V
  localparam int V_RAMP_SPAN = 15000;  // 1.5 V (ramp ends at 2.0 V)

  typedef logic [VOLT_W-1:0] volt_t;
  typedef logic [ADC_W-1:0]  adc_t;

  // Word types on the Carrier-to-SCROD links
  typedef enum logic [1:0] {W_IDLE = 2'd0, W_HDR = 2'd1, W_DATA = 2'd2, W_END = 2'd3} wtype_t;
  typedef struct packed {
    wtype_t      t;
    logic [15:0] d;
  } lword_t;

  // Region of interest handed from the ROI finder to the readout controller
  typedef struct packed {
    logic              is_end;   // end-of-event marker for this trigger
    logic [WIN_W-1:0]  win;      // storage window to digitize
    logic [N_CCH-1:0]  mask;     // channels of the Carrier with a channel trigger
    logic [15:0]       trig;     // local trigger number
  } roi_t;

  // Stream inside the SCROD: event builder -> feature extractor -> packet builder
  typedef enum logic [1:0] {S_START = 2'd0, S_WHDR = 2'd1, S_WSMP = 2'd2, S_EOE = 2'd3} skind_t;
  typedef struct packed {
    skind_t      k;
    logic [1:0]  carrier;
    logic [15:0] d;     // START/EOE: trigger number; WHDR: waveform header; WSMP: ADC code
  } ev_t;

  // Feature-extracted photon hit
  typedef struct packed {
    logic [1:0]        carrier;
    logic [1:0]        asic;
    logic [2:0]        ch;
    logic [WIN_W-1:0]  win;
    logic [15:0]       time_fx;  // CFD time in samples, 8 fractional bits
    logic [12:0]       amp;      // pedestal-subtracted peak (ADC counts)
    logic [18:0]       charge;   // sum of pedestal-subtracted samples
  } hit_t;

  // Sorted channel trigger record of the SCROD trigger stream
  typedef struct packed {
    logic [1:0]       carrier;
    logic [15:0]      slot;      // window slot (timestamp) of the channel triggers
    logic [N_CCH-1:0] mask;
  } trec_t;

  // Ramp voltage at step k (k counts system clocks from ramp start, 0..4095)
  function automatic volt_t ramp_volt(input logic [ADC_W-1:0] k);
    return volt_t'(V_RAMP_MIN + ((int'(k) * V_RAMP_SPAN) >> ADC_W));
  endfunction

  function automatic logic [GRAY_W-1:0] bin2gray(input logic [GRAY_W-1:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [GRAY_W-1:0] gray2bin(input logic [GRAY_W-1:0] g);
    logic [GRAY_W-1:0] b;
    b[GRAY_W-1] = g[GRAY_W-1];
    for (int i = GRAY_W - 2; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // Latched {Gray count, counter clock phase} -> binary ADC code
  function automatic adc_t raw_to_code(input adc_t raw);
    return {gray2bin(raw[ADC_W-1:1]), raw[0]};
  endfunction
endpackage
