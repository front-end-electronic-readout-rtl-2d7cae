// Feature extraction of the SCROD: pedestal subtraction of every waveform
// sample and constant fraction discrimination (CFD) timing, plus a charge
// estimate, per 64-sample waveform.
//   1. Each sample's pedestal is read from a table indexed by
//      {carrier, asic, channel, window, sample} (4 M entries of 12 bits, the
//      full per-cell table) and subtracted (one-clock read latency).
//   2. While samples arrive the block keeps the peak value, its position and
//      the sum of all samples (the charge estimate).
//   3. After the 64th sample it walks back from the peak to the first sample
//      at or below half the peak and interpolates linearly between that
//      sample and the next to get the crossing time in samples with FRAC
//      fractional bits (one division).
//   4. A hit is emitted if the peak reaches MIN_AMP; START and EOE markers
//      pass through in order, so hits stay inside their event.
// In the TOP system this processing runs as software on the SCROD's ARM
// core; here it is logic with the same function. The fraction (1/2), the
// amplitude cut and the number formats are this design's choices.
// Interface: ev_t input stream, valid/ready; output kind/trig/hit,
// valid/ready; ped_we/ped_addr/ped_data load the pedestal table.
// o_trig is the input word's data field passed straight through (markers
// carry the trigger number unchanged), so it is a wire from the input.
module feature_extractor
  import top_pkg::*;
#(
  parameter int FRAC    = 8,
  parameter int MIN_AMP = 40
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        i_valid,
  output logic        i_ready,
  input  ev_t         i,
  input  logic        ped_we,
  input  logic [21:0] ped_addr,
  input  adc_t        ped_data,
  output logic        o_valid,
  input  logic        o_ready,
  output skind_t      o_kind,     // S_START, S_WHDR (= hit) or S_EOE
  output logic [15:0] o_trig,
  output hit_t        o_hit
);
  localparam int NPED = N_CARRIER * N_CCH * N_WIN * N_SMP;
  typedef logic signed [13:0] smp_t;

  adc_t ped [NPED];
  smp_t wbuf [N_SMP];

  typedef enum logic [2:0] {F_PASS, F_WAIT, F_SCAN, F_DIV, F_EMIT} fst_t;
  fst_t st;

  logic [1:0]       car, asic;
  logic [2:0]       ch;
  logic [WIN_W-1:0] win;
  logic [SMP_W-1:0] n;
  // pipeline stage after the pedestal read
  logic             p_valid;
  logic [SMP_W-1:0] p_n;
  adc_t             p_code, ped_q;
  smp_t             pk;
  logic [SMP_W-1:0] pk_n, j, lo;
  logic signed [19:0] sum;
  logic [15:0]      t_fx;
  smp_t             half;

  assign half = pk >>> 1;

  // Pedestal table: write port, and synchronous read of the arriving sample
  always_ff @(posedge clk) begin
    if (ped_we) ped[ped_addr] <= ped_data;
    ped_q <= ped[{car, asic, ch, win, n}];
  end

  wire pass_mark = (i.k == S_START || i.k == S_EOE);
  assign i_ready = (st == F_PASS) && (pass_mark ? o_ready : 1'b1);

  always_comb begin
    o_valid = 1'b0; o_kind = i.k; o_trig = i.d; o_hit = '0;
    if (st == F_PASS && i_valid && pass_mark) o_valid = 1'b1;
    if (st == F_EMIT && pk >= smp_t'(MIN_AMP)) begin
      o_valid = 1'b1;
      o_kind  = S_WHDR;
      o_hit   = '{car, asic, ch, win, t_fx, 13'(pk), 19'(sum)};
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= F_PASS; n <= '0; p_valid <= 1'b0; car <= '0; asic <= '0; ch <= '0; win <= '0;
      pk <= '0; pk_n <= '0; sum <= '0; j <= '0; lo <= '0; t_fx <= '0; p_n <= '0; p_code <= '0;
    end else begin
      p_valid <= 1'b0;
      // stage 2: subtract, store, track peak and sum
      if (p_valid) begin
        smp_t s;
        s = smp_t'({2'b0, p_code}) - smp_t'({2'b0, ped_q});
        wbuf[p_n] <= s;
        sum <= sum + 20'(s);
        if (p_n == '0 || s > pk) begin pk <= s; pk_n <= p_n; end
        if (p_n == '1) st <= F_SCAN;
      end
      case (st)
        F_PASS: if (i_valid && i_ready) begin
          if (i.k == S_WHDR) begin
            car <= i.carrier; asic <= i.d[15:14]; ch <= i.d[13:11]; win <= i.d[10:2];
            n <= '0; sum <= '0;
          end else if (i.k == S_WSMP) begin
            p_valid <= 1'b1; p_n <= n; p_code <= i.d[ADC_W-1:0];
            n <= n + 1'b1;
            if (n == '1) st <= F_WAIT;
          end
        end
        F_WAIT: ;   // last sample in the pipeline; stage 2 moves on to F_SCAN
        F_SCAN: begin
          if (j == '0) begin
            // no crossing before the peak: use the peak position
            t_fx <= 16'(pk_n) << FRAC; st <= F_EMIT;
          end else if (wbuf[j - 1'b1] <= half) begin
            lo <= j - 1'b1; st <= F_DIV;
          end else j <= j - 1'b1;
        end
        F_DIV: begin
          t_fx <= (16'(lo) << FRAC) +
                  16'((32'(half - wbuf[lo]) << FRAC) / 32'(wbuf[lo + 1'b1] - wbuf[lo]));
          st <= F_EMIT;
        end
        F_EMIT: if (!o_valid || o_ready) st <= F_PASS;
        default: st <= F_PASS;
      endcase
      if (p_valid && p_n == '1) j <= (p_n == '0 || smp_t'({2'b0, p_code}) - smp_t'({2'b0, ped_q}) > pk) ? p_n : pk_n;
    end
  end
endmodule
