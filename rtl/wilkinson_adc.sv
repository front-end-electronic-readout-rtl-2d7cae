// Digital part of the IRSX Wilkinson ADC: one conversion digitizes 8
// channels x 64 samples in parallel. An 11-bit Gray code counter runs on a
// counter clock of half the system clock; when a cell's comparator (comp,
// from the analog model) first goes high, that cell's 12-bit register latches
// the Gray count together with the counter-clock level as the twelfth bit,
// as the IRSX does. A cell whose comparator never fires is latched at full
// scale in the last step.
// Timing: start is the pulse that also starts the ramp. busy is high for the
// 4096 steps of the conversion; done pulses one clock after the last step.
// The latched raw value {gray[10:0], phase} of any cell is read
// combinationally through rd_ch / rd_smp; raw_to_code() in top_pkg turns it
// into the binary 12-bit code (equal to the step number at which it latched).
// From the paper: Gray counter width, phase bit, one register per cell.
// Own choices: counter clock = system clock / 2, readout by address mux
// (the IRSX's own readout port is not described).
module wilkinson_adc
  import top_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             comp [N_CH][N_SMP],
  output logic             busy,
  output logic             done,
  input  logic [2:0]       rd_ch,
  input  logic [SMP_W-1:0] rd_smp,
  output adc_t             rd_raw
);
  localparam logic [GRAY_W-1:0] GRAY_LAST = bin2gray('1);

  logic [GRAY_W-1:0] gray;     // Gray code counter
  logic              cclk;     // counter clock level (phase bit)
  logic              last;     // last step of the conversion
  adc_t              latch [N_CH][N_SMP];
  logic              held  [N_CH][N_SMP];

  assign last = (gray == GRAY_LAST) && cclk;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; gray <= '0; cclk <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1; gray <= '0; cclk <= 1'b0;
      end else if (busy) begin
        cclk <= ~cclk;
        if (last) begin
          busy <= 1'b0; done <= 1'b1;
        end else if (cclk) begin
          gray <= bin2gray(gray2bin(gray) + 1'b1);
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int c = 0; c < N_CH; c++)
      for (int s = 0; s < N_SMP; s++) begin
        if (start) begin
          held[c][s] <= 1'b0;
        end else if (busy && !held[c][s] && (comp[c][s] || last)) begin
          latch[c][s] <= {gray, cclk};
          held[c][s]  <= 1'b1;
        end
      end
  end

  assign rd_raw = latch[rd_ch][rd_smp];
endmodule
