// Testbench of readout_ctrl: an ADC stand-in whose cells hold a known
// pattern (Gray coded), ROIs with a few channel bits set, random link
// backpressure. Checks the packet of every flagged channel (headers, 64
// decoded samples), the ramp start with the ROI's window, the lock release
// after the last channel and the END word.
module tb_readout_ctrl;
  import top_pkg::*;
  logic clk = 0, rst_n = 0;
  logic roi_valid = 0, roi_ready, ramp_start, adc_done = 0, lock_dec, lw_valid, lw_ready = 1;
  roi_t roi;
  logic [WIN_W-1:0] rd_win, lock_dec_win;
  logic [2:0] rd_ch; logic [SMP_W-1:0] rd_smp;
  adc_t rd_raw [N_ASIC];
  lword_t lw;
  int checks = 0, failures = 0;
  lword_t got [$];
  int nrel = 0, nstart = 0;
  always #5 clk = ~clk;
  readout_ctrl dut (.*);
  initial begin #3000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  function automatic adc_t pat(int a, int c, int s, int w);
    return adc_t'(a * 977 + c * 131 + s * 29 + w * 3);
  endfunction
  always_comb for (int a = 0; a < N_ASIC; a++) begin
    adc_t p; p = pat(a, rd_ch, rd_smp, rd_win);
    rd_raw[a] = {bin2gray(p[ADC_W-1:1]), p[0]};
  end
  always @(posedge clk) begin
    if (rst_n && lw_valid && lw_ready) got.push_back(lw);
    if (rst_n && lock_dec) begin nrel++; if (lock_dec_win != 9'd300) failures++; end
    if (rst_n && ramp_start) begin nstart++; fork begin repeat (40) @(posedge clk); adc_done <= 1; @(posedge clk); adc_done <= 0; end join_none end
  end
  always @(negedge clk) lw_ready <= ($urandom_range(0, 2) != 0);
  task automatic send(roi_t r);
    @(negedge clk); roi = r; roi_valid = 1; #1;
    while (!roi_ready) begin @(negedge clk); #1; end
    @(posedge clk); @(negedge clk); roi_valid = 0;
  endtask
  initial begin
    roi_t r;
    repeat (3) @(posedge clk); rst_n = 1;
    r = '{1'b0, 9'd300, 32'h8000_0021, 16'd7};
    send(r);
    r = '{1'b1, 9'd0, 32'h0, 16'd7};
    send(r);
    repeat (2000) @(negedge clk);
    // expected: channels 0, 5, 31 of window 300
    foreach (r.mask[i]) ;
    for (int idx = 0; idx < 32; idx++) if ((32'h8000_0021 >> idx) & 1) begin
      lword_t w;
      checks++; w = got.pop_front(); if (w.t != W_HDR || w.d != 16'd7) failures++;
      checks++; w = got.pop_front(); if (w.t != W_HDR || w.d != {2'(idx / 8), 3'(idx % 8), 9'd300, 2'b00}) failures++;
      for (int s = 0; s < 64; s++) begin
        checks++; w = got.pop_front();
        if (w.t != W_DATA || w.d != {4'b0, pat(idx / 8, idx % 8, s, 300)}) failures++;
      end
    end
    $display("left %0d starts %0d", got.size(), nstart);
    checks++; if (got.size() != 1 || got[0].t != W_END || got[0].d != 16'd7) failures++;
    checks++; if (nrel != 1) failures++;
    checks++; if (nstart != 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
