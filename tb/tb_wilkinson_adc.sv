// Testbench of wilkinson_adc: random stored voltages on all 8 x 64 cells, a
// reference ramp drives the comparators; every latched cell must decode to
// the first ramp step above its voltage (full scale if none), and the
// conversion must take 4096 steps.
module tb_wilkinson_adc;
  import top_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic comp [N_CH][N_SMP];
  logic busy, done;
  logic [2:0] rd_ch; logic [SMP_W-1:0] rd_smp; adc_t rd_raw;
  int checks = 0, failures = 0;
  int v [N_CH][N_SMP];
  int k; logic running = 0;
  always #5 clk = ~clk;
  wilkinson_adc dut (.*);
  always_comb for (int c = 0; c < N_CH; c++) for (int s = 0; s < N_SMP; s++)
    comp[c][s] = running && (ramp_volt(k[ADC_W-1:0]) > volt_t'(v[c][s]));
  always_ff @(posedge clk) if (start) begin running <= 1; k <= 0; end
                           else if (running) begin if (k == 4095) running <= 0; else k <= k + 1; end
  function automatic int expect_code(int vv);
    for (int j = 0; j < 4096; j++) if (V_RAMP_MIN + ((j * V_RAMP_SPAN) >> 12) > vv) return j;
    return 4095;
  endfunction
  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int cyc;
    k = 0; rd_ch = 0; rd_smp = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      for (int c = 0; c < N_CH; c++) for (int s = 0; s < N_SMP; s++)
        v[c][s] = (s == 5) ? 21000 : (s == 6 ? 4000 : 4500 + $urandom_range(0, 16000));
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++; if (cyc != 4097) begin failures++; $display("conversion took %0d clocks", cyc); end
      for (int c = 0; c < N_CH; c++) for (int s = 0; s < N_SMP; s++) begin
        rd_ch = 3'(c); rd_smp = SMP_W'(s); #1;
        checks++;
        if (raw_to_code(rd_raw) != adc_t'(expect_code(v[c][s]))) begin
          failures++;
          if (failures < 10) $display("cell %0d/%0d v=%0d code=%0d exp=%0d", c, s, v[c][s], raw_to_code(rd_raw), expect_code(v[c][s]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
