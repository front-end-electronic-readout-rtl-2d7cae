// Testbench of the IRSX analog model: writes random windows, checks the
// channel trigger bits against the threshold, checks that a window written
// with wr_en low keeps its old contents, and checks the comparator outputs
// during a ramp against the stored voltages.
module tb_irsx_sca;
  import top_pkg::*;
  logic clk = 0;
  volt_t vin [N_CH][N_SMP];
  logic smp_strobe = 0, wr_en = 0, ramp_start = 0;
  logic [WIN_W-1:0] wr_win = 0, rd_win = 0;
  volt_t thr = 12000;
  logic [N_CH-1:0] trig;
  logic comp [N_CH][N_SMP];
  int checks = 0, failures = 0;
  volt_t ref_mem [4][N_CH][N_SMP];
  always #5 clk = ~clk;
  irsx_sca dut (.*);
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic write_win(int w, logic en, output logic [N_CH-1:0] exp_trig);
    exp_trig = '0;
    for (int c = 0; c < N_CH; c++) for (int s = 0; s < N_SMP; s++) begin
      vin[c][s] = volt_t'(9000 + $urandom_range(0, 2000));
      if (c == (w % N_CH) && s == 20) vin[c][s] = 15000;
      if (vin[c][s] > thr) exp_trig[c] = 1'b1;
      if (en) ref_mem[w][c][s] = vin[c][s];
    end
    @(negedge clk); smp_strobe = 1; wr_en = en; wr_win = WIN_W'(w * 100);
    @(negedge clk); smp_strobe = 0; wr_en = 0;
  endtask
  initial begin
    logic [N_CH-1:0] et;
    for (int w = 0; w < 4; w++) begin
      write_win(w, 1'b1, et);
      checks++; if (trig !== et) begin failures++; $display("trig %b exp %b", trig, et); end
    end
    write_win(2, 1'b0, et);   // locked window: must not change
    checks++; if (trig !== et) failures++;
    for (int w = 0; w < 4; w++) begin
      @(negedge clk); rd_win = WIN_W'(w * 100); ramp_start = 1; @(negedge clk); ramp_start = 0;
      for (int k = 1; k < 4096; k += 1) begin
        if (k % 97 == 0) begin
          for (int c = 0; c < N_CH; c++) for (int s = 0; s < N_SMP; s++) begin
            checks++;
            if (comp[c][s] !== (V_RAMP_MIN + (((k - 1) * V_RAMP_SPAN) >> 12) > int'(ref_mem[w][c][s]))) failures++;
          end
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
