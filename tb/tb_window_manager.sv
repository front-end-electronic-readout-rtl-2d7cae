// Testbench of window_manager: one slot every 3 clocks, windows written in
// circular order, locked windows skipped, stall when every window is locked,
// recovery after release. Runs with a 16-window buffer.
module tb_window_manager;
  localparam int NW = 16;
  logic clk = 0, rst_n = 0;
  logic smp_strobe, slot_wr, stall;
  logic [3:0] wr_win, lock_inc_win = 0, lock_dec_win = 0;
  logic [15:0] slot;
  logic lock_inc = 0, lock_dec = 0;
  logic [4:0] n_locked;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  window_manager #(.NWIN(NW)) dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic next_slot(output int gap);
    gap = 0;
    do begin @(posedge clk); #1; gap++; end while (!smp_strobe);
  endtask
  task automatic lock(int w, logic inc);
    @(negedge clk);
    if (inc) begin lock_inc = 1; lock_inc_win = 4'(w); end else begin lock_dec = 1; lock_dec_win = 4'(w); end
    @(negedge clk); lock_inc = 0; lock_dec = 0;
  endtask
  initial begin
    int gap, expw, nst;
    repeat (3) @(posedge clk); rst_n = 1;
    next_slot(gap);
    expw = 0;
    for (int i = 0; i < 20; i++) begin
      checks++; if (!slot_wr || wr_win != 4'(expw)) begin failures++; $display("win %0d exp %0d", wr_win, expw); end
      expw = (expw + 1) % NW;
      next_slot(gap);
      checks++; if (gap != 3) failures++;
    end
    // lock the next two windows: they must be skipped
    lock((expw + 1) % NW, 1); lock((expw + 2) % NW, 1); lock((expw + 2) % NW, 1);
    next_slot(gap);
    expw = int'(wr_win);
    checks++; if (n_locked != 2) failures++;
    for (int i = 0; i < 20; i++) begin
      next_slot(gap); expw = (expw + 1) % NW;
      if (dut.lock_cnt[expw] != 0) expw = (expw + 1) % NW;
      if (dut.lock_cnt[expw] != 0) expw = (expw + 1) % NW;
      checks++; if (wr_win != 4'(expw) || dut.lock_cnt[wr_win] != 0) failures++;
    end
    // one release of a doubly locked window keeps it locked
    nst = (int'(wr_win) + 5) % NW;
    lock(nst, 1); lock(nst, 1); lock(nst, 0);
    checks++; if (dut.lock_cnt[nst] != 1) failures++;
    // lock everything: stall
    for (int w = 0; w < NW; w++) if (dut.lock_cnt[w] == 0) lock(w, 1);
    nst = 0;
    for (int i = 0; i < 5; i++) begin next_slot(gap); if (stall && !slot_wr) nst++; end
    checks++; if (nst != 5) begin failures++; $display("stalls %0d", nst); end
    lock(7, 0);
    next_slot(gap); next_slot(gap);
    checks++; if (!slot_wr || wr_win != 4'd7) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
