// Testbench of roi_finder: records one slot per clock with sparse channel
// trigger masks, fires global triggers, and checks that exactly the slots in
// the coincidence range (LAT slots back, SEARCH wide) come out as regions of
// interest with their windows locked, followed by the end marker, and that
// channel triggers outside the range are ignored.
module tb_roi_finder;
  import top_pkg::*;
  localparam int LAT = 212, SEARCH = 4;
  logic clk = 0, rst_n = 0;
  logic rec_valid = 0, rec_wr = 0, gtrig = 0, roi_ready = 1;
  logic [15:0] rec_slot = 0, cur_slot = 0;
  logic [WIN_W-1:0] rec_win = 0;
  logic [N_CCH-1:0] rec_mask = 0;
  logic trig_lost, roi_valid, lock_inc;
  roi_t roi;
  logic [WIN_W-1:0] lock_inc_win;
  int checks = 0, failures = 0;
  logic [N_CCH-1:0] mask_of [1024];
  roi_t got [$];
  int nlock = 0;
  always #5 clk = ~clk;
  roi_finder #(.LAT(LAT), .SEARCH(SEARCH)) dut (.*);
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) begin
    if (rst_n && roi_valid && roi_ready) got.push_back(roi);
    if (rst_n && lock_inc) begin nlock++; if (lock_inc_win != roi.win) failures++; end
  end
  always @(negedge clk) roi_ready <= ($urandom_range(0, 3) != 0);
  initial begin
    int tslots [2];
    tslots[0] = 600; tslots[1] = 900;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int s = 0; s < 1000; s++) begin
      @(negedge clk);
      mask_of[s] = ($urandom_range(0, 2) == 0 || s == 388) ? N_CCH'(1) << $urandom_range(0, 31) : '0;
      rec_valid = 1; rec_slot = 16'(s); rec_wr = (s % 7 != 3); rec_win = WIN_W'(s * 5); rec_mask = mask_of[s];
      cur_slot = 16'(s);
      gtrig = (s == tslots[0] || s == tslots[1]);
    end
    @(negedge clk); rec_valid = 0; gtrig = 0;
    repeat (100) @(negedge clk);
    for (int t = 0; t < 2; t++) begin
      for (int s = tslots[t] - LAT - SEARCH + 1; s <= tslots[t] - LAT; s++) begin
        if (mask_of[s] != 0 && (s % 7 != 3)) begin
          roi_t r;
          checks++;
          r = got.pop_front();
          if (r.is_end || r.win != WIN_W'(s * 5) || r.mask != mask_of[s] || r.trig != 16'(t)) begin
            failures++; $display("slot %0d: bad roi win=%0d mask=%h", s, r.win, r.mask);
          end
        end
      end
      checks++;
      if (got.size() == 0 || !got[0].is_end || got[0].trig != 16'(t)) failures++;
      else void'(got.pop_front());
    end
    checks++; if (got.size() != 0) failures++;
    checks++; if (nlock == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
