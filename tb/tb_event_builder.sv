// Testbench of event_builder: four Carrier buffers filled with waveform
// packets of two events (one Carrier with no hits, one with a wrong trigger
// number), output backpressure; checks the output stream
// START, (WHDR, 64 x WSMP) per packet in Carrier order, EOE, and mismatch.
module tb_event_builder;
  import top_pkg::*;
  logic clk = 0, rst_n = 0;
  logic ev_valid, ev_pop, o_valid, o_ready = 1, mismatch;
  logic [15:0] ev_trig;
  logic [N_CARRIER-1:0] cw_valid, cw_pop;
  lword_t cw [N_CARRIER];
  ev_t o;
  int checks = 0, failures = 0, nmis = 0;
  lword_t q [N_CARRIER][$];
  logic [15:0] evq [$];
  ev_t expq [$];
  always #5 clk = ~clk;
  event_builder dut (.*);
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(negedge clk) begin
    ev_valid = evq.size() > 0; ev_trig = ev_valid ? evq[0] : 16'h0;
    for (int c = 0; c < N_CARRIER; c++) begin
      cw_valid[c] = q[c].size() > 0; cw[c] = cw_valid[c] ? q[c][0] : '{W_IDLE, 16'h0};
    end
  end
  always @(posedge clk) begin
    for (int c = 0; c < N_CARRIER; c++) if (cw_pop[c]) void'(q[c].pop_front());
    if (ev_pop) void'(evq.pop_front());
    if (rst_n && o_valid && o_ready) begin
      checks++;
      if (expq.size() == 0 || o != expq.pop_front()) begin failures++; $display("bad %p at %0t", o, $time); end
    end
    if (rst_n && mismatch) nmis++;
  end
  always @(negedge clk) o_ready <= ($urandom_range(0, 3) != 0);
  task automatic pkt(int c, int trig, int a, int ch, int w);
    q[c].push_back('{W_HDR, 16'(trig)});
    q[c].push_back('{W_HDR, {2'(a), 3'(ch), 9'(w), 2'b0}});
    expq.push_back('{S_WHDR, 2'(c), {2'(a), 3'(ch), 9'(w), 2'b0}});
    for (int s = 0; s < 64; s++) begin
      q[c].push_back('{W_DATA, 16'(s * 10 + c)});
      expq.push_back('{S_WSMP, 2'(c), 16'(s * 10 + c)});
    end
  endtask
  initial begin
    repeat (3) @(posedge clk);
    for (int e = 0; e < 2; e++) begin
      evq.push_back(16'(e));
      expq.push_back('{S_START, 2'd0, 16'(e)});
      for (int c = 0; c < N_CARRIER; c++) begin
        if (!(e == 0 && c == 2)) pkt(c, (e == 1 && c == 3) ? 99 : e, c, e + 1, 100 + e);
        if (c == 1) pkt(c, e, 3, 7, 200);
        q[c].push_back('{W_END, 16'(e)});
      end
      expq.push_back('{S_EOE, 2'd3, 16'(e)});
    end
    rst_n = 1;
    repeat (3000) @(posedge clk);
    checks++; if (expq.size() != 0) failures++;
    checks++; if (nmis != 1) begin failures++; $display("mismatch count %0d", nmis); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
