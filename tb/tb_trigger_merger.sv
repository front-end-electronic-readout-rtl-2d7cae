// Testbench of trigger_merger: four Carriers send trigger records (3 words
// each) with different delays; checks that every record comes out once,
// with the right Carrier and mask, and in non-decreasing slot order.
module tb_trigger_merger;
  import top_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [N_CARRIER-1:0] w_valid = 0;
  lword_t w [N_CARRIER];
  logic o_valid, o_ready = 1, ovf;
  trec_t o;
  int checks = 0, failures = 0, nout = 0, last_slot = -1;
  trec_t sent [$];
  always #5 clk = ~clk;
  trigger_merger dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) if (rst_n && o_valid && o_ready) begin
    int k; k = -1;
    nout++;
    checks++; if (int'(o.slot) < last_slot) begin failures++; $display("order %0d after %0d", o.slot, last_slot); end
    last_slot = int'(o.slot);
    foreach (sent[n]) if (sent[n] == o) k = n;
    checks++; if (k < 0) begin failures++; $display("unknown %p at %0t", o, $time); end else sent.delete(k);
  end
  always @(negedge clk) o_ready <= ($urandom_range(0, 3) != 0);
  task automatic carrier_stream(int c);
    int slot; slot = 100 + c;
    for (int r = 0; r < 10; r++) begin
      trec_t t;
      logic [31:0] m;
      slot += $urandom_range(1, 12);
      m = $urandom | 1;
      t = '{2'(c), 16'(slot), m};
      sent.push_back(t);
      repeat ((r == 0 ? c * 5 : 0) + $urandom_range(0, 3)) @(negedge clk);
      @(negedge clk); w_valid[c] = 1; w[c] = '{W_HDR, 16'(slot)};
      @(negedge clk); w[c] = '{W_DATA, m[31:16]};
      @(negedge clk); w[c] = '{W_DATA, m[15:0]};
      @(negedge clk); w_valid[c] = 0;
    end
  endtask
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    fork
      carrier_stream(0); carrier_stream(1); carrier_stream(2); carrier_stream(3);
    join
    repeat (300) @(posedge clk);
    checks++; if (nout != 40 || sent.size() != 0) begin failures++; $display("nout %0d left %0d", nout, sent.size()); end
    checks++; if (ovf) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
