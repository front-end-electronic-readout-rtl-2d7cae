// Testbench of packet_builder: two events (one with two hits, one empty)
// with output backpressure; checks header (module address, trigger
// number), the two words of each hit, and the trailer with the hit count.
module tb_packet_builder;
  import top_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [5:0] module_addr = 6'd37;
  logic i_valid = 0, i_ready, o_valid, o_ready = 1, o_last;
  skind_t i_kind; logic [15:0] i_trig; hit_t i_hit;
  logic [31:0] o_data;
  int checks = 0, failures = 0;
  logic [32:0] expq [$];
  always #5 clk = ~clk;
  packet_builder dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) if (rst_n && o_valid && o_ready) begin
    checks++;
    if (expq.size() == 0 || {o_last, o_data} != expq.pop_front()) failures++;
  end
  always @(negedge clk) o_ready <= ($urandom_range(0, 2) != 0);
  task automatic put(skind_t k, int trig, hit_t h);
    @(negedge clk); i_kind = k; i_trig = 16'(trig); i_hit = h; i_valid = 1; #1;
    while (!i_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1; i_valid = 0;
  endtask
  initial begin
    hit_t h1, h2;
    h1 = '{2'd1, 2'd2, 3'd3, 9'd400, 16'h1234, 13'd800, 19'd20000};
    h2 = '{2'd3, 2'd0, 3'd7, 9'd5, 16'h0F80, 13'd55, 19'h7FFFF};
    repeat (3) @(posedge clk); rst_n = 1;
    expq.push_back({1'b0, 4'hA, 2'b0, 6'd37, 4'h0, 16'd1000});
    expq.push_back({1'b0, 2'd1, 2'd2, 3'd3, 9'd400, 16'h1234});
    expq.push_back({1'b0, 13'd800, 19'd20000});
    expq.push_back({1'b0, 2'd3, 2'd0, 3'd7, 9'd5, 16'h0F80});
    expq.push_back({1'b0, 13'd55, 19'h7FFFF});
    expq.push_back({1'b1, 4'hE, 12'h0, 16'd2});
    expq.push_back({1'b0, 4'hA, 2'b0, 6'd37, 4'h0, 16'd1001});
    expq.push_back({1'b1, 4'hE, 12'h0, 16'd0});
    put(S_START, 1000, '0); put(S_WHDR, 0, h1); put(S_WHDR, 0, h2); put(S_EOE, 1000, '0);
    put(S_START, 1001, '0); put(S_EOE, 1001, '0);
    repeat (20) @(posedge clk);
    checks++; if (expq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
