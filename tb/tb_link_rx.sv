// Testbench of link_rx: drives framed beats with idle gaps, including data
// beats that look like start beats; checks the words received, their order,
// and that a malformed start beat raises frame_err.
module tb_link_rx;
  import top_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [7:0] ser = 0;
  logic out_valid, frame_err;
  lword_t out_word;
  int checks = 0, failures = 0, nerr = 0;
  lword_t sent [$];
  always #5 clk = ~clk;
  link_rx dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (sent.size() == 0 || out_word != sent.pop_front()) begin failures++; $display("bad word %p at %0t", out_word, $time); end
    end
    if (rst_n && frame_err) nerr++;
  end
  initial begin
    lword_t w;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      w = '{wtype_t'($urandom_range(1, 3)), (n % 5 == 0) ? 16'hE0FF : 16'($urandom)};
      sent.push_back(w);
      @(negedge clk); ser = {1'b1, w.t, 5'b0};
      @(negedge clk); ser = w.d[15:8];
      @(negedge clk); ser = w.d[7:0];
      repeat ($urandom_range(0, 2)) begin @(negedge clk); ser = 8'h00; end
    end
    @(negedge clk); ser = 8'hA3; sent.push_back('{W_HDR, 16'h0102});
    @(negedge clk); ser = 8'h01; @(negedge clk); ser = 8'h02; @(negedge clk); ser = 0;
    repeat (5) @(negedge clk);
    checks++; if (nerr != 1) begin failures++; $display("nerr %0d", nerr); end
    checks++; if (sent.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
