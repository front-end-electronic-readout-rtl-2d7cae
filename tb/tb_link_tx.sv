// Testbench of link_tx: random words with random gaps; a reference beat
// sequencer predicts every serial beat ({1,type,00000}, data[15:8],
// data[7:0], idle 00) and the ready signal, and each clock is compared.
module tb_link_tx;
  import top_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready;
  lword_t in_word = '0;
  logic [7:0] ser;
  int checks = 0, failures = 0, rb = 0, nwords = 0;
  logic [7:0] expv = 0;
  logic [15:0] hold;
  always #5 clk = ~clk;
  link_tx dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) if (rst_n) begin
    checks++; if (in_ready != (rb == 0)) failures++;
    case (rb)
      0: if (in_valid) begin expv = {1'b1, in_word.t, 5'b0}; hold = in_word.d; rb = 1; nwords++; end else expv = 0;
      1: begin expv = hold[15:8]; rb = 2; end
      default: begin expv = hold[7:0]; rb = 0; end
    endcase
    #1; checks++; if (ser != expv) failures++;
  end
  always @(negedge clk) begin
    in_valid <= ($urandom_range(0, 2) != 0);
    if (in_ready || !in_valid) in_word <= '{wtype_t'($urandom_range(1, 3)), 16'($urandom)};
  end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (1000) @(posedge clk);
    checks++; if (nwords < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
