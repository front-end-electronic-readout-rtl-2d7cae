// Transmit side of the SRM-internal serial link from a Carrier to the SCROD.
// Each 18-bit link word (2-bit type, 16-bit data) is sent as three 8-bit
// beats: a start beat {1, type, 00000}, then data[15:8] and data[7:0]. An
// idle line carries 8'h00. With the 127 MHz system clock one lane of 8 bits
// per clock is about 1 Gb/s, the order of the gigabit link between the
// boards. Accepts one word every three clocks (in_ready high when idle).
// The paper only names this link; the framing is this design's own.
module link_tx
  import top_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  lword_t     in_word,
  output logic [7:0] ser
);
  logic [1:0]  beat;
  logic [15:0] hold;

  assign in_ready = (beat == 2'd0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      beat <= '0; ser <= '0; hold <= '0;
    end else begin
      case (beat)
        2'd0: if (in_valid) begin
          ser  <= {1'b1, in_word.t, 5'b0};
          hold <= in_word.d;
          beat <= 2'd1;
        end else ser <= 8'h00;
        2'd1: begin ser <= hold[15:8]; beat <= 2'd2; end
        default: begin ser <= hold[7:0]; beat <= 2'd0; end
      endcase
    end
  end
endmodule
