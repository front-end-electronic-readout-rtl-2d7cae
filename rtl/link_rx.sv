// Receive side of the SRM-internal Carrier-to-SCROD serial link (framing
// described in link_tx). In idle it waits for a beat with bit 7 set, takes
// the type from bits 6:5, and assembles the next two beats into the data
// word. out_valid pulses one clock after the last beat; there is no
// backpressure, the receiver buffers. frame_err pulses when a start beat has
// non-zero low bits. The framing is this design's own.
module link_rx
  import top_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] ser,
  output logic       out_valid,
  output lword_t     out_word,
  output logic       frame_err
);
  logic [1:0] beat;
  wtype_t     t;
  logic [7:0] hi;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      beat <= '0; out_valid <= 1'b0; frame_err <= 1'b0; out_word <= '0; t <= W_IDLE; hi <= '0;
    end else begin
      out_valid <= 1'b0; frame_err <= 1'b0;
      case (beat)
        2'd0: if (ser[7]) begin
          t         <= wtype_t'(ser[6:5]);
          frame_err <= (ser[4:0] != 5'b0);
          beat      <= 2'd1;
        end
        2'd1: begin hi <= ser; beat <= 2'd2; end
        default: begin
          out_word  <= '{t, {hi, ser}};
          out_valid <= 1'b1;
          beat      <= 2'd0;
        end
      endcase
    end
  end
endmodule
