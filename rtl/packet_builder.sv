// Packet builder of the SCROD: wraps the feature-extracted hits of one event
// into the data packet sent to the DAQ link, 32-bit words:
//   header  {4'hA, 2'b00, module_addr[5:0], 4'h0, trigger[15:0]}
//   per hit {carrier[1:0], asic[1:0], ch[2:0], window[8:0], time[15:0]}
//           {amplitude[12:0], charge[18:0]}
//   trailer {4'hE, 12'h000, number_of_hits[15:0]}   (last = 1)
// The header with module address and trigger number follows the paper; the
// word layout, magic nibbles and trailer are this design's own.
// Interface: input kind (S_START / S_WHDR = hit / S_EOE) with valid/ready,
// output words with valid/ready; a hit takes two output clocks.
// i_ready is o_ready gated by the state, a combinational path from the
// output side (no skid register).
module packet_builder
  import top_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [5:0]  module_addr,
  input  logic        i_valid,
  output logic        i_ready,
  input  skind_t      i_kind,
  input  logic [15:0] i_trig,
  input  hit_t        i_hit,
  output logic        o_valid,
  input  logic        o_ready,
  output logic [31:0] o_data,
  output logic        o_last
);
  logic        second;   // second word of a hit
  logic [15:0] nhits;

  always_comb begin
    o_valid = i_valid;
    o_last  = 1'b0;
    i_ready = 1'b0;
    o_data  = '0;
    case (i_kind)
      S_START: begin o_data = {4'hA, 2'b00, module_addr, 4'h0, i_trig}; i_ready = o_ready; end
      S_EOE:   begin o_data = {4'hE, 12'h000, nhits}; o_last = 1'b1; i_ready = o_ready; end
      default: begin
        if (!second) o_data = {i_hit.carrier, i_hit.asic, i_hit.ch, i_hit.win, i_hit.time_fx};
        else         o_data = {i_hit.amp, i_hit.charge};
        i_ready = o_ready && second;
      end
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      second <= 1'b0; nhits <= '0;
    end else if (i_valid && o_ready) begin
      case (i_kind)
        S_START: nhits <= '0;
        S_EOE:   nhits <= '0;
        default: begin
          second <= !second;
          if (second) nhits <= nhits + 1'b1;
        end
      endcase
    end
  end
endmodule
