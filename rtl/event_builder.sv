// Event builder of the SCROD firmware. For every global trigger (queued with
// the SCROD's own trigger number, ev_*) it gathers the waveform packets of
// that event from the four Carrier receive buffers, in Carrier order 0..3,
// and hands them on as one stream:
//   START(trigger) { WHDR(header) WSMP x64 }... EOE(trigger)
// Each Carrier's part ends with its END word. The trigger number carried in
// a Carrier's packet headers and END word is compared with the SCROD's;
// mismatch pulses on a difference (the event is still passed on).
// Interface: valid/ready everywhere; one word per clock.
// From the paper: the SCROD gathers the data of an event from all Carriers
// and assigns the event number. Own choices: Carrier order, stream format.
module event_builder
  import top_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ev_valid,
  output logic              ev_pop,
  input  logic [15:0]       ev_trig,
  input  logic [N_CARRIER-1:0] cw_valid,
  output logic [N_CARRIER-1:0] cw_pop,
  input  lword_t            cw [N_CARRIER],
  output logic              o_valid,
  input  logic              o_ready,
  output ev_t               o,
  output logic              mismatch
);
  typedef enum logic [1:0] {E_IDLE, E_START, E_COPY, E_EOE} est_t;
  est_t       st;
  logic [1:0] car;
  logic       hdr2;     // next HDR word is the second header word
  lword_t     w;

  assign w = cw[car];

  always_comb begin
    o_valid = 1'b0;
    o       = '{S_START, car, ev_trig};
    cw_pop  = '0;
    ev_pop  = 1'b0;
    case (st)
      E_START: begin o_valid = 1'b1; o = '{S_START, 2'd0, ev_trig}; end
      E_COPY: if (cw_valid[car]) begin
        case (w.t)
          W_HDR: if (hdr2) begin
                   o_valid = 1'b1; o = '{S_WHDR, car, w.d}; cw_pop[car] = o_ready;
                 end else cw_pop[car] = 1'b1;
          W_DATA: begin o_valid = 1'b1; o = '{S_WSMP, car, w.d}; cw_pop[car] = o_ready; end
          default: cw_pop[car] = 1'b1;   // END (or stray idle)
        endcase
      end
      E_EOE: begin
        o_valid = 1'b1; o = '{S_EOE, car, ev_trig}; ev_pop = o_ready;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= E_IDLE; car <= '0; hdr2 <= 1'b0; mismatch <= 1'b0;
    end else begin
      mismatch <= 1'b0;
      case (st)
        E_IDLE:  if (ev_valid) st <= E_START;
        E_START: if (o_ready) begin car <= '0; hdr2 <= 1'b0; st <= E_COPY; end
        E_COPY: if (cw_valid[car]) begin
          case (w.t)
            W_HDR: if (!hdr2) begin
                     hdr2 <= 1'b1;
                     mismatch <= (w.d != ev_trig);
                   end else if (o_ready) hdr2 <= 1'b0;
            W_END: begin
              mismatch <= (w.d != ev_trig);
              if (car == 2'(N_CARRIER - 1)) st <= E_EOE;
              else car <= car + 1'b1;
            end
            default: ;
          endcase
        end
        E_EOE: if (o_ready) st <= E_IDLE;
        default: st <= E_IDLE;
      endcase
    end
  end
endmodule
