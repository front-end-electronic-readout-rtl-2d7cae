// Trigger stream merger of the SCROD. Each Carrier streams a record for every
// window slot in which any of its 32 channel comparators fired (HDR slot,
// DATA mask[31:16], DATA mask[15:0]). The merger reassembles the records,
// buffers them per Carrier and sends them on as one stream sorted by slot:
// of the buffered heads it always takes the oldest slot (ties: lowest
// Carrier). Since a Carrier's own records arrive in slot order, sorting is
// exact once every Carrier has a record waiting; otherwise the oldest head
// is released after HOLD clocks, long enough for the link latency.
// A record arriving at a full buffer is dropped (ovf pulse).
// From the paper: the SCROD receives, buffers and sorts the Carriers'
// trigger streams. Own choices: record format, HOLD rule, depths.
module trigger_merger
  import top_pkg::*;
#(
  parameter int DEPTH = 16,
  parameter int HOLD  = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N_CARRIER-1:0] w_valid,
  input  lword_t               w [N_CARRIER],
  output logic                 o_valid,
  input  logic                 o_ready,
  output trec_t                o,
  output logic                 ovf
);
  localparam int RW = 16 + N_CCH + 16;   // slot, mask, arrival time
  logic [15:0] now;
  logic [N_CARRIER-1:0] f_in_r, f_v, f_pop, rec_push;
  logic [RW-1:0] f_d [N_CARRIER];
  logic [RW-1:0] rec [N_CARRIER];
  logic [1:0]    wi  [N_CARRIER];
  logic [N_CARRIER-1:0] ovf_v;

  always_ff @(posedge clk) begin
    if (!rst_n) now <= '0;
    else        now <= now + 1'b1;
  end

  for (genvar c = 0; c < N_CARRIER; c++) begin : g_car
    // reassemble the 3-word record
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        wi[c] <= '0; rec_push[c] <= 1'b0; rec[c] <= '0;
      end else begin
        rec_push[c] <= 1'b0;
        if (w_valid[c]) begin
          case (w[c].t)
            W_HDR:  begin rec[c][RW-1 -: 16] <= w[c].d; wi[c] <= 2'd1; end
            W_DATA: if (wi[c] == 2'd1) begin
                      rec[c][16+N_CCH-1 -: 16] <= w[c].d; wi[c] <= 2'd2;
                    end else if (wi[c] == 2'd2) begin
                      rec[c][31:16] <= w[c].d; rec[c][15:0] <= now; wi[c] <= 2'd0;
                      rec_push[c] <= 1'b1;
                    end
            default: wi[c] <= '0;
          endcase
        end
      end
    end
    // assembled record: {slot, mask_hi, mask_lo, arrival}
    sync_fifo #(.WIDTH(RW), .DEPTH(DEPTH)) u_f (
      .clk, .rst_n, .in_valid(rec_push[c]), .in_ready(f_in_r[c]), .in_data(rec[c]),
      .out_valid(f_v[c]), .out_ready(f_pop[c]), .out_data(f_d[c]), .count());
    assign ovf_v[c] = rec_push[c] && !f_in_r[c];
  end

  // Pick the oldest head
  logic [1:0] sel;
  logic       any, all;
  always_comb begin
    any = 1'b0; sel = '0;
    all = &f_v;
    for (int c = 0; c < N_CARRIER; c++) begin
      if (f_v[c]) begin
        if (!any || $signed(f_d[c][RW-1 -: 16] - f_d[sel][RW-1 -: 16]) < 0) sel = 2'(c);
        any = 1'b1;
      end
    end
  end

  wire ripe = all || (16'(now - f_d[sel][15:0]) >= 16'(HOLD));
  assign o_valid = any && ripe;
  assign o       = '{sel, f_d[sel][RW-1 -: 16], f_d[sel][16+N_CCH-1 -: N_CCH]};
  always_comb begin
    f_pop = '0;
    f_pop[sel] = o_valid && o_ready;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) ovf <= 1'b0;
    else        ovf <= |ovf_v;
  end
endmodule
