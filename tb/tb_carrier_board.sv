// Testbench of carrier_board at default size: pulses on two channels of two
// IRSX in one slot, a third pulse in another slot without trigger, a global
// trigger LAT slots after the first. Both serial links are decoded with
// link_rx. Checks the waveform packets (headers with IRSX, channel and the
// window the slot was written to, 64 samples equal to the ideal Wilkinson
// codes), the END word, and the trigger stream records (slot, mask).
module tb_carrier_board;
  import top_pkg::*;
  localparam int LAT = 212;
  localparam volt_t VPED = 16'd10000;
  logic clk = 0, rst_n = 0, gtrig = 0;
  volt_t vin [N_ASIC][N_CH][N_SMP];
  volt_t thr = 16'd10500;
  logic [7:0] ser_data, ser_trig;
  logic stall, trig_lost, tdrop;
  logic dv, tv, dfe, tfe;
  lword_t dw, tw;
  int checks = 0, failures = 0;
  carrier_board dut (.*);
  link_rx u_drx (.clk, .rst_n, .ser(ser_data), .out_valid(dv), .out_word(dw), .frame_err(dfe));
  link_rx u_trx (.clk, .rst_n, .ser(ser_trig), .out_valid(tv), .out_word(tw), .frame_err(tfe));
  always #4 clk = ~clk;
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  function automatic int code_of(int v);
    for (int k = 0; k < 4096; k++) if (V_RAMP_MIN + ((k * V_RAMP_SPAN) >> 12) > v) return k;
    return 4095;
  endfunction
  function automatic int pulse(int amp, int t0, int s);
    int d; d = s - t0;
    if (d < 0 || d >= 16) return 0;
    if (d < 4) return amp * (d + 1) / 4;
    return amp * (16 - d) / 12;
  endfunction
  typedef struct { int asic, ch, slot, amp, t0; } pulse_t;
  pulse_t pl [3];
  int win_of [1024];
  int slot_now = 0;
  lword_t dq [$], tq [$];
  always @(posedge clk) if (rst_n) begin
    if (dv) dq.push_back(dw);
    if (tv) tq.push_back(tw);
  end
  always @(negedge clk) if (rst_n && dut.smp_strobe) begin
    slot_now = int'(dut.slot);
    for (int a = 0; a < N_ASIC; a++) for (int ch = 0; ch < N_CH; ch++) for (int s = 0; s < N_SMP; s++) vin[a][ch][s] = VPED;
    foreach (pl[i]) if (pl[i].slot == slot_now)
      for (int s = 0; s < N_SMP; s++) vin[pl[i].asic][pl[i].ch][s] = VPED + volt_t'(pulse(pl[i].amp, pl[i].t0, s));
    if (slot_now < 1024) win_of[slot_now] = int'(dut.wr_win);
    gtrig = (slot_now == pl[0].slot + LAT);
  end
  always @(negedge clk) if (gtrig && !dut.smp_strobe) gtrig = 0;
  initial begin
    lword_t w;
    pl[0] = '{1, 3, 100, 4000, 20};
    pl[1] = '{3, 0, 100, 2000, 50};
    pl[2] = '{0, 5, 150, 3000, 7};
    for (int a = 0; a < N_ASIC; a++) for (int ch = 0; ch < N_CH; ch++) for (int s = 0; s < N_SMP; s++) vin[a][ch][s] = VPED;
    repeat (4) @(negedge clk); rst_n = 1;
    wait (dq.size() > 0 && dq[dq.size()-1].t == W_END);
    repeat (20) @(posedge clk);
    for (int i = 0; i < 2; i++) begin
      checks++; w = dq.pop_front(); if (w != '{W_HDR, 16'd0}) failures++;
      checks++; w = dq.pop_front();
      if (w != '{W_HDR, {2'(pl[i].asic), 3'(pl[i].ch), 9'(win_of[pl[i].slot]), 2'b0}}) begin failures++; $display("hdr %p", w); end
      for (int s = 0; s < 64; s++) begin
        checks++; w = dq.pop_front();
        if (w != '{W_DATA, 16'(code_of(VPED + pulse(pl[i].amp, pl[i].t0, s)))}) failures++;
      end
    end
    checks++; w = dq.pop_front(); if (w != '{W_END, 16'd0} || dq.size() != 0) failures++;
    // trigger stream: slot 100 (two IRSX), slot 150
    checks++;
    if (tq.size() != 6) failures++;
    else begin
      logic [31:0] m0, m1;
      m0 = (32'd1 << (1 * 8 + 3)) | (32'd1 << (3 * 8 + 0));
      m1 = 32'd1 << 5;
      if (tq[0] != '{W_HDR, 16'd100} || tq[1].d != m0[31:16] || tq[2].d != m0[15:0] ||
          tq[3] != '{W_HDR, 16'd150} || tq[4].d != m1[31:16] || tq[5].d != m1[15:0]) begin
        failures++; $display("trigger stream %p", tq);
      end
    end
    checks++; if (stall || trig_lost || tdrop) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
