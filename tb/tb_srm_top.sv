// End-to-end testbench of one readout module at its default size (4 Carriers
// x 4 IRSX x 8 channels, 512 windows, 5 us trigger latency).
// Scenario: all 128 channels sit at the 1.0 V pedestal; photon pulses are
// put on four channels in three Carriers, two global triggers arrive LAT
// slots after their pulses, and one pulse has no trigger. The pedestal table
// is loaded for the pulsed channels. Checks:
//  - every DAQ packet: header with module address and trigger number, the
//    hits (Carrier, IRSX, channel, storage window, CFD time, peak, charge)
//    against a reference computed from the ideal Wilkinson codes, trailer
//    with the hit count;
//  - the pulse without trigger gives no hit;
//  - the trigger stream has one record per pulse, sorted by slot;
//  - no status error.
// Mechanisms counted (each must occur): coincidence readout (packets),
// skipping of a locked window by the write
// pointer, a global trigger queued while a readout is in progress, trigger
// records of several Carriers merged, DAQ backpressure.
module tb_srm_top;
  import top_pkg::*;
  localparam int LAT = 212;
  localparam volt_t VPED = 16'd10000;   // 1.0 V
  logic clk = 0, rst_n = 0, gtrig = 0;
  volt_t thr = 16'd10500;
  volt_t vin [N_CARRIER][N_ASIC][N_CH][N_SMP];
  logic [5:0] module_addr = 6'd21;
  logic ped_we = 0; logic [21:0] ped_addr = 0; adc_t ped_data = 0;
  logic daq_valid, daq_ready = 1, daq_last, trg_valid, trg_ready = 1;
  logic [31:0] daq_data;
  trec_t trg;
  logic [N_CARRIER-1:0] stall, trig_lost, tdrop;
  logic mismatch, dovf, tovf, evq_lost, frame_err;
  int checks = 0, failures = 0;

  srm_top dut (.*);
  always #4 clk = ~clk;

  initial begin
    #20000000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---- reference ADC and CFD -------------------------------------------
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

  typedef struct { int car, asic, ch, slot, amp, t0; logic trig; } pulse_t;
  pulse_t pl [5];
  int win_of [N_CARRIER][2048];
  typedef struct { int car, asic, ch, win, t, pk, q; } ehit_t;

  function automatic ehit_t ref_hit(pulse_t p);
    int sm [64]; int pk, pkn, j, half, lo, sum, t, cp;
    ehit_t h;
    cp = code_of(VPED);
    sum = 0; pk = 0; pkn = 0;
    for (int s = 0; s < 64; s++) begin
      sm[s] = code_of(VPED + pulse(p.amp, p.t0, s)) - cp;
      sum += sm[s];
      if (s == 0 || sm[s] > pk) begin pk = sm[s]; pkn = s; end
    end
    half = pk >>> 1; j = pkn;
    while (j > 0 && sm[j-1] > half) j--;
    if (j == 0) t = pkn * 256;
    else begin lo = j - 1; t = lo * 256 + ((half - sm[lo]) * 256) / (sm[lo+1] - sm[lo]); end
    h = '{p.car, p.asic, p.ch, win_of[p.car][p.slot], t, pk, sum};
    return h;
  endfunction

  // ---- stimulus: one window of samples per slot --------------------------
  int slot_now = 0;
  int n_skip = 0, n_queued = 0;
  int last_win [N_CARRIER];
  always @(negedge clk) if (rst_n && dut.g_car[0].u_cb.smp_strobe) begin
    slot_now = int'(dut.g_car[0].u_cb.slot);
    for (int c = 0; c < N_CARRIER; c++) for (int a = 0; a < N_ASIC; a++)
      for (int ch = 0; ch < N_CH; ch++) for (int s = 0; s < N_SMP; s++) vin[c][a][ch][s] = VPED;
    foreach (pl[i]) if (pl[i].slot == slot_now)
      for (int s = 0; s < N_SMP; s++)
        vin[pl[i].car][pl[i].asic][pl[i].ch][s] = VPED + volt_t'(pulse(pl[i].amp, pl[i].t0, s));
    for (int c = 0; c < N_CARRIER; c++) begin
      int w;
      case (c)
        0: w = int'(dut.g_car[0].u_cb.wr_win);
        1: w = int'(dut.g_car[1].u_cb.wr_win);
        2: w = int'(dut.g_car[2].u_cb.wr_win);
        default: w = int'(dut.g_car[3].u_cb.wr_win);
      endcase
      if (slot_now < 2048) win_of[c][slot_now] = w;
      if (c == 0 && slot_now > 1 && w != (last_win[0] + 1) % N_WIN) n_skip++;
      last_win[c] = w;
    end
    // global triggers LAT slots after the triggered pulses
    foreach (pl[i]) if (pl[i].trig && pl[i].slot + LAT == slot_now && (i == 0 || pl[i-1].slot != pl[i].slot)) begin
      gtrig = 1;
      if (dut.g_car[0].u_cb.u_ro.st != 0) n_queued++;
    end
  end
  always @(negedge clk) if (gtrig && !dut.g_car[0].u_cb.smp_strobe) gtrig = 0;

  // ---- DAQ packet checker --------------------------------------------------
  ehit_t expect_hits [2][$];
  int n_pkt = 0, word_i = 0, cur_trig = 0, nh = 0, n_bp = 0;
  logic [31:0] w0;
  always @(negedge clk) daq_ready <= ($urandom_range(0, 4) != 0);
  always @(posedge clk) if (rst_n) begin
    if (daq_valid && !daq_ready) n_bp++;
    if (daq_valid && daq_ready) begin
      if (word_i == 0) begin
        checks++;
        if (daq_data[31:28] != 4'hA || daq_data[25:20] != module_addr || daq_data[15:0] != 16'(n_pkt)) begin
          failures++; $display("bad header %h", daq_data);
        end
        cur_trig = int'(daq_data[15:0]); nh = 0; word_i = 1;
      end else if (daq_last) begin
        checks++;
        if (daq_data[31:28] != 4'hE || int'(daq_data[15:0]) != nh || expect_hits[cur_trig % 2].size() != 0) begin
          failures++; $display("bad trailer %h, %0d hits expected still", daq_data, expect_hits[cur_trig % 2].size());
        end
        n_pkt++; word_i = 0;
      end else if (word_i % 2 == 1) begin
        w0 = daq_data; word_i++;
      end else begin
        int k; k = -1;
        foreach (expect_hits[cur_trig % 2][n]) begin
          ehit_t e; e = expect_hits[cur_trig % 2][n];
          if (w0 == {2'(e.car), 2'(e.asic), 3'(e.ch), 9'(e.win), 16'(e.t)} &&
              daq_data == {13'(e.pk), 19'(e.q)}) k = n;
        end
        checks++;
        if (k < 0) begin failures++; $display("unexpected hit %h %h", w0, daq_data); end
        else expect_hits[cur_trig % 2].delete(k);
        nh++; word_i++;
      end
    end
  end

  // ---- trigger stream checker ---------------------------------------------
  int n_trec = 0, last_tslot = -1, trec_car_mask = 0;
  always @(posedge clk) if (rst_n && trg_valid && trg_ready) begin
    int k; k = -1;
    foreach (pl[i]) if (pl[i].car == int'(trg.carrier) && pl[i].slot == int'(trg.slot)) k = i;
    checks++;
    if (k < 0 || int'(trg.slot) < last_tslot) begin failures++; $display("bad trigger record %p", trg); end
    else if (trg.mask[pl[k].asic * 8 + pl[k].ch] != 1'b1) failures++;
    last_tslot = int'(trg.slot);
    trec_car_mask |= 1 << trg.carrier;
    n_trec++;
  end

  int n_err = 0;
  always @(posedge clk) if (rst_n && (|stall || |trig_lost || |tdrop || mismatch || dovf || tovf || evq_lost || frame_err)) n_err++;

  initial begin
    int cp;
    pl[0] = '{0, 1, 3, 300, 4000, 20, 1'b1};
    pl[1] = '{2, 3, 7, 300, 2500, 35, 1'b1};
    pl[2] = '{1, 0, 0, 340, 3000, 10, 1'b0};   // no global trigger
    pl[3] = '{3, 2, 1, 600, 3500, 44, 1'b1};
    pl[4] = '{0, 2, 6, 600, 1800, 5, 1'b1};
    for (int c = 0; c < N_CARRIER; c++) for (int a = 0; a < N_ASIC; a++)
      for (int ch = 0; ch < N_CH; ch++) for (int s = 0; s < N_SMP; s++) vin[c][a][ch][s] = VPED;
    // pedestal table for the pulsed channels, all windows (during reset)
    cp = code_of(VPED);
    foreach (pl[i]) for (int w = 0; w < N_WIN; w++) for (int s = 0; s < N_SMP; s++) begin
      @(negedge clk);
      ped_we = 1; ped_addr = {2'(pl[i].car), 2'(pl[i].asic), 3'(pl[i].ch), 9'(w), 6'(s)}; ped_data = adc_t'(cp);
    end
    @(negedge clk); ped_we = 0;
    repeat (4) @(negedge clk); rst_n = 1;
    wait (slot_now == 301);
    expect_hits[0].push_back(ref_hit(pl[0])); expect_hits[0].push_back(ref_hit(pl[1]));
    wait (slot_now == 601);
    expect_hits[1].push_back(ref_hit(pl[3])); expect_hits[1].push_back(ref_hit(pl[4]));
    wait (n_pkt == 2);
    repeat (200) @(posedge clk);
    checks++; if (n_trec != 5) begin failures++; $display("trigger records %0d", n_trec); end
    checks++; if (n_err != 0) begin failures++; $display("status errors %0d", n_err); end
    $display("mechanisms: packets=%0d window_skips=%0d queued_triggers=%0d trigger_carriers=%b daq_backpressure=%0d",
             n_pkt, n_skip, n_queued, trec_car_mask[3:0], n_bp);
    checks++; if (n_skip == 0)   begin failures++; $display("locked-window skip never happened"); end
    checks++; if (n_queued == 0) begin failures++; $display("queued trigger never happened"); end
    checks++; if (trec_car_mask[3:0] != 4'hF) begin failures++; $display("trigger merge incomplete"); end
    checks++; if (n_bp == 0)     begin failures++; $display("backpressure never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
