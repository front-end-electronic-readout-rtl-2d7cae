// Testbench of scrod: four Carrier link transmitters (link_tx) send two
// events of waveform packets and trigger records; pedestals are loaded for
// the channels used. Checks the DAQ packets (header with module address and
// trigger number, hits against a reference pedestal subtraction and CFD,
// trailer count), the trigger fan-out, the sorted trigger stream and that no
// status error is raised.
module tb_scrod;
  import top_pkg::*;
  logic clk = 0, rst_n = 0, gtrig_in = 0, gtrig_out;
  logic [5:0] module_addr = 6'd9;
  logic [7:0] ser_data [N_CARRIER];
  logic [7:0] ser_trig [N_CARRIER];
  logic ped_we = 0; logic [21:0] ped_addr = 0; adc_t ped_data = 0;
  logic daq_valid, daq_ready = 1, daq_last, trg_valid, trg_ready = 1;
  logic [31:0] daq_data;
  trec_t trg;
  logic mismatch, dovf, tovf, evq_lost, frame_err;
  int checks = 0, failures = 0;
  scrod dut (.*);
  always #4 clk = ~clk;
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // Carrier-side transmitters fed from queues
  lword_t dq [N_CARRIER][$];
  lword_t tq [N_CARRIER][$];
  logic [N_CARRIER-1:0] dvl, drd, tvl, trd;
  lword_t dwd [N_CARRIER];
  lword_t twd [N_CARRIER];
  for (genvar c = 0; c < N_CARRIER; c++) begin : g_tx
    link_tx u_d (.clk, .rst_n, .in_valid(dvl[c]), .in_ready(drd[c]), .in_word(dwd[c]), .ser(ser_data[c]));
    link_tx u_t (.clk, .rst_n, .in_valid(tvl[c]), .in_ready(trd[c]), .in_word(twd[c]), .ser(ser_trig[c]));
  end
  always @(negedge clk) for (int c = 0; c < N_CARRIER; c++) begin
    dvl[c] = dq[c].size() > 0; dwd[c] = dvl[c] ? dq[c][0] : '{W_IDLE, 16'h0};
    tvl[c] = tq[c].size() > 0; twd[c] = tvl[c] ? tq[c][0] : '{W_IDLE, 16'h0};
  end
  always @(posedge clk) for (int c = 0; c < N_CARRIER; c++) begin
    if (dvl[c] && drd[c]) void'(dq[c].pop_front());
    if (tvl[c] && trd[c]) void'(tq[c].pop_front());
  end

  typedef struct { int car, asic, ch, win, amp, t0, trig; } wf_t;
  wf_t wf [4];
  int ped [4][64];
  int sig [4][64];
  typedef struct { logic [31:0] a, b; } eh_t;
  eh_t exp_hits [2][$];

  task automatic make(int n);
    int pk, pkn, j, half, lo, sum, t;
    wf_t f; f = wf[n];
    dq[f.car].push_back('{W_HDR, 16'(f.trig)});
    dq[f.car].push_back('{W_HDR, {2'(f.asic), 3'(f.ch), 9'(f.win), 2'b0}});
    sum = 0; pk = 0; pkn = 0;
    for (int s = 0; s < 64; s++) begin
      int d; d = s - f.t0;
      sig[n][s] = (d < 0 || d >= 12) ? 0 : (d < 3) ? f.amp * (d + 1) / 3 : f.amp * (12 - d) / 9;
      dq[f.car].push_back('{W_DATA, 16'(ped[n][s] + sig[n][s])});
      sum += sig[n][s];
      if (s == 0 || sig[n][s] > pk) begin pk = sig[n][s]; pkn = s; end
    end
    half = pk >>> 1; j = pkn;
    while (j > 0 && sig[n][j-1] > half) j--;
    if (j == 0) t = pkn * 256;
    else begin lo = j - 1; t = lo * 256 + ((half - sig[n][lo]) * 256) / (sig[n][lo+1] - sig[n][lo]); end
    exp_hits[f.trig].push_back('{{2'(f.car), 2'(f.asic), 3'(f.ch), 9'(f.win), 16'(t)}, {13'(pk), 19'(sum)}});
  endtask

  int n_pkt = 0, wi = 0, nh = 0, cur = 0, n_gt = 0, n_tr = 0, last_slot = -1, n_err = 0;
  logic [31:0] w0;
  always @(posedge clk) if (rst_n) begin
    if (gtrig_out) n_gt++;
    if (mismatch || dovf || tovf || evq_lost || frame_err) n_err++;
    if (trg_valid && trg_ready) begin
      checks++; if (int'(trg.slot) < last_slot || trg.mask != 32'(1) << (trg.carrier * 3 + 1)) failures++;
      last_slot = int'(trg.slot); n_tr++;
    end
    if (daq_valid && daq_ready) begin
      if (wi == 0) begin
        checks++; if (daq_data != {4'hA, 2'b0, 6'd9, 4'h0, 16'(n_pkt)}) failures++;
        cur = n_pkt; wi = 1; nh = 0;
      end else if (daq_last) begin
        checks++; if (daq_data != {4'hE, 12'h0, 16'(nh)} || exp_hits[cur].size() != 0) failures++;
        wi = 0; n_pkt++;
      end else if (wi % 2 == 1) begin w0 = daq_data; wi++; end
      else begin
        int k; k = -1;
        foreach (exp_hits[cur][n]) if (exp_hits[cur][n].a == w0 && exp_hits[cur][n].b == daq_data) k = n;
        checks++; if (k < 0) begin failures++; $display("unexpected hit %h %h", w0, daq_data); end
        else exp_hits[cur].delete(k);
        wi++; nh++;
      end
    end
  end
  always @(negedge clk) begin daq_ready <= ($urandom_range(0, 3) != 0); trg_ready <= ($urandom_range(0, 3) != 0); end

  initial begin
    wf[0] = '{0, 1, 2, 44, 900, 12, 0};
    wf[1] = '{2, 3, 7, 300, 500, 30, 0};
    wf[2] = '{1, 0, 4, 511, 1100, 3, 1};
    wf[3] = '{3, 2, 0, 7, 700, 50, 1};
    for (int n = 0; n < 4; n++) for (int s = 0; s < 64; s++) ped[n][s] = 2500 + $urandom_range(0, 400);
    for (int n = 0; n < 4; n++) for (int s = 0; s < 64; s++) begin
      @(negedge clk); ped_we = 1; ped_data = adc_t'(ped[n][s]);
      ped_addr = {2'(wf[n].car), 2'(wf[n].asic), 3'(wf[n].ch), 9'(wf[n].win), 6'(s)};
    end
    @(negedge clk); ped_we = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); gtrig_in = 1; @(negedge clk); gtrig_in = 0;
    @(negedge clk); gtrig_in = 1; @(negedge clk); gtrig_in = 0;
    for (int e = 0; e < 2; e++) begin
      for (int n = 0; n < 4; n++) if (wf[n].trig == e) make(n);
      for (int c = 0; c < N_CARRIER; c++) dq[c].push_back('{W_END, 16'(e)});
    end
    for (int c = 0; c < N_CARRIER; c++) for (int r = 0; r < 3; r++) begin
      tq[c].push_back('{W_HDR, 16'(100 + r * 10 + c)});
      tq[c].push_back('{W_DATA, 16'((32'(1) << (c * 3 + 1)) >> 16)});
      tq[c].push_back('{W_DATA, 16'(32'(1) << (c * 3 + 1))});
    end
    wait (n_pkt == 2);
    repeat (300) @(posedge clk);
    checks++; if (n_gt != 2) failures++;
    checks++; if (n_tr != 12) begin failures++; $display("trigger records %0d", n_tr); end
    checks++; if (n_err != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
