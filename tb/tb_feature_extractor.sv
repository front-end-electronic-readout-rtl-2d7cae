// Testbench of feature_extractor: loads pedestals for the cells used,
// sends START, three waveforms (two pulses of different height and timing,
// one below the amplitude cut) and EOE, and compares the hits with a
// reference computation of pedestal subtraction, half-maximum CFD time
// (8 fractional bits), peak and charge.
module tb_feature_extractor;
  import top_pkg::*;
  logic clk = 0, rst_n = 0;
  logic i_valid = 0, i_ready, ped_we = 0, o_valid, o_ready = 1;
  ev_t i;
  logic [21:0] ped_addr = 0;
  adc_t ped_data = 0;
  skind_t o_kind;
  logic [15:0] o_trig;
  hit_t o_hit;
  int checks = 0, failures = 0;
  int ped [3][64];
  typedef struct { skind_t k; int trig; hit_t h; } out_t;
  out_t expq [$];
  always #5 clk = ~clk;
  feature_extractor dut (.*);
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) if (rst_n && o_valid && o_ready) begin
    out_t e;
    checks++;
    if (expq.size() == 0) failures++;
    else begin
      e = expq.pop_front();
      if (o_kind != e.k || (e.k != S_WHDR && o_trig != 16'(e.trig)) || (e.k == S_WHDR && o_hit != e.h)) begin
        failures++; $display("got %p exp %p", o_hit, e.h);
      end
    end
  end
  always @(negedge clk) o_ready <= ($urandom_range(0, 3) != 0);
  task automatic put(ev_t x);
    @(negedge clk); i = x; i_valid = 1; #1;
    while (!i_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1; i_valid = 0;
  endtask
  function automatic logic [21:0] addr(int car, int a, int ch, int w, int s);
    return {2'(car), 2'(a), 3'(ch), 9'(w), 6'(s)};
  endfunction
  task automatic wave(int n, int car, int a, int ch, int w, int amp, int t0);
    int sm [64]; int pk, pkn, j, half, lo, sum, t;
    out_t e;
    put('{S_WHDR, 2'(car), {2'(a), 3'(ch), 9'(w), 2'b0}});
    sum = 0; pk = 0; pkn = 0;
    for (int s = 0; s < 64; s++) begin
      int d; d = s - t0;
      sm[s] = (d < 0) ? $urandom_range(0, 6) - 3 : (d < 4) ? amp * (d + 1) / 4 : (d < 16) ? amp * (16 - d) / 12 : $urandom_range(0, 6) - 3;
      put('{S_WSMP, 2'(car), 16'(ped[n][s] + sm[s])});
      sum += sm[s];
      if (s == 0 || sm[s] > pk) begin pk = sm[s]; pkn = s; end
    end
    half = pk >>> 1; j = pkn;
    while (j > 0 && sm[j-1] > half) j--;
    if (j == 0) t = pkn * 256;
    else begin lo = j - 1; t = lo * 256 + ((half - sm[lo]) * 256) / (sm[lo+1] - sm[lo]); end
    if (pk >= 40) begin
      e.k = S_WHDR; e.trig = 0;
      e.h = '{2'(car), 2'(a), 3'(ch), 9'(w), 16'(t), 13'(pk), 19'(sum)};
      expq.push_back(e);
    end
  endtask
  initial begin
    int cw [3][4];
    cw[0] = '{1, 2, 5, 77}; cw[1] = '{3, 0, 0, 511}; cw[2] = '{0, 3, 7, 1};
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 3; n++) for (int s = 0; s < 64; s++) begin
      ped[n][s] = 2600 + $urandom_range(0, 300);
      @(negedge clk); ped_we = 1; ped_addr = addr(cw[n][0], cw[n][1], cw[n][2], cw[n][3], s); ped_data = adc_t'(ped[n][s]);
    end
    @(negedge clk); ped_we = 0;
    expq.push_back('{S_START, 5, '0});
    put('{S_START, 2'd0, 16'd5});
    wave(0, 1, 2, 5, 77, 900, 21);
    wave(1, 3, 0, 0, 511, 300, 40);
    wave(2, 0, 3, 7, 1, 20, 10);
    expq.push_back('{S_EOE, 5, '0});
    put('{S_EOE, 2'd3, 16'd5});
    repeat (200) @(posedge clk);
    checks++; if (expq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
