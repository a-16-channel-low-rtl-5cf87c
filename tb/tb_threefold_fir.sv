// tb_threefold_fir -- checks the threefold FIR (with its coefficient memory)
// against a direct-form model: every output of LPF, BPF1, BPF2, HT Re and
// HT Im of all 16 channels is compared with convolutions over the full tap
// sets (symmetric LPF/BPF, antisymmetric HT) written out from the programmed
// unique coefficients, with the same rounding and saturation. Random
// coefficients, random ADC data, random band selection per channel.
// Also checks the 4-cycle latency, that only every fourth ADC word of a
// channel produces an output, and 16 outputs per 64 ADC words.
module tb_threefold_fir;
  import nc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic adc_valid = 0;
  logic [3:0] adc_ch = 0;
  logic [ADC_W-1:0] adc_data = 0;
  logic [NCH-1:0] band_sel;
  fir_slot_e slot;
  coef_t coef [NLANE];
  logic we = 0; logic [6:0] addr = 0; coef_t wdata = 0;
  logic out_valid; logic [3:0] out_ch;
  sample_t d_lpf, d_bpf1, d_bpf2, d_ht_re, d_ht_im;

  fir_coeff_mem u_mem (.clk, .rst_n, .we, .addr, .wdata, .slot, .coef);
  threefold_fir dut (.*);

  int checks = 0, failures = 0, outputs = 0;
  int c_set [4][NLANE];
  int xh [NCH][$];   // ADC history (scaled signed), newest first
  int yh [NCH][$];   // LPF output history
  int wh [NCH][$];   // HT input history
  int dec [NCH];
  typedef struct { int ch; int lpf, b1, b2, re, im; int t; } exp_t;
  exp_t expq [$];
  int cyc = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rnd_sat(longint acc);
    longint r;
    r = (acc + 1024) >>> 11;
    if (r > 2047) r = 2047;
    if (r < -2048) r = -2048;
    return int'(r);
  endfunction

  function automatic int at(ref int q [$], input int k);
    return (k < q.size()) ? q[k] : 0;
  endfunction

  task automatic model(int ch, int x);
    longint acc;
    exp_t e;
    xh[ch].push_front(x);
    dec[ch]++;
    if (dec[ch] % 4 != 0) return;
    acc = 0;
    for (int j = 0; j < 25; j++) acc += longint'(c_set[0][(j < 12) ? j : 24 - j]) * at(xh[ch], j);
    e.lpf = rnd_sat(acc);
    yh[ch].push_front(e.lpf);
    acc = 0;
    for (int j = 0; j < 42; j++) acc += longint'(c_set[1][(j < 21) ? j : 41 - j]) * at(yh[ch], j);
    e.b1 = rnd_sat(acc);
    acc = 0;
    for (int j = 0; j < 42; j++) acc += longint'(c_set[2][(j < 21) ? j : 41 - j]) * at(yh[ch], j);
    e.b2 = rnd_sat(acc);
    wh[ch].push_front(band_sel[ch] ? e.b2 : e.b1);
    acc = 0;
    for (int j = 0; j < 15; j++)
      if (j < 7)      acc += longint'(c_set[3][j]) * at(wh[ch], j);
      else if (j > 7) acc -= longint'(c_set[3][14 - j]) * at(wh[ch], j);
    e.im = rnd_sat(acc);
    e.re = at(wh[ch], 7);
    e.ch = ch;
    e.t  = cyc;
    expq.push_back(e);
  endtask

  // cyc counts clock edges. The model runs just after edge T (cyc = T), the
  // word is sampled at edge T + 1, and the result must be registered at edge
  // T + 5 (four slots), which this block sees at edge T + 6.
  always @(posedge clk) begin
    exp_t e;
    cyc++;
    if (rst_n && out_valid) begin
    outputs++;
    checks++;
    if (expq.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = expq.pop_front();
      if (out_ch != 4'(e.ch) || d_lpf != sample_t'(e.lpf) || d_bpf1 != sample_t'(e.b1) ||
          d_bpf2 != sample_t'(e.b2) || d_ht_re != sample_t'(e.re) || d_ht_im != sample_t'(e.im)) begin
        failures++;
        if (failures < 6) $display("ch%0d got %0d %0d %0d %0d %0d exp ch%0d %0d %0d %0d %0d %0d", out_ch,
          d_lpf, d_bpf1, d_bpf2, d_ht_re, d_ht_im, e.ch, e.lpf, e.b1, e.b2, e.re, e.im);
      end
      checks++;
      if (cyc - e.t != 6) begin failures++; $display("latency %0d", cyc - e.t); end
    end
    end
  end

  initial begin
    band_sel = 16'($urandom);
    for (int c = 0; c < NCH; c++) dec[c] = 0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    // program the coefficient sets
    for (int s = 0; s < 4; s++) begin
      int n;
      n = (s == 0) ? 13 : (s == 3) ? 7 : 21;
      for (int i = 0; i < NLANE; i++) c_set[s][i] = 0;
      for (int i = 0; i < n; i++) begin
        c_set[s][i] = $urandom_range(0, 1200) - 600;
        @(posedge clk); #1;
        we = 1; addr = {2'(s), 5'(i)}; wdata = coef_t'(c_set[s][i]);
      end
      // a write beyond the set must be ignored
      @(posedge clk); #1; addr = {2'(s), 5'(n)}; wdata = 12'sh123;
    end
    @(posedge clk); #1 we = 0;
    // stream: one ADC word every 4 cycles, channels in order
    for (int k = 0; k < 16 * 4 * 80; k++) begin
      int code, x;
      if (k < 64) code = 1023; else code = 512 + $rtoi(300.0 * $sin(k / 50.0)) + $urandom_range(0, 200) - 100;
      x = (code - 512) * 4;
      @(posedge clk); #1;
      adc_valid = 1; adc_ch = 4'(k % 16); adc_data = 10'(code);
      model(k % 16, x);
      @(posedge clk); #1 adc_valid = 0;
      @(posedge clk); @(posedge clk);
    end
    repeat (10) @(posedge clk);
    checks++;
    if (outputs != 16 * 80) begin failures++; $display("outputs %0d", outputs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
