// tb_connectivity_extractor -- drives 16 channels of synthetic analytic
// pairs, one pair every 4 cycles in channel order, and checks
//  * per sample: amplitude = max(|Re|,|Im|) exactly, phase within 1 LSB of
//    atan2 of the driven pair;
//  * per window (N = 256 frames): PLV of a fixed 60-degree pair, PLV of a
//    pair with a random phase, PAC of a theta phase with an amplitude-
//    modulated gamma channel, and SE of several channels, each against
//    sums formed in floating point from the driven values, and the number of
//    frames between window outputs.
module tb_connectivity_extractor;
  import nc_pkg::*;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0;
  logic [3:0] in_ch = 0;
  sample_t re = 0, im = 0;
  logic [NPAIR-1:0][3:0] pair_a, pair_b;
  logic [NPAIR-1:0] pair_pac;
  logic [1:0] win_log2 = 2'd0;
  logic smp_valid; logic [3:0] smp_ch;
  phase_t phase [NCH]; amp_t amp [NCH];
  logic win_valid; fwin_t f_pair [NPAIR]; fwin_t f_se [NCH];

  connectivity_extractor dut (.*);

  int checks = 0, failures = 0;
  int windows = 0;
  // reference sums for the current window
  real rs [NPAIR], rc [NPAIR];
  real rse [NCH];
  real ref_pair [NPAIR], ref_se [NCH];
  real ph [NCH];
  int  re_i [NCH], im_i [NCH];
  int  frame = 0, win_frame0 = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real linf(real a, real b);
    a = (a < 0) ? -a : a; b = (b < 0) ? -b : b;
    return (a > b) ? a : b;
  endfunction

  task automatic chk_close(string what, real got, real exp, real tol);
    checks++;
    if (got - exp > tol || exp - got > tol) begin
      failures++;
      $display("%s: got %0f expected %0f", what, got, exp);
    end
  endtask

  // window outputs
  always @(posedge clk) if (rst_n && win_valid) begin
    windows++;
    chk_close("frames per window", real'(frame - win_frame0), 256.0, 0.0);
    win_frame0 = frame;
    chk_close("PLV 60deg", real'(f_pair[0]), ref_pair[0], 4.0);
    chk_close("PLV random", real'(f_pair[1]), ref_pair[1], 4.0);
    chk_close("PAC", real'(f_pair[2]), ref_pair[2], 0.03 * ref_pair[2] + 3.0);
    chk_close("PLV 60deg value", real'(f_pair[0]), 442.5, 6.0);
    for (int c = 0; c < 5; c++) chk_close($sformatf("SE ch%0d", c), real'(f_se[c]), ref_se[c], 1.0);
  end

  // per-sample outputs
  always @(posedge clk) if (rst_n && smp_valid) begin
    int a, e, d;
    a = (re_i[smp_ch] < 0 ? -re_i[smp_ch] : re_i[smp_ch]);
    if ((im_i[smp_ch] < 0 ? -im_i[smp_ch] : im_i[smp_ch]) > a) a = (im_i[smp_ch] < 0 ? -im_i[smp_ch] : im_i[smp_ch]);
    checks++;
    if (int'(amp[smp_ch]) != a) begin failures++; $display("amp ch%0d %0d exp %0d", smp_ch, amp[smp_ch], a); end
    e = $rtoi($atan2(real'(im_i[smp_ch]), real'(re_i[smp_ch])) * 512.0 / PI + 512.5) - 512;
    d = int'(phase[smp_ch]) - e;
    if (d > 512) d -= 1024; if (d < -512) d += 1024;
    checks++;
    if (d > 1 || d < -1) begin failures++; $display("phase ch%0d %0d exp %0d", smp_ch, phase[smp_ch], e); end
  end

  initial begin
    pair_a = '0; pair_b = '0; pair_pac = '0;
    pair_a[0] = 4'd0; pair_b[0] = 4'd1;                 // PLV, 60 degrees apart
    pair_a[1] = 4'd0; pair_b[1] = 4'd2;                 // PLV, random phase
    pair_a[2] = 4'd0; pair_b[2] = 4'd3; pair_pac[2] = 1; // PAC theta(0) -> gamma(3)
    for (int p = 0; p < NPAIR; p++) begin rs[p] = 0; rc[p] = 0; end
    for (int c = 0; c < NCH; c++) rse[c] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (2) @(posedge clk);
    for (frame = 0; frame < 256 * 3; frame++) begin
      real th0, thg, am;
      th0 = 2.0 * PI * 6.0 * frame / 1000.0;
      thg = 2.0 * PI * 80.0 * frame / 1000.0;
      for (int c = 0; c < NCH; c++) begin
        real p, a;
        case (c)
          0: begin p = th0;          a = 1000.0; end
          1: begin p = th0 - PI / 3; a = 900.0; end
          2: begin p = 2.0 * PI * ($urandom_range(0, 9999) / 10000.0); a = 700.0; end
          3: begin p = thg;          a = 800.0 * (1.0 + 0.5 * $cos(th0)); end
          default: begin p = 2.0 * PI * c * frame / 1000.0; a = 100.0 * c; end
        endcase
        re_i[c] = $rtoi(a * $cos(p) + 2048.5) - 2048;
        im_i[c] = $rtoi(a * $sin(p) + 2048.5) - 2048;
        ph[c]   = $atan2(real'(im_i[c]), real'(re_i[c]));
        rse[c] += real'(re_i[c]) * real'(re_i[c]);
        @(posedge clk); #1;
        in_valid = 1; in_ch = 4'(c); re = sample_t'(re_i[c]); im = sample_t'(im_i[c]);
        @(posedge clk); #1;
        in_valid = 0;
        @(posedge clk); @(posedge clk);
      end
      // reference accumulation of the frame
      rs[0] += 511.0 * $sin(ph[0] - ph[1]); rc[0] += 511.0 * $cos(ph[0] - ph[1]);
      rs[1] += 511.0 * $sin(ph[0] - ph[2]); rc[1] += 511.0 * $cos(ph[0] - ph[2]);
      am = linf(real'(re_i[3]), real'(im_i[3]));
      rs[2] += am * $sin(ph[0]); rc[2] += am * $cos(ph[0]);
      if ((frame % 256) == 255) begin
        ref_pair[0] = linf(rs[0], rc[0]) / 256.0;
        ref_pair[1] = linf(rs[1], rc[1]) / 256.0;
        ref_pair[2] = linf(rs[2], rc[2]) / 256.0;
        for (int c = 0; c < NCH; c++) begin ref_se[c] = $floor(rse[c] / 256.0); rse[c] = 0; end
        for (int p = 0; p < NPAIR; p++) begin rs[p] = 0; rc[p] = 0; end
      end
    end
    repeat (40) @(posedge clk);
    checks++;
    if (windows != 3) begin failures++; $display("windows = %0d", windows); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
