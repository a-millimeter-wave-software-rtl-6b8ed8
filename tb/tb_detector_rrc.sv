// tb_detector_rrc: the detector against the band-limited trigger waveform.
//
// The correlator taps are the rectangular +-1 approximation of the trigger
// waveform, but the transmitted waveform is the real one: the Golay sequence
// repeated four times, BPSK, upsampled by 4 and shaped by a root-raised-cosine
// filter with roll-off 0.5. Each burst also gets a random carrier frequency
// offset of up to +-3 MHz at 1.536 GS/s (about a quarter turn over one
// 128-sample repetition), a random phase and amplitude, and the receiver adds
// noise about 25 dB below the burst.
//
// Checks, every clock: trigger_wtr and the eight lag outputs equal the
// reference detector (tb_ref_pkg, computed from the definitions) 8 clocks
// after the beat that closes the window. Per burst: every burst is detected,
// within 48 samples of the end of its fourth repetition (the RRC filter delay
// is 16 samples). Between bursts: no trigger at all (no false alarm on noise).
//
// The RRC filter spans +-4 symbols (+-16 samples); the span, the offsets and
// the noise level are this testbench's choices, the roll-off, the upsampling
// factor and the sequence structure are the original design's.
`timescale 1ns/1ps
module tb_detector_rrc;
  import sdr_pkg::*;
  import tb_ref_pkg::*;

  localparam int    NBURST = 12;
  localparam int    LAT    = 8;
  localparam int    SPAN   = 16;                    // RRC half-length in samples
  localparam real   PI     = 3.14159265358979;
  localparam real   BETA   = 0.5;
  localparam real   TSYM   = 4.0;                   // samples per chip

  logic clk = 0, rst = 1;
  logic [127:0] adc_i, adc_q;
  logic trigger_wtr;
  logic [7:0] ppd_det;
  logic [31:0] n_detect;
  int checks = 0, failures = 0;

  detector dut (.clk(clk), .rst(rst), .adc_i(adc_i), .adc_q(adc_q),
                .trigger_wtr(trigger_wtr), .ppd_det(ppd_det), .n_detect(n_detect));

  always #2.6 clk = ~clk;

  // root-raised-cosine impulse response, t in samples
  function automatic real rrc(int n);
    real t, x, den;
    t = real'(n) / TSYM;
    if (n == 0) return 1.0 - BETA + 4.0 * BETA / PI;
    x = 4.0 * BETA * t;
    if (x == 1.0 || x == -1.0)
      return BETA / $sqrt(2.0) * ((1.0 + 2.0 / PI) * $sin(PI / (4.0 * BETA)) +
                                  (1.0 - 2.0 / PI) * $cos(PI / (4.0 * BETA)));
    den = PI * t * (1.0 - x * x);
    return ($sin(PI * t * (1.0 - BETA)) + x * $cos(PI * t * (1.0 + BETA))) / den;
  endfunction

  // shaped trigger waveform, real valued, 512 + 2*SPAN samples, peak near 1
  real wf[512 + 2 * SPAN];
  function automatic void build_wf();
    real pk;
    pk = 0.0;
    for (int m = 0; m < 512 + 2 * SPAN; m++) begin
      real acc;
      acc = 0.0;
      for (int s = 0; s < 128; s++) begin
        int d;
        d = m - SPAN - 4 * s;
        if (d >= -SPAN && d <= SPAN) acc += (golay(s % 32) ? 1.0 : -1.0) * rrc(d);
      end
      wf[m] = acc;
      if (acc > pk) pk = acc;
      if (-acc > pk) pk = -acc;
    end
    for (int m = 0; m < 512 + 2 * SPAN; m++) wf[m] = wf[m] / pk;
  endfunction

  int burst_start[$];          // sample index of the first shaped sample
  int wf_pos = -1, gap = 300, nb = 0;
  real amp, ph, dph;

  function automatic int noise();
    return $signed($urandom_range(600)) - 300;
  endfunction

  task automatic push_sample();
    int vi, vq;
    vi = noise();
    vq = noise();
    if (wf_pos < 0 && gap == 0 && nb < NBURST) begin
      wf_pos = 0;
      nb++;
      burst_start.push_back(smp_i.size());
      amp = 4000.0 + real'($urandom_range(6000));
      ph  = 2.0 * PI * real'($urandom_range(1000)) / 1000.0;
      dph = 2.0 * PI * (real'($urandom_range(6000)) - 3000.0) * 1.0e3 / 1.536e9;
    end
    if (wf_pos >= 0) begin
      real a;
      a = amp * wf[wf_pos];
      vi += $rtoi(a * $cos(ph));
      vq += $rtoi(a * $sin(ph));
      ph += dph;
      wf_pos++;
      if (wf_pos == 512 + 2 * SPAN) begin wf_pos = -1; gap = 200 + $urandom_range(600); end
    end else if (gap > 0) gap--;
    smp_i.push_back(vi);
    smp_q.push_back(vq);
  endtask

  // which burst, if any, a detection at window end n belongs to
  function automatic int burst_of(int n);
    foreach (burst_start[b]) begin
      int e;
      e = burst_start[b] + 2 * SPAN + 511 - SPAN;  // end of the 4th repetition
      if (n >= e - 48 && n <= e + 48) return b;
    end
    return -1;
  endfunction

  initial begin
    #(5.2 * (NBURST * 200 + 1000));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit found[NBURST];
    int false_alarms, t, tail, n_found;
    false_alarms = 0;
    tail = 40;
    foreach (found[b]) found[b] = 0;
    init();
    build_wf();
    adc_i = '0; adc_q = '0;
    repeat (4) @(posedge clk);
    @(negedge clk) rst = 0;
    t = 0;
    while (tail > 0) begin
      repeat (8) push_sample();
      for (int j = 0; j < 8; j++) begin
        adc_i[16*j +: 16] = 16'(smp_i[8 * t + j]);
        adc_q[16*j +: 16] = 16'(smp_q[8 * t + j]);
      end
      @(posedge clk);
      #0.1;
      if (t >= LAT - 1) begin
        bit [7:0] ed;
        int tb;
        tb = t - (LAT - 1);
        for (int l = 0; l < 8; l++) ed[l] = tb_ref_pkg::det(tb, l);
        checks++;
        if (ppd_det != ed || trigger_wtr != (|ed)) begin
          failures++;
          if (failures < 10) $display("beat %0d: ppd_det=%b expected %b", tb, ppd_det, ed);
        end
        for (int l = 0; l < 8; l++) if (ppd_det[l]) begin
          int b;
          b = burst_of(8 * tb + 7 - l);
          if (b < 0) false_alarms++;
          else found[b] = 1;
        end
      end
      @(negedge clk);
      t++;
      if (nb == NBURST && wf_pos < 0) tail--;
    end
    n_found = 0;
    for (int b = 0; b < NBURST; b++) begin
      checks++;
      if (found[b]) n_found++;
      else begin
        failures++;
        $display("burst %0d (sample %0d) not detected", b, burst_start[b]);
      end
    end
    checks++;
    if (false_alarms != 0) begin
      failures++;
      $display("%0d detections outside the bursts", false_alarms);
    end
    $display("bursts=%0d detected=%0d false=%0d N_detect=%0d", NBURST, n_found, false_alarms, n_detect);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
