// tb_detector: self-checking testbench of the 8-lag trigger detector.
//
// Random noise with trigger waveforms starting at random sample offsets (so
// every lag gets its turn), random complex gains. Every clock, trigger_wtr is
// compared with the OR over the 8 lags of the reference detection (window of
// lag l ends at sample 8t+7-l), 8 clocks after beat t; each lag's output is
// checked too. At the end N_detect must equal the number of rising edges of
// lag 0's reference detection, and several different lags must have fired.
`timescale 1ns/1ps
module tb_detector;
  import sdr_pkg::*;
  import tb_ref_pkg::*;

  localparam int NBEATS = 3000;
  localparam int LAT    = 8;

  logic clk = 0, rst = 1;
  logic [127:0] adc_i, adc_q;
  logic trigger_wtr;
  logic [7:0] ppd_det;
  logic [31:0] n_detect;
  int checks = 0, failures = 0, trig_cnt = 0, exp_n_detect = 0;
  bit prev_d0 = 0;
  bit [7:0] lags_seen = '0;

  detector dut (.clk(clk), .rst(rst), .adc_i(adc_i), .adc_q(adc_q),
                .trigger_wtr(trigger_wtr), .ppd_det(ppd_det), .n_detect(n_detect));

  always #2.6 clk = ~clk;

  int wf_pos = -1, wf_ai, wf_aq, gap = 200;

  task automatic push_sample();
    int vi, vq, c;
    vi = $signed($urandom_range(1000)) - 500;
    vq = $signed($urandom_range(1000)) - 500;
    if (wf_pos < 0 && gap == 0) begin
      wf_pos = 0;
      wf_ai = $signed($urandom_range(20000)) - 10000;
      wf_aq = $signed($urandom_range(20000)) - 10000;
      if (wf_ai < 3000 && wf_ai > -3000) wf_ai = 6000;
    end
    if (wf_pos >= 0) begin
      c = sync_chip(wf_pos, 1);
      vi += c * wf_ai;
      vq += c * wf_aq;
      wf_pos++;
      if (wf_pos == 512) begin wf_pos = -1; gap = 60 + $urandom_range(500); end
    end else if (gap > 0) gap--;
    smp_i.push_back(vi);
    smp_q.push_back(vq);
  endtask

  initial begin
    #(5.2 * (NBEATS + 200));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    init();
    adc_i = '0; adc_q = '0;
    repeat (4) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int t = 0; t < NBEATS; t++) begin
      repeat (8) push_sample();
      for (int j = 0; j < 8; j++) begin
        adc_i[16*j +: 16] = 16'(smp_i[8 * t + j]);
        adc_q[16*j +: 16] = 16'(smp_q[8 * t + j]);
      end
      @(posedge clk);
      #0.1;
      if (t >= LAT - 1) begin
        bit [7:0] ed;
        for (int l = 0; l < 8; l++) ed[l] = tb_ref_pkg::det(t - (LAT - 1), l);
        checks++;
        if (ppd_det !== ed || trigger_wtr !== (|ed)) begin
          failures++;
          if (failures < 10) $display("beat %0d: ppd_det=%b expected %b trig=%0b", t - LAT + 1, ppd_det, ed, trigger_wtr);
        end
        if (|ed) trig_cnt++;
        lags_seen |= ed;
        if (ed[0] && !prev_d0) exp_n_detect++;
        prev_d0 = ed[0];
      end
      @(negedge clk);
    end
    checks++;
    if (n_detect != 32'(exp_n_detect)) begin
      failures++;
      $display("N_detect=%0d expected %0d", n_detect, exp_n_detect);
    end
    checks++;
    if ($countones(lags_seen) < 4 || exp_n_detect == 0) begin
      failures++;
      $display("too few lags exercised: %b, lag-0 events %0d", lags_seen, exp_n_detect);
    end
    $display("trigger cycles=%0d lags seen=%b N_detect=%0d", trig_cnt, lags_seen, n_detect);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
