// tb_ppd: self-checking testbench of one preamble detector (lag 0).
//
// Feeds random noise with trigger waveforms (four Golay repetitions, random
// complex gain, random start sample, sometimes near full scale) and compares
// the hit and detection outputs every clock with tb_ref_pkg, which evaluates
// the metric directly from the sample history. Latencies checked: hit 6
// clocks and det 8 clocks after the beat that closes the window.
`timescale 1ns/1ps
module tb_ppd;
  import sdr_pkg::*;
  import tb_ref_pkg::*;

  localparam int NBEATS = 2500;

  logic clk = 0, rst = 1;
  logic signed [15:0] x_i [8], x_q [8];
  logic hit, det;
  int checks = 0, failures = 0, dets = 0, hits = 0;

  ppd dut (.clk(clk), .rst(rst), .x_i(x_i), .x_q(x_q), .hit(hit), .det(det));

  always #2.6 clk = ~clk;

  // waveform generator state
  int wf_pos = -1, wf_ai, wf_aq, gap = 300, noise = 600;

  task automatic push_sample();
    int vi, vq, c;
    vi = $signed($urandom_range(2 * noise)) - noise;
    vq = $signed($urandom_range(2 * noise)) - noise;
    if (wf_pos < 0 && gap == 0) begin
      wf_pos = 0;
      case ($urandom_range(3))
        0: begin wf_ai = 32000; wf_aq = 0; end          // near full scale
        1: begin wf_ai = $urandom_range(12000) + 2000; wf_aq = -($urandom_range(12000)); end
        2: begin wf_ai = 700; wf_aq = 700; end          // weak
        default: begin wf_ai = -($urandom_range(9000)); wf_aq = $urandom_range(9000) + 1000; end
      endcase
    end
    if (wf_pos >= 0) begin
      c = sync_chip(wf_pos, 1);
      vi = (wf_ai == 32000) ? c * 32767 + ((c > 0) ? 0 : -1) : vi + c * wf_ai;
      vq = (wf_ai == 32000) ? 0 : vq + c * wf_aq;
      wf_pos++;
      if (wf_pos == 512) begin wf_pos = -1; gap = 100 + $urandom_range(700); end
    end else if (gap > 0) gap--;
    if (vi > 32767) vi = 32767; if (vi < -32768) vi = -32768;
    if (vq > 32767) vq = 32767; if (vq < -32768) vq = -32768;
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
    if (golay(0) != GOLAY_DEFAULT[0] || golay(31) != GOLAY_DEFAULT[31]) begin
      $display("package Golay constant differs from the recursive construction");
      failures++;
    end
    checks++;
    foreach (x_i[j]) begin x_i[j] = 0; x_q[j] = 0; end
    repeat (4) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int t = 0; t < NBEATS; t++) begin
      repeat (8) push_sample();
      for (int j = 0; j < 8; j++) begin
        x_i[j] = 16'(smp_i[8 * t + 7 - j]);
        x_q[j] = 16'(smp_q[8 * t + 7 - j]);
      end
      @(posedge clk);
      #0.1;
      // after the edge consuming beat t: hit for beat t-5, det for beat t-7
      if (t >= 5) begin
        bit eh;
        eh = hit_ref(8 * (t - 5) + 7);
        checks++;
        if (hit !== eh) begin
          failures++;
          if (failures < 10) $display("beat %0d: hit=%0b expected %0b", t - 5, hit, eh);
        end
        if (eh) hits++;
      end
      if (t >= 7) begin
        bit ed;
        ed = tb_ref_pkg::det(t - 7, 0);
        checks++;
        if (det !== ed) begin
          failures++;
          if (failures < 10) $display("beat %0d: det=%0b expected %0b", t - 7, det, ed);
        end
        if (ed) dets++;
      end
      @(negedge clk);
    end
    checks++;
    if (dets < 3) begin
      failures++;
      $display("too few detections exercised: %0d", dets);
    end
    $display("hits=%0d detections=%0d", hits, dets);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit hit_ref(int n);
    return tb_ref_pkg::hit(n);
  endfunction

endmodule
