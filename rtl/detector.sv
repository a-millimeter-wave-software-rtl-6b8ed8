// detector: trigger-waveform detector (IP_detector) for waveform-triggered
// reception.
//
// The ADC delivers R = 8 consecutive samples per clock on each of I and Q.
// The trigger waveform can start at any of the 8 positions in a beat, so 8
// parallel preamble detectors (ppd) run side by side, PPD l correlating the
// window that ends l samples before the newest sample of the beat. The
// "slicers and shifters" keep the previous beat and cut, for PPD l, the 8
// samples x_{n-l}, ..., x_{n-l-7} out of the last 16 (n = newest sample).
// The trigger t_rx,w is the OR of the 8 detections. PPD 0's detections are
// counted (N_detect) for test purposes.
//
// Interface: adc_i / adc_q are the converter beats, sample j in bits
// [16j+15:16j], sample 0 the oldest in time (this ordering is this design's
// assumption). The stream is taken to be valid every clock, as the
// converter never stalls. Timing: the slicer adds no latency (the current
// beat feeds the PPDs directly), so trigger_wtr, the OR of the registered ppd
// outputs, rises 8 clocks after the beat that completes the waveform.
// N_detect counts rising edges of PPD 0's detection (the paper says it counts
// "detection events"); it clears only on reset.
module detector
  import sdr_pkg::*;
#(
  parameter logic [31:0] GOLAY = GOLAY_DEFAULT
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [BEAT_W-1:0] adc_i,
  input  logic [BEAT_W-1:0] adc_q,
  output logic              trigger_wtr,     // t_rx,w
  output logic [R-1:0]      ppd_det,         // per-lag detections
  output logic [31:0]       n_detect         // N_detect
);

  logic [BEAT_W-1:0] prev_i, prev_q;
  logic signed [SAMPLE_W-1:0] win_i [2*R], win_q [2*R];
  logic signed [SAMPLE_W-1:0] sl_i [R][R], sl_q [R][R];
  logic det0_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      prev_i <= '0;
      prev_q <= '0;
    end else begin
      prev_i <= adc_i;
      prev_q <= adc_q;
    end
  end

  // win[0..7] = previous beat, win[8..15] = current beat, oldest first.
  always_comb begin
    for (int j = 0; j < int'(R); j++) begin
      win_i[j]     = prev_i[SAMPLE_W*j +: SAMPLE_W];
      win_q[j]     = prev_q[SAMPLE_W*j +: SAMPLE_W];
      win_i[R + j] = adc_i[SAMPLE_W*j +: SAMPLE_W];
      win_q[R + j] = adc_q[SAMPLE_W*j +: SAMPLE_W];
    end
  end

  // Slicer for lag l: x_{n-l-j} = win[15-l-j].
  for (genvar l = 0; l < R; l++) begin : g_ppd
    always_comb begin
      for (int j = 0; j < int'(R); j++) begin
        sl_i[l][j] = win_i[2*R - 1 - l - j];
        sl_q[l][j] = win_q[2*R - 1 - l - j];
      end
    end
    logic hit_unused;
    ppd #(.GOLAY(GOLAY)) u_ppd (
      .clk (clk),
      .rst (rst),
      .x_i (sl_i[l]),
      .x_q (sl_q[l]),
      .hit (hit_unused),
      .det (ppd_det[l])
    );
  end

  assign trigger_wtr = |ppd_det;

  always_ff @(posedge clk) begin
    if (rst) begin
      det0_q   <= 1'b0;
      n_detect <= '0;
    end else begin
      det0_q <= ppd_det[0];
      if (ppd_det[0] && !det0_q) n_detect <= n_detect + 1'b1;
    end
  end

endmodule
