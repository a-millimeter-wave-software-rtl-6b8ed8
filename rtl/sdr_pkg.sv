// sdr_pkg: constants and types shared by the programmable-logic blocks of the
// millimetre-wave SDR.
//
// The data converters run R = 8 times faster than the 192 MHz logic clock, so
// every logic-clock beat carries R = 8 samples of 16 bits for the in-phase and
// R = 8 for the quadrature channel (128 bits each). The sample FIFOs hold
// 2^15 beats, i.e. 2^18 IQ samples. These numbers follow the paper. The
// register widths, the Golay sequence used for the trigger waveform and the
// config/status structs are this design's own choices.
package sdr_pkg;

  // Samples per logic-clock beat (f_sample / f_PL = 1.536 GHz / 192 MHz).
  localparam int unsigned R       = 8;
  // Bits per sample.
  localparam int unsigned SAMPLE_W = 16;
  // Beat width on each of the I and Q streams (16 * R).
  localparam int unsigned BEAT_W  = SAMPLE_W * R;
  // FIFO depth in beats.
  localparam int unsigned FIFO_DEPTH = 1 << 15;
  // Width of transfer sizes, thresholds and FIFO occupancies (holds 0..2^15).
  localparam int unsigned CNT_W   = 16;

  // Trigger waveform: length-32 binary Golay sequence g, repeated four times,
  // each chip repeated N_up = 4 times (128 samples). Bit k of GOLAY is g_k,
  // 1 -> +1 and 0 -> -1. Built by the usual concatenation a' = [a b],
  // b' = [a -b] starting from a = b = [1].
  localparam logic [31:0] GOLAY_DEFAULT = 32'b1011_1000_1011_0111_0100_0111_1011_0111;

  // Correlator coefficient b_k for k = 0..127 (1 means +1, 0 means -1):
  // b = 2[g31 g31 g31 g31 g30 ... g0 g0 g0 g0] - 1, so b_k = g_{31 - k/4}.
  function automatic logic coef_bit(input logic [31:0] g, input int unsigned k);
    return g[31 - (k / 4)];
  endfunction

  // Registers written by the processing system (through the monitor).
  typedef struct packed {
    logic [CNT_W-1:0] transfer_size;   // L_tx, beats per transmission
    logic             trigger_soft;    // t_tx, transmission starts on its rising edge
  } tx_cfg_t;

  typedef struct packed {
    logic [CNT_W-1:0] transfer_size;   // L_rx, beats per reception
    logic             transfer_enable; // e_rx
    logic             cnt_reset;       // r_trans, clears N_trans while 1
    logic [CNT_W-1:0] threshold;       // D_th, stop threshold on the ADC-FIFO count
    logic             trigger_soft;    // t_rx,s
    logic             mode;            // m_rx: 0 software-, 1 waveform-triggered
  } rx_cfg_t;

  // Values read back by the processing system.
  typedef struct packed {
    logic [CNT_W-1:0] n_trans;         // N_trans, completed receptions
    logic [CNT_W-1:0] cnt_fifo_adc_i;  // D_adc,I
    logic [CNT_W-1:0] cnt_fifo_adc_q;  // D_adc,Q
    logic [CNT_W-1:0] cnt_fifo_dac_i;  // D_dac,I
    logic [CNT_W-1:0] cnt_fifo_dac_q;  // D_dac,Q
    logic [31:0]      n_detect;        // N_detect, detections of PPD 0
  } status_t;

endpackage
