// tb_rx_packet_gen: self-checking testbench of the receive packet generator.
//
// The ADC side is an always-valid source of numbered beats; the FIFO side is
// a model FIFO of 64 beats whose fill level drives D_adc,I. Checks, each
// against counts worked out in the testbench: software-triggered transfers
// store exactly L_rx consecutive beats starting with the beat after the
// trigger edge, one per clock, tlast on the last one only, N_trans + 1;
// e_rx = 0 blocks; t_rx,w is ignored in mode 0 and starts transfers in mode
// 1, where t_rx,s still works; with D_th = L_rx * floor(64 / L_rx) the
// buffer takes exactly floor(64 / L_rx) waveform-triggered transfers and
// then refuses (stop threshold); the threshold does not apply in mode 0;
// r_trans clears N_trans.
`timescale 1ns/1ps
module tb_rx_packet_gen;
  import sdr_pkg::*;

  localparam int FDEPTH = 64;

  logic clk = 0, rst = 1;
  rx_cfg_t cfg;
  logic trigger_wtr;
  logic [CNT_W-1:0] cnt_fifo_adc, n_trans;
  logic [127:0] s_i_data, s_q_data, m_i_data, m_q_data;
  logic s_i_valid, s_i_ready, s_q_valid, s_q_ready;
  logic m_i_valid, m_i_last, m_i_ready, m_q_valid, m_q_last, m_q_ready, busy;
  int checks = 0, failures = 0, cycle = 0, adc_beat = 0;
  int stored[$];
  bit stored_last[$];
  int exp_trans = 0;

  rx_packet_gen dut (.clk(clk), .rst(rst), .cfg(cfg), .trigger_wtr(trigger_wtr),
    .cnt_fifo_adc(cnt_fifo_adc),
    .s_i_data(s_i_data), .s_i_valid(s_i_valid), .s_i_ready(s_i_ready),
    .s_q_data(s_q_data), .s_q_valid(s_q_valid), .s_q_ready(s_q_ready),
    .m_i_data(m_i_data), .m_i_valid(m_i_valid), .m_i_last(m_i_last), .m_i_ready(m_i_ready),
    .m_q_data(m_q_data), .m_q_valid(m_q_valid), .m_q_last(m_q_last), .m_q_ready(m_q_ready),
    .n_trans(n_trans), .busy(busy));

  always #2.6 clk = ~clk;

  // ADC: a new beat every clock, beat number in every word.
  assign s_i_valid = 1'b1;
  assign s_q_valid = 1'b1;
  assign s_i_data  = {4{32'(adc_beat)}};
  assign s_q_data  = ~{4{32'(adc_beat)}};
  assign m_i_ready = stored.size() < FDEPTH;
  assign m_q_ready = m_i_ready;
  assign cnt_fifo_adc = CNT_W'(stored.size());

  always @(posedge clk) begin
    cycle <= cycle + 1;
    adc_beat <= adc_beat + 1;
    if (!rst && m_i_valid && m_i_ready) begin
      checks++;
      if (m_q_data != ~m_i_data || !m_q_valid || m_q_last != m_i_last) begin
        failures++;
        $display("I/Q mismatch at beat %0d", adc_beat);
      end
      stored.push_back(int'(m_i_data[31:0]));
      stored_last.push_back(m_i_last);
    end
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Raise a trigger for one clock; return the ADC beat number at the edge.
  task automatic fire(bit wtr, output int beat_at_edge);
    @(negedge clk);
    if (wtr) trigger_wtr = 1; else cfg.trigger_soft = 1;
    beat_at_edge = adc_beat;
    @(negedge clk);
    trigger_wtr = 0;
    cfg.trigger_soft = 0;
  endtask

  // Fire and check a transfer of L beats (or none if expect_xfer = 0).
  task automatic xfer(bit wtr, int L, bit expect_xfer, string what);
    int b0, n0;
    n0 = stored.size();
    fire(wtr, b0);
    repeat (L + 6) @(negedge clk);
    checks++;
    if (!expect_xfer) begin
      if (stored.size() != n0) begin
        failures++;
        $display("%s: %0d beats stored, none expected", what, stored.size() - n0);
      end
    end else begin
      exp_trans++;
      if (stored.size() - n0 != L) begin
        failures++;
        $display("%s: %0d beats stored, expected %0d", what, stored.size() - n0, L);
      end else begin
        for (int k = 0; k < L; k++) begin
          checks++;
          if (stored[n0 + k] != b0 + 1 + k || stored_last[n0 + k] != (k == L - 1)) begin
            failures++;
            $display("%s: beat %0d is ADC beat %0d last=%0b, expected %0d", what, k,
                     stored[n0 + k], stored_last[n0 + k], b0 + 1 + k);
            break;
          end
        end
      end
    end
    checks++;
    if (n_trans != CNT_W'(exp_trans)) begin
      failures++;
      $display("%s: N_trans=%0d expected %0d", what, n_trans, exp_trans);
    end
  endtask

  initial begin
    cfg = '0;
    trigger_wtr = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (3) @(negedge clk);

    // software-triggered reception
    cfg.mode = 0; cfg.transfer_size = 16'd5; cfg.transfer_enable = 0;
    xfer(0, 5, 0, "STR with e_rx=0");
    cfg.transfer_enable = 1;
    xfer(0, 5, 1, "STR");
    xfer(1, 5, 0, "WTR trigger in mode 0");
    cfg.transfer_size = 16'd12;
    xfer(0, 12, 1, "STR L=12");

    // reset of N_trans
    @(negedge clk) cfg.cnt_reset = 1;
    @(negedge clk) cfg.cnt_reset = 0;
    exp_trans = 0;
    checks++;
    if (n_trans != 0) begin failures++; $display("r_trans did not clear N_trans"); end

    // waveform-triggered reception into an empty buffer
    stored.delete(); stored_last.delete();
    cfg.mode = 1; cfg.transfer_size = 16'd10;
    cfg.threshold = 16'(10 * (FDEPTH / 10));
    for (int k = 0; k < FDEPTH / 10; k++) xfer(1, 10, 1, "WTR buffer");
    xfer(1, 10, 0, "WTR above threshold");
    xfer(0, 10, 0, "soft trigger above threshold in mode 1");
    // the PS drains the buffer, after which a soft trigger in mode 1 works
    stored.delete(); stored_last.delete();
    xfer(0, 10, 1, "soft trigger in mode 1");
    // mode 0 ignores the threshold
    cfg.mode = 0;
    cfg.threshold = 16'd0;
    xfer(0, 10, 1, "STR ignores threshold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
