// tb_tx_packet_gen: self-checking testbench of the transmit packet generator.
//
// The FIFO side is a queue of numbered beats, the DAC side a sink. Checks:
// nothing moves before a trigger; after a rising edge of t_tx exactly L_tx
// beats reach the DAC in order, I and Q alike; with data always available
// they go out one per clock starting the clock after the edge (the full
// 1.536 GS/s rate); a trigger held high or re-raised during a transfer does
// not start another one; a later rising edge does; data is forced to zero
// while disabled; the transfer survives gaps in the FIFO valid.
`timescale 1ns/1ps
module tb_tx_packet_gen;
  import sdr_pkg::*;

  logic clk = 0, rst = 1;
  tx_cfg_t cfg;
  logic [127:0] s_i_data, s_q_data, m_i_data, m_q_data;
  logic s_i_valid, s_i_ready, s_q_valid, s_q_ready;
  logic m_i_valid, m_i_ready, m_q_valid, m_q_ready, busy;
  int checks = 0, failures = 0;
  int next_src = 0, next_exp = 0, sent = 0;
  bit gappy = 0;
  int first_cycle = -1, last_cycle = -1, cycle = 0;

  tx_packet_gen dut (.clk(clk), .rst(rst), .cfg(cfg),
    .s_i_data(s_i_data), .s_i_valid(s_i_valid), .s_i_ready(s_i_ready),
    .s_q_data(s_q_data), .s_q_valid(s_q_valid), .s_q_ready(s_q_ready),
    .m_i_data(m_i_data), .m_i_valid(m_i_valid), .m_i_ready(m_i_ready),
    .m_q_data(m_q_data), .m_q_valid(m_q_valid), .m_q_ready(m_q_ready),
    .busy(busy));

  always #2.6 clk = ~clk;

  // source: beat k carries k in I and ~k in Q
  always_comb begin
    s_i_data = {4{32'(next_src)}};
    s_q_data = ~{4{32'(next_src)}};
  end

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (!rst) begin
      if (!busy) begin
        checks++;
        if (m_i_valid || m_q_valid || s_i_ready || s_q_ready || m_i_data != '0 || m_q_data != '0) begin
          failures++;
          $display("cycle %0d: traffic while idle", cycle);
        end
      end
      if (m_i_valid && m_i_ready) begin
        checks++;
        if (m_i_data != {4{32'(next_exp)}} || m_q_data != ~{4{32'(next_exp)}} || !m_q_valid) begin
          failures++;
          $display("beat %0d wrong: %h", next_exp, m_i_data[31:0]);
        end
        if (first_cycle < 0) first_cycle = cycle;
        last_cycle = cycle;
        next_exp++;
        sent++;
      end
      if (s_i_valid && s_i_ready) next_src++;
    end
  end

  always @(negedge clk) begin
    s_i_valid = gappy ? ($urandom_range(2) != 0) : 1'b1;
    s_q_valid = s_i_valid;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pulse_and_wait(int L, int expect_n, int hold);
    int start_sent, t_edge;
    start_sent = sent;
    first_cycle = -1;
    @(negedge clk);
    cfg.transfer_size = 16'(L);
    cfg.trigger_soft = 1;
    t_edge = cycle;
    repeat (hold) @(negedge clk);
    cfg.trigger_soft = 0;
    repeat (L * 4 + 20) @(negedge clk);
    checks++;
    if (sent - start_sent != expect_n) begin
      failures++;
      $display("L=%0d: %0d beats sent, expected %0d", L, sent - start_sent, expect_n);
    end
    if (!gappy && expect_n > 0) begin
      checks++;
      if (first_cycle != t_edge + 1 || last_cycle != t_edge + expect_n) begin
        failures++;
        $display("L=%0d: beats in cycles %0d..%0d, trigger seen in %0d", L, first_cycle, last_cycle, t_edge);
      end
    end
  endtask

  initial begin
    cfg = '0;
    m_i_ready = 1; m_q_ready = 1;
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (sent != 0) failures++;
    pulse_and_wait(10, 10, 1);
    pulse_and_wait(37, 37, 60);       // trigger held high through and after the transfer
    pulse_and_wait(0, 0, 2);          // L = 0 sends nothing
    // re-trigger during a transfer is ignored
    begin
      int s0;
      s0 = sent;
      @(negedge clk) cfg.transfer_size = 16'd30; cfg.trigger_soft = 1;
      @(negedge clk) cfg.trigger_soft = 0;
      repeat (5) @(negedge clk);
      cfg.trigger_soft = 1;
      @(negedge clk) cfg.trigger_soft = 0;
      repeat (80) @(negedge clk);
      checks++;
      if (sent - s0 != 30) begin failures++; $display("re-trigger: %0d beats", sent - s0); end
    end
    gappy = 1;
    pulse_and_wait(50, 50, 1);        // FIFO valid with gaps
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
