// tb_iq_fifo: self-checking testbench of the dual-clock sample FIFO.
//
// Write clock 192 MHz, read clock 100 MHz, as on the ADC side. A depth of
// 16 beats keeps the run short. Phase 1 fills the FIFO until it refuses
// data and checks that it held exactly 16 beats and that both counts settle
// at 16. Phase 2 streams random data and tlast with random valid/ready on
// both sides and checks order and content against a queue. Phase 3 checks
// that both counts settle at the number of beats left inside.
`timescale 1ns/1ps
module tb_iq_fifo;

  localparam int AW = 4, DEPTH = 1 << AW, W = 128, NWORDS = 3000;

  logic wclk = 0, rclk = 0, wrst = 1, rrst = 1;
  logic [W-1:0] s_data, m_data;
  logic s_last, s_valid, s_ready, m_last, m_valid, m_ready;
  logic [AW:0] wr_count, rd_count;
  int checks = 0, failures = 0;
  logic [W:0] model[$];
  int nwritten = 0, nread = 0;
  bit stream_reads = 0;

  iq_fifo #(.DATA_W(W), .ADDR_W(AW)) dut (
    .wr_clk(wclk), .wr_rst(wrst), .s_data(s_data), .s_last(s_last), .s_valid(s_valid),
    .s_ready(s_ready), .wr_count(wr_count),
    .rd_clk(rclk), .rd_rst(rrst), .m_data(m_data), .m_last(m_last), .m_valid(m_valid),
    .m_ready(m_ready), .rd_count(rd_count));

  always #2.6 wclk = ~wclk;
  always #5.0 rclk = ~rclk;

  function automatic logic [W-1:0] rnd128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  // reader
  always @(posedge rclk) begin
    if (!rrst && m_valid && m_ready) begin
      logic [W:0] e;
      checks++;
      if (model.size() == 0) begin
        failures++;
        $display("read from an empty FIFO");
      end else begin
        e = model.pop_front();
        if ({m_last, m_data} !== e) begin
          failures++;
          if (failures < 10) $display("word %0d: got %h expected %h", nread, {m_last, m_data}, e);
        end
      end
      nread++;
    end
  end
  always @(negedge rclk) m_ready = stream_reads && ($urandom_range(3) != 0);

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_until(int n, bit random_valid);
    int done = 0;
    while (done < n) begin
      @(negedge wclk);
      s_valid = random_valid ? ($urandom_range(1) == 1) : 1'b1;
      s_data  = rnd128();
      s_last  = ($urandom_range(7) == 0);
      @(posedge wclk);
      if (s_valid && s_ready) begin
        model.push_back({s_last, s_data});
        done++;
        nwritten++;
      end else if (!random_valid && !s_ready) break;
    end
    @(negedge wclk) s_valid = 0;
  endtask

  initial begin
    s_valid = 0; s_data = '0; s_last = 0; m_ready = 0;
    repeat (5) @(posedge rclk);
    wrst = 0; rrst = 0;
    // phase 1: fill until full
    write_until(DEPTH + 8, 0);
    repeat (6) @(posedge rclk);
    checks++;
    if (nwritten != DEPTH || wr_count != (AW+1)'(DEPTH) || rd_count != (AW+1)'(DEPTH) || s_ready) begin
      failures++;
      $display("full: wrote %0d, wr_count %0d rd_count %0d s_ready %0b", nwritten, wr_count, rd_count, s_ready);
    end
    // phase 2: random streaming
    stream_reads = 1;
    write_until(NWORDS, 1);
    // phase 3: drain part way then stop
    while (model.size() > 5) @(posedge rclk);
    stream_reads = 0;
    repeat (8) @(posedge rclk);
    checks++;
    if (wr_count != (AW+1)'(model.size()) || rd_count != (AW+1)'(model.size())) begin
      failures++;
      $display("counts %0d/%0d with %0d words inside", wr_count, rd_count, model.size());
    end
    checks++;
    if (nread + model.size() != nwritten) failures++;
    $display("written=%0d read=%0d", nwritten, nread);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
