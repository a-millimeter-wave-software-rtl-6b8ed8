// tb_sdr_pl_top: end-to-end testbench of the SDR logic at full size.
//
// The testbench plays the processing system (register writes over AXI4-Lite,
// DMA into the DAC-FIFOs and out of the ADC-FIFOs) and the radio: the DAC
// output is looped back to the ADC through a model channel with a sample
// delay that changes between bursts (so the trigger lands on different
// lags), a complex gain and noise. Every top parameter is at its default
// (FIFOs of 2^15 beats, 8 samples per beat).
//
//  1. Software-triggered reception (mode 0): one capture of 64 beats; its
//     beats must be 64 consecutive ADC beats, tlast on the last.
//  2. Beam sweep in waveform-triggered reception (mode 1): 64 bursts, one per
//     transmit beam, each the trigger waveform followed by a 1580-sample
//     payload that carries the burst index, are sent with t_tx at irregular
//     times; L_rx = ceil(1580/8) = 198. Every eighth burst arrives below the
//     noise and must not be stored. The index decoded from each stored
//     capture must name the bursts that were sent above the noise, in order. The expected
//     captures are worked out from the recorded ADC samples with the
//     reference detector (tb_ref_pkg) and the paper's timing rule; N_trans,
//     N_detect and the read-back data must match them.
//  3. A software trigger in mode 1 and a reset of N_trans.
//  4. Stop threshold: L_rx = 10000, D_th = 30000; four bursts give three
//     captures and one refused trigger; D_adc,I ends at 30000 and the DMA
//     reads 30000 beats with tlast every 10000.
//  5. ADC-FIFO flush: two software-triggered captures are dropped by holding
//     the flush input; D_adc,I must return to 0 with no beat offered to the
//     DMA, and a capture made afterwards must read back intact.
// Each mechanism is counted and a failure is counted for one that never
// happened.
`timescale 1ns/1ps
module tb_sdr_pl_top;
  import sdr_pkg::*;
  import tb_ref_pkg::*;

  localparam int PAYLOAD = 1580;          // samples pulled per transfer in the experiment
  localparam int K       = 64;            // bursts in the sweep phase (one per TX beam)

  logic clk_pl = 0, clk_ps = 0, rst_pl = 1, rst_ps = 1;
  always #2.604 clk_pl = ~clk_pl;         // 192 MHz
  always #5.0   clk_ps = ~clk_ps;         // 100 MHz

  logic [7:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  logic [127:0] tx_i_data, tx_q_data, rx_i_data, rx_q_data, dac_i, dac_q, adc_i, adc_q;
  logic tx_i_valid, tx_i_ready, tx_q_valid, tx_q_ready;
  logic rx_i_last, rx_i_valid, rx_i_ready, rx_q_last, rx_q_valid, rx_q_ready;
  logic dac_i_valid, dac_q_valid, adc_i_ready, adc_q_ready;
  logic trigger_wtr, tx_busy, rx_busy;
  logic flush = 0;

  sdr_pl_top dut (
    .clk_pl, .rst_pl, .clk_ps, .rst_ps,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .dma_tx_i_data(tx_i_data), .dma_tx_i_valid(tx_i_valid), .dma_tx_i_ready(tx_i_ready),
    .dma_tx_q_data(tx_q_data), .dma_tx_q_valid(tx_q_valid), .dma_tx_q_ready(tx_q_ready),
    .dma_rx_i_data(rx_i_data), .dma_rx_i_last(rx_i_last), .dma_rx_i_valid(rx_i_valid), .dma_rx_i_ready(rx_i_ready),
    .dma_rx_q_data(rx_q_data), .dma_rx_q_last(rx_q_last), .dma_rx_q_valid(rx_q_valid), .dma_rx_q_ready(rx_q_ready),
    .adc_fifo_flush(flush),
    .dac_i_data(dac_i), .dac_i_valid(dac_i_valid), .dac_i_ready(1'b1),
    .dac_q_data(dac_q), .dac_q_valid(dac_q_valid), .dac_q_ready(1'b1),
    .adc_i_data(adc_i), .adc_i_valid(1'b1), .adc_i_ready(adc_i_ready),
    .adc_q_data(adc_q), .adc_q_valid(1'b1), .adc_q_ready(adc_q_ready),
    .trigger_wtr(trigger_wtr), .tx_busy(tx_busy), .rx_busy(rx_busy));

  int checks = 0, failures = 0;
  // mechanism counters
  int n_str = 0, n_wtr = 0, n_soft_mode1 = 0, n_refused = 0, n_cnt_reset = 0,
      n_mode_switch = 0, n_tx = 0, n_last = 0, n_flush = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- channel model: DAC -> air -> ADC ----------------
  int air_i[$], air_q[$];
  logic [127:0] adc_log_i[$], adc_log_q[$];
  int cyc = 0;                 // index of the ADC beat being presented
  int gain_a = 3, gain_b = -2; // (a + jb) / 4
  int noise = 150;

  always @(posedge clk_pl) begin
    for (int j = 0; j < 8; j++) begin
      if (dac_i_valid) begin
        air_i.push_back(int'($signed(dac_i[16*j +: 16])));
        air_q.push_back(int'($signed(dac_q[16*j +: 16])));
      end else begin
        air_i.push_back(0);
        air_q.push_back(0);
      end
    end
  end

  function automatic int clip(int v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction

  always @(negedge clk_pl) begin
    if (rst_pl) begin
      adc_i <= '0;
      adc_q <= '0;
    end else begin
      logic [127:0] bi, bq;
      for (int j = 0; j < 8; j++) begin
        int ti, tq, vi, vq;
        ti = air_i.size() > 0 ? air_i.pop_front() : 0;
        tq = air_q.size() > 0 ? air_q.pop_front() : 0;
        vi = clip((gain_a * ti - gain_b * tq) / 4 + $signed($urandom_range(2 * noise)) - noise);
        vq = clip((gain_b * ti + gain_a * tq) / 4 + $signed($urandom_range(2 * noise)) - noise);
        bi[16*j +: 16] = 16'(vi);
        bq[16*j +: 16] = 16'(vq);
        smp_i.push_back(vi);
        smp_q.push_back(vq);
      end
      adc_i <= bi;
      adc_q <= bq;
      adc_log_i.push_back(bi);
      adc_log_q.push_back(bq);
      cyc <= cyc + 1;
    end
  end

  // Shift the channel delay by d samples while the air is quiet.
  task automatic add_delay(int d);
    @(posedge clk_pl);
    for (int k = 0; k < d; k++) begin air_i.push_front(0); air_q.push_front(0); end
  endtask

  // ---------------- AXI4-Lite master ----------------
  task automatic axi_write(logic [7:0] a, logic [31:0] d);
    @(negedge clk_ps);
    awaddr = a; wdata = d; wstrb = 4'hF; awvalid = 1; wvalid = 1;
    #0.5;
    while (!(awready && wready)) begin @(negedge clk_ps); #0.5; end
    @(negedge clk_ps);
    awvalid = 0; wvalid = 0; bready = 1;
    while (!bvalid) @(negedge clk_ps);
    @(negedge clk_ps) bready = 0;
  endtask

  // The status registers are snapshots that cross from the logic clock;
  // wait until any change made so far has reached the bus side.
  task automatic axi_read(logic [7:0] a, output logic [31:0] d);
    repeat (12) @(posedge clk_ps);
    @(negedge clk_ps);
    araddr = a; arvalid = 1;
    #0.5;
    while (!arready) begin @(negedge clk_ps); #0.5; end
    @(negedge clk_ps) arvalid = 0;
    while (!rvalid) @(negedge clk_ps);
    d = rdata;
    rready = 1;
    @(negedge clk_ps) rready = 0;
  endtask

  localparam logic [7:0] A_LTX = 8'h00, A_TTX = 8'h04, A_LRX = 8'h08, A_ERX = 8'h0C,
                         A_RTR = 8'h10, A_DTH = 8'h14, A_TRX = 8'h18, A_MRX = 8'h1C,
                         A_NTR = 8'h20, A_DAI = 8'h24, A_DAQ = 8'h28, A_DDI = 8'h2C,
                         A_DDQ = 8'h30, A_NDT = 8'h34;

  // ---------------- DMA ----------------
  // Send S samples: pad to a multiple of 8, DMA into the DAC-FIFOs, set
  // L_tx = ceil(S/8) and give t_tx a rising edge.
  task automatic transmit(int si[$], int sq[$]);
    int nb;
    while (si.size() % 8 != 0) begin si.push_back(0); sq.push_back(0); end
    nb = si.size() / 8;
    for (int b = 0; b < nb; b++) begin
      bit di, dq;
      @(negedge clk_ps);
      for (int j = 0; j < 8; j++) begin
        tx_i_data[16*j +: 16] = 16'(si[8*b + j]);
        tx_q_data[16*j +: 16] = 16'(sq[8*b + j]);
      end
      tx_i_valid = 1; tx_q_valid = 1;
      di = 0; dq = 0;
      while (!(di && dq)) begin
        @(posedge clk_ps);
        if (tx_i_valid && tx_i_ready) di = 1;
        if (tx_q_valid && tx_q_ready) dq = 1;
        @(negedge clk_ps);
        if (di) tx_i_valid = 0;
        if (dq) tx_q_valid = 0;
      end
    end
    @(negedge clk_ps) begin tx_i_valid = 0; tx_q_valid = 0; end
    repeat (4) @(posedge clk_pl);
    begin
      logic [31:0] d;
      axi_read(A_DDI, d);
      check(d == 32'(nb), "DAC-FIFO count after DMA");
    end
    axi_write(A_LTX, 32'(nb));
    axi_write(A_TTX, 1);
    axi_write(A_TTX, 0);
    wait (tx_busy);
    wait (!tx_busy);
    n_tx++;
  endtask

  // Read n beats from the ADC-FIFOs.
  logic [127:0] got_i[$], got_q[$];
  bit got_last[$];
  task automatic dma_read(int n);
    int idle;
    got_i.delete(); got_q.delete(); got_last.delete();
    @(negedge clk_ps);
    rx_i_ready = 1; rx_q_ready = 1;
    idle = 0;
    while (got_i.size() < n && idle < 100) begin
      idle = (rx_i_valid && rx_q_valid) ? 0 : idle + 1;
      @(posedge clk_ps);
      if (rx_i_valid && rx_q_valid) begin
        got_i.push_back(rx_i_data);
        got_q.push_back(rx_q_data);
        got_last.push_back(rx_i_last);
        if (rx_i_last != rx_q_last) check(0, "I/Q tlast differ");
      end
      @(negedge clk_ps);
    end
    rx_i_ready = 0; rx_q_ready = 0;
    check(got_i.size() == n, $sformatf("DMA read %0d of %0d beats", got_i.size(), n));
    while (got_i.size() < n) begin got_i.push_back('0); got_q.push_back('0); got_last.push_back(0); end
  endtask

  // A burst: trigger waveform (512 samples, amplitude amp) then payload.
  task automatic burst(int idx, int amp);
    int si[$], sq[$];
    for (int m = 0; m < 512; m++) begin
      si.push_back(sync_chip(m, amp));
      sq.push_back(0);
    end
    // payload: ramp (50), zeros (25), tone (50), zeros (25), then data that
    // carries the burst index
    for (int m = 0; m < PAYLOAD; m++) begin
      int vi, vq;
      if (m < 50)       begin vi = 100 * m; vq = 0; end
      else if (m < 75)  begin vi = 0; vq = 0; end
      else if (m < 125) begin vi = (m % 4 < 2) ? 3000 : -3000; vq = (m % 4 == 1 || m % 4 == 2) ? 3000 : -3000; end
      else if (m < 150) begin vi = 0; vq = 0; end
      else              begin vi = 64 * idx + (m % 64); vq = -vi; end
      si.push_back(vi);
      sq.push_back(vq);
    end
    transmit(si, sq);
  endtask

  initial begin
    #6ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    int cyc_a0, lrx, n_xfer_exp, n_det_exp;
    int exp_start[$];
    int sent_ok[$];
    init();
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    awaddr = 0; araddr = 0; wdata = 0; wstrb = 0;
    tx_i_valid = 0; tx_q_valid = 0; tx_i_data = 0; tx_q_data = 0;
    rx_i_ready = 0; rx_q_ready = 0;
    repeat (6) @(posedge clk_ps);
    @(negedge clk_pl) begin rst_pl = 0; rst_ps = 0; end
    repeat (20) @(posedge clk_pl);

    // ---- 1. software-triggered reception ----
    axi_write(A_MRX, 0);
    axi_write(A_LRX, 64);
    axi_write(A_ERX, 1);
    axi_write(A_TRX, 1);
    axi_write(A_TRX, 0);
    repeat (100) @(posedge clk_pl);
    axi_read(A_NTR, d);
    check(d == 1, "N_trans after STR");
    dma_read(64);
    begin
      int s;
      s = -1;
      for (int t = 0; t < adc_log_i.size(); t++) if (adc_log_i[t] == got_i[0]) s = t;
      check(s >= 0, "STR first beat found in the ADC record");
      for (int k = 0; k < 64; k++) begin
        if (s < 0) break;
        check(got_i[k] == adc_log_i[s + k] && got_q[k] == adc_log_q[s + k] &&
              got_last[k] == (k == 63), "STR beat content/tlast");
      end
      n_str++;
      n_last++;
    end

    // ---- 2. waveform-triggered sweep ----
    lrx = (PAYLOAD + 7) / 8;
    axi_write(A_RTR, 1);
    axi_write(A_RTR, 0);
    n_cnt_reset++;
    axi_write(A_LRX, 32'(lrx));
    axi_write(A_DTH, 32'(lrx * (FIFO_DEPTH / lrx)));
    axi_write(A_MRX, 1);
    n_mode_switch++;
    axi_read(A_NDT, d);
    n_det_exp = int'(d);
    cyc_a0 = cyc + 10;
    repeat (10) @(posedge clk_pl);
    for (int k = 0; k < K; k++) begin
      add_delay(1 + $urandom_range(12));
      // every eighth announcement arrives far below the noise (a beam that
      // misses the receiver): it must not be stored
      if (k % 8 == 5) burst(k, 40);
      else begin
        burst(k, 6000 + 500 * (k % 8));
        sent_ok.push_back(k);
      end
      repeat ($urandom_range(300) + 50) @(posedge clk_pl);
    end
    repeat (300) @(posedge clk_pl);
    // expected captures from the reference detector: trigger seen 8 clocks
    // after the beat that closes the window, capture starts one clock later
    begin
      bit prev, trig, idle_ok, d0, d0_prev;
      int busy_until;
      prev = 0; busy_until = -1; d0_prev = 0;
      for (int c = cyc_a0; c < cyc - 2; c++) begin
        trig = 0;
        for (int l = 0; l < 8; l++) trig |= tb_ref_pkg::det(c - 8, l);
        d0 = tb_ref_pkg::det(c - 8, 0);
        if (d0 && !d0_prev) n_det_exp++;
        d0_prev = d0;
        if (trig && !prev && c > busy_until) begin
          exp_start.push_back(c + 1);
          busy_until = c + lrx;
        end
        prev = trig;
      end
    end
    n_xfer_exp = exp_start.size();
    check(n_xfer_exp == sent_ok.size(), $sformatf("reference sees %0d bursts, %0d were sent above the noise",
                                                 n_xfer_exp, sent_ok.size()));
    axi_read(A_NTR, d);
    check(d == 32'(n_xfer_exp), $sformatf("N_trans %0d, expected %0d", d, n_xfer_exp));
    axi_read(A_DAI, d);
    check(d == 32'(n_xfer_exp * lrx), "D_adc,I after sweep");
    axi_read(A_DAQ, d);
    check(d == 32'(n_xfer_exp * lrx), "D_adc,Q after sweep");
    axi_read(A_NDT, d);
    check(d == 32'(n_det_exp), $sformatf("N_detect %0d, expected %0d", d, n_det_exp));
    dma_read(n_xfer_exp * lrx);
    for (int x = 0; x < n_xfer_exp; x++) begin
      int bad;
      bad = 0;
      for (int k = 0; k < lrx; k++) begin
        int t;
        t = exp_start[x] + k;
        if (got_i[x * lrx + k] != adc_log_i[t] || got_q[x * lrx + k] != adc_log_q[t] ||
            got_last[x * lrx + k] != (k == lrx - 1)) bad++;
      end
      check(bad == 0, $sformatf("transfer %0d: %0d beats differ from the expected capture", x, bad));
      // Decode the announcement index the way the receiving computer would:
      // beats 30..149 of a capture lie in the data part of the payload.
      // There the burst sent I = -Q = 64*idx + m%64, which the channel gain
      // (3 - 2j)/4 turns into Q = -5/4 of that; averaging 960 samples removes
      // the noise.
      begin
        longint acc;
        int idx;
        acc = 0;
        for (int k = 30; k < 150; k++)
          for (int j = 0; j < 8; j++) acc += longint'($signed(got_q[x * lrx + k][16*j +: 16]));
        idx = $rtoi((-real'(acc) / 1200.0 - 31.5) / 64.0 + 0.5);
        check(x < sent_ok.size() && idx == sent_ok[x],
              $sformatf("transfer %0d decodes to burst %0d", x, idx));
      end
      if (bad == 0) n_wtr++;
      n_last++;
    end

    // ---- 3. soft trigger in mode 1, counter reset ----
    axi_read(A_NTR, d);
    axi_write(A_TRX, 1);
    axi_write(A_TRX, 0);
    repeat (lrx + 20) @(posedge clk_pl);
    begin
      logic [31:0] d2, c2;
      axi_read(A_NTR, d2);
      axi_read(A_DAI, c2);
      check(d2 == d + 1 && c2 == 32'(lrx), "soft trigger in mode 1");
      if (d2 == d + 1) n_soft_mode1++;
    end
    axi_write(A_RTR, 1);
    axi_read(A_NTR, d);
    check(d == 0, "N_trans cleared by r_trans");
    axi_write(A_RTR, 0);
    n_cnt_reset++;
    dma_read(lrx);
    check(got_last[lrx - 1] && !got_last[0], "tlast of the soft-triggered transfer");

    // ---- 4. stop threshold ----
    begin
      int before_refused;
      axi_write(A_LRX, 10000);
      axi_write(A_DTH, 30000);
      before_refused = n_refused;
      for (int k = 0; k < 4; k++) begin
        add_delay(3);
        burst(20 + k, 8000);
        repeat (10100 - PAYLOAD / 8) @(posedge clk_pl);
      end
      axi_read(A_NTR, d);
      check(d == 3, $sformatf("N_trans at threshold %0d, expected 3", d));
      axi_read(A_DAI, d);
      check(d == 30000, $sformatf("D_adc,I at threshold %0d, expected 30000", d));
      check(n_refused > before_refused, "a trigger was refused at the threshold");
      dma_read(30000);
      begin
        int nl;
        nl = 0;
        foreach (got_last[k]) if (got_last[k]) begin
          nl++;
          check(k % 10000 == 9999, "tlast position");
        end
        check(nl == 3, "three tlast in the buffered data");
        n_last++;
      end
    end

    axi_write(A_MRX, 0);
    n_mode_switch++;

    // ---- 5. ADC-FIFO flush ----
    axi_write(A_LRX, 64);
    for (int k = 0; k < 2; k++) begin
      axi_write(A_TRX, 1);
      axi_write(A_TRX, 0);
      repeat (80) @(posedge clk_pl);
    end
    axi_read(A_DAI, d);
    check(d == 128, $sformatf("D_adc,I before flush %0d, expected 128", d));
    begin
      int seen, n;
      seen = 0;
      n = 0;
      @(negedge clk_ps) flush = 1;
      do begin
        @(posedge clk_ps);
        if (rx_i_valid || rx_q_valid) seen++;
        n++;
        if (n % 50 == 0) axi_read(A_DAI, d);
      end while (d != 0 && n < 2000);
      @(negedge clk_ps) flush = 0;
      check(d == 0, "D_adc,I back to 0 after flush");
      check(seen == 0, "no beat offered to the DMA during flush");
      axi_read(A_DAQ, d);
      check(d == 0, "D_adc,Q back to 0 after flush");
      if (d == 0 && seen == 0) n_flush++;
    end
    axi_write(A_TRX, 1);
    axi_write(A_TRX, 0);
    repeat (80) @(posedge clk_pl);
    dma_read(64);
    begin
      int s;
      s = -1;
      for (int t = adc_log_i.size() - 1; t >= 0; t--) if (adc_log_i[t] == got_i[0]) begin s = t; break; end
      check(s >= 0 && s + 63 < adc_log_i.size(), "capture after flush found in the ADC record");
      for (int k = 0; k < 64; k++) begin
        if (s < 0 || s + 63 >= adc_log_i.size()) break;
        check(got_i[k] == adc_log_i[s + k] && got_q[k] == adc_log_q[s + k] &&
              got_last[k] == (k == 63), "capture after flush: beat content/tlast");
      end
      n_str++;
    end

    // ---- mechanisms ----
    check(n_str > 0, "software-triggered reception happened");
    check(n_wtr > 0, "waveform-triggered reception happened");
    check(n_soft_mode1 > 0, "soft trigger in waveform mode happened");
    check(n_refused > 0, "stop threshold refused a trigger");
    check(n_cnt_reset > 0, "transfer counter reset happened");
    check(n_mode_switch > 1, "mode switches happened");
    check(n_tx > 0, "transmissions happened");
    check(n_flush > 0, "ADC-FIFO flush happened");
    $display("mechanisms: STR=%0d WTR=%0d soft-in-WTR=%0d refused=%0d cnt-reset=%0d mode-switch=%0d tx=%0d last=%0d flush=%0d",
             n_str, n_wtr, n_soft_mode1, n_refused, n_cnt_reset, n_mode_switch, n_tx, n_last, n_flush);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // A detector trigger that finds the receive path idle but starts nothing:
  // the buffer was at its stop threshold.
  logic trig_q = 0;
  int   refuse_wait = -1;
  always @(posedge clk_pl) begin
    trig_q <= trigger_wtr;
    if (trigger_wtr && !trig_q && !rx_busy) refuse_wait <= 2;
    else if (refuse_wait > 0) refuse_wait <= refuse_wait - 1;
    else if (refuse_wait == 0) begin
      if (!rx_busy) n_refused++;
      refuse_wait <= -1;
    end
  end

endmodule
