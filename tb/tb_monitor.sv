// tb_monitor: self-checking testbench of the AXI4-Lite register block.
//
// Writes random values to the eight control registers (address and data
// channels offered in either order, responses accepted late), reads them
// back, checks the fields that reach tx_cfg / rx_cfg, checks byte strobes,
// reads the six status registers against random status inputs, and checks
// that writes to read-only addresses change nothing and that unmapped
// addresses read as zero.
//
// The bus side runs at 100 MHz and the logic side at 192 MHz. Every write
// response must come within 20 bus clocks, and once it has come the new
// value must already be on tx_cfg / rx_cfg (checked field by field right
// after each write); before the write the field must still hold its reset
// value. Status inputs change on the logic clock; a read issued 12 bus
// clocks later must return the new value.
`timescale 1ns/1ps
module tb_monitor;
  import sdr_pkg::*;

  logic clk = 0, rst = 1, clk_bus = 0, rst_bus = 1;
  logic [7:0] awaddr, araddr;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0] wstrb;
  logic [1:0] bresp, rresp;
  tx_cfg_t tx_cfg;
  rx_cfg_t rx_cfg;
  status_t status;
  int checks = 0, failures = 0;

  monitor dut (.clk_bus(clk_bus), .rst_bus(rst_bus), .clk(clk), .rst(rst),
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .tx_cfg(tx_cfg), .rx_cfg(rx_cfg), .status(status));

  always #5     clk_bus = ~clk_bus;   // 100 MHz
  always #2.604 clk = ~clk;           // 192 MHz

  // the configuration field a register address drives, as seen by the logic
  function automatic logic [31:0] cfg_field(int r);
    case (r)
      0: return 32'(tx_cfg.transfer_size);
      1: return 32'(tx_cfg.trigger_soft);
      2: return 32'(rx_cfg.transfer_size);
      3: return 32'(rx_cfg.transfer_enable);
      4: return 32'(rx_cfg.cnt_reset);
      5: return 32'(rx_cfg.threshold);
      6: return 32'(rx_cfg.trigger_soft);
      default: return 32'(rx_cfg.mode);
    endcase
  endfunction

  function automatic logic [31:0] field_of(int r, logic [31:0] v);
    return (r == 0 || r == 2 || r == 5) ? 32'(v[15:0]) : 32'(v[0]);
  endfunction

  task automatic axi_write(logic [7:0] a, logic [31:0] d, logic [3:0] s = 4'hF);
    int lag, n;
    lag = $urandom_range(2);
    @(negedge clk_bus);
    awaddr = a; wdata = d; wstrb = s;
    awvalid = 1;
    if (lag == 0) wvalid = 1;
    repeat (lag) @(negedge clk_bus);
    wvalid = 1;
    #1;
    while (!(awready && wready)) begin @(negedge clk_bus); #1; end
    @(negedge clk_bus);
    awvalid = 0; wvalid = 0;
    repeat ($urandom_range(3)) @(negedge clk_bus);
    n = 0;
    while (!bvalid && n < 20) begin @(negedge clk_bus); n++; end
    checks++;
    if (!bvalid || bresp != 2'b00) begin failures++; $display("no write response"); end
    bready = 1;
    @(negedge clk_bus) bready = 0;
  endtask

  task automatic axi_read(logic [7:0] a, output logic [31:0] d);
    @(negedge clk_bus);
    araddr = a; arvalid = 1;
    #1;
    while (!arready) begin @(negedge clk_bus); #1; end
    @(negedge clk_bus) arvalid = 0;
    repeat ($urandom_range(3)) @(negedge clk_bus);
    while (!rvalid) @(negedge clk_bus);
    d = rdata;
    rready = 1;
    @(negedge clk_bus) rready = 0;
  endtask

  task automatic expect_read(logic [7:0] a, logic [31:0] e, string what);
    logic [31:0] d;
    axi_read(a, d);
    checks++;
    if (d !== e) begin failures++; $display("%s @%h: read %h expected %h", what, a, d, e); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] val [8];

  initial begin
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    awaddr = 0; araddr = 0; wdata = 0; wstrb = 0;
    status = '0;
    repeat (3) @(negedge clk_bus);
    rst = 0; rst_bus = 0;
    repeat (10) @(negedge clk_bus);
    for (int r = 0; r < 8; r++) begin
      val[r] = $urandom;
      if (field_of(r, val[r]) == 0) val[r][0] = 1'b1;   // make every change visible
      checks++;
      if (cfg_field(r) != 0) begin failures++; $display("field %0d not 0 before its write", r); end
      axi_write(8'(4 * r), val[r]);
      checks++;
      if (cfg_field(r) != field_of(r, val[r])) begin
        failures++;
        $display("field %0d is %h after the write response, expected %h", r, cfg_field(r), field_of(r, val[r]));
      end
    end
    for (int r = 0; r < 8; r++) expect_read(8'(4 * r), val[r], "control register");
    checks++;
    if (tx_cfg.transfer_size != val[0][15:0] || tx_cfg.trigger_soft != val[1][0] ||
        rx_cfg.transfer_size != val[2][15:0] || rx_cfg.transfer_enable != val[3][0] ||
        rx_cfg.cnt_reset != val[4][0] || rx_cfg.threshold != val[5][15:0] ||
        rx_cfg.trigger_soft != val[6][0] || rx_cfg.mode != val[7][0]) begin
      failures++;
      $display("configuration fields do not match the registers");
    end
    // byte strobes: change only byte 1 of L_rx
    axi_write(8'h08, 32'hA5A5_A5A5, 4'b0010);
    val[2][15:8] = 8'hA5;
    expect_read(8'h08, val[2], "strobed write");
    // status registers
    for (int k = 0; k < 4; k++) begin
      @(negedge clk);
      status.n_trans        = 16'($urandom);
      status.cnt_fifo_adc_i = 16'($urandom);
      status.cnt_fifo_adc_q = 16'($urandom);
      status.cnt_fifo_dac_i = 16'($urandom);
      status.cnt_fifo_dac_q = 16'($urandom);
      status.n_detect       = $urandom;
      repeat (12) @(posedge clk_bus);
      expect_read(8'h20, 32'(status.n_trans), "N_trans");
      expect_read(8'h24, 32'(status.cnt_fifo_adc_i), "D_adc,I");
      expect_read(8'h28, 32'(status.cnt_fifo_adc_q), "D_adc,Q");
      expect_read(8'h2C, 32'(status.cnt_fifo_dac_i), "D_dac,I");
      expect_read(8'h30, 32'(status.cnt_fifo_dac_q), "D_dac,Q");
      expect_read(8'h34, status.n_detect, "N_detect");
    end
    // read-only and unmapped addresses
    axi_write(8'h20, 32'hFFFF_FFFF);
    expect_read(8'h20, 32'(status.n_trans), "write to read-only");
    axi_write(8'h80, 32'h1234_5678);
    expect_read(8'h80, 32'h0, "unmapped");
    for (int r = 0; r < 8; r++) expect_read(8'(4 * r), val[r], "control register after other writes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
