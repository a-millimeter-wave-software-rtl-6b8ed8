// sdr_pl_top: programmable-logic part of the millimetre-wave SDR.
//
// Transmit path: DMA (processing-system clock) -> DAC-FIFO I/Q -> tx_packet_gen
// -> DAC streams of the data converter (logic clock). Receive path: ADC streams
// -> rx_packet_gen -> ADC-FIFO I/Q -> DMA. The detector watches the ADC
// streams all the time and raises t_rx,w when it finds the trigger waveform;
// in waveform-triggered mode that starts a reception of L_rx beats, and as
// long as the ADC-FIFO count is under D_th further detections store further
// transfers back to back. The monitor exposes all control and status
// registers on one AXI4-Lite port. The data converters, the DMA engines and
// the processor are outside this module; their streams are its ports.
//
// ADC-FIFO flush: while adc_fifo_flush (clk_ps) is high, both ADC-FIFOs are
// read at one beat per clk_ps cycle and the beats are thrown away; the DMA
// side sees no valid beat. Holding it until D_adc,I reads 0 empties the
// buffer at any time without resetting across the clock boundary (the paper
// only says the buffer can be flushed at any time; draining instead of a
// reset is this design's choice and keeps the Gray pointers consistent).
//
// Clocks: clk_pl is the 192 MHz logic clock (8 samples per beat at
// 1.536 GS/s); clk_ps is the DMA side of the FIFOs and the AXI4-Lite side of
// the monitor (100 MHz in the paper). The FIFOs and the monitor are the only
// blocks with two clocks. Resets are synchronous, active high, one per
// clock, and must overlap. Every beat is 8 samples of 16 bits per channel,
// sample 0 in the low bits and oldest. The wiring follows the paper's block
// diagram; port names are this design's.
module sdr_pl_top
  import sdr_pkg::*;
#(
  parameter int unsigned FIFO_AW = 15,               // FIFO depth 2^15 beats
  parameter logic [31:0] GOLAY   = GOLAY_DEFAULT
) (
  input  logic              clk_pl,
  input  logic              rst_pl,
  input  logic              clk_ps,
  input  logic              rst_ps,

  // AXI4-Lite register port (clk_ps)
  input  logic [7:0]        s_axi_awaddr,
  input  logic              s_axi_awvalid,
  output logic              s_axi_awready,
  input  logic [31:0]       s_axi_wdata,
  input  logic [3:0]        s_axi_wstrb,
  input  logic              s_axi_wvalid,
  output logic              s_axi_wready,
  output logic [1:0]        s_axi_bresp,
  output logic              s_axi_bvalid,
  input  logic              s_axi_bready,
  input  logic [7:0]        s_axi_araddr,
  input  logic              s_axi_arvalid,
  output logic              s_axi_arready,
  output logic [31:0]       s_axi_rdata,
  output logic [1:0]        s_axi_rresp,
  output logic              s_axi_rvalid,
  input  logic              s_axi_rready,

  // DMA -> DAC-FIFOs (clk_ps)
  input  logic [BEAT_W-1:0] dma_tx_i_data,
  input  logic              dma_tx_i_valid,
  output logic              dma_tx_i_ready,
  input  logic [BEAT_W-1:0] dma_tx_q_data,
  input  logic              dma_tx_q_valid,
  output logic              dma_tx_q_ready,

  // ADC-FIFOs -> DMA (clk_ps)
  output logic [BEAT_W-1:0] dma_rx_i_data,
  output logic              dma_rx_i_last,
  output logic              dma_rx_i_valid,
  input  logic              dma_rx_i_ready,
  output logic [BEAT_W-1:0] dma_rx_q_data,
  output logic              dma_rx_q_last,
  output logic              dma_rx_q_valid,
  input  logic              dma_rx_q_ready,
  input  logic              adc_fifo_flush,   // clk_ps: drain and drop the ADC-FIFOs

  // Data converter, DAC streams (clk_pl)
  output logic [BEAT_W-1:0] dac_i_data,
  output logic              dac_i_valid,
  input  logic              dac_i_ready,
  output logic [BEAT_W-1:0] dac_q_data,
  output logic              dac_q_valid,
  input  logic              dac_q_ready,

  // Data converter, ADC streams (clk_pl)
  input  logic [BEAT_W-1:0] adc_i_data,
  input  logic              adc_i_valid,
  output logic              adc_i_ready,
  input  logic [BEAT_W-1:0] adc_q_data,
  input  logic              adc_q_valid,
  output logic              adc_q_ready,

  // Observation
  output logic              trigger_wtr,
  output logic              tx_busy,
  output logic              rx_busy
);

  tx_cfg_t tx_cfg;
  rx_cfg_t rx_cfg;
  status_t status;

  // ---------------- transmit ----------------
  logic [BEAT_W-1:0] txf_i_data, txf_q_data;
  logic txf_i_valid, txf_i_ready, txf_q_valid, txf_q_ready;
  logic txf_i_last_unused, txf_q_last_unused;
  logic [FIFO_AW:0] dac_i_wcnt_unused, dac_q_wcnt_unused, dac_i_cnt, dac_q_cnt;

  iq_fifo #(.DATA_W(BEAT_W), .ADDR_W(FIFO_AW)) u_dac_fifo_i (
    .wr_clk(clk_ps), .wr_rst(rst_ps),
    .s_data(dma_tx_i_data), .s_last(1'b0), .s_valid(dma_tx_i_valid), .s_ready(dma_tx_i_ready),
    .wr_count(dac_i_wcnt_unused),
    .rd_clk(clk_pl), .rd_rst(rst_pl),
    .m_data(txf_i_data), .m_last(txf_i_last_unused), .m_valid(txf_i_valid), .m_ready(txf_i_ready),
    .rd_count(dac_i_cnt));

  iq_fifo #(.DATA_W(BEAT_W), .ADDR_W(FIFO_AW)) u_dac_fifo_q (
    .wr_clk(clk_ps), .wr_rst(rst_ps),
    .s_data(dma_tx_q_data), .s_last(1'b0), .s_valid(dma_tx_q_valid), .s_ready(dma_tx_q_ready),
    .wr_count(dac_q_wcnt_unused),
    .rd_clk(clk_pl), .rd_rst(rst_pl),
    .m_data(txf_q_data), .m_last(txf_q_last_unused), .m_valid(txf_q_valid), .m_ready(txf_q_ready),
    .rd_count(dac_q_cnt));

  tx_packet_gen u_tx (
    .clk(clk_pl), .rst(rst_pl), .cfg(tx_cfg),
    .s_i_data(txf_i_data), .s_i_valid(txf_i_valid), .s_i_ready(txf_i_ready),
    .s_q_data(txf_q_data), .s_q_valid(txf_q_valid), .s_q_ready(txf_q_ready),
    .m_i_data(dac_i_data), .m_i_valid(dac_i_valid), .m_i_ready(dac_i_ready),
    .m_q_data(dac_q_data), .m_q_valid(dac_q_valid), .m_q_ready(dac_q_ready),
    .busy(tx_busy));

  // ---------------- receive ----------------
  logic [BEAT_W-1:0] rxf_i_data, rxf_q_data;
  logic rxf_i_valid, rxf_i_ready, rxf_i_last, rxf_q_valid, rxf_q_ready, rxf_q_last;
  logic [FIFO_AW:0] adc_i_cnt, adc_q_cnt, adc_i_rcnt_unused, adc_q_rcnt_unused;
  logic adcf_i_valid, adcf_q_valid;
  logic [R-1:0]     ppd_det_unused;
  logic [31:0]      n_detect;
  logic [CNT_W-1:0] n_trans;

  detector #(.GOLAY(GOLAY)) u_det (
    .clk(clk_pl), .rst(rst_pl),
    .adc_i(adc_i_data), .adc_q(adc_q_data),
    .trigger_wtr(trigger_wtr), .ppd_det(ppd_det_unused), .n_detect(n_detect));

  rx_packet_gen u_rx (
    .clk(clk_pl), .rst(rst_pl), .cfg(rx_cfg),
    .trigger_wtr(trigger_wtr), .cnt_fifo_adc(CNT_W'(adc_i_cnt)),
    .s_i_data(adc_i_data), .s_i_valid(adc_i_valid), .s_i_ready(adc_i_ready),
    .s_q_data(adc_q_data), .s_q_valid(adc_q_valid), .s_q_ready(adc_q_ready),
    .m_i_data(rxf_i_data), .m_i_valid(rxf_i_valid), .m_i_last(rxf_i_last), .m_i_ready(rxf_i_ready),
    .m_q_data(rxf_q_data), .m_q_valid(rxf_q_valid), .m_q_last(rxf_q_last), .m_q_ready(rxf_q_ready),
    .n_trans(n_trans), .busy(rx_busy));

  iq_fifo #(.DATA_W(BEAT_W), .ADDR_W(FIFO_AW)) u_adc_fifo_i (
    .wr_clk(clk_pl), .wr_rst(rst_pl),
    .s_data(rxf_i_data), .s_last(rxf_i_last), .s_valid(rxf_i_valid), .s_ready(rxf_i_ready),
    .wr_count(adc_i_cnt),
    .rd_clk(clk_ps), .rd_rst(rst_ps),
    .m_data(dma_rx_i_data), .m_last(dma_rx_i_last), .m_valid(adcf_i_valid),
    .m_ready(dma_rx_i_ready | adc_fifo_flush),
    .rd_count(adc_i_rcnt_unused));

  iq_fifo #(.DATA_W(BEAT_W), .ADDR_W(FIFO_AW)) u_adc_fifo_q (
    .wr_clk(clk_pl), .wr_rst(rst_pl),
    .s_data(rxf_q_data), .s_last(rxf_q_last), .s_valid(rxf_q_valid), .s_ready(rxf_q_ready),
    .wr_count(adc_q_cnt),
    .rd_clk(clk_ps), .rd_rst(rst_ps),
    .m_data(dma_rx_q_data), .m_last(dma_rx_q_last), .m_valid(adcf_q_valid),
    .m_ready(dma_rx_q_ready | adc_fifo_flush),
    .rd_count(adc_q_rcnt_unused));

  assign dma_rx_i_valid = adcf_i_valid & ~adc_fifo_flush;
  assign dma_rx_q_valid = adcf_q_valid & ~adc_fifo_flush;

  // ---------------- registers ----------------
  assign status.n_trans        = n_trans;
  assign status.cnt_fifo_adc_i = CNT_W'(adc_i_cnt);
  assign status.cnt_fifo_adc_q = CNT_W'(adc_q_cnt);
  assign status.cnt_fifo_dac_i = CNT_W'(dac_i_cnt);
  assign status.cnt_fifo_dac_q = CNT_W'(dac_q_cnt);
  assign status.n_detect       = n_detect;

  monitor #(.ADDR_W(8)) u_mon (
    .clk_bus(clk_ps), .rst_bus(rst_ps), .clk(clk_pl), .rst(rst_pl),
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready,
    .s_axi_wdata, .s_axi_wstrb, .s_axi_wvalid, .s_axi_wready,
    .s_axi_bresp, .s_axi_bvalid, .s_axi_bready,
    .s_axi_araddr, .s_axi_arvalid, .s_axi_arready,
    .s_axi_rdata, .s_axi_rresp, .s_axi_rvalid, .s_axi_rready,
    .tx_cfg(tx_cfg), .rx_cfg(rx_cfg), .status(status));

endmodule
