// monitor: register interface (IP_monitor) between the processing system and
// the packet generators, the detector and the FIFOs.
//
// An AXI4-Lite slave with 32-bit registers. The processing system writes the
// transmit and receive control registers and reads back the transfer count,
// the four FIFO counts and the detection count; the "parameter mapping" fans
// the registers out as the tx_cfg / rx_cfg structs and gathers status_t.
// The register set is the one in the paper's figure; the addresses, the
// field widths and the AXI4-Lite handshake details are this design's:
//
//   0x00 L_tx      transfer size, transmit (beats)          RW
//   0x04 t_tx      software trigger, transmit (bit 0)       RW
//   0x08 L_rx      transfer size, receive (beats)           RW
//   0x0C e_rx      transfer enable, receive (bit 0)         RW
//   0x10 r_trans   transfer-counter reset (bit 0)           RW
//   0x14 D_th      stop threshold on D_adc,I (beats)        RW
//   0x18 t_rx,s    software trigger, receive (bit 0)        RW
//   0x1C m_rx      mode: 0 software, 1 waveform trigger     RW
//   0x20 N_trans   completed receptions                     RO
//   0x24 D_adc,I   ADC-FIFO I count                         RO
//   0x28 D_adc,Q   ADC-FIFO Q count                         RO
//   0x2C D_dac,I   DAC-FIFO I count                         RO
//   0x30 D_dac,Q   DAC-FIFO Q count                         RO
//   0x34 N_detect  detections of PPD 0                      RO
//
// Clocks: the bus side (AXI4-Lite, the registers themselves) runs on
// clk_bus, the processing-system clock (100 MHz in the original), and the
// parameter mapping runs on clk, the 192 MHz logic clock, as drawn in the
// original block diagram. Two toggle handshakes cross between them:
//  * configuration, bus -> logic: an accepted write toggles cfg_req; the
//    logic side, seeing the synchronised toggle, copies all eight registers
//    into its own configuration flops and toggles cfg_ack back. The bus side
//    takes no new write until the ack has returned, so the registers are
//    stable while they are copied, and the write response (BVALID) is given
//    only then: when software sees the response, the logic already uses the
//    new value.
//  * status, logic -> bus: the logic side copies status_t into a holding
//    register and toggles st_req; the bus side copies the holding register
//    and toggles st_ack; then the logic side takes the next snapshot. A read
//    of a status register returns a snapshot a few clocks old (at most about
//    3 clk_bus + 3 clk periods).
// Each toggle passes through two flip-flops. Both resets must be applied
// together.
//
// Timing (bus side): a write is taken when address and data are both valid,
// no response is pending and no configuration copy is in flight; BVALID
// rises about 2 clk_bus + 2 clk cycles later. A read is answered one
// clk_bus cycle after ARVALID/ARREADY. Byte strobes are honoured; writes to
// read-only or unmapped addresses are ignored with an OKAY response,
// unmapped reads return 0. The handshake crossings and the addresses are
// this design's; the register set and the two clock rates are the
// original's.
module monitor
  import sdr_pkg::*;
#(
  parameter int unsigned ADDR_W = 8
) (
  input  logic              clk_bus,     // AXI side
  input  logic              rst_bus,
  input  logic              clk,         // parameter mapping, logic clock
  input  logic              rst,

  input  logic [ADDR_W-1:0] s_axi_awaddr,
  input  logic              s_axi_awvalid,
  output logic              s_axi_awready,
  input  logic [31:0]       s_axi_wdata,
  input  logic [3:0]        s_axi_wstrb,
  input  logic              s_axi_wvalid,
  output logic              s_axi_wready,
  output logic [1:0]        s_axi_bresp,
  output logic              s_axi_bvalid,
  input  logic              s_axi_bready,
  input  logic [ADDR_W-1:0] s_axi_araddr,
  input  logic              s_axi_arvalid,
  output logic              s_axi_arready,
  output logic [31:0]       s_axi_rdata,
  output logic [1:0]        s_axi_rresp,
  output logic              s_axi_rvalid,
  input  logic              s_axi_rready,

  output tx_cfg_t           tx_cfg,
  output rx_cfg_t           rx_cfg,
  input  status_t           status
);

  localparam int unsigned NRW = 8;          // read/write registers 0x00..0x1C

  // ---------------- bus side (clk_bus) ----------------
  logic [31:0] regs [NRW];
  logic        wr_go, rd_go;
  logic [ADDR_W-3:0] wr_idx, rd_idx;
  logic        cfg_req, cfg_busy;
  logic [1:0]  cfg_ack_sync;
  logic        st_ack;
  logic [1:0]  st_req_sync;
  status_t     st_bus;
  // logic side
  logic        cfg_ack;
  logic [1:0]  cfg_req_sync;
  logic        st_req;
  logic [1:0]  st_ack_sync;
  status_t     st_hold;

  assign wr_idx = s_axi_awaddr[ADDR_W-1:2];
  assign rd_idx = s_axi_araddr[ADDR_W-1:2];

  assign wr_go         = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid && !cfg_busy;
  assign s_axi_awready = wr_go;
  assign s_axi_wready  = wr_go;
  assign s_axi_bresp   = 2'b00;
  assign rd_go         = s_axi_arvalid && !s_axi_rvalid;
  assign s_axi_arready = rd_go;
  assign s_axi_rresp   = 2'b00;

  always_ff @(posedge clk_bus) begin
    if (rst_bus) begin
      for (int r = 0; r < int'(NRW); r++) regs[r] <= '0;
      s_axi_bvalid <= 1'b0;
      cfg_req      <= 1'b0;
      cfg_busy     <= 1'b0;
      cfg_ack_sync <= '0;
    end else begin
      cfg_ack_sync <= {cfg_ack_sync[0], cfg_ack};
      if (wr_go) begin
        cfg_busy <= 1'b1;
        cfg_req  <= ~cfg_req;
        if (wr_idx < (ADDR_W-2)'(NRW))
          for (int b = 0; b < 4; b++)
            if (s_axi_wstrb[b]) regs[wr_idx[2:0]][8*b +: 8] <= s_axi_wdata[8*b +: 8];
      end else if (cfg_busy && cfg_ack_sync[1] == cfg_req) begin
        cfg_busy     <= 1'b0;
        s_axi_bvalid <= 1'b1;
      end else if (s_axi_bready) begin
        s_axi_bvalid <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk_bus) begin
    if (rst_bus) begin
      st_req_sync <= '0;
      st_ack      <= 1'b0;
      st_bus      <= '0;
    end else begin
      st_req_sync <= {st_req_sync[0], st_req};
      if (st_req_sync[1] != st_ack) begin
        st_bus <= st_hold;
        st_ack <= st_req_sync[1];
      end
    end
  end

  always_ff @(posedge clk_bus) begin
    if (rst_bus) begin
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
    end else begin
      if (rd_go) begin
        s_axi_rvalid <= 1'b1;
        unique case (rd_idx)
          'h0, 'h1, 'h2, 'h3,
          'h4, 'h5, 'h6, 'h7: s_axi_rdata <= regs[rd_idx[2:0]];
          'h8:     s_axi_rdata <= 32'(st_bus.n_trans);
          'h9:     s_axi_rdata <= 32'(st_bus.cnt_fifo_adc_i);
          'hA:     s_axi_rdata <= 32'(st_bus.cnt_fifo_adc_q);
          'hB:     s_axi_rdata <= 32'(st_bus.cnt_fifo_dac_i);
          'hC:     s_axi_rdata <= 32'(st_bus.cnt_fifo_dac_q);
          'hD:     s_axi_rdata <= st_bus.n_detect;
          default: s_axi_rdata <= '0;
        endcase
      end else if (s_axi_rready) begin
        s_axi_rvalid <= 1'b0;
      end
    end
  end

  // ---------------- logic side (clk): parameter mapping ----------------

  always_ff @(posedge clk) begin
    if (rst) begin
      cfg_req_sync <= '0;
      cfg_ack      <= 1'b0;
      tx_cfg       <= '0;
      rx_cfg       <= '0;
    end else begin
      cfg_req_sync <= {cfg_req_sync[0], cfg_req};
      if (cfg_req_sync[1] != cfg_ack) begin
        // the bus side holds regs still until cfg_ack comes back
        tx_cfg.transfer_size   <= regs[0][CNT_W-1:0];
        tx_cfg.trigger_soft    <= regs[1][0];
        rx_cfg.transfer_size   <= regs[2][CNT_W-1:0];
        rx_cfg.transfer_enable <= regs[3][0];
        rx_cfg.cnt_reset       <= regs[4][0];
        rx_cfg.threshold       <= regs[5][CNT_W-1:0];
        rx_cfg.trigger_soft    <= regs[6][0];
        rx_cfg.mode            <= regs[7][0];
        cfg_ack                <= cfg_req_sync[1];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st_ack_sync <= '0;
      st_req      <= 1'b0;
      st_hold     <= '0;
    end else begin
      st_ack_sync <= {st_ack_sync[0], st_ack};
      if (st_ack_sync[1] == st_req) begin
        st_hold <= status;
        st_req  <= ~st_req;
      end
    end
  end

  // AXI responses stay valid until accepted.
  a_bvalid_hold: assert property (@(posedge clk_bus) disable iff (rst_bus)
                                  s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid);
  a_rvalid_hold: assert property (@(posedge clk_bus) disable iff (rst_bus)
                                  s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata));

endmodule
