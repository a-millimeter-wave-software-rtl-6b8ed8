// iq_fifo: dual-clock AXI-Stream FIFO used as DAC-FIFO and ADC-FIFO.
//
// The SDR keeps one FIFO per channel (I and Q) on each side: the DAC-FIFOs
// are filled by DMA from the processing system and drained by the transmit
// packet generator; the ADC-FIFOs are filled by the receive packet generator
// and drained by DMA. The paper sets depth 2^15 and width 16R = 128 bits, so a
// FIFO holds 2^18 samples; those are the defaults here. The paper uses a
// vendor FIFO; this is a plain replacement with the same role: a dual-port
// array, binary read/write pointers one bit wider than the address, and
// Gray-coded copies of them passed through two-flop synchronisers.
//
// Interface: write side (s_*) in wr_clk, read side (m_*) in rd_clk, both
// AXI-Stream valid/ready, each beat carrying DATA_W bits plus tlast.
// wr_count is the occupancy seen from the write side and rd_count from the
// read side; each lags the other side by the two synchroniser cycles, so
// wr_count never under-states the fill level (what the receive packet
// generator needs for its stop threshold). The read data is the array word at
// the read pointer (first-word fall-through, combinational read). Resets are
// synchronous and active high, one per clock domain, and must overlap.
module iq_fifo #(
  parameter int unsigned DATA_W = 128,
  parameter int unsigned ADDR_W = 15            // depth = 2^ADDR_W beats
) (
  input  logic              wr_clk,
  input  logic              wr_rst,
  input  logic [DATA_W-1:0] s_data,
  input  logic              s_last,
  input  logic              s_valid,
  output logic              s_ready,
  output logic [ADDR_W:0]   wr_count,

  input  logic              rd_clk,
  input  logic              rd_rst,
  output logic [DATA_W-1:0] m_data,
  output logic              m_last,
  output logic              m_valid,
  input  logic              m_ready,
  output logic [ADDR_W:0]   rd_count
);

  localparam int unsigned DEPTH = 1 << ADDR_W;

  logic [DATA_W:0] mem [DEPTH];

  logic [ADDR_W:0] wptr, rptr;              // binary pointers
  logic [ADDR_W:0] wgray, rgray;            // their Gray codes (registered)
  logic [ADDR_W:0] wgray_s1, wgray_s2;      // write pointer in rd_clk
  logic [ADDR_W:0] rgray_s1, rgray_s2;      // read pointer in wr_clk
  logic [ADDR_W:0] rptr_w, wptr_r;          // synchronised binary pointers

  function automatic logic [ADDR_W:0] bin2gray(input logic [ADDR_W:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [ADDR_W:0] gray2bin(input logic [ADDR_W:0] g);
    logic [ADDR_W:0] b;
    b[ADDR_W] = g[ADDR_W];
    for (int i = int'(ADDR_W) - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // ---------------- write side ----------------
  assign rptr_w   = gray2bin(rgray_s2);
  assign wr_count = wptr - rptr_w;
  assign s_ready  = (wr_count != (ADDR_W+1)'(DEPTH)) && !wr_rst;

  always_ff @(posedge wr_clk) begin
    if (s_valid && s_ready) mem[wptr[ADDR_W-1:0]] <= {s_last, s_data};
  end

  always_ff @(posedge wr_clk) begin
    if (wr_rst) begin
      wptr     <= '0;
      wgray    <= '0;
      rgray_s1 <= '0;
      rgray_s2 <= '0;
    end else begin
      if (s_valid && s_ready) begin
        wptr  <= wptr + 1'b1;
        wgray <= bin2gray(wptr + 1'b1);
      end
      rgray_s1 <= rgray;
      rgray_s2 <= rgray_s1;
    end
  end

  // ---------------- read side ----------------
  assign wptr_r   = gray2bin(wgray_s2);
  assign rd_count = wptr_r - rptr;
  assign m_valid  = (rd_count != '0) && !rd_rst;
  assign {m_last, m_data} = mem[rptr[ADDR_W-1:0]];

  always_ff @(posedge rd_clk) begin
    if (rd_rst) begin
      rptr     <= '0;
      rgray    <= '0;
      wgray_s1 <= '0;
      wgray_s2 <= '0;
    end else begin
      if (m_valid && m_ready) begin
        rptr  <= rptr + 1'b1;
        rgray <= bin2gray(rptr + 1'b1);
      end
      wgray_s1 <= wgray;
      wgray_s2 <= wgray_s1;
    end
  end

  // A FIFO never reports more words than it can hold.
  a_wr_count_range: assert property (@(posedge wr_clk) disable iff (wr_rst)
                                     wr_count <= (ADDR_W+1)'(DEPTH));
  a_rd_count_range: assert property (@(posedge rd_clk) disable iff (rd_rst)
                                     rd_count <= (ADDR_W+1)'(DEPTH));

endmodule
