// tx_packet_gen: transmit packet generator (IP_packetGenTX).
//
// Sits between the two DAC-FIFOs (I and Q) and the DAC side of the data
// converter block. While idle it blocks both streams; a rising edge of the
// software trigger t_tx opens them for exactly L_tx beats of R = 8 samples
// per channel, after which they are blocked again. As in the paper's block
// diagram, one "enable" line is ANDed into the data, the valid going to the
// DAC and the ready going back to the FIFO; a small FSM drives enable.
//
// Interface: cfg carries L_tx (transfer_size) and t_tx (trigger_soft), both
// in this clock domain. s_* are the FIFO side, m_* the DAC side, AXI-Stream
// valid/ready. Timing: enable rises one cycle after the cycle in which t_tx
// is first seen high, and falls in the cycle after the L_tx-th beat (counted
// on the I stream; the I and Q streams are assumed to move in lockstep, as
// both FIFOs are written before the trigger). A trigger during a transfer
// is ignored; L_tx = 0 sends nothing. The counter width and the edge
// detector are this design's choices; the gating and the trigger rule follow
// the paper.
module tx_packet_gen
  import sdr_pkg::*;
#(
  parameter int unsigned DATA_W = BEAT_W
) (
  input  logic              clk,
  input  logic              rst,
  input  tx_cfg_t           cfg,

  input  logic [DATA_W-1:0] s_i_data,
  input  logic              s_i_valid,
  output logic              s_i_ready,
  input  logic [DATA_W-1:0] s_q_data,
  input  logic              s_q_valid,
  output logic              s_q_ready,

  output logic [DATA_W-1:0] m_i_data,
  output logic              m_i_valid,
  input  logic              m_i_ready,
  output logic [DATA_W-1:0] m_q_data,
  output logic              m_q_valid,
  input  logic              m_q_ready,

  output logic              busy            // the enable line
);

  typedef enum logic {TX_IDLE, TX_SEND} tx_state_t;

  tx_state_t        state;
  logic             trig_q;
  logic [CNT_W-1:0] beats;
  logic             enable;
  logic             beat_done;

  assign enable = (state == TX_SEND);
  assign busy   = enable;

  // Gating from the block diagram.
  assign m_i_data  = s_i_data & {DATA_W{enable}};
  assign m_q_data  = s_q_data & {DATA_W{enable}};
  assign m_i_valid = s_i_valid & enable;
  assign m_q_valid = s_q_valid & enable;
  assign s_i_ready = m_i_ready & enable;
  assign s_q_ready = m_q_ready & enable;

  assign beat_done = m_i_valid && m_i_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      state  <= TX_IDLE;
      trig_q <= 1'b0;
      beats  <= '0;
    end else begin
      trig_q <= cfg.trigger_soft;
      unique case (state)
        TX_IDLE: begin
          beats <= '0;
          if (cfg.trigger_soft && !trig_q && cfg.transfer_size != '0) state <= TX_SEND;
        end
        TX_SEND: begin
          if (beat_done) begin
            beats <= beats + 1'b1;
            if (beats == cfg.transfer_size - 1'b1) state <= TX_IDLE;
          end
        end
        default: state <= TX_IDLE;
      endcase
    end
  end

  // Nothing passes while idle.
  a_no_beat_idle: assert property (@(posedge clk) disable iff (rst)
                                   !enable |-> !m_i_valid && !m_q_valid && !s_i_ready && !s_q_ready);

endmodule
