// rx_packet_gen: receive packet generator (IP_packetGenRX).
//
// Sits between the ADC side of the data converter block and the two
// ADC-FIFOs (I and Q). While idle it blocks both streams. A transfer passes
// exactly L_rx beats (R = 8 samples per channel per beat) into the FIFOs,
// marks the last one with tlast and then increments the transfer counter
// N_trans that the processing system polls.
//
// Trigger selection follows the paper's block diagram: a multiplexer driven
// by the mode flag m_rx chooses the software trigger t_rx,s (m_rx = 0,
// software-triggered reception) or the OR of t_rx,s and the detector's
// trigger t_rx,w (m_rx = 1, waveform-triggered reception). A transfer starts
// on a rising edge of the selected trigger if the transfer enable e_rx is
// set and, in waveform-triggered mode, the ADC-FIFO count D_adc,I is below
// the stop threshold D_th; this keeps room for a whole transfer when the
// processing system sets D_th = L_rx * floor(D_FIFO / L_rx). Several
// transfers can so be buffered back to back (the discontinuous-transmission
// buffer). r_trans clears N_trans while it is 1.
//
// Interface: cfg (rx_cfg_t) from the monitor; s_* from the ADC, m_* to the
// FIFOs; the enable line is ANDed into the valid towards the FIFO and the
// ready towards the ADC, as in the diagram. Timing: enable rises in the
// cycle after the trigger edge is seen, so the first beat stored is the one
// arriving one cycle after the trigger. Beats are counted on the I stream;
// I and Q move in lockstep. Choices of this design: the edge detector, that
// the threshold is checked only in waveform-triggered mode (the paper states
// it for that mode), that N_trans also counts software-triggered transfers,
// that e_rx only gates the start of a transfer, and the register widths.
module rx_packet_gen
  import sdr_pkg::*;
#(
  parameter int unsigned DATA_W = BEAT_W
) (
  input  logic              clk,
  input  logic              rst,
  input  rx_cfg_t           cfg,
  input  logic              trigger_wtr,     // t_rx,w from the detector
  input  logic [CNT_W-1:0]  cnt_fifo_adc,    // D_adc,I

  input  logic [DATA_W-1:0] s_i_data,
  input  logic              s_i_valid,
  output logic              s_i_ready,
  input  logic [DATA_W-1:0] s_q_data,
  input  logic              s_q_valid,
  output logic              s_q_ready,

  output logic [DATA_W-1:0] m_i_data,
  output logic              m_i_valid,
  output logic              m_i_last,
  input  logic              m_i_ready,
  output logic [DATA_W-1:0] m_q_data,
  output logic              m_q_valid,
  output logic              m_q_last,
  input  logic              m_q_ready,

  output logic [CNT_W-1:0]  n_trans,         // N_trans
  output logic              busy             // the enable line
);

  typedef enum logic {RX_IDLE, RX_XFER} rx_state_t;

  rx_state_t        state;
  logic             trig, trig_q;
  logic             room;
  logic [CNT_W-1:0] beats;
  logic             enable, last_beat, beat_done;

  // Trigger multiplexer: input 0 is t_rx,s, input 1 is t_rx,s OR t_rx,w.
  assign trig   = cfg.mode ? (cfg.trigger_soft | trigger_wtr) : cfg.trigger_soft;
  assign room   = !cfg.mode || (cnt_fifo_adc < cfg.threshold);

  assign enable = (state == RX_XFER);
  assign busy   = enable;

  assign m_i_data  = s_i_data;
  assign m_q_data  = s_q_data;
  assign m_i_valid = s_i_valid & enable;
  assign m_q_valid = s_q_valid & enable;
  assign s_i_ready = m_i_ready & enable;
  assign s_q_ready = m_q_ready & enable;

  assign last_beat = enable && (beats == cfg.transfer_size - 1'b1);
  assign m_i_last  = last_beat;
  assign m_q_last  = last_beat;
  assign beat_done = m_i_valid && m_i_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= RX_IDLE;
      trig_q  <= 1'b0;
      beats   <= '0;
      n_trans <= '0;
    end else begin
      trig_q <= trig;
      unique case (state)
        RX_IDLE: begin
          beats <= '0;
          if (trig && !trig_q && cfg.transfer_enable && room && cfg.transfer_size != '0)
            state <= RX_XFER;
        end
        RX_XFER: begin
          if (beat_done) begin
            beats <= beats + 1'b1;
            if (last_beat) state <= RX_IDLE;
          end
        end
        default: state <= RX_IDLE;
      endcase
      if (cfg.cnt_reset)                   n_trans <= '0;
      else if (beat_done && last_beat)     n_trans <= n_trans + 1'b1;
    end
  end

  // tlast only accompanies a valid beat.
  a_last_valid: assert property (@(posedge clk) disable iff (rst) m_i_last |-> enable);

endmodule
