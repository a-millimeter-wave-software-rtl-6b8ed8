// ppd: parallel preamble detector, one lag of the trigger-waveform search.
//
// The trigger waveform is a length-32 binary Golay sequence g repeated four
// times, BPSK-mapped and upsampled by N_up = 4. The detector correlates the
// received samples with the rectangular-pulse approximation
// b = 2[g31 g31 g31 g31 g30 ... g0 g0 g0 g0] - 1 (128 taps of +-1, so every
// product is an addition or a subtraction) and normalises by the window
// energy:  m_n = |rho_n|^2 / (||b||^2 * ||x_n||^2),  rho_n = sum_k b_k x_{n-k},
// ||x_n||^2 = sum_{k=0}^{127} |x_{n-k}|^2, with ||b||^2 = 128. A hit is
// m_n > 1/4, computed exactly as |rho_n|^2 > 32 ||x_n||^2. The PPD declares
// a detection when it sees a hit in four clocks 16 clocks (128 samples)
// apart, i.e. on each of the four repetitions of g.
//
// Each clock brings R = 8 samples, so rho_n is evaluated once per clock as
// the sum of 8 sub-filters: column j gets x_{n-j} and the taps b_{8k+j},
// k = 0..15. Each column is a transposed-form FIR with a register after every
// adder (b_{8*15+j} at the far end, b_j next to the output, then one more
// register), followed by a three-stage pipelined adder tree, as in the
// paper's figure. The energy is a running sum over the last 16 beats.
// I and Q use the same real taps.
//
// Interface: x_i[j], x_q[j] = x_{n-j} of this PPD's lag, j = 0..7 (newest
// first), valid every clock (the converter never stalls). Timing: det is
// registered and rises 8 clocks after the beat that completes the fourth
// repetition. Fixed by the paper: 128 taps built from g, N_up = 4, R = 8,
// threshold 1/4, four hits 128 samples apart, transposed sub-filters.
// This design's choices: the normalisation by ||b||^2 (the paper writes the
// metric in forms that differ by constant factors; this one lies in [0, 1]),
// the pipeline depth after the adder tree and the widths (full precision, no
// rounding).
module ppd
  import sdr_pkg::*;
#(
  parameter logic [31:0] GOLAY   = GOLAY_DEFAULT,
  parameter int unsigned X_W     = SAMPLE_W,
  parameter int unsigned REPEATS = 4,      // hits needed
  parameter int unsigned SPACING = 16      // clocks between hits (128 samples / R)
) (
  input  logic                clk,
  input  logic                rst,
  input  logic signed [X_W-1:0] x_i [R],
  input  logic signed [X_W-1:0] x_q [R],
  output logic                hit,          // m_n > 1/4 this clock (registered)
  output logic                det           // detection (registered)
);

  localparam int unsigned TAPS  = 128;
  localparam int unsigned NSUB  = TAPS / R;          // 16 taps per sub-filter
  localparam int unsigned COL_W = X_W + 5;           // sum of 16 terms, +1 for negation
  localparam int unsigned RHO_W = COL_W + 3;         // sum of 8 columns
  localparam int unsigned SQ_W  = 2 * RHO_W + 1;     // |rho|^2
  localparam int unsigned E_W   = 2 * X_W + 1 + 7;   // 128 sample energies
  localparam int unsigned CMP_W = (SQ_W > E_W + 5) ? SQ_W : E_W + 5;
  localparam int unsigned HIST  = SPACING * (REPEATS - 1) + 1;

  // ---------------- transposed-form sub-filters ----------------
  logic signed [COL_W-1:0] sub_i [R][NSUB];
  logic signed [COL_W-1:0] sub_q [R][NSUB];

  for (genvar j = 0; j < R; j++) begin : g_col
    logic signed [COL_W-1:0] xi_e, xq_e;
    assign xi_e = COL_W'(x_i[j]);
    assign xq_e = COL_W'(x_q[j]);
    for (genvar k = 0; k < NSUB; k++) begin : g_tap
      localparam logic BK = coef_bit(GOLAY, R * k + j);
      logic signed [COL_W-1:0] pi, pq;
      assign pi = BK ? xi_e : -xi_e;
      assign pq = BK ? xq_e : -xq_e;
      always_ff @(posedge clk) begin
        if (rst) begin
          sub_i[j][k] <= '0;
          sub_q[j][k] <= '0;
        end else if (k == NSUB - 1) begin
          sub_i[j][k] <= pi;
          sub_q[j][k] <= pq;
        end else begin
          sub_i[j][k] <= sub_i[j][(k+1) % NSUB] + pi;
          sub_q[j][k] <= sub_q[j][(k+1) % NSUB] + pq;
        end
      end
    end
  end

  // ---------------- pipelined summation (3 stages) ----------------
  logic signed [RHO_W-1:0] s1_i [4], s1_q [4];
  logic signed [RHO_W-1:0] s2_i [2], s2_q [2];
  logic signed [RHO_W-1:0] rho_i, rho_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int a = 0; a < 4; a++) begin s1_i[a] <= '0; s1_q[a] <= '0; end
      for (int a = 0; a < 2; a++) begin s2_i[a] <= '0; s2_q[a] <= '0; end
      rho_i <= '0;
      rho_q <= '0;
    end else begin
      for (int a = 0; a < 4; a++) begin
        s1_i[a] <= RHO_W'(sub_i[2*a][0]) + RHO_W'(sub_i[2*a+1][0]);
        s1_q[a] <= RHO_W'(sub_q[2*a][0]) + RHO_W'(sub_q[2*a+1][0]);
      end
      for (int a = 0; a < 2; a++) begin
        s2_i[a] <= s1_i[2*a] + s1_i[2*a+1];
        s2_q[a] <= s1_q[2*a] + s1_q[2*a+1];
      end
      rho_i <= s2_i[0] + s2_i[1];
      rho_q <= s2_q[0] + s2_q[1];
    end
  end

  // ---------------- window energy ----------------
  logic [E_W-1:0] e_now;                // energy of this beat's 8 samples
  logic [E_W-1:0] e_dly [SPACING];      // e_dly[k] = e_now of k+1 clocks ago
  logic [E_W-1:0] e_sum;                // energy of the previous 16 beats
  logic [E_W-1:0] e_p1, e_p2, e_p3;     // aligned with the adder tree

  // Squares, computed at full width (sign-extended before multiplying).
  function automatic logic [2*X_W-1:0] sq_x(input logic signed [X_W-1:0] a);
    logic signed [2*X_W-1:0] ae;
    ae = (2*X_W)'(a);
    return unsigned'(ae * ae);
  endfunction

  function automatic logic [2*RHO_W-1:0] sq_rho(input logic signed [RHO_W-1:0] a);
    logic signed [2*RHO_W-1:0] ae;
    ae = (2*RHO_W)'(a);
    return unsigned'(ae * ae);
  endfunction

  always_comb begin
    e_now = '0;
    for (int j = 0; j < R; j++)
      e_now += E_W'(sq_x(x_i[j])) + E_W'(sq_x(x_q[j]));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < SPACING; k++) e_dly[k] <= '0;
      e_sum <= '0;
      e_p1  <= '0;
      e_p2  <= '0;
      e_p3  <= '0;
    end else begin
      e_dly[0] <= e_now;
      for (int k = 1; k < SPACING; k++) e_dly[k] <= e_dly[k-1];
      e_sum <= e_sum + e_now - e_dly[SPACING-1];
      e_p1  <= e_sum;
      e_p2  <= e_p1;
      e_p3  <= e_p2;
    end
  end

  // ---------------- metric and decision ----------------
  logic [SQ_W-1:0] mag2;
  logic [E_W-1:0]  e_p4;
  logic [HIST-1:0] hist;
  logic            all_hits;

  always_ff @(posedge clk) begin
    if (rst) begin
      mag2 <= '0;
      e_p4 <= '0;
      hit  <= 1'b0;
      hist <= '0;
      det  <= 1'b0;
    end else begin
      mag2 <= SQ_W'(sq_rho(rho_i)) + SQ_W'(sq_rho(rho_q));
      e_p4 <= e_p3;
      // m > 1/4  <=>  4|rho|^2 > 128 E  <=>  |rho|^2 > 32 E
      hit  <= CMP_W'(mag2) > (CMP_W'(e_p4) << 5);
      hist <= {hist[HIST-2:0], hit};
      det  <= all_hits;
    end
  end

  always_comb begin
    all_hits = 1'b1;
    for (int r = 0; r < int'(REPEATS); r++) all_hits &= hist[r * SPACING];
  end

endmodule
