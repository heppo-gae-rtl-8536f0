// heppo_pe -- GAE processing element with K-step lookahead.
//
// Elements of one trajectory arrive newest timestep first (t = T-1 down to 0),
// one per cycle at most, each carrying R_t, V_t, its index t, its trajectory
// and Done (set on t = 0, the last element of the vector). For each element the
// PE produces
//     delta_t = R_t + gamma * V_{t+1} - V_t
//     A_t     = C^K * A_{t+K} + sum_{i=0}^{K-1} C^i * delta_{t+i},   C = gamma*lambda
//     RTG_t   = V_t + A_t
// which is the sequential recurrence A_t = delta_t + C * A_{t+1} unrolled K
// times. Unrolling puts K registers in the feedback loop (fb[0..K-1]); the
// multiplier by C^K is placed in front of the last of them, so for K >= 2 it
// has a register on both sides and only the loop adder is left in the
// one-cycle recurrence (a synthesis tool may retime the registers further
// into the DSP); the feed-forward part keeps the last K-1 deltas and
// weights them with C^1..C^{K-1}. The structure (V register and x gamma, +R,
// -V, delta delay line with xC^i taps, adder tree, loop adder with K
// registers and xC^K, then +V for the rewards-to-go) follows the pipelined
// GAE unit with lookahead of the HEPPO-GAE paper; the paper builds K = 2.
//
// Trajectory boundaries: the element after a Done (or the first after reset)
// starts a new vector. It sees V_{t+1} = 0 and every lookahead term that would
// reach past the start of its vector is dropped, so vectors can follow each
// other back to back with no bubble. Treating the end of a stored vector as a
// terminal state (no bootstrap value) is this design's choice.
//
// Interface: in_valid/in (no back pressure; the caller keeps the pipeline
// from overflowing its consumer). Results come out on out_valid exactly LAT
// = 8 cycles after the input, one per cycle. gamma and c_pow[i] = C^i are
// static during a run.
module heppo_pe
  import heppo_pkg::*;
#(
  parameter int unsigned K = 2     // lookahead steps (paper: 2)
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  val_item_t in,
  input  fx_t       gamma,
  input  fx_t       c_pow [K+1],   // c_pow[i] = (gamma*lambda)^i, c_pow[0] unused
  output logic      out_valid,
  output fx_t       out_adv,
  output fx_t       out_rtg,
  output idx_t      out_idx,
  output trj_t      out_traj,
  output logic      out_done
);
  localparam int unsigned PW = $clog2(K + 1);
  typedef logic [PW-1:0] pos_t;

  // side band carried down the pipeline with each element
  typedef struct packed {
    fx_t  v;
    idx_t idx;
    trj_t traj;
    logic done;
    pos_t pos;    // elements of this vector already seen, saturated at K
  } side_t;

  // ---- stage 1: previous-value register, vector position -------------------
  logic  fresh;          // next element starts a new vector
  fx_t   v_prev;         // V_{t+1}
  pos_t  pos_prev;
  pos_t  pos_in;

  always_comb begin
    if (fresh)                  pos_in = '0;
    else if (pos_prev >= PW'(K)) pos_in = PW'(K);
    else                        pos_in = pos_prev + 1'b1;
  end

  logic  s1_valid;
  fx_t   s1_r, s1_vnext;
  side_t s1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fresh    <= 1'b1;
      v_prev   <= '0;
      pos_prev <= '0;
      s1_valid <= 1'b0;
      s1_r     <= '0;
      s1_vnext <= '0;
      s1       <= '0;
    end else begin
      s1_valid <= in_valid;
      if (in_valid) begin
        fresh    <= in.done;
        v_prev   <= in.v;
        pos_prev <= pos_in;
        s1_r     <= in.r;
        s1_vnext <= fresh ? '0 : v_prev;
        s1       <= '{v: in.v, idx: in.idx, traj: in.traj, done: in.done, pos: pos_in};
      end
    end
  end

  // ---- stage 2: x gamma ------------------------------------------------------
  logic  s2_valid;
  fx_t   s2_r, s2_gv;
  side_t s2;
  // ---- stage 3: + R -----------------------------------------------------------
  logic  s3_valid;
  fx_t   s3_sum;
  side_t s3;
  // ---- stage 4: - V  (delta_t) -------------------------------------------------
  logic  s4_valid;
  fx_t   s4_delta;
  side_t s4;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_valid <= 1'b0; s2_r <= '0; s2_gv <= '0; s2 <= '0;
      s3_valid <= 1'b0; s3_sum <= '0; s3 <= '0;
      s4_valid <= 1'b0; s4_delta <= '0; s4 <= '0;
    end else begin
      s2_valid <= s1_valid;
      s2_r     <= s1_r;
      s2_gv    <= fx_mul(gamma, s1_vnext);
      s2       <= s1;
      s3_valid <= s2_valid;
      s3_sum   <= s2_r + s2_gv;
      s3       <= s2;
      s4_valid <= s3_valid;
      s4_delta <= s3_sum - s3.v;
      s4       <= s3;
    end
  end

  // ---- stage 5: delta delay line and C^i taps ----------------------------------
  // dh[i] holds delta_{t+i} of the element now in stage 4 (dh[0] unused).
  fx_t   dh   [K];
  fx_t   prod [K];
  logic  s5_valid;
  fx_t   s5_p [K];
  side_t s5;

  always_comb begin
    prod[0] = s4_delta;
    for (int i = 1; i < K; i++)
      prod[i] = (int'(s4.pos) >= i) ? fx_mul(c_pow[i], dh[i]) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < K; i++) begin
        dh[i]   <= '0;
        s5_p[i] <= '0;
      end
      s5_valid <= 1'b0;
      s5       <= '0;
    end else begin
      s5_valid <= s4_valid;
      s5       <= s4;
      for (int i = 0; i < K; i++) s5_p[i] <= prod[i];
      if (s4_valid) begin
        if (K > 1) dh[1 % K] <= s4_delta;
        for (int i = 2; i < K; i++) dh[i] <= dh[i-1];
      end
    end
  end

  // ---- stage 6: feed-forward adder tree ------------------------------------------
  fx_t   ff_sum;
  always_comb begin
    ff_sum = '0;
    for (int i = 0; i < K; i++) ff_sum += s5_p[i];
  end

  logic  s6_valid;
  fx_t   s6_f;
  side_t s6;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s6_valid <= 1'b0; s6_f <= '0; s6 <= '0;
    end else begin
      s6_valid <= s5_valid;
      s6_f     <= ff_sum;
      s6       <= s5;
    end
  end

  // ---- stage 7: lookahead feedback loop ---------------------------------------------
  // The loop holds K registers. fb[j] (j < K-1) = A of the element j+1
  // positions later in time; the last one holds the loop product already
  // multiplied, fb[K-1] = C^K * A_{t+K}. The multiplier thus sits between
  // fb[K-2] and fb[K-1] and the adder alone closes the loop (for K >= 2).
  fx_t  fb [K];
  fx_t  fb_last_in;
  fx_t  loop_term;
  fx_t  adv_now;
  assign loop_term  = (int'(s6.pos) >= int'(K)) ? fb[K-1] : '0;
  assign adv_now    = s6_f + loop_term;
  assign fb_last_in = fx_mul(c_pow[K], (K == 1) ? adv_now : fb[(K >= 2) ? K-2 : 0]);

  logic  s7_valid;
  fx_t   s7_adv;
  side_t s7;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < K; j++) fb[j] <= '0;
      s7_valid <= 1'b0; s7_adv <= '0; s7 <= '0;
    end else begin
      s7_valid <= s6_valid;
      s7_adv   <= adv_now;
      s7       <= s6;
      if (s6_valid) begin
        if (K >= 2) fb[0] <= adv_now;
        for (int j = 1; j < K - 1; j++) fb[j] <= fb[j-1];
        fb[K-1] <= fb_last_in;
      end
    end
  end

  // ---- stage 8: rewards-to-go and output registers ------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_adv   <= '0;
      out_rtg   <= '0;
      out_idx   <= '0;
      out_traj  <= '0;
      out_done  <= 1'b0;
    end else begin
      out_valid <= s7_valid;
      out_adv   <= s7_adv;
      out_rtg   <= s7.v + s7_adv;
      out_idx   <= s7.idx;
      out_traj  <= s7.traj;
      out_done  <= s7.done;
    end
  end

endmodule
