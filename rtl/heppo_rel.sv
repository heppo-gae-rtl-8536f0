// heppo_rel -- Rewards Loader (ReL), the first stage of a row.
//
// Given a job (a trajectory and its length T) it walks the trajectory's
// rewards from timestep T-1 down to 0, reading each codeword from BRAM0
// through the read crossbar, de-quantizes it to the 32-bit datapath format
// (rewards stay in their standardized form) and pushes (R_i, i, Done) into the
// queue toward the Values Loader; Done marks i = 0, the last element of the
// vector. Walking backward follows the paper's data flow and FILO layout; the
// queue entry also carries the trajectory number, which the paper leaves
// implicit.
//
// Timing: one read request per cycle while the job lasts and the queue has
// room for the request plus the one still in flight; the codeword returns one
// cycle after the grant and is pushed that cycle. job_ready is high while the
// loader is idle; a job is accepted in the cycle job_valid && job_ready.
module heppo_rel
  import heppo_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,   // timesteps per BRAM (paper: 1024)
  parameter int unsigned LANES = 64,     // trajectories per BRAM word (paper: 64)
  parameter int unsigned QD    = 4       // depth of the downstream queue
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // job from the controller
  input  logic                          job_valid,
  input  trj_t                          job_traj,
  input  idx_t                          job_len,
  output logic                          job_ready,
  // read crossbar (BRAM0)
  output logic                          rd_req,
  output logic [$clog2(DEPTH)-1:0]      rd_addr,
  output logic [$clog2(LANES)-1:0]      rd_lane,
  input  logic                          rd_gnt,
  input  logic                          rd_valid,
  input  q_t                            rd_data,
  // queue toward the Values Loader
  output logic                          q_push,
  output rel_item_t                     q_item,
  input  logic [$clog2(QD+1)-1:0]       q_free
);
  logic busy;
  idx_t cur;
  trj_t traj;
  idx_t pend_idx;
  trj_t pend_traj;
  logic pend_done;

  assign job_ready = !busy;
  assign rd_req    = busy && (int'(q_free) > int'(rd_valid));
  assign rd_addr   = cur[$clog2(DEPTH)-1:0];
  assign rd_lane   = traj[$clog2(LANES)-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      cur       <= '0;
      traj      <= '0;
      pend_idx  <= '0;
      pend_traj <= '0;
      pend_done <= 1'b0;
    end else begin
      if (!busy && job_valid) begin
        busy <= 1'b1;
        cur  <= job_len - 1'b1;
        traj <= job_traj;
      end else if (rd_req && rd_gnt) begin
        pend_idx  <= cur;
        pend_traj <= traj;
        pend_done <= (cur == '0);
        if (cur == '0) busy <= 1'b0;
        else           cur  <= cur - 1'b1;
      end
    end
  end

  assign q_push = rd_valid;
  assign q_item = '{r: dequant(rd_data), idx: pend_idx, traj: pend_traj, done: pend_done};

  a_len_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
                                  (job_valid && job_ready) |-> (job_len != '0));
  a_len_fits:    assert property (@(posedge clk) disable iff (!rst_n)
                                  (job_valid && job_ready) |-> (int'(job_len) <= int'(DEPTH)));

endmodule
