// heppo_ctrl -- run controller: start/done handshake with the processing
// system and round-robin distribution of trajectories to the rows.
//
// Protocol (a four-phase handshake on two levels, each synchronized into the
// other clock domain outside this module): the processing system fills the
// BRAMs, then raises start. The controller leaves IDLE, deals the n_traj
// trajectories of length t_len to the rows, counts the results written back
// and, when all n_traj * t_len have been written, raises done. It drops done
// once start has been lowered and returns to IDLE. busy is high from the start
// until done; while it is low the BRAM ports belong to the processing system.
//
// Dealing: every cycle each idle row (job_ready) takes the next trajectory, in
// row order, as long as trajectories remain. At the start every row takes one
// in the same cycle, so all rows walk their vectors in step; a row that
// finishes takes the next unassigned trajectory. That is the paper's
// "round-robin, a finished row gets a new vector"; the exact order is this
// design's choice. run_cycles counts the cycles of the last run.
module heppo_ctrl
  import heppo_pkg::*;
#(
  parameter int unsigned N = 64          // rows
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,          // level, already synchronized
  output logic                done,           // level
  output logic                busy,
  input  trj_t                n_traj,         // trajectories in the batch
  input  idx_t                t_len,          // timesteps per trajectory
  // jobs to the rows
  input  logic [N-1:0]        job_ready,
  output logic [N-1:0]        job_valid,
  output trj_t                job_traj [N],
  output idx_t                job_len,
  // results written this cycle
  input  logic [$clog2(N+1)-1:0] wr_count,
  output logic [31:0]         run_cycles
);
  typedef enum logic [1:0] {IDLE, RUN, DONE} state_t;
  state_t state;

  trj_t  next_traj;
  logic [31:0] written;
  logic [31:0] total;
  trj_t  dealt;

  assign total   = 32'(n_traj) * 32'(t_len);
  assign job_len = t_len;
  assign busy    = (state == RUN);
  assign done    = (state == DONE);

  always_comb begin
    dealt = '0;
    for (int k = 0; k < N; k++) begin
      job_traj[k]  = next_traj + dealt;
      job_valid[k] = 1'b0;
      if (state == RUN && job_ready[k] && (32'(next_traj) + 32'(dealt) < 32'(n_traj))) begin
        job_valid[k] = 1'b1;
        dealt        = dealt + 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= IDLE;
      next_traj  <= '0;
      written    <= '0;
      run_cycles <= '0;
    end else begin
      unique case (state)
        IDLE: if (start) begin
          state      <= RUN;
          next_traj  <= '0;
          written    <= '0;
          run_cycles <= '0;
        end
        RUN: begin
          next_traj  <= next_traj + dealt;
          written    <= written + 32'(wr_count);
          run_cycles <= run_cycles + 1;
          if (written + 32'(wr_count) >= total) state <= DONE;
        end
        DONE: if (!start) state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end

  a_no_extra_writes: assert property (@(posedge clk) disable iff (!rst_n)
                                      (state != RUN) |-> (wr_count == '0));

endmodule
