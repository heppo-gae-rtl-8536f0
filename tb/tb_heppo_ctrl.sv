// tb_heppo_ctrl -- self-checking test of the run controller.
//
// Four row models take jobs and write back their elements at random rates.
// Two runs (10 trajectories of 7 steps, then 3 of 5) check the four-phase
// start/done handshake, that every trajectory is dealt exactly once and with
// the run's length, that all idle rows are served in the same cycle at the
// start, that finished rows get further trajectories, that done rises only
// after the last element has been written and that run_cycles counts the
// cycles of the run.
module tb_heppo_ctrl;
  import heppo_pkg::*;
  localparam int N = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, done, busy;
  trj_t n_traj;
  idx_t t_len;
  logic [N-1:0] job_ready, job_valid;
  trj_t job_traj [N];
  idx_t job_len;
  logic [2:0] wr_count;
  logic [31:0] run_cycles;
  heppo_ctrl #(.N(N)) dut (.*);

  int remain [N];
  int dealt_cnt [64];
  int writes = 0, busy_cycles = 0, reassign = 0, first_burst = 0;

  always_comb for (int k = 0; k < N; k++) job_ready[k] = (remain[k] == 0);

  always @(negedge clk) begin
    int w;
    w = 0;
    for (int k = 0; k < N; k++) if (remain[k] > 0 && ($urandom % 2 == 0)) w++;
    wr_count = 3'(w);
  end

  always @(posedge clk) if (rst_n) begin
    int w, nv;
    w = int'(wr_count);
    nv = 0;
    if (busy) busy_cycles++;
    // writes are taken from the busiest rows
    for (int k = 0; k < N && w > 0; k++) if (remain[k] > 0) begin remain[k]--; w--; end
    for (int k = 0; k < N; k++) if (job_valid[k]) begin
      nv++;
      checks++;
      if (!job_ready[k] || job_len != t_len || int'(job_traj[k]) >= int'(n_traj)) begin
        failures++; $display("bad job to row %0d", k);
      end
      dealt_cnt[job_traj[k]]++;
      remain[k] = int'(t_len);
    end
    if (nv == N) first_burst++;
    if (nv > 0 && nv < N) reassign++;
    if (wr_count != 0) writes += int'(wr_count);
  end

  initial begin
    repeat (4000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_run(int nt, int tl);
    @(negedge clk);
    for (int i = 0; i < 64; i++) dealt_cnt[i] = 0;
    writes = 0; busy_cycles = 0;
    n_traj = trj_t'(nt); t_len = idx_t'(tl);
    start = 1;
    while (!done) begin
      @(negedge clk);
      checks++;
      if (!done && writes >= nt * tl && !busy) begin failures++; $display("not done"); end
      if (done && writes < nt * tl) begin failures++; $display("done early"); end
    end
    checks++;
    if (writes != nt * tl) begin failures++; $display("writes %0d", writes); end
    for (int i = 0; i < 64; i++) begin
      checks++;
      if (dealt_cnt[i] != ((i < nt) ? 1 : 0)) begin failures++; $display("trajectory %0d dealt %0d times", i, dealt_cnt[i]); end
    end
    checks++;
    if (int'(run_cycles) != busy_cycles) begin failures++; $display("run_cycles %0d expected %0d", run_cycles, busy_cycles); end
    repeat (3) @(negedge clk);
    checks++;
    if (!done) begin failures++; $display("done dropped while start high"); end
    start = 0;
    @(negedge clk);
    checks++;
    if (done || busy) begin failures++; $display("not back to idle"); end
  endtask

  initial begin
    for (int k = 0; k < N; k++) remain[k] = 0;
    start = 0; n_traj = '0; t_len = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    do_run(10, 7);
    do_run(3, 5);
    checks++;
    if (first_burst < 1 || reassign < 1) begin failures++; $display("dealing patterns not seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
