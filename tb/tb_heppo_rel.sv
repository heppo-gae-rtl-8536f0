// tb_heppo_rel -- self-checking test of the Rewards Loader.
//
// A 32 x 8-lane BRAM model answers reads one cycle after a randomly withheld
// grant; a queue model of depth 4 is drained at random. Jobs of several
// lengths (including 1 and the full 32) on different trajectories must yield
// exactly the elements i = T-1 .. 0 of that trajectory, in order, each reward
// equal to its codeword / 32, Done only on i = 0, never a push into a full
// queue. A final job with grants and pops always on must stream one element
// per cycle.
module tb_heppo_rel;
  import heppo_pkg::*;
  localparam int DEPTH = 32, LANES = 8, QD = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic job_valid, job_ready, rd_req, rd_gnt, rd_valid, q_push;
  trj_t job_traj;
  idx_t job_len;
  logic [4:0] rd_addr;
  logic [2:0] rd_lane;
  q_t rd_data;
  rel_item_t q_item;
  logic [2:0] q_free;
  heppo_rel #(.DEPTH(DEPTH), .LANES(LANES), .QD(QD)) dut (.*);

  logic [LANES-1:0][QW-1:0] model [DEPTH];
  logic gnt_on = 1'b0, pop_on = 1'b0;   // force always-grant / always-pop
  int qcount = 0;
  int exp_idx, exp_lane;
  int pushes = 0, run = 0, max_run = 0;

  // memory model: data for the granted request one cycle later
  always @(posedge clk) begin
    rd_valid <= rst_n && rd_req && rd_gnt;
    rd_data  <= model[rd_addr][rd_lane];
  end
  always @(negedge clk) rd_gnt = gnt_on || ($urandom % 3 != 0);

  // queue model and item checker
  assign q_free = 3'(QD - qcount);
  always @(posedge clk) if (rst_n) begin
    logic pop;
    pop = (qcount > 0) && (pop_on || ($urandom % 2 == 0));
    if (q_push) begin
      checks++;
      if (qcount - int'(pop) >= QD) begin failures++; $display("push into full queue"); end
      checks++;
      if (int'(q_item.idx) != exp_idx || int'(q_item.traj) != exp_lane ||
          q_item.done != (exp_idx == 0) ||
          real'(q_item.r) / 65536.0 != real'($signed(model[exp_idx][exp_lane])) / 32.0) begin
        failures++;
        $display("item idx %0d traj %0d done %b r %h; expected idx %0d traj %0d", q_item.idx,
                 q_item.traj, q_item.done, q_item.r, exp_idx, exp_lane);
      end
      exp_idx--;
      pushes++;
      run++;
      if (run > max_run) max_run = run;
    end else run = 0;
    qcount = qcount + int'(q_push) - int'(pop);
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_job(int lane, int len);
    @(negedge clk);
    checks++;
    if (!job_ready) begin failures++; $display("not ready for a job"); end
    job_valid = 1; job_traj = trj_t'(lane); job_len = idx_t'(len);
    exp_idx = len - 1; exp_lane = lane;
    @(negedge clk);
    job_valid = 0;
    while (exp_idx >= 0) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  initial begin
    for (int a = 0; a < DEPTH; a++) for (int j = 0; j < LANES; j++) model[a][j] = 8'($urandom);
    job_valid = 0; job_traj = '0; job_len = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    do_job(3, 20);
    do_job(0, 1);
    do_job(7, 32);
    do_job(5, 2);
    max_run = 0;
    gnt_on = 1; pop_on = 1;
    do_job(1, 32);
    checks++;
    if (pushes != 20 + 1 + 32 + 2 + 32) begin failures++; $display("pushes %0d", pushes); end
    checks++;
    if (max_run < 32) begin failures++; $display("longest run %0d, expected 32", max_run); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
