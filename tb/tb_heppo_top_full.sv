// tb_heppo_top_full -- end-to-end test of the accelerator at its default size (64 rows, 64 trajectories, 1024 timesteps).
//
// The test plays the processing system: it fills BRAM0 with random 8-bit
// reward codes and BRAM1 with random value codes through the host port,
// writes the configuration (gamma 0.99, lambda 0.95, mu_v -1.5, sigma_v 2.5),
// raises start in its own clock domain, waits for done, reads both BRAMs back
// and compares every advantage and rewards-to-go code with a double-precision
// model of de-quantization, GAE and re-quantization (one code of slack for
// fixed-point rounding at a code boundary). Runs: 128 trajectories cannot fit 64 lanes, so one run of all 64 trajectories of 1024 steps, then 64 trajectories of 700 steps in a second run after re-filling.
// It also checks the run time against the one-element-per-row-per-cycle rate
// and counts the mechanisms the design relies on: vectors ending on Done,
// trajectories dealt to a row that had finished one, reads served to all rows
// at once, codes clipped by the re-quantizer, and the BRAM ports passing
// between the host and the accelerator. A mechanism never seen is a failure.
module tb_heppo_top_full;
  import heppo_pkg::*;
  localparam int N_PE  = 64;
  localparam int LANES = 64;
  localparam int T_MAX = 1024;
  localparam int HW = $clog2(LANES / 4);

  logic clk = 1'b0, ps_clk = 1'b0;
  logic rst_n = 1'b0, ps_rst_n = 1'b0;
  always #5 clk = ~clk;
  always #7 ps_clk = ~ps_clk;
  int checks = 0, failures = 0;

  logic ps_start, ps_done, host_ready, host_en, host_we, host_sel;
  cfg_t cfg;
  trj_t n_traj;
  idx_t t_len;
  logic [$clog2(T_MAX)-1:0] host_addr;
  logic [HW-1:0] host_word;
  logic [31:0] host_wdata, host_rdata, run_cycles, sat_count;

  heppo_top dut (.*);

  // stimulus codes and read-back results
  logic [7:0] rc [T_MAX][LANES], vc [T_MAX][LANES];
  logic [7:0] ra [T_MAX][LANES], rr [T_MAX][LANES];

  // mechanism counters
  int n_done = 0, n_redeal = 0, n_allrows = 0, n_switch = 0, n_clip = 0;
  int deals [N_PE];
  logic busy_q = 1'b0;
  always @(posedge clk) if (rst_n) begin
    int g;
    g = 0;
    for (int k = 0; k < N_PE; k++) begin
      if (dut.u_ctrl.job_valid[k]) begin
        deals[k]++;
        if (deals[k] > 1) n_redeal++;
      end
      g += int'(dut.u_xbar_r.gnt[k]);
    end
    if (g == N_PE) n_allrows++;
    busy_q <= dut.busy;
    if (busy_q != dut.busy) n_switch++;
  end
  for (genvar k = 0; k < N_PE; k++) begin : g_mon
    always @(posedge clk) if (rst_n && dut.g_row[k].pe_valid && dut.g_row[k].pe_done) n_done++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fr(fx_t x);
    return real'(x) / 65536.0;
  endfunction
  function automatic int qref(real x);
    int q;
    q = $rtoi($floor(x * 32.0 + 0.5));
    if (q > 127) q = 127;
    if (q < -128) q = -128;
    return q;
  endfunction

  task automatic host_write(logic sel, int t, int w, logic [31:0] d);
    @(negedge clk);
    host_en = 1; host_we = 1; host_sel = sel;
    host_addr = ($clog2(T_MAX))'(t); host_word = HW'(w); host_wdata = d;
    @(negedge clk);
    host_en = 0; host_we = 0;
  endtask

  task automatic host_read(logic sel, int t, int w, output logic [31:0] d);
    @(negedge clk);
    host_en = 1; host_we = 0; host_sel = sel;
    host_addr = ($clog2(T_MAX))'(t); host_word = HW'(w);
    @(negedge clk);
    host_en = 0;
    d = host_rdata;
  endtask

  task automatic run(int nt, int tl);
    real g, c, mu, sg, isg;
    int bad_a = 0, bad_r = 0, slack = 0, limit;
    logic [31:0] d;
    // fill the stack memories (push order: t = 0 first)
    for (int t = 0; t < T_MAX; t++)
      for (int j = 0; j < LANES; j++) begin
        rc[t][j] = 8'($urandom);
        vc[t][j] = 8'($urandom);
      end
    for (int t = 0; t < T_MAX; t++)
      for (int w = 0; w < LANES / 4; w++) begin
        host_write(0, t, w, {rc[t][4*w+3], rc[t][4*w+2], rc[t][4*w+1], rc[t][4*w]});
        host_write(1, t, w, {vc[t][4*w+3], vc[t][4*w+2], vc[t][4*w+1], vc[t][4*w]});
      end
    n_traj = trj_t'(nt);
    t_len  = idx_t'(tl);
    // start / done handshake in the processing-system clock domain
    @(negedge ps_clk);
    ps_start = 1;
    while (!ps_done) @(negedge ps_clk);
    checks++;
    if (!host_ready) begin failures++; $display("host port not free while done is held"); end
    n_clip += int'(sat_count);
    // run time: one element per row per cycle plus a fill latency per round
    limit = ((nt + N_PE - 1) / N_PE) * (tl + 20);
    checks++;
    if (int'(run_cycles) > limit) begin failures++; $display("run took %0d cycles, limit %0d", run_cycles, limit); end
    $display("run %0d x %0d: %0d cycles, %0d clipped codes", nt, tl, run_cycles, sat_count);
    @(negedge ps_clk);
    ps_start = 0;
    while (ps_done) @(negedge ps_clk);
    repeat (2) @(negedge clk);
    checks++;
    if (!host_ready) begin failures++; $display("host port not returned"); end
    // read back
    for (int t = 0; t < T_MAX; t++)
      for (int w = 0; w < LANES / 4; w++) begin
        host_read(0, t, w, d);
        for (int b = 0; b < 4; b++) ra[t][4*w+b] = d[8*b +: 8];
        host_read(1, t, w, d);
        for (int b = 0; b < 4; b++) rr[t][4*w+b] = d[8*b +: 8];
      end
    // reference
    g   = fr(cfg.gamma);
    c   = fr(fx_mul(cfg.gamma, cfg.lambda));
    mu  = fr(cfg.mu_v);
    sg  = fr(cfg.sigma_v);
    isg = fr(cfg.inv_sigma_v);
    for (int j = 0; j < LANES; j++) begin
      real a_next, v_next;
      a_next = 0.0; v_next = 0.0;
      for (int t = T_MAX - 1; t >= 0; t--) begin
        checks++;
        if (j < nt && t < tl) begin
          real r, v, dl, a, rt;
          int ea, er, da, dr;
          r  = real'($signed(rc[t][j])) / 32.0;
          v  = real'($signed(vc[t][j])) / 32.0 * sg + mu;
          dl = r + ((t == tl - 1) ? 0.0 : g * v_next) - v;
          a  = dl + ((t == tl - 1) ? 0.0 : c * a_next);
          rt = v + a;
          a_next = a; v_next = v;
          ea = qref(a);
          er = qref((rt - mu) * isg);
          da = int'($signed(ra[t][j])) - ea;
          dr = int'($signed(rr[t][j])) - er;
          if (da != 0 || dr != 0) slack++;
          if (da > 1 || da < -1) bad_a++;
          if (dr > 1 || dr < -1) bad_r++;
          if ((da > 1 || da < -1 || dr > 1 || dr < -1) && bad_a + bad_r < 8)
            $display("traj %0d t %0d: adv %0d rtg %0d expected %0d %0d", j, t,
                     $signed(ra[t][j]), $signed(rr[t][j]), ea, er);
          if (da > 1 || da < -1 || dr > 1 || dr < -1) failures++;
        end else begin
          // untouched words keep the pushed codes
          if (ra[t][j] != rc[t][j] || rr[t][j] != vc[t][j]) begin
            failures++;
            if (bad_a < 8) $display("traj %0d t %0d outside the run was overwritten", j, t);
            bad_a++;
          end
        end
      end
    end
    $display("  %0d results off by one code (rounding), %0d adv / %0d rtg wrong", slack, bad_a, bad_r);
  endtask

  initial begin
    for (int k = 0; k < N_PE; k++) deals[k] = 0;
    ps_start = 0; host_en = 0; host_we = 0; host_sel = 0; host_addr = '0; host_word = '0;
    host_wdata = '0;
    cfg.gamma       = fx_t'(32'sd64881);    // 0.99
    cfg.lambda      = fx_t'(32'sd62259);    // 0.95
    cfg.mu_v        = fx_t'(-32'sd98304);   // -1.5
    cfg.sigma_v     = fx_t'(32'sd163840);   // 2.5
    cfg.inv_sigma_v = fx_t'(32'sd26214);    // 0.4
    n_traj = '0; t_len = '0;
    repeat (3) @(posedge clk);
    rst_n = 1; ps_rst_n = 1;
    run(64, 1024);
    run(64, 700);
    checks++;
    if (n_done == 0)    begin failures++; $display("no vector ended on Done"); end
    checks++;
    if (n_redeal == 0)  begin failures++; $display("no row was dealt a second trajectory"); end
    checks++;
    if (n_allrows == 0) begin failures++; $display("no read served all rows at once"); end
    checks++;
    if (n_clip == 0)    begin failures++; $display("no code was clipped"); end
    checks++;
    if (n_switch < 2)   begin failures++; $display("BRAM ports never changed hands"); end
    $display("mechanisms: done %0d, re-deals %0d, all-row reads %0d, clipped %0d, port switches %0d",
             n_done, n_redeal, n_allrows, n_clip, n_switch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
