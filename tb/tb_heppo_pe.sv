// tb_heppo_pe -- self-checking test of the GAE processing element.
//
// Drives vectors of random length (1 to 40, so shorter and longer than the
// lookahead depth), newest timestep first, with random gaps and long
// back-to-back stretches, into PEs with K = 1, 2 (the paper's choice) and 3,
// the three lookahead depths whose cost the paper compares, all at once. The reference is the plain sequential recurrence
// A_t = delta_t + gamma*lambda*A_{t+1} in double precision, so the check also
// shows that the lookahead rewrite computes the same advantages; results must
// agree within a fixed-point tolerance. Also checked: Done, index and
// trajectory pass through, and every result appears exactly LAT = 8 cycles
// after its input (one result per cycle at full rate).
module tb_heppo_pe;
  import heppo_pkg::*;

  localparam int LAT   = 8;
  localparam int NELEM = 3000;
  localparam real TOL  = 2.0e-3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic      in_valid;
  val_item_t in;
  fx_t       gamma, lambda;
  fx_t       cp1 [2], cp2 [3], cp3 [4];

  logic o1_valid, o2_valid, o3_valid, o1_done, o2_done, o3_done;
  fx_t  o1_adv, o1_rtg, o2_adv, o2_rtg, o3_adv, o3_rtg;
  idx_t o1_idx, o2_idx, o3_idx;
  trj_t o1_traj, o2_traj, o3_traj;

  heppo_pe #(.K(1)) dut1 (.clk, .rst_n, .in_valid, .in, .gamma, .c_pow(cp1),
    .out_valid(o1_valid), .out_adv(o1_adv), .out_rtg(o1_rtg), .out_idx(o1_idx),
    .out_traj(o1_traj), .out_done(o1_done));

  heppo_pe #(.K(2)) dut2 (.clk, .rst_n, .in_valid, .in, .gamma, .c_pow(cp2),
    .out_valid(o2_valid), .out_adv(o2_adv), .out_rtg(o2_rtg), .out_idx(o2_idx),
    .out_traj(o2_traj), .out_done(o2_done));
  heppo_pe #(.K(3)) dut3 (.clk, .rst_n, .in_valid, .in, .gamma, .c_pow(cp3),
    .out_valid(o3_valid), .out_adv(o3_adv), .out_rtg(o3_rtg), .out_idx(o3_idx),
    .out_traj(o3_traj), .out_done(o3_done));

  function automatic real to_r(fx_t x);
    return real'(x) / real'(1 << FRAC);
  endfunction
  function automatic fx_t to_fx(real x);
    return fx_t'($rtoi(x * real'(1 << FRAC)));
  endfunction

  // stimulus and expected results, in arrival order
  val_item_t stim   [NELEM];
  real       exp_a  [NELEM];
  real       exp_rt [NELEM];
  int        t_in   [NELEM];
  int        n_out1 = 0, n_out2 = 0, n_out3 = 0;
  int        max_err_ulp = 0;

  task automatic check_out(int n, fx_t adv, fx_t rtg, idx_t idx, trj_t trj, logic dn, int k);
    real ea;
    checks++;
    ea = to_r(adv) - exp_a[n];
    if (ea < 0) ea = -ea;
    if (ea > TOL || (to_r(rtg) - exp_rt[n] > TOL) || (exp_rt[n] - to_r(rtg) > TOL)) begin
      failures++;
      if (failures < 10)
        $display("K=%0d elem %0d: adv %f rtg %f expected %f %f", k, n, to_r(adv), to_r(rtg), exp_a[n], exp_rt[n]);
    end
    checks++;
    if (idx != stim[n].idx || trj != stim[n].traj || dn != stim[n].done) begin
      failures++;
      if (failures < 10) $display("K=%0d elem %0d: side band mismatch", k, n);
    end
    checks++;
    if (cycle - t_in[n] != LAT) begin
      failures++;
      if (failures < 10) $display("K=%0d elem %0d: latency %0d", k, n, cycle - t_in[n]);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (o1_valid) begin
      check_out(n_out1, o1_adv, o1_rtg, o1_idx, o1_traj, o1_done, 1);
      n_out1++;
    end
    if (o2_valid) begin
      check_out(n_out2, o2_adv, o2_rtg, o2_idx, o2_traj, o2_done, 2);
      n_out2++;
    end
    if (o3_valid) begin
      check_out(n_out3, o3_adv, o3_rtg, o3_idx, o3_traj, o3_done, 3);
      n_out3++;
    end
  end

  // watchdog
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, len, trj, nvec;
    real g, l, c, aprev, vprev;
    logic first;
    gamma  = to_fx(0.99);
    lambda = to_fx(0.95);
    // coefficient powers as the accelerator forms them
    cp2[0] = fx_t'(1 << FRAC); cp3[0] = cp2[0]; cp1[0] = cp2[0];
    cp2[1] = fx_mul(gamma, lambda); cp3[1] = cp2[1]; cp1[1] = cp2[1];
    cp2[2] = fx_mul(cp2[1], cp2[1]); cp3[2] = cp2[2];
    cp3[3] = fx_mul(cp3[2], cp3[1]);
    g = to_r(gamma); l = to_r(lambda);
    c = to_r(cp2[1]);

    // build the stream: vectors newest-first, Done on the last element
    n = 0; trj = 0; nvec = 0;
    while (n < NELEM) begin
      if (nvec < 6) len = nvec + 1;            // 1..6: around the lookahead depth
      else          len = 1 + ($urandom % 40);
      if (n + len > NELEM) len = NELEM - n;
      first = 1'b1;
      for (int t = len - 1; t >= 0; t--) begin
        real r, v, d;
        int ur, uv;
        ur = int'($urandom_range(32'h0008_0000)) - 32'sh0004_0000;   // +/-4
        uv = int'($urandom_range(32'h0028_0000)) - 32'sh0014_0000;   // +/-20
        stim[n].r    = fx_t'(ur);
        stim[n].v    = fx_t'(uv);
        stim[n].idx  = idx_t'(t);
        stim[n].traj = trj_t'(trj);
        stim[n].done = (t == 0);
        r = to_r(stim[n].r); v = to_r(stim[n].v);
        d = r + (first ? 0.0 : g * vprev) - v;
        exp_a[n]  = d + (first ? 0.0 : c * aprev);
        exp_rt[n] = v + exp_a[n];
        aprev = exp_a[n]; vprev = v; first = 1'b0;
        n++;
      end
      trj++; nvec++;
    end

    in_valid = 1'b0;
    in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int i = 0; i < NELEM; i++) begin
      // gaps in the first third, back to back afterwards
      if (i < NELEM / 3) while (($urandom % 4) == 0) begin
        in_valid <= 1'b0;
        @(posedge clk);
      end
      in_valid <= 1'b1;
      in       <= stim[i];
      t_in[i]  = cycle + 1;
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (LAT + 4) @(posedge clk);
    checks++;
    if (n_out1 != NELEM || n_out2 != NELEM || n_out3 != NELEM) begin
      failures++;
      $display("result count %0d %0d %0d of %0d", n_out1, n_out2, n_out3, NELEM);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
