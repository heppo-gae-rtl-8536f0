// tb_heppo_wb -- self-checking test of the write-back unit.
//
// A PE model with the real 8-cycle latency issues results only while
// credit_ok is high; the write crossbar grant is withheld at random, then
// always given. Every write, in order, must carry the element's index and
// trajectory, the advantage code round(adv*32) saturated to [-128,127] and the
// rewards-to-go code round((rtg-mu_v)/sigma_v*32) saturated (within one code,
// since 1/sigma_v is itself rounded). Saturation pulses must match the
// reference, the queue must never overflow (its assertion) and with the grant
// always on the PE model must be able to issue every cycle.
module tb_heppo_wb;
  import heppo_pkg::*;
  localparam int DEPTH = 64, LANES = 8, QD = 16, LAT = 8, NI = 400;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  fx_t mu_v, inv_sigma_v;
  logic pe_issue, credit_ok, in_valid, wr_req, wr_gnt, sat_adv, sat_rtg;
  fx_t in_adv, in_rtg;
  idx_t in_idx;
  trj_t in_traj;
  logic [5:0] wr_addr;
  logic [2:0] wr_lane;
  q_t wr_adv, wr_rtg;
  heppo_wb #(.DEPTH(DEPTH), .LANES(LANES), .QD(QD)) dut (.*);

  fx_t  a_v [NI], r_v [NI];
  int   issued = 0, written = 0;
  logic fast = 1'b0;
  logic [LAT-1:0] pipe_v;
  int   pipe_n [LAT];
  int   run = 0, max_run = 0, n_sat = 0, n_sat_exp = 0;
  real  mu, isg;

  function automatic int qref(real x);
    int q;
    q = $rtoi($floor(x * 32.0 + 0.5));
    if (q > 127) q = 127;
    if (q < -128) q = -128;
    return q;
  endfunction
  function automatic logic satref(real x);
    int q;
    q = $rtoi($floor(x * 32.0 + 0.5));
    return (q > 127) || (q < -128);
  endfunction

  // PE model: fixed latency pipeline
  always @(negedge clk) begin
    pe_issue = rst_n && credit_ok && (issued < NI) && (fast || ($urandom % 4 != 0));
    wr_gnt   = fast || ($urandom % 3 == 0);
  end
  always @(posedge clk) if (rst_n) begin
    pipe_v <= {pipe_v[LAT-2:0], pe_issue};
    for (int s = LAT - 1; s > 0; s--) pipe_n[s] <= pipe_n[s-1];
    pipe_n[0] <= issued;
    if (pe_issue) begin issued++; run++; if (run > max_run) max_run = run; end
    else run = 0;
  end
  always_comb begin
    in_valid = pipe_v[LAT-1];
    in_adv   = a_v[pipe_n[LAT-1] % NI];
    in_rtg   = r_v[pipe_n[LAT-1] % NI];
    in_idx   = idx_t'(pipe_n[LAT-1] % DEPTH);
    in_traj  = trj_t'(pipe_n[LAT-1] % LANES);
  end

  // checker
  always @(posedge clk) if (rst_n) begin
    if (in_valid) begin
      n_sat += int'(sat_adv) + int'(sat_rtg);
      n_sat_exp += int'(satref(real'(in_adv) / 65536.0)) +
                   int'(satref((real'(in_rtg) / 65536.0 - mu) * isg));
    end
    if (wr_req && wr_gnt) begin
      int ea, er, dr;
      ea = qref(real'(a_v[written]) / 65536.0);
      er = qref((real'(r_v[written]) / 65536.0 - mu) * isg);
      dr = int'(wr_rtg) - er;
      checks++;
      if (int'(wr_adv) != ea || dr > 1 || dr < -1 ||
          int'(wr_addr) != written % DEPTH || int'(wr_lane) != written % LANES) begin
        failures++;
        $display("write %0d: adv %0d rtg %0d expected %0d %0d", written, wr_adv, wr_rtg, ea, er);
      end
      written++;
    end
  end

  initial begin
    repeat (8000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NI; i++) begin
      int a, r;
      a = int'($urandom_range(32'h000c_0000)) - 32'sh0006_0000;   // +/-6: some saturate
      r = int'($urandom_range(32'h0030_0000)) - 32'sh0018_0000;   // +/-24
      a_v[i] = fx_t'(a);
      r_v[i] = fx_t'(r);
    end
    mu_v        = fx_t'(32'sd65536);      // 1.0
    inv_sigma_v = fx_t'(32'sd21845);      // 1/3
    mu  = 1.0;
    isg = 21845.0 / 65536.0;
    pipe_v = '0;
    for (int s = 0; s < LAT; s++) pipe_n[s] = 0;
    pe_issue = 0; wr_gnt = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (issued >= NI / 2);
    @(negedge clk);
    fast = 1;
    max_run = 0;
    wait (written == NI);
    repeat (2) @(posedge clk);
    checks++;
    if (max_run < NI / 2 - 20) begin failures++; $display("longest issue run %0d", max_run); end
    checks++;
    if (n_sat != n_sat_exp || n_sat == 0) begin failures++; $display("saturations %0d expected %0d", n_sat, n_sat_exp); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
