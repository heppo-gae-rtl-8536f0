// tb_heppo_xbar_wr -- self-checking test of the write crossbar.
//
// Four write-back requesters (requester k owns trajectories k and k+4) on a
// 16 x 8-lane memory pair built from the crossbar's outputs. Phase 1: random
// addresses, requests held until granted; phase 2: all requesters in step on
// the same address. Checks: grants only to requesters, all granted share the
// written address, nobody waits more than N cycles, everything granted in
// lock step, and at the end both memories equal the model of all granted
// writes (lane enables and lane data correct).
module tb_heppo_xbar_wr;
  localparam int N = 4, DEPTH = 16, LANES = 8, QW = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] req, gnt;
  logic [N-1:0][3:0] addr;
  logic [N-1:0][2:0] lane;
  logic [N-1:0][QW-1:0] adv, rtg;
  logic mem_en;
  logic [3:0] mem_addr;
  logic [LANES-1:0] mem_lane_we;
  logic [LANES-1:0][QW-1:0] mem_wdata_adv, mem_wdata_rtg;
  heppo_xbar_wr #(.N(N), .DEPTH(DEPTH), .LANES(LANES), .QW(QW)) dut (.*);

  logic [LANES-1:0][QW-1:0] m_adv [DEPTH], m_rtg [DEPTH];   // written by the DUT
  logic [LANES-1:0][QW-1:0] e_adv [DEPTH], e_rtg [DEPTH];   // expected
  always @(posedge clk)
    if (mem_en) for (int j = 0; j < LANES; j++) if (mem_lane_we[j]) begin
      m_adv[mem_addr][j] <= mem_wdata_adv[j];
      m_rtg[mem_addr][j] <= mem_wdata_rtg[j];
    end

  int wait_c [N];
  int n_conflict = 0, n_all = 0;
  logic [N-1:0] g;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      m_adv[a] = '0; m_rtg[a] = '0; e_adv[a] = '0; e_rtg[a] = '0;
    end
    req = '0; addr = '0; lane = '0; adv = '0; rtg = '0;
    for (int k = 0; k < N; k++) wait_c[k] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 1000; cyc++) begin
      @(negedge clk);
      for (int k = 0; k < N; k++) begin
        if (cyc < 500) begin
          if (!req[k] && ($urandom % 4 != 0)) begin
            req[k] = 1'b1; addr[k] = 4'($urandom); lane[k] = 3'(k + N * ($urandom % 2));
            adv[k] = 8'($urandom); rtg[k] = 8'($urandom); wait_c[k] = 0;
          end
        end else begin
          req[k] = 1'b1; addr[k] = 4'(cyc % DEPTH); lane[k] = 3'(k + N * (cyc % 2));
          adv[k] = 8'($urandom); rtg[k] = 8'($urandom);
        end
      end
      #1;
      checks++;
      if ((req != '0) && (gnt == '0)) begin failures++; $display("no grant"); end
      if ((gnt & ~req) != '0) begin failures++; $display("grant without request"); end
      for (int k = 0; k < N; k++) if (gnt[k] && (addr[k] != mem_addr || !mem_en)) begin
        failures++; $display("granted address differs");
      end
      if (cyc < 500 && gnt != req) n_conflict++;
      if (cyc >= 500) begin
        checks++;
        if (gnt != req) begin failures++; $display("lock-step writes not all granted"); end
        else n_all++;
      end
      g = gnt;
      for (int k = 0; k < N; k++) if (g[k]) begin
        e_adv[addr[k]][lane[k]] = adv[k];
        e_rtg[addr[k]][lane[k]] = rtg[k];
      end
      @(posedge clk);
      #1;
      for (int k = 0; k < N; k++) begin
        if (req[k] && !g[k]) begin
          wait_c[k]++;
          checks++;
          if (wait_c[k] > N) begin failures++; $display("req %0d starved", k); end
        end
        if (g[k]) req[k] = 1'b0;
      end
    end
    @(posedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      checks++;
      if (m_adv[a] != e_adv[a] || m_rtg[a] != e_rtg[a]) begin
        failures++; $display("word %0d: %h/%h expected %h/%h", a, m_adv[a], m_rtg[a], e_adv[a], e_rtg[a]);
      end
    end
    checks++;
    if (n_conflict == 0 || n_all == 0) begin failures++; $display("mechanisms not exercised"); end
    $display("conflict cycles %0d, lock-step cycles %0d", n_conflict, n_all);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
