// tb_heppo_xbar_rd -- self-checking test of the read crossbar.
//
// Four requesters on a 16 x 8-lane memory model. Phase 1: random addresses,
// each request held until granted; checks that grants go only to requesters,
// that all granted share the address sent to memory, that at least one is
// granted whenever any asks, that no request waits more than N cycles (round
// robin), and that each granted requester receives its own lane of the right
// word one cycle later. Phase 2: all requesters walk the same addresses in
// step and must all be granted every cycle (coalesced reads).
module tb_heppo_xbar_rd;
  localparam int N = 4, DEPTH = 16, LANES = 8, QW = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] req, gnt, rvalid;
  logic [N-1:0][3:0] addr;
  logic [N-1:0][2:0] lane;
  logic [N-1:0][QW-1:0] rdata;
  logic mem_en;
  logic [3:0] mem_addr;
  logic [LANES-1:0][QW-1:0] mem_rdata;
  heppo_xbar_rd #(.N(N), .DEPTH(DEPTH), .LANES(LANES), .QW(QW)) dut (.*);

  logic [LANES-1:0][QW-1:0] model [DEPTH];
  always @(posedge clk) if (mem_en) mem_rdata <= model[mem_addr];

  logic [N-1:0]       exp_v;
  logic [N-1:0][QW-1:0] exp_d;
  int wait_c [N];
  int phase = 1;
  logic [N-1:0] g;
  int n_conflict = 0, n_all = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker, sampled just before each clock edge
  always @(negedge clk) if (rst_n) begin
    for (int k = 0; k < N; k++) begin
      if (exp_v[k]) begin
        checks++;
        if (!rvalid[k] || rdata[k] != exp_d[k]) begin
          failures++;
          $display("req %0d: data %h expected %h", k, rdata[k], exp_d[k]);
        end
      end else if (rvalid[k]) begin
        failures++;
        $display("req %0d: unexpected rvalid", k);
      end
    end
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) for (int j = 0; j < LANES; j++) model[a][j] = 8'($urandom);
    req = '0; addr = '0; lane = '0; exp_v = '0; exp_d = '0;
    for (int k = 0; k < N; k++) wait_c[k] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 1200; cyc++) begin
      @(negedge clk);
      #1;
      if (cyc == 600) phase = 2;
      // new requests for idle requesters
      for (int k = 0; k < N; k++) begin
        if (phase == 1) begin
          if (!req[k] && ($urandom % 4 != 0)) begin
            req[k] = 1'b1; addr[k] = 4'($urandom); lane[k] = 3'($urandom); wait_c[k] = 0;
          end
        end else begin
          req[k] = 1'b1; addr[k] = 4'(DEPTH - 1 - (cyc % DEPTH)); lane[k] = 3'(k);
        end
      end
      #1;
      checks++;
      if ((req != '0) && (gnt == '0)) begin failures++; $display("no grant"); end
      if ((gnt & ~req) != '0) begin failures++; $display("grant without request"); end
      for (int k = 0; k < N; k++) if (gnt[k] && addr[k] != mem_addr) begin
        failures++; $display("granted address differs");
      end
      if (phase == 1 && gnt != req) n_conflict++;
      if (phase == 2) begin
        checks++;
        if (gnt != req) begin failures++; $display("lock-step requests not all granted"); end
        else n_all++;
      end
      g = gnt;
      @(posedge clk);
      #1;
      for (int k = 0; k < N; k++) begin
        exp_v[k] = g[k];
        exp_d[k] = model[addr[k]][lane[k]];
        if (req[k] && !g[k]) begin
          wait_c[k]++;
          checks++;
          if (wait_c[k] > N) begin failures++; $display("req %0d starved", k); end
        end
        if (g[k] && phase == 1) begin req[k] = 1'b0; lane[k] = 3'($urandom); end
      end
    end
    checks++;
    if (n_conflict == 0 || n_all == 0) begin failures++; $display("mechanisms not exercised"); end
    $display("conflict cycles %0d, lock-step cycles %0d", n_conflict, n_all);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
