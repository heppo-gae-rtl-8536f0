// heppo_xbar_wr -- write side of the system crossbar: N write-back units share
// the write ports of BRAM0 (advantages) and BRAM1 (rewards-to-go).
//
// Every requester offers one result: a timestep (address), a lane
// (trajectory), an advantage codeword and a rewards-to-go codeword. Each cycle
// a round-robin winner is chosen; every requester with the winner's address is
// granted in the same cycle and its two codewords are merged into the lane
// positions of one write per BRAM, with per-lane write enables. In the normal
// lock-step case all rows write one word together each cycle. Grants are
// combinational and the write happens on the same clock edge. No two
// requesters ever hold the same (address, lane): each element is written once.
// Coalescing and round-robin order are this design's choices; the paper names
// the crossbar but does not describe it.
module heppo_xbar_wr #(
  parameter int unsigned N     = 64,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned LANES = 64,
  parameter int unsigned QW    = 8
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic [N-1:0]                        req,
  input  logic [N-1:0][$clog2(DEPTH)-1:0]     addr,
  input  logic [N-1:0][$clog2(LANES)-1:0]     lane,
  input  logic [N-1:0][QW-1:0]                adv,
  input  logic [N-1:0][QW-1:0]                rtg,
  output logic [N-1:0]                        gnt,
  // BRAM0 and BRAM1 port B (same address and lane enables)
  output logic                                mem_en,
  output logic [$clog2(DEPTH)-1:0]            mem_addr,
  output logic [LANES-1:0]                    mem_lane_we,
  output logic [LANES-1:0][QW-1:0]            mem_wdata_adv,
  output logic [LANES-1:0][QW-1:0]            mem_wdata_rtg
);
  localparam int unsigned NW = (N > 1) ? $clog2(N) : 1;

  logic [NW-1:0] ptr;
  logic [NW-1:0] win;
  logic          any;

  always_comb begin
    any = 1'b0;
    win = ptr;
    for (int s = 0; s < N; s++) begin
      logic [NW-1:0] k;
      k = NW'((int'(ptr) + s) % N);
      if (!any && req[k]) begin
        any = 1'b1;
        win = k;
      end
    end
  end

  assign mem_en   = any;
  assign mem_addr = addr[win];

  always_comb begin
    mem_lane_we   = '0;
    mem_wdata_adv = '0;
    mem_wdata_rtg = '0;
    for (int k = 0; k < N; k++) begin
      gnt[k] = req[k] && (addr[k] == mem_addr);
      if (gnt[k]) begin
        mem_lane_we[lane[k]]   = 1'b1;
        mem_wdata_adv[lane[k]] = adv[k];
        mem_wdata_rtg[lane[k]] = rtg[k];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   ptr <= '0;
    else if (any) ptr <= (win == NW'(N-1)) ? '0 : win + 1'b1;
  end

  // two granted requesters never target the same lane
  always_comb begin
    for (int a = 0; a < N; a++)
      for (int b = a + 1; b < N; b++)
        a_lane_unique: assert (!(rst_n && gnt[a] && gnt[b] && lane[a] == lane[b]));
  end

endmodule
