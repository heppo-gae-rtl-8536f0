// heppo_xbar_rd -- read side of the system crossbar: N loaders share one read
// port of a stack BRAM.
//
// Each requester asks for one codeword: a timestep (the BRAM address) and a
// lane (its trajectory). Because a BRAM word already holds the same timestep
// of every trajectory, all requesters that ask for the same address are served
// by one read. Each cycle the crossbar picks a winner in round-robin order,
// reads the winner's address and grants every requester whose address matches.
// Rows that walk their vectors in step (the normal case: equal lengths, same
// start) are all granted every cycle; rows that have drifted apart share the
// port in turn. The grant is combinational; the codeword arrives on rvalid /
// rdata one cycle later, selected from the word by the lane registered at the
// grant. The coalescing of equal addresses and the round-robin order are this
// design's choices; the paper names the crossbar but does not describe it.
module heppo_xbar_rd #(
  parameter int unsigned N     = 64,    // requesters (rows)
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned LANES = 64,
  parameter int unsigned QW    = 8
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic [N-1:0]                        req,
  input  logic [N-1:0][$clog2(DEPTH)-1:0]     addr,
  input  logic [N-1:0][$clog2(LANES)-1:0]     lane,
  output logic [N-1:0]                        gnt,
  output logic [N-1:0]                        rvalid,
  output logic [N-1:0][QW-1:0]                rdata,
  // BRAM port A
  output logic                                mem_en,
  output logic [$clog2(DEPTH)-1:0]            mem_addr,
  input  logic [LANES-1:0][QW-1:0]            mem_rdata
);
  localparam int unsigned NW = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned LW = $clog2(LANES);

  logic [NW-1:0] ptr;          // requester with the highest priority
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
    for (int k = 0; k < N; k++) gnt[k] = req[k] && (addr[k] == mem_addr);
  end

  logic [N-1:0]          gnt_q;
  logic [N-1:0][LW-1:0]  lane_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr    <= '0;
      gnt_q  <= '0;
      lane_q <= '0;
    end else begin
      gnt_q  <= gnt;
      lane_q <= lane;
      if (any) ptr <= (win == NW'(N-1)) ? '0 : win + 1'b1;
    end
  end

  always_comb begin
    for (int k = 0; k < N; k++) begin
      rvalid[k] = gnt_q[k];
      rdata[k]  = mem_rdata[lane_q[k]];
    end
  end

  // the winner is always among the granted
  a_win_granted: assert property (@(posedge clk) disable iff (!rst_n) any |-> gnt[win]);

endmodule
