// heppo_stack_bram -- one dual-port block RAM of the stack memory system.
//
// Each word is one timestep: LANES codewords of QW bits, lane j holding
// trajectory j (R_(j,t) in BRAM0, V_(j,t) in BRAM1). Timestep t sits at
// address t: the processing system fills it upward (push, t = 0 first) and the
// accelerator reads it downward from T-1 (pop), overwriting each word in place
// with the advantages (BRAM0) and rewards-to-go (BRAM1) once the word has been
// read. This is the layout of the paper's stack memory figure.
//
// Port A reads: address registered, data valid one cycle after a_en.
// Port B writes: per-lane write enables, so different trajectories of the same
// timestep can be written in one cycle or in different cycles. A read and a
// write to the same address in the same cycle return the old word.
module heppo_stack_bram #(
  parameter int unsigned DEPTH = 1024,  // timesteps (paper: 1024)
  parameter int unsigned LANES = 64,    // trajectories per word (paper: 64)
  parameter int unsigned QW    = 8      // codeword bits (paper: 8)
) (
  input  logic                          clk,
  // port A: read
  input  logic                          a_en,
  input  logic [$clog2(DEPTH)-1:0]      a_addr,
  output logic [LANES-1:0][QW-1:0]      a_rdata,
  // port B: write
  input  logic                          b_en,
  input  logic [$clog2(DEPTH)-1:0]      b_addr,
  input  logic [LANES-1:0]              b_lane_we,
  input  logic [LANES-1:0][QW-1:0]      b_wdata
);
  logic [LANES-1:0][QW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) a_rdata <= mem[a_addr];
  end

  always_ff @(posedge clk) begin
    if (b_en) begin
      for (int j = 0; j < LANES; j++)
        if (b_lane_we[j]) mem[b_addr][j] <= b_wdata[j];
    end
  end

endmodule
