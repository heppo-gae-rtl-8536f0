// heppo_fifo -- synchronous first-in-first-out queue between the stages of a
// row (ReL -> VaL -> PE, and PE -> write back).
//
// A circular buffer of DEPTH entries of type T with a read and a write
// pointer and an occupancy counter. push and pop may happen in the same cycle
// (also when full: the pop makes room). The head entry is shown on rd_data
// combinationally while not empty (show-ahead). `free` lets a producer with a
// known in-flight count reserve room before it issues a memory read. The
// queues themselves are drawn in the paper's architecture figure; their depth
// is this design's choice.
module heppo_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  T                         wr_data,
  input  logic                     pop,
  output T                         rd_data,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic [$clog2(DEPTH+1)-1:0] free
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  T               mem [DEPTH];
  logic [AW-1:0]  wp, rp;

  assign empty   = (count == '0);
  assign full    = (count == CW'(DEPTH));
  assign free    = CW'(DEPTH) - count;
  assign rd_data = mem[rp];

  logic do_push, do_pop;
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_push) wp <= inc(wp);
      if (do_pop)  rp <= inc(rp);
      count <= count + CW'(do_push) - CW'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= wr_data;
  end

  // a producer never pushes into a full queue, a consumer never pops an empty one
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);

endmodule
