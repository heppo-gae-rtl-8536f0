// heppo_val -- Values Loader (VaL), the second stage of a row.
//
// For each (R_i, i, Done) taken from the ReL queue it reads V_i of the same
// trajectory from BRAM1 through the read crossbar, de-quantizes the codeword
// and undoes the block standardization (v = code * step * sigma_v + mu_v,
// with the block statistics sigma_v and mu_v supplied with the run), then
// pushes (R_i, V_i, i, Done) into the queue toward the PE. The de-quantize /
// de-standardize step follows the paper; doing it in the loader is this
// design's choice.
//
// Timing: the head of the input queue is offered to the crossbar while the
// output queue has room for it plus the one in flight; it is popped on the
// grant and the value returns, and is pushed, one cycle later. One element
// per cycle at full rate.
module heppo_val
  import heppo_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned LANES = 64,
  parameter int unsigned QD    = 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  fx_t                           mu_v,
  input  fx_t                           sigma_v,
  // queue from the Rewards Loader
  input  logic                          in_empty,
  input  rel_item_t                     in_item,
  output logic                          in_pop,
  // read crossbar (BRAM1)
  output logic                          rd_req,
  output logic [$clog2(DEPTH)-1:0]      rd_addr,
  output logic [$clog2(LANES)-1:0]      rd_lane,
  input  logic                          rd_gnt,
  input  logic                          rd_valid,
  input  q_t                            rd_data,
  // queue toward the PE
  output logic                          q_push,
  output val_item_t                     q_item,
  input  logic [$clog2(QD+1)-1:0]       q_free
);
  rel_item_t pend;

  assign rd_req  = !in_empty && (int'(q_free) > int'(rd_valid));
  assign rd_addr = in_item.idx[$clog2(DEPTH)-1:0];
  assign rd_lane = in_item.traj[$clog2(LANES)-1:0];
  assign in_pop  = rd_req && rd_gnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      pend <= '0;
    else if (in_pop) pend <= in_item;
  end

  assign q_push = rd_valid;
  assign q_item = '{r:    pend.r,
                    v:    fx_mul(dequant(rd_data), sigma_v) + mu_v,
                    idx:  pend.idx,
                    traj: pend.traj,
                    done: pend.done};

endmodule
