// heppo_wb -- write-back unit, the last stage of a row.
//
// Takes the PE's advantage and rewards-to-go for element i, re-quantizes both
// to 8-bit codewords and queues them; the head of the queue asks the write
// crossbar to store them in place of R_i (BRAM0) and V_i (BRAM1) at address i.
// The advantage is coded on the reward grid (it stays in the standardized
// reward scale); the rewards-to-go, which is in the value scale, is first
// block-standardized with the run's mu_v and 1/sigma_v. Both saturate at the
// codeword range; sat_adv / sat_rtg pulse when that happens. Overwriting the
// inputs in place and writing 8-bit results follow the paper (its memory and
// bandwidth figures count one byte per advantage and per rewards-to-go); the
// quantizer scales are this design's choice.
//
// Flow control: the PE has no stall, so the row may only start an element
// when the queue is sure to have room for it when it comes out of the PE.
// credit_ok is high while free entries exceed the elements still inside the
// PE; pe_issue reports an element entering the PE.
module heppo_wb
  import heppo_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned LANES = 64,
  parameter int unsigned QD    = 16     // must exceed the PE latency for full rate
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  fx_t                           mu_v,
  input  fx_t                           inv_sigma_v,
  // credit toward the row input
  input  logic                          pe_issue,
  output logic                          credit_ok,
  // from the PE
  input  logic                          in_valid,
  input  fx_t                           in_adv,
  input  fx_t                           in_rtg,
  input  idx_t                          in_idx,
  input  trj_t                          in_traj,
  // write crossbar
  output logic                          wr_req,
  output logic [$clog2(DEPTH)-1:0]      wr_addr,
  output logic [$clog2(LANES)-1:0]      wr_lane,
  output q_t                            wr_adv,
  output q_t                            wr_rtg,
  input  logic                          wr_gnt,
  // events
  output logic                          sat_adv,
  output logic                          sat_rtg
);
  localparam int unsigned CW = $clog2(QD+1);

  fx_t       rtg_std;
  wb_item_t  item, head;
  logic      empty, full;
  logic [CW-1:0] count, free;
  logic [CW:0]   outstanding;

  assign rtg_std = fx_mul(in_rtg - mu_v, inv_sigma_v);
  assign item    = '{adv: quant(in_adv), rtg: quant(rtg_std), idx: in_idx, traj: in_traj};
  assign sat_adv = in_valid && quant_sat(in_adv);
  assign sat_rtg = in_valid && quant_sat(rtg_std);

  heppo_fifo #(.T(wb_item_t), .DEPTH(QD)) u_q (
    .clk, .rst_n,
    .push(in_valid), .wr_data(item),
    .pop(wr_req && wr_gnt), .rd_data(head),
    .empty, .full, .count, .free
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) outstanding <= '0;
    else        outstanding <= outstanding + (CW+1)'(pe_issue) - (CW+1)'(in_valid);
  end
  assign credit_ok = (CW+1)'(free) > outstanding;

  assign wr_req  = !empty;
  assign wr_addr = head.idx[$clog2(DEPTH)-1:0];
  assign wr_lane = head.traj[$clog2(LANES)-1:0];
  assign wr_adv  = head.adv;
  assign wr_rtg  = head.rtg;

  // The credits keep the queue from overflowing: a result never arrives at a
  // full queue unless the head leaves in the same cycle, and the queue never
  // holds more than the results already promised room.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && full |-> wr_req && wr_gnt);
  a_credit_bound: assert property (@(posedge clk) disable iff (!rst_n)
    int'(count) + int'(outstanding) <= int'(QD));

endmodule
