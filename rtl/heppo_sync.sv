// heppo_sync -- two-flop synchronizer for a level control signal entering a
// clock domain.
//
// The accelerator and the processing system run from different clocks. Data
// never crosses between them directly (it is exchanged through the BRAMs,
// while only one side works on them), but the control levels that start a run
// and report its end do, and each of them passes through one of these. The
// output follows the input two to three destination clock edges later.
module heppo_sync #(
  parameter int unsigned STAGES = 2
) (
  input  logic clk,       // destination clock
  input  logic rst_n,     // destination reset
  input  logic d,         // level from the other domain
  output logic q
);
  logic [STAGES-1:0] r;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r <= '0;
    else        r <= {r[STAGES-2:0], d};
  end
  assign q = r[STAGES-1];
endmodule
