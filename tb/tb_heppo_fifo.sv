// tb_heppo_fifo -- self-checking test of the row queue.
//
// Random pushes and pops (including push and pop together while full) on a
// 4-entry queue of 16-bit words, against a queue model: data order, empty,
// full, count and free are checked every cycle.
module tb_heppo_fifo;
  localparam int DEPTH = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic push, pop, empty, full;
  logic [15:0] wr_data, rd_data;
  logic [2:0] count, free;
  heppo_fifo #(.T(logic [15:0]), .DEPTH(DEPTH)) dut (.*);

  logic [15:0] model [$];
  int n_full_pp = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; wr_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      checks++;
      if (empty != (model.size() == 0) || full != (model.size() == DEPTH) ||
          int'(count) != model.size() || int'(free) != DEPTH - model.size()) begin
        failures++;
        $display("flags wrong at %0d: size %0d count %0d", i, model.size(), count);
      end
      if (model.size() > 0) begin
        checks++;
        if (rd_data != model[0]) begin
          failures++;
          $display("head %h expected %h", rd_data, model[0]);
        end
      end
      pop     = (model.size() > 0) && ($urandom % 3 != 0);
      push    = ((model.size() < DEPTH) || pop) && ($urandom % 2 == 0);
      wr_data = 16'($urandom);
      if (push && pop && model.size() == DEPTH) n_full_pp++;
      @(posedge clk);
      #1;
      if (pop)  void'(model.pop_front());
      if (push) model.push_back(wr_data);
    end
    checks++;
    if (n_full_pp == 0) begin
      failures++;
      $display("push+pop while full never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
