// tb_heppo_sync -- self-checking test of the two-flop synchronizer: the output
// must follow a random input level exactly two destination clock edges later.
module tb_heppo_sync;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic d = 1'b0, q;
  logic [1:0] hist;
  heppo_sync dut (.clk, .rst_n, .d, .q);

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hist = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      if (i >= 2) begin
        checks++;
        if (q != hist[0]) begin
          failures++;
          $display("cycle %0d: q=%b expected %b", i, q, hist[0]);
        end
      end
      hist = {hist[0], d};
      d = ($urandom % 3 == 0) ? ~d : d;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
