// tb_heppo_stack_bram -- self-checking test of a stack BRAM.
//
// Fills a 32 x 8-lane memory word by word (push order, t = 0 first), then
// reads it back from the top down while overwriting random lanes of words
// already read (the in-place update), and finally reads everything again.
// Every read is compared with an array model; read latency is one cycle and a
// same-address read/write returns the old word.
module tb_heppo_stack_bram;
  localparam int DEPTH = 32, LANES = 8, QW = 8;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic a_en, b_en;
  logic [4:0] a_addr, b_addr;
  logic [LANES-1:0][QW-1:0] a_rdata, b_wdata;
  logic [LANES-1:0] b_lane_we;
  heppo_stack_bram #(.DEPTH(DEPTH), .LANES(LANES), .QW(QW)) dut (.*);

  logic [LANES-1:0][QW-1:0] model [DEPTH];
  logic [LANES-1:0][QW-1:0] expect_q;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(logic ren, int ra, logic wen, int wa, logic [LANES-1:0] we,
                      logic [LANES-1:0][QW-1:0] wd);
    @(negedge clk);
    a_en = ren; a_addr = 5'(ra);
    b_en = wen; b_addr = 5'(wa); b_lane_we = we; b_wdata = wd;
    expect_q = model[ra];   // old contents: sampled before the write lands
    @(posedge clk);
    #1;
    if (ren) begin
      checks++;
      if (a_rdata !== expect_q) begin
        failures++;
        $display("read %0d: %h expected %h", ra, a_rdata, expect_q);
      end
    end
    if (wen) for (int j = 0; j < LANES; j++) if (we[j]) model[wa][j] = wd[j];
  endtask

  initial begin
    logic [LANES-1:0][QW-1:0] w;
    a_en = 0; b_en = 0; a_addr = 0; b_addr = 0; b_lane_we = 0; b_wdata = 0;
    for (int t = 0; t < DEPTH; t++) begin
      for (int j = 0; j < LANES; j++) w[j] = 8'($urandom);
      step(0, 0, 1, t, '1, w);
    end
    // pop from the top; overwrite the previous (already read) word in place,
    // and once also the word being read
    for (int t = DEPTH - 1; t >= 0; t--) begin
      for (int j = 0; j < LANES; j++) w[j] = 8'($urandom);
      step(1, t, 1, (t == DEPTH - 1) ? t : t + 1, LANES'($urandom), w);
    end
    for (int t = 0; t < DEPTH; t++) step(1, t, 0, 0, '0, w);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
