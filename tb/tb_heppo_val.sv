// tb_heppo_val -- self-checking test of the Values Loader.
//
// An input queue model offers 300 random (R_i, i, Done, trajectory) entries;
// a 32 x 8-lane BRAM model answers the value reads one cycle after a randomly
// withheld grant; the output queue (depth 4) drains at random. Every pushed
// entry must carry the same R, i, Done and trajectory, in order, with
// V = code/32 * sigma_v + mu_v (within one LSB of the 16-bit fraction), and
// the output queue must never overflow. With grants and pops always on the
// loader must move one entry per cycle.
module tb_heppo_val;
  import heppo_pkg::*;
  localparam int DEPTH = 32, LANES = 8, QD = 4, NI = 300;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  fx_t mu_v, sigma_v;
  logic in_empty, in_pop, rd_req, rd_gnt, rd_valid, q_push;
  rel_item_t in_item;
  logic [4:0] rd_addr;
  logic [2:0] rd_lane;
  q_t rd_data;
  val_item_t q_item;
  logic [2:0] q_free;
  heppo_val #(.DEPTH(DEPTH), .LANES(LANES), .QD(QD)) dut (.*);

  logic [LANES-1:0][QW-1:0] model [DEPTH];
  rel_item_t items [NI];
  int head = 0, outn = 0, qcount = 0;
  logic fast = 1'b0;
  int run = 0, max_run = 0;

  assign in_empty = (head >= NI);
  assign in_item  = items[head < NI ? head : 0];
  assign q_free   = 3'(QD - qcount);

  always @(posedge clk) begin
    rd_valid <= rst_n && rd_req && rd_gnt;
    rd_data  <= model[rd_addr][rd_lane];
  end
  always @(negedge clk) rd_gnt = fast || ($urandom % 3 != 0);

  always @(posedge clk) if (rst_n) begin
    logic pop;
    real ev, gv;
    pop = (qcount > 0) && (fast || ($urandom % 2 == 0));
    if (in_pop) head++;
    if (q_push) begin
      rel_item_t e;
      e = items[outn];
      checks++;
      if (qcount - int'(pop) >= QD) begin failures++; $display("push into full queue"); end
      ev = real'($signed(model[e.idx][e.traj])) / 32.0 * (real'(sigma_v) / 65536.0)
           + real'(mu_v) / 65536.0;
      gv = real'(q_item.v) / 65536.0;
      checks++;
      if (q_item.r != e.r || q_item.idx != e.idx || q_item.traj != e.traj || q_item.done != e.done ||
          gv - ev > 1.0/65536.0 || ev - gv > 1.0/65536.0) begin
        failures++;
        $display("entry %0d: v %f expected %f", outn, gv, ev);
      end
      outn++;
      run++;
      if (run > max_run) max_run = run;
    end else run = 0;
    qcount = qcount + int'(q_push) - int'(pop);
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) for (int j = 0; j < LANES; j++) model[a][j] = 8'($urandom);
    for (int i = 0; i < NI; i++) begin
      int rr;
      rr = int'($urandom_range(32'h0008_0000)) - 32'sh0004_0000;
      items[i].r    = fx_t'(rr);
      items[i].idx  = idx_t'($urandom % DEPTH);
      items[i].traj = trj_t'($urandom % LANES);
      items[i].done = 1'($urandom);
    end
    mu_v    = fx_t'(-32'sd163840);    // -2.5
    sigma_v = fx_t'(32'sd229376);     //  3.5
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (head >= NI / 2);
    @(negedge clk);
    fast = 1;
    max_run = 0;
    wait (outn == NI);
    repeat (3) @(posedge clk);
    checks++;
    if (max_run < NI / 2 - 4) begin failures++; $display("longest run %0d", max_run); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
