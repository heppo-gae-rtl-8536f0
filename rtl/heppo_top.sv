// heppo_top -- HEPPO-GAE advantage / rewards-to-go accelerator.
//
// N_PE identical rows, each a Rewards Loader (ReL), a queue, a Values Loader
// (VaL), a queue, a GAE processing element (PE) and a write-back unit, share
// two dual-port stack BRAMs through a read crossbar per BRAM and one write
// crossbar. BRAM0 holds the 8-bit rewards of all trajectories, BRAM1 the
// 8-bit values, one word per timestep. Each row walks one trajectory from its
// last timestep to its first, and the results overwrite the inputs in place:
// advantages into BRAM0, rewards-to-go into BRAM1. A controller deals
// trajectories to rows and runs the start/done handshake with the processing
// system.
//
// Use: while the accelerator is idle (host_ready) the processing system owns
// the BRAMs through the host port: 32-bit words, four lanes (trajectories
// 4w..4w+3) of one timestep per word, host_sel choosing BRAM0 or BRAM1, reads
// returning one cycle later. It writes cfg, n_traj and t_len, raises ps_start
// and waits for ps_done, then reads the results and lowers ps_start. ps_start
// and ps_done live in the ps_clk domain and are synchronized; the host port and
// everything else run on clk (the paper's BRAM would give the processing system
// its own port clock; here one clock is used for both sides of the BRAMs).
//
// Rate: with all rows in step the crossbars serve every row each cycle, so the
// array completes N_PE elements per cycle after a fill latency of about 14
// cycles per vector (queue, crossbar and 8-cycle PE).
module heppo_top
  import heppo_pkg::*;
#(
  parameter int unsigned N_PE  = 64,    // rows (paper: 64 PEs)
  parameter int unsigned LANES = 64,    // trajectories per BRAM word (paper: 64)
  parameter int unsigned T_MAX = 1024,  // timesteps (paper: 1024)
  parameter int unsigned K     = 2,     // lookahead steps (paper: 2)
  parameter int unsigned QD    = 4,     // ReL->VaL and VaL->PE queue depth
  parameter int unsigned WBD   = 16     // write-back queue depth
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           ps_clk,
  input  logic                           ps_rst_n,
  // run control, processing-system clock domain
  input  logic                           ps_start,
  output logic                           ps_done,
  // run configuration (static while busy)
  input  cfg_t                           cfg,
  input  trj_t                           n_traj,
  input  idx_t                           t_len,
  // host access to the BRAMs while idle
  output logic                           host_ready,
  input  logic                           host_en,
  input  logic                           host_we,
  input  logic                           host_sel,     // 0: BRAM0 (R / Adv), 1: BRAM1 (V / RTG)
  input  logic [$clog2(T_MAX)-1:0]       host_addr,    // timestep
  input  logic [$clog2(LANES/4)-1:0]     host_word,    // group of four trajectories
  input  logic [31:0]                    host_wdata,
  output logic [31:0]                    host_rdata,
  // status
  output logic [31:0]                    run_cycles,
  output logic [31:0]                    sat_count     // results clipped by the 8-bit re-quantization
);
  localparam int unsigned AW = $clog2(T_MAX);
  localparam int unsigned LW = $clog2(LANES);
  localparam int unsigned HW = $clog2(LANES/4);

  typedef logic [LANES-1:0][QW-1:0] word_t;

  // ---- control --------------------------------------------------------------
  logic start_s, done_l, busy;
  heppo_sync u_sync_start (.clk(clk),    .rst_n(rst_n),    .d(ps_start), .q(start_s));
  heppo_sync u_sync_done  (.clk(ps_clk), .rst_n(ps_rst_n), .d(done_l),   .q(ps_done));

  logic [N_PE-1:0]            job_ready, job_valid;
  trj_t                       job_traj [N_PE];
  idx_t                       job_len;
  logic [$clog2(N_PE+1)-1:0]  wr_count;

  heppo_ctrl #(.N(N_PE)) u_ctrl (
    .clk, .rst_n, .start(start_s), .done(done_l), .busy,
    .n_traj, .t_len, .job_ready, .job_valid, .job_traj, .job_len,
    .wr_count, .run_cycles
  );
  assign host_ready = !busy;

  fx_t c_pow [K+1];
  heppo_coef #(.K(K)) u_coef (.clk, .rst_n, .gamma(cfg.gamma), .lambda(cfg.lambda), .c_pow);

  // ---- crossbars ------------------------------------------------------------------
  logic [N_PE-1:0]            r_req, r_gnt, r_rvalid;
  logic [N_PE-1:0][AW-1:0]    r_addr;
  logic [N_PE-1:0][LW-1:0]    r_lane;
  logic [N_PE-1:0][QW-1:0]    r_rdata;
  logic [N_PE-1:0]            v_req, v_gnt, v_rvalid;
  logic [N_PE-1:0][AW-1:0]    v_addr;
  logic [N_PE-1:0][LW-1:0]    v_lane;
  logic [N_PE-1:0][QW-1:0]    v_rdata;
  logic [N_PE-1:0]            w_req, w_gnt;
  logic [N_PE-1:0][AW-1:0]    w_addr;
  logic [N_PE-1:0][LW-1:0]    w_lane;
  logic [N_PE-1:0][QW-1:0]    w_adv, w_rtg;

  logic              xr_en, xv_en, xw_en;
  logic [AW-1:0]     xr_addr, xv_addr, xw_addr;
  logic [LANES-1:0]  xw_we;
  word_t             xw_adv, xw_rtg, b0_rdata, b1_rdata;

  heppo_xbar_rd #(.N(N_PE), .DEPTH(T_MAX), .LANES(LANES), .QW(QW)) u_xbar_r (
    .clk, .rst_n, .req(r_req), .addr(r_addr), .lane(r_lane), .gnt(r_gnt),
    .rvalid(r_rvalid), .rdata(r_rdata),
    .mem_en(xr_en), .mem_addr(xr_addr), .mem_rdata(b0_rdata)
  );
  heppo_xbar_rd #(.N(N_PE), .DEPTH(T_MAX), .LANES(LANES), .QW(QW)) u_xbar_v (
    .clk, .rst_n, .req(v_req), .addr(v_addr), .lane(v_lane), .gnt(v_gnt),
    .rvalid(v_rvalid), .rdata(v_rdata),
    .mem_en(xv_en), .mem_addr(xv_addr), .mem_rdata(b1_rdata)
  );
  heppo_xbar_wr #(.N(N_PE), .DEPTH(T_MAX), .LANES(LANES), .QW(QW)) u_xbar_w (
    .clk, .rst_n, .req(w_req), .addr(w_addr), .lane(w_lane), .adv(w_adv), .rtg(w_rtg),
    .gnt(w_gnt), .mem_en(xw_en), .mem_addr(xw_addr), .mem_lane_we(xw_we),
    .mem_wdata_adv(xw_adv), .mem_wdata_rtg(xw_rtg)
  );

  always_comb begin
    wr_count = '0;
    for (int k = 0; k < N_PE; k++) wr_count += ($clog2(N_PE+1))'(w_gnt[k]);
  end

  // ---- host port and BRAM port multiplexing -----------------------------------
  logic [LANES-1:0] host_we_lanes;
  word_t            host_wword;
  always_comb begin
    host_we_lanes = '0;
    host_wword    = '0;
    for (int b = 0; b < 4; b++) begin
      host_we_lanes[4*host_word + b] = 1'b1;
      host_wword[4*host_word + b]    = host_wdata[8*b +: 8];
    end
  end

  logic             a0_en, a1_en, b0_en, b1_en;
  logic [AW-1:0]    a0_addr, a1_addr, b0_addr, b1_addr;
  logic [LANES-1:0] b0_we, b1_we;
  word_t            b0_wdata, b1_wdata;

  always_comb begin
    if (busy) begin
      a0_en = xr_en; a0_addr = xr_addr;
      a1_en = xv_en; a1_addr = xv_addr;
      b0_en = xw_en; b0_addr = xw_addr; b0_we = xw_we; b0_wdata = xw_adv;
      b1_en = xw_en; b1_addr = xw_addr; b1_we = xw_we; b1_wdata = xw_rtg;
    end else begin
      a0_en = host_en && !host_we && !host_sel; a0_addr = host_addr;
      a1_en = host_en && !host_we &&  host_sel; a1_addr = host_addr;
      b0_en = host_en &&  host_we && !host_sel; b0_addr = host_addr; b0_we = host_we_lanes; b0_wdata = host_wword;
      b1_en = host_en &&  host_we &&  host_sel; b1_addr = host_addr; b1_we = host_we_lanes; b1_wdata = host_wword;
    end
  end

  heppo_stack_bram #(.DEPTH(T_MAX), .LANES(LANES), .QW(QW)) u_bram0 (
    .clk, .a_en(a0_en), .a_addr(a0_addr), .a_rdata(b0_rdata),
    .b_en(b0_en), .b_addr(b0_addr), .b_lane_we(b0_we), .b_wdata(b0_wdata)
  );
  heppo_stack_bram #(.DEPTH(T_MAX), .LANES(LANES), .QW(QW)) u_bram1 (
    .clk, .a_en(a1_en), .a_addr(a1_addr), .a_rdata(b1_rdata),
    .b_en(b1_en), .b_addr(b1_addr), .b_lane_we(b1_we), .b_wdata(b1_wdata)
  );

  logic          host_sel_q;
  logic [HW-1:0] host_word_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      host_sel_q  <= 1'b0;
      host_word_q <= '0;
    end else if (host_en && !host_we) begin
      host_sel_q  <= host_sel;
      host_word_q <= host_word;
    end
  end
  always_comb begin
    for (int b = 0; b < 4; b++)
      host_rdata[8*b +: 8] = host_sel_q ? b1_rdata[4*host_word_q + b] : b0_rdata[4*host_word_q + b];
  end

  // ---- rows ------------------------------------------------------------------------------
  logic [N_PE-1:0] sat_a, sat_r;

  for (genvar k = 0; k < N_PE; k++) begin : g_row
    rel_item_t              rq_in, rq_out;
    val_item_t              vq_in, vq_out;
    logic                   rq_push, rq_empty, rq_full, rq_pop;
    logic                   vq_push, vq_empty, vq_full, vq_pop;
    logic [$clog2(QD+1)-1:0] rq_count, rq_free, vq_count, vq_free;
    logic                   credit_ok;
    logic                   pe_valid, pe_done;
    fx_t                    pe_adv, pe_rtg;
    idx_t                   pe_idx;
    trj_t                   pe_traj;

    heppo_rel #(.DEPTH(T_MAX), .LANES(LANES), .QD(QD)) u_rel (
      .clk, .rst_n,
      .job_valid(job_valid[k]), .job_traj(job_traj[k]), .job_len, .job_ready(job_ready[k]),
      .rd_req(r_req[k]), .rd_addr(r_addr[k]), .rd_lane(r_lane[k]), .rd_gnt(r_gnt[k]),
      .rd_valid(r_rvalid[k]), .rd_data(r_rdata[k]),
      .q_push(rq_push), .q_item(rq_in), .q_free(rq_free)
    );

    heppo_fifo #(.T(rel_item_t), .DEPTH(QD)) u_rq (
      .clk, .rst_n, .push(rq_push), .wr_data(rq_in), .pop(rq_pop), .rd_data(rq_out),
      .empty(rq_empty), .full(rq_full), .count(rq_count), .free(rq_free)
    );

    heppo_val #(.DEPTH(T_MAX), .LANES(LANES), .QD(QD)) u_val (
      .clk, .rst_n, .mu_v(cfg.mu_v), .sigma_v(cfg.sigma_v),
      .in_empty(rq_empty), .in_item(rq_out), .in_pop(rq_pop),
      .rd_req(v_req[k]), .rd_addr(v_addr[k]), .rd_lane(v_lane[k]), .rd_gnt(v_gnt[k]),
      .rd_valid(v_rvalid[k]), .rd_data(v_rdata[k]),
      .q_push(vq_push), .q_item(vq_in), .q_free(vq_free)
    );

    heppo_fifo #(.T(val_item_t), .DEPTH(QD)) u_vq (
      .clk, .rst_n, .push(vq_push), .wr_data(vq_in), .pop(vq_pop), .rd_data(vq_out),
      .empty(vq_empty), .full(vq_full), .count(vq_count), .free(vq_free)
    );

    assign vq_pop = !vq_empty && credit_ok;

    heppo_pe #(.K(K)) u_pe (
      .clk, .rst_n, .in_valid(vq_pop), .in(vq_out), .gamma(cfg.gamma), .c_pow,
      .out_valid(pe_valid), .out_adv(pe_adv), .out_rtg(pe_rtg),
      .out_idx(pe_idx), .out_traj(pe_traj), .out_done(pe_done)
    );

    heppo_wb #(.DEPTH(T_MAX), .LANES(LANES), .QD(WBD)) u_wb (
      .clk, .rst_n, .mu_v(cfg.mu_v), .inv_sigma_v(cfg.inv_sigma_v),
      .pe_issue(vq_pop), .credit_ok,
      .in_valid(pe_valid), .in_adv(pe_adv), .in_rtg(pe_rtg), .in_idx(pe_idx), .in_traj(pe_traj),
      .wr_req(w_req[k]), .wr_addr(w_addr[k]), .wr_lane(w_lane[k]),
      .wr_adv(w_adv[k]), .wr_rtg(w_rtg[k]), .wr_gnt(w_gnt[k]),
      .sat_adv(sat_a[k]), .sat_rtg(sat_r[k])
    );

    // Row invariants: the loaders' room checks keep both queues from
    // overflowing, each queue's count and free space add up to its depth, and
    // Done leaves the PE only with timestep 0.
    a_rq_room: assert property (@(posedge clk) disable iff (!rst_n) rq_push && rq_full |-> rq_pop);
    a_vq_room: assert property (@(posedge clk) disable iff (!rst_n) vq_push && vq_full |-> vq_pop);
    a_q_count: assert property (@(posedge clk) disable iff (!rst_n)
      (int'(rq_count) + int'(rq_free) == int'(QD)) && (int'(vq_count) + int'(vq_free) == int'(QD)));
    a_pe_done: assert property (@(posedge clk) disable iff (!rst_n) pe_valid && pe_done |-> pe_idx == '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sat_count <= '0;
    else if (start_s && !busy && !done_l) sat_count <= '0;
    else begin
      logic [31:0] s;
      s = sat_count;
      for (int k = 0; k < N_PE; k++) s += 32'(sat_a[k]) + 32'(sat_r[k]);
      sat_count <= s;
    end
  end

endmodule
