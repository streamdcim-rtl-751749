// streamdcim_top: StreamDCIM, a tile-based streaming digital CIM accelerator
// for the attention layers of two-modality (X: vision, Y: language)
// Transformers.
//
// Structure:
//  * input, weight and output buffers (pingpong_buffer, 2 x 32 KB each);
//  * the tile-based streaming network: the systolic input scheduler, the
//    Q-CIM and K-CIM cores (eight weight-stationary qk_cim_macro each), the
//    TBR-CIM core (eight tbr_cim_macro, hybrid or normal mode per macro) and
//    the pipeline bus that cross-forwards tile rows between TBR-CIM macros;
//  * the result collector, the special function unit (softmax, GELU) and the
//    dynamic token pruning unit on the way to the output buffer;
//  * the global controller with a compute and a rewrite command queue.
//
// Host interface (this design's own): the host writes the input and weight
// buffers, reads the output buffer on its second read port and issues
// compute (cc_*) and rewrite (rc_*) commands with valid/ready handshakes.
// Results of Q-CIM and of TBR-CIM go to the addresses given in a command's
// out_addr0, K-CIM results to out_addr1; by convention modal-X results are
// kept in output bank 0 and modal-Y results in bank 1, which are the
// Q_X/K_X/V_X and Q_Y/K_Y/V_Y sources of the CIM rewriting select MUX. Both
// share read port 0 of the output buffer; the source selects the bank.
// Event outputs (ev_*) pulse for the mechanisms of interest.
module streamdcim_top
  import sdcim_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // host access to the buffers
  input  logic              host_in_we,
  input  logic [ADDR_W-1:0] host_in_addr,
  input  vec_t              host_in_data,
  input  logic              host_w_we,
  input  logic [ADDR_W-1:0] host_w_addr,
  input  vec_t              host_w_data,
  input  logic              host_o_re,
  input  logic [ADDR_W-1:0] host_o_addr,
  output vec_t              host_o_rdata,
  // commands
  input  logic              cc_valid,
  output logic              cc_ready,
  input  ccmd_t             cc,
  input  logic              rc_valid,
  output logic              rc_ready,
  input  rcmd_t             rc,
  // status
  output logic [LANES-1:0]  keep_mask,
  output logic [MACROS-1:0] mode_normal,
  output logic              ev_sched_stall,
  output logic              ev_rw_hazard,
  output logic              ev_rw_overlap,
  output logic              ev_cc_blocked,
  output logic              ev_xfwd_row,
  output logic              ev_out_write
);
  // ---------------- controller ----------------
  logic              xfwd_active, xfwd_dir;
  logic [2:0]        xfwd_src;
  logic [MACROS-1:0] fwd_start;
  logic [4:0]        fwd_row;
  logic              sched_start, sched_busy, sched_tok_issue, sched_done;
  logic [ADDR_W-1:0] sched_addr_a, sched_addr_b;
  logic [6:0]        sched_n_tok, sched_tok_idx;
  logic              cfg_load, expect_res, coll_idle, sfu_idle;
  logic [1:0]        cfg_kind, cfg_core_mask;
  logic [MACROS-1:0] cfg_xmask;
  logic [ADDR_W-1:0] cfg_out0, cfg_out1;
  logic [5:0]        cfg_shift;
  sfu_func_e         sfu_func;
  logic              dtpu_en, dtpu_clear, dtpu_finalize, dtpu_mask_valid;
  logic [6:0]        dtpu_keep_cnt;
  logic              rw_rd_en, rw_wr_half;
  src_sel_e          rw_sel;
  logic [ADDR_W-1:0] rw_rd_addr;
  logic [MACROS-1:0] rw_wr_q, rw_wr_k, rw_wr_t;
  logic [4:0]        rw_wr_row;

  global_controller u_ctrl (
    .clk, .rst_n, .cc_valid, .cc_ready, .cc, .rc_valid, .rc_ready, .rc,
    .mode_normal, .xfwd_active, .xfwd_src, .xfwd_dir, .fwd_start, .fwd_row,
    .sched_start, .sched_addr_a, .sched_addr_b, .sched_n_tok, .sched_busy, .sched_tok_issue,
    .cfg_load, .cfg_kind, .cfg_core_mask, .cfg_xmask, .cfg_out0, .cfg_out1, .cfg_shift,
    .expect_res, .coll_idle, .sfu_idle, .sfu_func, .dtpu_en, .dtpu_clear, .dtpu_finalize,
    .dtpu_keep_cnt, .rw_rd_en, .rw_sel, .rw_rd_addr, .rw_wr_q, .rw_wr_k, .rw_wr_t,
    .rw_wr_row, .rw_wr_half, .rw_hazard(ev_rw_hazard), .rw_overlap(ev_rw_overlap),
    .cc_blocked(ev_cc_blocked)
  );

  // ---------------- buffers ----------------
  vec_t in_rdata0, in_rdata1, w_rdata0, w_rdata1, o_rdata0;
  logic sfu_out_valid;
  vec_t sfu_out_data;
  logic [ADDR_W-1:0] sfu_out_tag;
  logic [ADDR_W-1:0] sched_rd_addr;
  logic              sched_rd_en;

  pingpong_buffer u_input_buf (
    .clk, .we(host_in_we), .waddr(host_in_addr), .wdata(host_in_data),
    .re0(sched_rd_en), .raddr0(sched_rd_addr), .rdata0(in_rdata0),
    .re1(rw_rd_en && rw_sel == SRC_INPUT), .raddr1(rw_rd_addr), .rdata1(in_rdata1)
  );

  pingpong_buffer u_weight_buf (
    .clk, .we(host_w_we), .waddr(host_w_addr), .wdata(host_w_data),
    .re0(rw_rd_en && rw_sel == SRC_WEIGHT), .raddr0(rw_rd_addr), .rdata0(w_rdata0),
    .re1(1'b0), .raddr1('0), .rdata1(w_rdata1)
  );

  pingpong_buffer u_output_buf (
    .clk, .we(sfu_out_valid), .waddr(sfu_out_tag), .wdata(sfu_out_data),
    .re0(rw_rd_en && (rw_sel == SRC_RES_X || rw_sel == SRC_RES_Y)),
    .raddr0({rw_sel == SRC_RES_Y, rw_rd_addr[ADDR_W-2:0]}), .rdata0(o_rdata0),
    .re1(host_o_re), .raddr1(host_o_addr), .rdata1(host_o_rdata)
  );

  // The four sources of the CIM rewriting select MUX.
  vec_t wr_src [4];
  assign wr_src[SRC_INPUT]  = in_rdata1;
  assign wr_src[SRC_RES_X]  = o_rdata0;
  assign wr_src[SRC_WEIGHT] = w_rdata0;
  assign wr_src[SRC_RES_Y]  = o_rdata0;

  // ---------------- input scheduler ----------------
  act_t act_a [MACROS];
  act_t act_b [MACROS];

  systolic_input_scheduler u_sched (
    .clk, .rst_n, .start(sched_start), .addr_a(sched_addr_a), .addr_b(sched_addr_b),
    .n_tok(sched_n_tok), .keep_mask, .rd_en(sched_rd_en), .rd_addr(sched_rd_addr),
    .rd_data(in_rdata0), .coll_idle, .act_a, .act_b, .tok_issue(sched_tok_issue),
    .tok_idx(sched_tok_idx), .stall(ev_sched_stall), .busy(sched_busy), .done(sched_done)
  );

  // ---------------- Q-CIM and K-CIM cores ----------------
  logic signed [ACC_W-1:0] q_res [MACROS][TILE_ROWS];
  logic signed [ACC_W-1:0] k_res [MACROS][TILE_ROWS];
  logic [MACROS-1:0] q_valid, k_valid;

  for (genvar m = 0; m < MACROS; m++) begin : g_qk
    qk_cim_macro u_q (
      .clk, .rst_n, .wr_en(rw_wr_q[m]), .wr_row(rw_wr_row), .wr_data(wr_src[rw_sel]),
      .act(act_a[m]), .res(q_res[m]), .res_valid(q_valid[m])
    );
    qk_cim_macro u_k (
      .clk, .rst_n, .wr_en(rw_wr_k[m]), .wr_row(rw_wr_row), .wr_data(wr_src[rw_sel]),
      .act(act_b[m]), .res(k_res[m]), .res_valid(k_valid[m])
    );
  end

  // ---------------- TBR-CIM core and pipeline bus ----------------
  act_t fwd_i [MACROS];
  act_t fwd_w [MACROS];
  act_t act_a_last [MACROS];
  act_t act_b_last [MACROS];
  logic [MACROS-1:0] en_l, en_r;
  logic signed [ACC_W-1:0] t_res [MACROS][2*TILE_ROWS];
  logic [MACROS-1:0] t_valid;

  tbsn_pipeline_bus u_bus (
    .clk, .rst_n, .active(xfwd_active), .src(xfwd_src), .dir(xfwd_dir),
    .fwd_i, .fwd_w, .act_a_last, .act_b_last, .en_l, .en_r
  );

  for (genvar m = 0; m < MACROS; m++) begin : g_tbr
    tbr_cim_macro u_tbr (
      .clk, .rst_n, .mode_normal(mode_normal[m]),
      .wr_en(rw_wr_t[m]), .wr_sel(rw_sel), .wr_src, .wr_row(rw_wr_row), .wr_half(rw_wr_half),
      .act_a_init(act_a[m]), .act_b_init(act_b[m]),
      .act_a_last(act_a_last[m]), .act_b_last(act_b_last[m]),
      .sel_last(xfwd_active), .en_l(en_l[m]), .en_r(en_r[m]),
      .fwd_start(fwd_start[m]), .fwd_row, .fwd_i(fwd_i[m]), .fwd_w(fwd_w[m]),
      .res(t_res[m]), .res_valid(t_valid[m])
    );
  end

  // ---------------- result path ----------------
  logic              coll_valid, sfu_in_ready;
  vec_t              coll_data;
  logic [ADDR_W-1:0] coll_addr;

  result_collector u_coll (
    .clk, .rst_n, .cfg_load, .cfg_kind, .cfg_core_mask, .cfg_xmask, .cfg_out0, .cfg_out1,
    .cfg_shift, .expect_res, .q_res, .q_valid, .k_res, .k_valid, .t_res, .t_valid,
    .out_valid(coll_valid), .out_ready(sfu_in_ready), .out_data(coll_data),
    .out_addr(coll_addr), .idle(coll_idle)
  );

  sfu u_sfu (
    .clk, .rst_n, .in_valid(coll_valid), .in_ready(sfu_in_ready), .in_data(coll_data),
    .in_func(sfu_func), .in_tag(coll_addr),
    .out_valid(sfu_out_valid), .out_ready(1'b1), .out_data(sfu_out_data), .out_tag(sfu_out_tag)
  );
  assign sfu_idle = sfu_in_ready;

  dtpu u_dtpu (
    .clk, .rst_n, .clear(dtpu_clear), .snoop_valid(sfu_out_valid && dtpu_en),
    .snoop_data(sfu_out_data), .finalize(dtpu_finalize), .keep_cnt(dtpu_keep_cnt),
    .keep_mask, .mask_valid(dtpu_mask_valid)
  );

  assign ev_xfwd_row  = |fwd_start;
  assign ev_out_write = sfu_out_valid;
endmodule
