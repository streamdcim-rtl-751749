// global_controller: sequencing of the StreamDCIM datapath.
//
// Two command queues run side by side, which is what lets CIM rewriting
// hide behind computation (ping-pong-like compute-rewriting pipeline):
//
// Compute side (cc_*, one command at a time):
//   OP_WS_QK   weight-stationary pass: the input scheduler streams n_tok
//              token rows, stream A into Q-CIM and stream B into K-CIM
//              (core_mask selects which cores deliver results).
//   OP_WS_TBR  weight-stationary pass on the TBR-CIM core in normal mode:
//              streams A and B form 128-element rows.
//   OP_XFWD    one cross-forwarding step: source macro src reads out its 32
//              tile rows one after another; for each, the pipeline bus
//              delivers the planes to the consumer macros (see
//              tbsn_pipeline_bus) and the collector gathers one word per
//              consumer. A row starts when the collector is idle.
//   OP_MODE    writes mode_config of the eight TBR-CIM macros.
//   OP_PRUNE   DTPU ranks the collected column sums, keeps keep_cnt tokens.
//   OP_DTPU_CLR clears the DTPU.
//   A command is accepted (cc_ready) when the previous one has fully drained
//   through the collector and SFU, and when no macro it uses is being
//   rewritten.
//
// Rewrite side (rc_*): writes n_rows rows of one half of one macro from one
// of the four rewriting sources, one row per cycle (buffer read, then write
// the next cycle). It waits while the target macro is in use by the running
// (or just arriving) compute command: a TBR-CIM macro is in use during a
// cross-forwarding step only if it is the source or a consumer of that step,
// so macros that the step no longer needs are rewritten at once.
// rw_hazard is high in cycles a rewrite waits, rw_overlap in cycles a row is
// written while a compute command runs.
//
// Which macros a step uses follows the paper's dataflow and pipeline figure;
// the command set and its encoding are this design's own.
module global_controller
  import sdcim_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // commands
  input  logic              cc_valid,
  output logic              cc_ready,
  input  ccmd_t             cc,
  input  logic              rc_valid,
  output logic              rc_ready,
  input  rcmd_t             rc,
  // TBR-CIM configuration
  output logic [MACROS-1:0] mode_normal,
  output logic              xfwd_active,
  output logic [2:0]        xfwd_src,
  output logic              xfwd_dir,
  output logic [MACROS-1:0] fwd_start,
  output logic [4:0]        fwd_row,
  // input scheduler
  output logic              sched_start,
  output logic [ADDR_W-1:0] sched_addr_a,
  output logic [ADDR_W-1:0] sched_addr_b,
  output logic [6:0]        sched_n_tok,
  input  logic              sched_busy,
  input  logic              sched_tok_issue,
  // result collector, SFU, DTPU
  output logic              cfg_load,
  output logic [1:0]        cfg_kind,
  output logic [1:0]        cfg_core_mask,
  output logic [MACROS-1:0] cfg_xmask,
  output logic [ADDR_W-1:0] cfg_out0,
  output logic [ADDR_W-1:0] cfg_out1,
  output logic [5:0]        cfg_shift,
  output logic              expect_res,
  input  logic              coll_idle,
  input  logic              sfu_idle,
  output sfu_func_e         sfu_func,
  output logic              dtpu_en,
  output logic              dtpu_clear,
  output logic              dtpu_finalize,
  output logic [6:0]        dtpu_keep_cnt,
  // rewriting
  output logic              rw_rd_en,
  output src_sel_e          rw_sel,
  output logic [ADDR_W-1:0] rw_rd_addr,
  output logic [MACROS-1:0] rw_wr_q,
  output logic [MACROS-1:0] rw_wr_k,
  output logic [MACROS-1:0] rw_wr_t,
  output logic [4:0]        rw_wr_row,
  output logic              rw_wr_half,
  // events
  output logic              rw_hazard,
  output logic              rw_overlap,
  output logic              cc_blocked
);
  // ---------------- compute side ----------------
  typedef enum logic [2:0] {K_IDLE, K_WS_GO, K_WS_RUN, K_X_ROW, K_X_GAP, K_DRAIN} kstate_e;
  kstate_e ks;
  ccmd_t   cur;
  logic [5:0] xrow;

  // Macros a compute command uses: {tbr, k, q}
  function automatic logic [3*MACROS-1:0] uses(ccmd_t c);
    logic [MACROS-1:0] t;
    t = '0;
    unique case (c.op)
      OP_WS_QK:  return {{MACROS{1'b0}}, {MACROS{c.core_mask[1]}}, {MACROS{c.core_mask[0]}}};
      OP_WS_TBR: return {{MACROS{1'b1}}, {2*MACROS{1'b0}}};
      OP_XFWD: begin
        for (int j = 0; j < MACROS; j++)
          t[j] = c.dir ? (j <= int'(c.src)) : (j >= int'(c.src));
        return {t, {2*MACROS{1'b0}}};
      end
      default:   return '0;
    endcase
  endfunction

  function automatic logic [MACROS-1:0] consumers(logic [2:0] s, logic d);
    logic [MACROS-1:0] t;
    for (int j = 0; j < MACROS; j++) t[j] = d ? (j <= int'(s)) : (j >= int'(s));
    return t;
  endfunction

  // ---------------- rewrite side state ----------------
  typedef enum logic [1:0] {R_IDLE, R_CHECK, R_RUN} rstate_e;
  rstate_e rs;
  rcmd_t   rcur;
  logic [5:0] rcnt;
  logic       wpend;
  logic [4:0] wrow_q;

  logic [3*MACROS-1:0] rw_target;   // macro being rewritten
  always_comb begin
    rw_target = '0;
    rw_target[int'(rcur.core)*MACROS + int'(rcur.macro)] = 1'b1;
  end
  logic [3*MACROS-1:0] rw_active;
  assign rw_active = (rs == R_RUN || wpend) ? rw_target : '0;

  logic [3*MACROS-1:0] c_need;      // macros held or claimed by compute
  assign c_need = (ks != K_IDLE) ? uses(cur) : (cc_valid ? uses(cc) : '0);

  assign cc_blocked = (ks == K_IDLE) && cc_valid && ((uses(cc) & rw_active) != '0);
  assign cc_ready   = (ks == K_IDLE) && !cc_blocked;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ks <= K_IDLE;
      cur <= '0;
      xrow <= '0;
      mode_normal <= '0;
    end else begin
      unique case (ks)
        K_IDLE: if (cc_valid && cc_ready) begin
          cur <= cc;
          unique case (cc.op)
            OP_WS_QK, OP_WS_TBR: ks <= K_WS_GO;
            OP_XFWD:             begin xrow <= '0; ks <= K_X_ROW; end
            OP_MODE:             mode_normal <= cc.mode;
            default: ;
          endcase
        end
        K_WS_GO:  ks <= K_WS_RUN;
        K_WS_RUN: if (!sched_busy) ks <= K_DRAIN;
        K_X_ROW:  if (coll_idle) begin
          xrow <= xrow + 6'd1;
          ks   <= K_X_GAP;
        end
        K_X_GAP:  ks <= (xrow == 6'(TILE_ROWS)) ? K_DRAIN : K_X_ROW;
        K_DRAIN:  if (coll_idle && sfu_idle) ks <= K_IDLE;
        default:  ks <= K_IDLE;
      endcase
    end
  end

  logic cc_fire;
  assign cc_fire = cc_valid && cc_ready;

  assign sched_start   = (ks == K_WS_GO);
  assign sched_addr_a  = cur.addr_a;
  assign sched_addr_b  = cur.addr_b;
  assign sched_n_tok   = cur.n_tok;
  assign xfwd_active   = (cur.op == OP_XFWD) && (ks != K_IDLE);
  assign xfwd_src      = cur.src;
  assign xfwd_dir      = cur.dir;
  assign fwd_row       = xrow[4:0];
  always_comb begin
    fwd_start = '0;
    if (ks == K_X_ROW && coll_idle) fwd_start[cur.src] = 1'b1;
  end
  assign expect_res    = (ks == K_X_ROW && coll_idle) || ((ks == K_WS_RUN) && sched_tok_issue);
  assign cfg_load      = cc_fire && (cc.op == OP_WS_QK || cc.op == OP_WS_TBR || cc.op == OP_XFWD);
  assign cfg_kind      = (cc.op == OP_WS_QK) ? 2'd0 : (cc.op == OP_WS_TBR) ? 2'd1 : 2'd2;
  assign cfg_core_mask = cc.core_mask;
  assign cfg_xmask     = consumers(cc.src, cc.dir);
  assign cfg_out0      = cc.out_addr0;
  assign cfg_out1      = cc.out_addr1;
  assign cfg_shift     = cc.shift;
  assign sfu_func      = cur.sfu_func;
  assign dtpu_en       = (ks != K_IDLE) && cur.dtpu_en;
  assign dtpu_clear    = cc_fire && (cc.op == OP_DTPU_CLR);
  assign dtpu_finalize = cc_fire && (cc.op == OP_PRUNE);
  assign dtpu_keep_cnt = cc.keep_cnt;

  // ---------------- rewrite side ----------------
  logic rw_wait;
  assign rw_wait  = (rs == R_CHECK) && ((c_need & rw_target) != '0);
  assign rc_ready = (rs == R_IDLE) && !wpend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs <= R_IDLE;
      rcur <= '0;
      rcnt <= '0;
      wpend <= 1'b0;
      wrow_q <= '0;
    end else begin
      wpend  <= (rs == R_RUN);
      wrow_q <= rcur.row0 + rcnt[4:0];
      unique case (rs)
        R_IDLE:  if (rc_valid && rc_ready) begin rcur <= rc; rcnt <= '0; rs <= R_CHECK; end
        R_CHECK: if (!rw_wait) rs <= R_RUN;
        R_RUN: begin
          rcnt <= rcnt + 6'd1;
          if (rcnt + 6'd1 == rcur.n_rows) rs <= R_IDLE;
        end
        default: rs <= R_IDLE;
      endcase
    end
  end

  assign rw_rd_en   = (rs == R_RUN);
  assign rw_sel     = rcur.sel;
  assign rw_rd_addr = rcur.src_addr + ADDR_W'(rcnt);
  always_comb begin
    rw_wr_q = '0; rw_wr_k = '0; rw_wr_t = '0;
    if (wpend) begin
      unique case (rcur.core)
        CORE_Q:  rw_wr_q[rcur.macro] = 1'b1;
        CORE_K:  rw_wr_k[rcur.macro] = 1'b1;
        default: rw_wr_t[rcur.macro] = 1'b1;
      endcase
    end
  end
  assign rw_wr_row  = wrow_q;
  assign rw_wr_half = rcur.half;
  assign rw_hazard  = rw_wait;
  assign rw_overlap = wpend && (ks != K_IDLE);

  // A cross-forwarding step needs its macros in hybrid mode.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (ks == K_X_ROW) |-> ((consumers(cur.src, cur.dir) & mode_normal) == '0))
    else $error("global_controller: cross-forwarding on a macro in normal mode");
endmodule
