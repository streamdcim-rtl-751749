// tb_streamdcim_top: end-to-end test of the accelerator at its default size.
//
// Program (one attention-layer slice of the stream for modal X):
//  1. Load W_Q / W_K rows into the weight buffer and I_X / I_Y rows into the
//     input buffer; rewrite all Q-CIM and K-CIM macros from the weight buffer.
//  2. Load a 256-token I_Y and a 256-column W_V; rewrite every TBR-CIM macro:
//     left half <- its I_Y tile (input buffer), right half <- its W_V tile
//     (weight buffer). Switch all TBR-CIM macros to hybrid mode.
//  3. Cross-forwarding step src=0 of I_Y x W_V: check all 256 words (V).
//  4. Weight-stationary Q_X / K_Y generation for 8 tokens; check.
//  5. Cross-forwarding step src=1, and during it rewrite TBR-CIM #0 with Q_X
//     (from output bank 0) and K_Y (from output bank 1) - macro #0 is free,
//     so this overlaps - and also ask for TBR-CIM #1, which is busy and must
//     wait (hazard). Check the step's 224 words.
//  6. Q_X x K_Y^T on TBR-CIM #0 (dir=1, src=0) through the softmax, with the
//     DTPU collecting column sums; check the probability rows.
//  7. Prune: keep the top tokens; check the keep mask against a ranking done
//     here; then a Q-CIM pass through GELU on 8 tokens must skip the pruned
//     ones. Check its words.
//  8. Mode switch to normal, a rewrite of TBR-CIM #2 immediately followed by
//     a normal-mode TBR-CIM pass (which must wait for the rewrite); check the
//     128-term results.
// Mechanisms counted, each must occur: scheduler stall, rewrite hazard wait,
// rewrite overlapping compute, compute blocked by rewrite, cross-forwarding
// rows, pruned-token skip, softmax, GELU, mode switch hybrid->normal.
module tb_streamdcim_top;
  import sdcim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic host_in_we, host_w_we, host_o_re;
  logic [ADDR_W-1:0] host_in_addr, host_w_addr, host_o_addr;
  vec_t host_in_data, host_w_data, host_o_rdata;
  logic cc_valid, cc_ready, rc_valid, rc_ready;
  ccmd_t cc;
  rcmd_t rc;
  logic [63:0] keep_mask;
  logic [7:0] mode_normal;
  logic ev_sched_stall, ev_rw_hazard, ev_rw_overlap, ev_cc_blocked, ev_xfwd_row, ev_out_write;

  streamdcim_top dut (.*);

  // ---------------- models ----------------
  typedef logic signed [15:0] row_t [64];
  row_t in_m [512], w_m [512], out_m [512];
  row_t tL [8][32], tR [8][32], qW [8][32], kW [8][32];
  int SH = 6;

  int n_stall = 0, n_hazard = 0, n_overlap = 0, n_blocked = 0, n_xrow = 0, n_owr = 0, n_mode = 0;
  logic [MACROS-1:0] mode_q = '1;
  always @(posedge clk) if (rst_n) begin
    if (mode_normal != mode_q) n_mode++;
    mode_q <= mode_normal;
    n_stall   += int'(ev_sched_stall);
    n_hazard  += int'(ev_rw_hazard);
    n_overlap += int'(ev_rw_overlap);
    n_blocked += int'(ev_cc_blocked);
    n_xrow    += int'(ev_xfwd_row);
    n_owr     += int'(ev_out_write);
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  function automatic longint q16(longint v);
    longint s;
    s = v >>> SH;
    if (s > 32767) return 32767;
    if (s < -32768) return -32768;
    return s;
  endfunction

  function automatic longint dot(row_t a, row_t b);
    longint s;
    s = 0;
    for (int c = 0; c < 64; c++) s += longint'(a[c]) * longint'(b[c]);
    return s;
  endfunction

  task automatic wr_in(int a, row_t r);
    @(negedge clk);
    host_in_we = 1; host_in_addr = ADDR_W'(a);
    for (int c = 0; c < 64; c++) host_in_data[c] = r[c];
    in_m[a] = r;
    @(negedge clk); host_in_we = 0;
  endtask

  task automatic wr_w(int a, row_t r);
    @(negedge clk);
    host_w_we = 1; host_w_addr = ADDR_W'(a);
    for (int c = 0; c < 64; c++) host_w_data[c] = r[c];
    w_m[a] = r;
    @(negedge clk); host_w_we = 0;
  endtask

  task automatic rd_out(int a, output row_t r);
    @(negedge clk);
    host_o_re = 1; host_o_addr = ADDR_W'(a);
    @(negedge clk);
    host_o_re = 0;
    for (int c = 0; c < 64; c++) r[c] = host_o_rdata[c];
  endtask

  function automatic row_t rnd_row(int lim);
    row_t r;
    for (int c = 0; c < 64; c++) r[c] = 16'($urandom_range(0, 2*lim) - lim);
    return r;
  endfunction

  task automatic send_cc(ccmd_t c);
    @(negedge clk);
    cc_valid = 1; cc = c;
    @(posedge clk);
    while (!cc_ready) @(posedge clk);
    @(negedge clk);
    cc_valid = 0;
  endtask

  task automatic wait_cc_idle();
    @(negedge clk);
    while (!cc_ready) @(negedge clk);
  endtask

  task automatic send_rc(core_e core, int macro, int half, src_sel_e sel, int addr);
    rcmd_t r;
    r = '0;
    r.core = core; r.macro = 3'(macro); r.half = half[0]; r.row0 = '0; r.n_rows = 6'd32;
    r.sel = sel; r.src_addr = ADDR_W'(addr);
    @(negedge clk);
    rc_valid = 1; rc = r;
    @(posedge clk);
    while (!rc_ready) @(posedge clk);
    @(negedge clk);
    rc_valid = 0;
  endtask

  task automatic wait_rc_idle();
    @(negedge clk);
    while (!rc_ready) @(negedge clk);
  endtask

  function automatic row_t src_row(src_sel_e sel, int a);
    case (sel)
      SRC_INPUT:  return in_m[a];
      SRC_WEIGHT: return w_m[a];
      SRC_RES_X:  return out_m[a % 256];
      default:    return out_m[256 + (a % 256)];
    endcase
  endfunction

  // model of a 32-row rewrite
  task automatic model_rw(core_e core, int m, int half, src_sel_e sel, int addr);
    for (int r = 0; r < 32; r++) begin
      row_t v;
      v = src_row(sel, addr + r);
      case (core)
        CORE_Q:  qW[m][r] = v;
        CORE_K:  kW[m][r] = v;
        default: if (half == 0) tL[m][r] = v; else tR[m][r] = v;
      endcase
    end
  endtask

  task automatic rewrite(core_e core, int m, int half, src_sel_e sel, int addr);
    model_rw(core, m, half, sel, addr);
    send_rc(core, m, half, sel, addr);
  endtask

  function automatic ccmd_t mk(op_e op);
    ccmd_t c;
    c = '0;
    c.op = op; c.shift = 6'(SH); c.sfu_func = SFU_PASS;
    return c;
  endfunction

  // check the words of one cross-forwarding step (software model)
  task automatic check_xfwd(int s, int d, int base, bit softmax);
    int a;
    a = base;
    for (int r = 0; r < 32; r++)
      for (int j = 0; j < 8; j++) begin
        bit cons, en_l_j;
        longint v [64];
        row_t got;
        cons   = d ? (j <= s) : (j >= s);
        en_l_j = d ? (j < s)  : (j > s);
        if (!cons) continue;
        for (int i = 0; i < 32; i++) begin
          v[i]      = en_l_j ? q16(dot(tL[j][i], tR[s][r])) : 0;
          v[32 + i] = q16(dot(tR[j][i], tL[s][r]));
        end
        if (softmax) begin
          longint mx, e [64], sum;
          mx = v[0];
          for (int c = 1; c < 64; c++) if (v[c] > mx) mx = v[c];
          sum = 0;
          for (int c = 0; c < 64; c++) begin
            longint t, ip, fr;
            t  = ((v[c] - mx) * 369) >>> 8;
            ip = t >>> 8;
            fr = t & 255;
            e[c] = (ip < -15) ? 0 : (((256 + fr) << 7) >> (-ip));
            sum += e[c];
          end
          for (int c = 0; c < 64; c++) begin
            v[c] = (e[c] << 15) / sum;
            if (v[c] > 32767) v[c] = 32767;
            psum_col[c] += v[c];
          end
        end
        rd_out(a, got);
        for (int c = 0; c < 64; c++)
          chk($sformatf("xfwd s=%0d d=%0d r=%0d j=%0d lane %0d", s, d, r, j, c),
              softmax ? longint'(16'(got[c])) : longint'(got[c]), v[c]);
        out_m[a] = got;
        a++;
      end
  endtask

  longint psum_col [64];

  initial begin
    #50ms;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ccmd_t c;
    row_t got;
    int n_skip;
    host_in_we = 0; host_w_we = 0; host_o_re = 0; host_in_addr = '0; host_w_addr = '0;
    host_o_addr = '0; host_in_data = '0; host_w_data = '0; cc_valid = 0; rc_valid = 0;
    cc = '0; rc = '0;
    for (int c2 = 0; c2 < 64; c2++) psum_col[c2] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- 1. Q/K weights and I_X, I_Y token rows
    for (int a = 0; a < 512; a++) wr_w(a, rnd_row(60));
    for (int a = 0; a < 8; a++)  wr_in(a, rnd_row(60));        // I_X tokens 0..7
    for (int a = 16; a < 24; a++) wr_in(a, rnd_row(60));       // I_Y tokens 0..7
    for (int m = 0; m < 8; m++) begin
      rewrite(CORE_Q, m, 0, SRC_WEIGHT, 32*m);
      rewrite(CORE_K, m, 0, SRC_WEIGHT, 256 + 32*m);
    end
    wait_rc_idle();

    // ---- 2. TBR-CIM tiles: I_Y (256 tokens at input 256..511), W_V (weight 0..255)
    for (int a = 256; a < 512; a++) wr_in(a, rnd_row(60));
    for (int a = 0; a < 256; a++)  wr_w(a, rnd_row(60));
    for (int m = 0; m < 8; m++) begin
      rewrite(CORE_TBR, m, 0, SRC_INPUT, 256 + 32*m);
      rewrite(CORE_TBR, m, 1, SRC_WEIGHT, 32*m);
    end
    wait_rc_idle();
    c = mk(OP_MODE); c.mode = 8'h00;
    send_cc(c); wait_cc_idle();
    chk("hybrid mode set", mode_normal, 0);

    // ---- 3. cross-forwarding step src=0 (I_Y x W_V)
    c = mk(OP_XFWD); c.src = 3'd0; c.dir = 1'b0; c.out_addr0 = 9'd0;
    send_cc(c); wait_cc_idle();
    check_xfwd(0, 0, 0, 0);
    $display("step src=0 checked, time %0t", $time);

    // ---- 4. Q_X and K_Y generation, 8 tokens
    c = mk(OP_WS_QK); c.addr_a = 9'd0; c.addr_b = 9'd16; c.n_tok = 7'd8; c.core_mask = 2'b11;
    c.out_addr0 = 9'd0; c.out_addr1 = 9'd256;
    send_cc(c); wait_cc_idle();
    for (int t = 0; t < 8; t++)
      for (int w = 0; w < 4; w++) begin
        rd_out(4*t + w, got);
        out_m[4*t + w] = got;
        for (int l = 0; l < 64; l++) chk("Q_X", got[l], q16(dot(in_m[t], qW[2*w + l/32][l%32])));
        rd_out(256 + 4*t + w, got);
        out_m[256 + 4*t + w] = got;
        for (int l = 0; l < 64; l++) chk("K_Y", got[l], q16(dot(in_m[16 + t], kW[2*w + l/32][l%32])));
      end
    $display("Q/K generation checked, time %0t", $time);

    // ---- 5. step src=1 with rewriting of TBR-CIM #0 overlapped, #1 waits
    c = mk(OP_XFWD); c.src = 3'd1; c.dir = 1'b0; c.out_addr0 = 9'd32;
    send_cc(c);
    begin
      row_t saveL [32], saveR [32];
      // #1 is rewritten only after the step; the step must use the old tile
      saveL = tL[1]; saveR = tR[1];
      rewrite(CORE_TBR, 0, 0, SRC_RES_X, 0);
      rewrite(CORE_TBR, 0, 1, SRC_RES_Y, 256);
      model_rw(CORE_TBR, 1, 0, SRC_RES_X, 0);
      send_rc(CORE_TBR, 1, 0, SRC_RES_X, 0);
      wait_cc_idle();
      wait_rc_idle();
      begin
        row_t newL [32];
        newL = tL[1];
        tL[1] = saveL;
        check_xfwd(1, 0, 32, 0);
        tL[1] = newL;
      end
    end
    $display("step src=1 checked, time %0t", $time);

    // ---- 6. Q_X x K_Y^T on TBR-CIM #0 through softmax, DTPU collecting
    c = mk(OP_DTPU_CLR);
    send_cc(c);
    c = mk(OP_XFWD); c.src = 3'd0; c.dir = 1'b1; c.out_addr0 = 9'd300; c.sfu_func = SFU_SOFTMAX;
    c.dtpu_en = 1'b1;
    send_cc(c); wait_cc_idle();
    check_xfwd(0, 1, 300, 1);
    $display("softmax step checked, time %0t", $time);

    // ---- 7. prune, then a pruned Q-CIM pass through GELU
    begin
      int order [64], kc;
      logic [63:0] exp_mask;
      for (int i = 0; i < 64; i++) order[i] = i;
      for (int i = 0; i < 64; i++)
        for (int j = 0; j < 63 - i; j++)
          if (psum_col[order[j+1]] > psum_col[order[j]] ||
              (psum_col[order[j+1]] == psum_col[order[j]] && order[j+1] < order[j])) begin
            int tmp;
            tmp = order[j]; order[j] = order[j+1]; order[j+1] = tmp;
          end
      // keep count chosen so that some of tokens 0..7 are kept and some pruned
      kc = 64;
      for (int i = 0; i < 64; i++) if (order[i] < 8) begin kc = i + 1; if (order[i] != 7) break; end
      begin
        int first_lo, seen;
        seen = 0; first_lo = 64;
        for (int i = 0; i < 64; i++) if (order[i] < 8) begin
          seen++;
          if (seen == 4) first_lo = i + 1;
        end
        kc = first_lo;
      end
      exp_mask = '0;
      for (int i = 0; i < kc; i++) exp_mask[order[i]] = 1'b1;
      c = mk(OP_PRUNE); c.keep_cnt = 7'(kc);
      send_cc(c); wait_cc_idle();
      chk("keep mask", keep_mask == exp_mask, 1);
      n_skip = 0;
      for (int t = 0; t < 8; t++) if (!keep_mask[t]) n_skip++;
      c = mk(OP_WS_QK); c.addr_a = 9'd0; c.addr_b = 9'd16; c.n_tok = 7'd8; c.core_mask = 2'b01;
      c.out_addr0 = 9'd64; c.sfu_func = SFU_GELU;
      send_cc(c); wait_cc_idle();
      begin
        int k;
        k = 0;
        for (int t = 0; t < 8; t++) if (keep_mask[t]) begin
          for (int w = 0; w < 4; w++) begin
            rd_out(64 + 4*k + w, got);
            for (int l = 0; l < 64; l++) begin
              longint x, h, p;
              x = q16(dot(in_m[t], qW[2*w + l/32][l%32]));
              h = (x >>> 2) + 128;
              if (h < 0) h = 0;
              if (h > 256) h = 256;
              p = (x * h) >>> 8;
              if (p > 32767) p = 32767;
              if (p < -32768) p = -32768;
              chk("pruned GELU pass", got[l], p);
            end
          end
          k++;
        end
        chk("words written by pruned pass", 64 + 4*k, 64 + 4*(8 - n_skip));
      end
    end
    $display("prune checked (%0d of 8 tokens skipped), time %0t", n_skip, $time);

    // ---- 8. normal mode, rewrite #2 then a TBR-CIM weight-stationary pass
    c = mk(OP_MODE); c.mode = 8'hFF;
    send_cc(c); wait_cc_idle();
    chk("normal mode set", mode_normal, 8'hFF);
    rewrite(CORE_TBR, 2, 1, SRC_INPUT, 300);
    c = mk(OP_WS_TBR); c.addr_a = 9'd0; c.addr_b = 9'd16; c.n_tok = 7'd3; c.out_addr0 = 9'd128;
    send_cc(c); wait_cc_idle();
    for (int t = 0; t < 3; t++)
      for (int w = 0; w < 4; w++) begin
        rd_out(128 + 4*t + w, got);
        for (int l = 0; l < 64; l++) begin
          int m, r;
          m = 2*w + l/32; r = l % 32;
          chk("TBR normal", got[l], q16(dot(in_m[t], tL[m][r]) + dot(in_m[16 + t], tR[m][r])));
        end
      end

    // ---- mechanisms
    $display("events: stall=%0d hazard=%0d overlap=%0d blocked=%0d xfwd_rows=%0d skipped=%0d writes=%0d mode_switches=%0d",
             n_stall, n_hazard, n_overlap, n_blocked, n_xrow, n_skip, n_owr, n_mode);
    chk("scheduler stall happened", n_stall > 0, 1);
    chk("rewrite hazard wait happened", n_hazard > 0, 1);
    chk("rewrite overlapped compute", n_overlap > 0, 1);
    chk("compute blocked by rewrite", n_blocked > 0, 1);
    chk("cross-forwarding rows", n_xrow, 3 * 32);
    chk("pruned tokens skipped", n_skip > 0 && n_skip < 8, 1);
    chk("mode switches (to hybrid and back)", n_mode >= 2, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
