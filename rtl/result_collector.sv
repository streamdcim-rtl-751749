// result_collector: gathers CIM results and packs them into buffer words.
//
// At the start of a pass (cfg_load) the controller sets the pass kind, which
// macros deliver, the output addresses and a right shift. For every token
// (weight-stationary) or tile row (cross-forwarding) the controller pulses
// expect; the collector then captures each expected macro's results when
// its res_valid pulses (macros finish at different cycles because of the
// systolic skew), rounds each to INT16 (arithmetic right shift by cfg_shift,
// then saturation) and, once all have arrived, emits the words one per
// accepted handshake:
//   KIND_QK:   Q-CIM words (macros 2w and 2w+1 in lanes 0-31 / 32-63) to
//              cfg_out0.., then K-CIM words the same way to cfg_out1..
//   KIND_TBR:  normal-mode TBR-CIM words, paired like Q-CIM, to cfg_out0..
//   KIND_XFWD: one word per consumer TBR-CIM macro (all 64 lanes) to cfg_out0..
// Address counters advance across the whole pass. idle is high when nothing
// is expected or waiting to be emitted. The whole block is this design's
// own: the paper does not describe the path from the macros to the buffer.
module result_collector
  import sdcim_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cfg_load,
  input  logic [1:0]               cfg_kind,
  input  logic [1:0]               cfg_core_mask,
  input  logic [MACROS-1:0]        cfg_xmask,
  input  logic [ADDR_W-1:0]        cfg_out0,
  input  logic [ADDR_W-1:0]        cfg_out1,
  input  logic [5:0]               cfg_shift,
  input  logic                     expect_res,
  input  logic signed [ACC_W-1:0]  q_res [MACROS][TILE_ROWS],
  input  logic [MACROS-1:0]        q_valid,
  input  logic signed [ACC_W-1:0]  k_res [MACROS][TILE_ROWS],
  input  logic [MACROS-1:0]        k_valid,
  input  logic signed [ACC_W-1:0]  t_res [MACROS][2*TILE_ROWS],
  input  logic [MACROS-1:0]        t_valid,
  output logic                     out_valid,
  input  logic                     out_ready,
  output vec_t                     out_data,
  output logic [ADDR_W-1:0]        out_addr,
  output logic                     idle
);
  localparam logic [1:0] KIND_QK = 2'd0, KIND_TBR = 2'd1, KIND_XFWD = 2'd2;

  function automatic logic [DATA_W-1:0] quant(logic signed [ACC_W-1:0] v, logic [5:0] sh);
    logic signed [ACC_W-1:0] s;
    s = v >>> sh;
    if (s > 32767)       return 16'h7fff;
    else if (s < -32768) return 16'h8000;
    else                 return DATA_W'(s);
  endfunction

  logic [1:0]        kind;
  logic [1:0]        cmask;
  logic [MACROS-1:0] xmask;
  logic [5:0]        shift;
  logic [ADDR_W-1:0] a0, a1;

  typedef enum logic [1:0] {C_IDLE, C_WAIT, C_EMIT} state_e;
  state_e state;

  vec_t hq [MACROS/2];
  vec_t hk [MACROS/2];
  vec_t ht [MACROS];
  logic [MACROS-1:0] gq, gk, gt;       // captured flags
  logic [MACROS-1:0] nq, nk, nt;       // expected flags
  logic [3:0] widx;                    // 0-3 Q, 4-7 K, 8-15 TBR

  always_comb begin
    nq = (kind == KIND_QK && cmask[0]) ? '1 : '0;
    nk = (kind == KIND_QK && cmask[1]) ? '1 : '0;
    nt = (kind == KIND_TBR) ? '1 : (kind == KIND_XFWD) ? xmask : '0;
  end

  function automatic logic word_en(logic [3:0] w);
    if (w < 4)       return nq[0];
    else if (w < 8)  return nk[0];
    else if (kind == KIND_TBR) return (w < 12);
    else             return nt[w[2:0]];
  endfunction

  logic all_in;
  assign all_in = ((gq & nq) == nq) && ((gk & nk) == nk) && ((gt & nt) == nt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE;
      kind <= KIND_QK; cmask <= '0; xmask <= '0; shift <= '0; a0 <= '0; a1 <= '0;
      gq <= '0; gk <= '0; gt <= '0; widx <= '0;
      for (int m = 0; m < MACROS/2; m++) begin hq[m] <= '0; hk[m] <= '0; end
      for (int m = 0; m < MACROS; m++) ht[m] <= '0;
    end else begin
      if (cfg_load) begin
        kind <= cfg_kind; cmask <= cfg_core_mask; xmask <= cfg_xmask;
        shift <= cfg_shift; a0 <= cfg_out0; a1 <= cfg_out1;
      end
      // capture
      for (int m = 0; m < MACROS; m++) begin
        if (state == C_WAIT && q_valid[m] && nq[m]) begin
          gq[m] <= 1'b1;
          for (int r = 0; r < TILE_ROWS; r++) hq[m/2][(m%2)*TILE_ROWS + r] <= quant(q_res[m][r], shift);
        end
        if (state == C_WAIT && k_valid[m] && nk[m]) begin
          gk[m] <= 1'b1;
          for (int r = 0; r < TILE_ROWS; r++) hk[m/2][(m%2)*TILE_ROWS + r] <= quant(k_res[m][r], shift);
        end
        if (state == C_WAIT && t_valid[m] && nt[m]) begin
          gt[m] <= 1'b1;
          if (kind == KIND_TBR)
            for (int r = 0; r < TILE_ROWS; r++) ht[m/2][(m%2)*TILE_ROWS + r] <= quant(t_res[m][r], shift);
          else
            for (int r = 0; r < 2*TILE_ROWS; r++) ht[m][r] <= quant(t_res[m][r], shift);
        end
      end
      unique case (state)
        C_IDLE: if (expect_res) begin
          gq <= '0; gk <= '0; gt <= '0;
          state <= C_WAIT;
        end
        C_WAIT: if (all_in) begin
          widx  <= '0;
          state <= C_EMIT;
        end
        C_EMIT: begin
          if (!word_en(widx) || out_ready) begin
            if (word_en(widx)) begin
              if (widx >= 4 && widx < 8) a1 <= a1 + 1'b1;
              else                       a0 <= a0 + 1'b1;
            end
            widx <= widx + 4'd1;
            if (widx == 4'd15) state <= C_IDLE;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  assign out_valid = (state == C_EMIT) && word_en(widx);
  assign out_addr  = (widx >= 4 && widx < 8) ? a1 : a0;
  always_comb begin
    if (widx < 4)       out_data = hq[widx[1:0]];
    else if (widx < 8)  out_data = hk[widx[1:0]];
    else                out_data = ht[widx[2:0]];
  end
  assign idle = (state == C_IDLE);

  assert property (@(posedge clk) disable iff (!rst_n) expect_res |-> state == C_IDLE)
    else $error("result_collector: new results expected before the previous ones were emitted");
endmodule
