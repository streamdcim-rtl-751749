// systolic_input_scheduler: tile-based systolic input scheduler of the
// streaming network.
//
// On start it walks tokens 0..n_tok-1 of a pass. A token whose keep_mask bit
// is 0 has been pruned by the token-pruning unit and is skipped. For each kept
// token it reads two rows from the input buffer (stream A at addr_a+t,
// stream B at addr_b+t, one read per cycle, read data one cycle later), then
// waits until the result path is idle (coll_idle) and sends both rows as 16 bit
// planes of 64 bits, MSB first. Stream A feeds Q-CIM (I_X) or the left half of
// a normal-mode TBR-CIM macro; stream B feeds K-CIM (I_Y) or the right half.
//
// The streams reach macro k of a core k cycles after macro 0: each macro
// passes the planes on to its neighbour through one register (systolic skew).
// tok_issue pulses when a token's first plane leaves, with its index on
// tok_idx. stall is high in cycles where a loaded token waits for coll_idle.
// done pulses once the last token's last plane has left.
//
// The paper only names this block; the two streams, pruning skip and the
// wait-for-idle rule are this design's choices.
module systolic_input_scheduler
  import sdcim_pkg::*;
#(
  parameter int NMACRO = MACROS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] addr_a,
  input  logic [ADDR_W-1:0] addr_b,
  input  logic [6:0]        n_tok,
  input  logic [LANES-1:0]  keep_mask,
  output logic              rd_en,
  output logic [ADDR_W-1:0] rd_addr,
  input  vec_t              rd_data,
  input  logic              coll_idle,
  output act_t              act_a [NMACRO],
  output act_t              act_b [NMACRO],
  output logic              tok_issue,
  output logic [6:0]        tok_idx,
  output logic              stall,
  output logic              busy,
  output logic              done
);
  typedef enum logic [2:0] {S_IDLE, S_SKIP, S_RDA, S_RDB, S_CAPB, S_WAIT, S_STREAM} state_e;
  state_e state;

  logic [ADDR_W-1:0] base_a, base_b;
  logic [6:0]        ntok, tok;
  logic [LANES-1:0]  keep;
  vec_t              row_a, row_b;
  logic [3:0]        plane;

  act_t src_a, src_b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      base_a <= '0; base_b <= '0; ntok <= '0; tok <= '0; keep <= '0;
      row_a <= '0; row_b <= '0; plane <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          base_a <= addr_a; base_b <= addr_b; ntok <= n_tok; keep <= keep_mask;
          tok <= '0;
          state <= S_SKIP;
        end
        S_SKIP: begin
          if (tok >= ntok)              state <= S_IDLE;
          else if (!keep[tok[5:0]])     tok   <= tok + 7'd1;
          else                          state <= S_RDA;
        end
        S_RDA:  state <= S_RDB;
        S_RDB:  begin row_a <= rd_data; state <= S_CAPB; end
        S_CAPB: begin row_b <= rd_data; state <= S_WAIT; end
        S_WAIT: if (coll_idle) begin plane <= 4'd0; state <= S_STREAM; end
        S_STREAM: begin
          plane <= plane + 4'd1;
          if (plane == 4'd15) begin
            tok   <= tok + 7'd1;
            state <= S_SKIP;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign rd_en   = (state == S_RDA) || (state == S_RDB);
  assign rd_addr = (state == S_RDA) ? base_a + ADDR_W'(tok) : base_b + ADDR_W'(tok);
  assign stall   = (state == S_WAIT) && !coll_idle;
  assign busy    = (state != S_IDLE);
  assign tok_issue = (state == S_STREAM) && (plane == 4'd0);
  assign tok_idx   = tok;
  assign done    = (state == S_SKIP) && (tok >= ntok);

  always_comb begin
    src_a = ACT_IDLE;
    src_b = ACT_IDLE;
    if (state == S_STREAM) begin
      src_a.valid = 1'b1;
      src_a.msb   = (plane == 4'd0);
      src_a.last  = (plane == 4'd15);
      for (int c = 0; c < LANES; c++) begin
        src_a.bits[c] = row_a[c][4'd15 - plane];
        src_b.bits[c] = row_b[c][4'd15 - plane];
      end
      src_b.valid = 1'b1;
      src_b.msb   = src_a.msb;
      src_b.last  = src_a.last;
    end
  end

  // Systolic skew: macro 0 sees the stream directly, macro k after k registers.
  act_t skew_a [NMACRO];
  act_t skew_b [NMACRO];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NMACRO; k++) begin skew_a[k] <= ACT_IDLE; skew_b[k] <= ACT_IDLE; end
    end else begin
      skew_a[0] <= src_a;
      skew_b[0] <= src_b;
      for (int k = 1; k < NMACRO; k++) begin skew_a[k] <= skew_a[k-1]; skew_b[k] <= skew_b[k-1]; end
    end
  end

  always_comb begin
    act_a[0] = src_a;
    act_b[0] = src_b;
    for (int k = 1; k < NMACRO; k++) begin act_a[k] = skew_a[k-1]; act_b[k] = skew_b[k-1]; end
  end
endmodule
