// tbsn_pipeline_bus: cross-forwarding pipeline bus of the TBR-CIM core.
//
// In one cross-forwarding step, source macro src reads out its stored tile
// rows: the input-part row (fwd_i: a row of I_Y, or of Q_X) and the
// weight-part row (fwd_w: a column of W_V, or a row of K_Y). The bus carries
// both along a chain of macros ("last CIM" -> "next CIM"), one register per
// hop in each direction, so macro j sees the source's planes |j - src|
// cycles after the source does. The input-part stream drives Input
// Activation B (the weight part) of the consumers, the weight-part stream
// drives Input Activation A (the input part): this is the cross in
// cross-forwarding.
//
// Consumers and half enables (paper: "Each row from (I_Y)_0 is sent to the
// W_V part of TBR-CIM #0-7 ... each column from (W_V)_0 is sent to the I_Y
// part of TBR-CIM #1-7", and Q_X*K_Y^T is the inverse process):
//   dir = 0 (I*W):     en_r[j] = j >= src,  en_l[j] = j > src
//   dir = 1 (Q*K^T):   en_r[j] = j <= src,  en_l[j] = j < src
// Together, the steps src = 0..7 then produce every product exactly once.
// When active is low all half enables are 1 (normal weight-stationary use).
// The per-hop register is this design's choice.
module tbsn_pipeline_bus
  import sdcim_pkg::*;
#(
  parameter int NMACRO = MACROS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               active,
  input  logic [2:0]         src,
  input  logic               dir,
  input  act_t               fwd_i [NMACRO],
  input  act_t               fwd_w [NMACRO],
  output act_t               act_a_last [NMACRO],
  output act_t               act_b_last [NMACRO],
  output logic [NMACRO-1:0]  en_l,
  output logic [NMACRO-1:0]  en_r
);
  act_t up_i [NMACRO], up_w [NMACRO], dn_i [NMACRO], dn_w [NMACRO];   // bus values at each macro
  act_t rup_i [NMACRO], rup_w [NMACRO], rdn_i [NMACRO], rdn_w [NMACRO]; // hop registers

  always_comb begin
    for (int j = 0; j < NMACRO; j++) begin
      up_i[j] = (j == int'(src)) ? fwd_i[j] : rup_i[j];
      up_w[j] = (j == int'(src)) ? fwd_w[j] : rup_w[j];
      dn_i[j] = (j == int'(src)) ? fwd_i[j] : rdn_i[j];
      dn_w[j] = (j == int'(src)) ? fwd_w[j] : rdn_w[j];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < NMACRO; j++) begin
        rup_i[j] <= ACT_IDLE; rup_w[j] <= ACT_IDLE; rdn_i[j] <= ACT_IDLE; rdn_w[j] <= ACT_IDLE;
      end
    end else begin
      rup_i[0] <= ACT_IDLE; rup_w[0] <= ACT_IDLE;
      rdn_i[NMACRO-1] <= ACT_IDLE; rdn_w[NMACRO-1] <= ACT_IDLE;
      for (int j = 1; j < NMACRO; j++) begin
        rup_i[j] <= up_i[j-1];
        rup_w[j] <= up_w[j-1];
      end
      for (int j = 0; j < NMACRO-1; j++) begin
        rdn_i[j] <= dn_i[j+1];
        rdn_w[j] <= dn_w[j+1];
      end
    end
  end

  always_comb begin
    for (int j = 0; j < NMACRO; j++) begin
      if (j >= int'(src)) begin
        act_b_last[j] = up_i[j];
        act_a_last[j] = up_w[j];
      end else begin
        act_b_last[j] = dn_i[j];
        act_a_last[j] = dn_w[j];
      end
      if (!active) begin
        en_l[j] = 1'b1;
        en_r[j] = 1'b1;
      end else if (!dir) begin
        en_r[j] = (j >= int'(src));
        en_l[j] = (j >  int'(src));
      end else begin
        en_r[j] = (j <= int'(src));
        en_l[j] = (j <  int'(src));
      end
    end
  end
endmodule
