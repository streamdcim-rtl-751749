// qk_cim_macro: weight-stationary CIM macro of the Q-CIM and K-CIM cores.
//
// Eight 4 x 64-column SRAM-CIM arrays hold 32 weight rows of 64 INT16 words
// (tile row r in array r/4, row r%4). A 64-element input row arrives
// bit-serially on act (64 bits per cycle, MSB plane first, 16 planes); every
// row computes its dot product with it, and after the last plane res[r]
// holds the 32 signed results. res_valid pulses 2 cycles after the last
// plane (array register, accumulator register). wr_* writes one row.
//
// Array count and size follow the paper; unlike the TBR-CIM macro these
// arrays are not dual-mode and always run in normal mode.
module qk_cim_macro
  import sdcim_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [4:0]               wr_row,
  input  vec_t                     wr_data,
  input  act_t                     act,
  output logic signed [ACC_W-1:0]  res [TILE_ROWS],
  output logic                     res_valid
);
  logic d_valid, d_msb, d_last;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) {d_valid, d_msb, d_last} <= '0;
    else        {d_valid, d_msb, d_last} <= {act.valid, act.msb, act.last};
  end

  logic [ARRAYS-1:0] acc_valid;

  for (genvar a = 0; a < ARRAYS; a++) begin : g_arr
    logic signed [PSUM_W-1:0] pl [ROWS];
    logic signed [PSUM_W-1:0] pr [ROWS];
    logic signed [ACC_W-1:0]  ac [ROWS];
    vec_t rl, rr;

    cim_array #(.COLS(LANES)) u_array (
      .clk, .wr_en(wr_en && (wr_row[4:2] == 3'(a))), .wr_row(wr_row[1:0]),
      .wr_half(1'b0), .wr_data,
      .rd_row(2'd0), .rd_l(rl), .rd_r(rr),
      .a_bits(act.valid ? act.bits : '0), .b_bits('0),
      .en_l(1'b1), .en_r(1'b0), .mode_normal(1'b1), .psum_l(pl), .psum_r(pr)
    );

    macro_accumulator #(.NLANES(ROWS)) u_acc (
      .clk, .rst_n, .in_valid(d_valid), .in_msb(d_msb), .in_last(d_last),
      .psum(pl), .acc(ac), .out_valid(acc_valid[a])
    );

    always_comb
      for (int r = 0; r < ROWS; r++) res[a*ROWS + r] = ac[r];
  end

  assign res_valid = &acc_valid;
endmodule
