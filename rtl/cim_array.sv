// cim_array: one SRAM-CIM array of a CIM macro (4 rows x COLS words x 16 bits).
//
// Storage is a register array written one half row (64 words) per cycle.
// Every row has its own dual-mode adder tree, so all four rows compute in
// parallel on the same input bit planes and give four (normal mode) or eight
// (hybrid mode: left and right half apart) partial sums per cycle. The sums
// are registered: psum_* is valid one cycle after the bit plane was applied.
// en_l / en_r gate the input bits of the left / right half, so a half that
// takes no part in the current step contributes zero.
// A combinational read port returns both halves of one row (rd_r is 0 for a
// 64-column array); the macro uses it to
// forward stored rows to other macros (cross-forwarding).
//
// Rows, columns and the two-half dual-mode structure follow the paper;
// the write width, the read port and the output register are this design's
// choices.
module cim_array
  import sdcim_pkg::*;
#(
  parameter int COLS = 128
) (
  input  logic                     clk,
  // write port
  input  logic                     wr_en,
  input  logic [1:0]               wr_row,
  input  logic                     wr_half,
  input  vec_t                     wr_data,
  // read port
  input  logic [1:0]               rd_row,
  output vec_t                     rd_l,
  output vec_t                     rd_r,
  // compute
  input  logic [LANES-1:0]         a_bits,
  input  logic [LANES-1:0]         b_bits,
  input  logic                     en_l,
  input  logic                     en_r,
  input  logic                     mode_normal,
  output logic signed [PSUM_W-1:0] psum_l [ROWS],
  output logic signed [PSUM_W-1:0] psum_r [ROWS]
);
  localparam int HALVES = COLS / LANES;

  logic [COLS-1:0][DATA_W-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int c = 0; c < LANES; c++)
        mem[wr_row][((HALVES == 2) ? int'(wr_half) * LANES : 0) + c] <= wr_data[c];
    end
  end

  always_comb begin
    for (int c = 0; c < LANES; c++) begin
      rd_l[c] = mem[rd_row][c];
      rd_r[c] = (HALVES == 2) ? mem[rd_row][(HALVES - 1) * LANES + c] : '0;
    end
  end

  logic [LANES-1:0] a_g, b_g;
  assign a_g = en_l ? a_bits : '0;
  assign b_g = en_r ? b_bits : '0;

  logic signed [PSUM_W-1:0] sl [ROWS];
  logic signed [PSUM_W-1:0] sr [ROWS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    dm_adder_tree #(.COLS(COLS)) u_tree (
      .w(mem[r]), .a_bits(a_g), .b_bits(b_g), .mode_normal(mode_normal),
      .sum_l(sl[r]), .sum_r(sr[r])
    );
  end

  always_ff @(posedge clk) begin
    for (int r = 0; r < ROWS; r++) begin
      psum_l[r] <= sl[r];
      psum_r[r] <= sr[r];
    end
  end
endmodule
