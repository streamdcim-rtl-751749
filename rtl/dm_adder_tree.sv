// dm_adder_tree: dual-mode reconfigurable subarray adder tree of one SRAM-CIM
// subarray row.
//
// Each stored 16-bit word w[c] is multiplied by one input bit: columns
// 0..63 by a_bits (Input Activation A, In[0..63]) and, for a 128-column row,
// columns 64..127 by b_bits (Input Activation B). The products of each half
// are summed in a 64-input tree. In normal mode (mode_normal = 1) the two
// half sums are added and returned on sum_l; in hybrid mode (mode_normal = 0)
// they are returned separately on sum_l and sum_r, so the left half can hold
// an input tile and the right half a weight tile. Combinational.
//
// The split into two 64-column trees joined by a final adder and a mode mux
// follows the macro diagram; the tree is written as a plain sum and the output
// width PSUM_W is this design's choice. With COLS = 64 there is one half and
// b_bits and mode_normal are not used (sum_r is 0).
module dm_adder_tree
  import sdcim_pkg::*;
#(
  parameter int COLS = 128
) (
  input  logic [COLS-1:0][DATA_W-1:0] w,
  input  logic [LANES-1:0]            a_bits,
  input  logic [LANES-1:0]            b_bits,
  input  logic                        mode_normal,
  output logic signed [PSUM_W-1:0]    sum_l,
  output logic signed [PSUM_W-1:0]    sum_r
);
  localparam int HALVES = COLS / LANES;

  logic signed [PSUM_W-1:0] half_sum [HALVES];

  always_comb begin
    for (int h = 0; h < HALVES; h++) begin
      half_sum[h] = '0;
      for (int c = 0; c < LANES; c++) begin
        if ((h == 0) ? a_bits[c] : b_bits[c])
          half_sum[h] += PSUM_W'($signed(w[h*LANES + c]));
      end
    end
  end

  if (HALVES == 2) begin : g_dual
    always_comb begin
      if (mode_normal) begin
        sum_l = half_sum[0] + half_sum[1];
        sum_r = '0;
      end else begin
        sum_l = half_sum[0];
        sum_r = half_sum[1];
      end
    end
  end else begin : g_single
    assign sum_l = half_sum[0];
    assign sum_r = '0;
  end
endmodule
