// macro_accumulator: shift-and-add accumulator of a CIM macro.
//
// Inputs arrive bit-serially, most significant bit plane first. For every
// lane the accumulator starts with the negated plane sum on the sign plane
// (in_msb, weight -2^15 in two's complement) and then doubles and adds each
// following plane: acc = 2*acc + psum. On the plane marked in_last the lane
// holds the signed dot product of the stored words with the 16-bit inputs;
// acc is registered and out_valid pulses for one cycle in the following cycle.
//
// The paper names a macro accumulator; the bit-serial order and the
// widths are this design's choices.
module macro_accumulator
  import sdcim_pkg::*;
#(
  parameter int NLANES = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     in_msb,
  input  logic                     in_last,
  input  logic signed [PSUM_W-1:0] psum [NLANES],
  output logic signed [ACC_W-1:0]  acc  [NLANES],
  output logic                     out_valid
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < NLANES; i++) acc[i] <= '0;
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid) begin
        for (int i = 0; i < NLANES; i++) begin
          if (in_msb) acc[i] <= -ACC_W'(psum[i]);
          else        acc[i] <= (acc[i] <<< 1) + ACC_W'(psum[i]);
        end
      end
    end
  end
endmodule
