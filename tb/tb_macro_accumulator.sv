// tb_macro_accumulator: feeds random plane sums for random 16-bit inputs and
// checks that each lane ends at sum_k psum_k * 2^(15-k), with the first
// (sign) plane counted negative, and that out_valid comes one cycle after
// the edge that takes the last plane, and only then.
module tb_macro_accumulator;
  import sdcim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_msb, in_last, out_valid;
  logic signed [PSUM_W-1:0] psum [8];
  logic signed [ACC_W-1:0]  acc [8];

  macro_accumulator #(.NLANES(8)) dut (.clk, .rst_n, .in_valid, .in_msb, .in_last, .psum, .acc, .out_valid);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint exp [8];
    in_valid = 0; in_msb = 0; in_last = 0;
    for (int i = 0; i < 8; i++) psum[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 40; it++) begin
      for (int i = 0; i < 8; i++) exp[i] = 0;
      for (int k = 0; k < 16; k++) begin
        @(negedge clk);
        in_valid = 1; in_msb = (k == 0); in_last = (k == 15);
        for (int i = 0; i < 8; i++) begin
          psum[i] = PSUM_W'($signed($urandom_range(0, 8000000)) - 4000000);
          exp[i] += (k == 0) ? -(longint'(psum[i]) <<< 15) : (longint'(psum[i]) <<< (15 - k));
        end
        @(posedge clk); #1;
        checks++;
        if (out_valid != (k == 15)) begin failures++; $display("FAIL out_valid=%0d at plane %0d", out_valid, k); end
        // a gap cycle every other operand: valid low must hold the value
        if (k == 7 && it[0]) begin @(negedge clk); in_valid = 0; @(posedge clk); #1; end
      end
      @(negedge clk); in_valid = 0;
      for (int i = 0; i < 8; i++) begin
        checks++;
        if (longint'(acc[i]) != exp[i]) begin failures++; $display("FAIL lane %0d got %0d exp %0d", i, acc[i], exp[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
