// tb_dm_adder_tree: random test of the dual-mode adder tree.
// For random stored words and input bits it checks the joined 128-term sum in
// normal mode, the two separate half sums in hybrid mode, and the one-half
// (64-column) variant, against sums formed here lane by lane.
module tb_dm_adder_tree;
  import sdcim_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [127:0][15:0] w;
  logic [63:0] a, b;
  logic mode;
  logic signed [PSUM_W-1:0] sl, sr, sl64, sr64;

  dm_adder_tree #(.COLS(128)) dut (.w, .a_bits(a), .b_bits(b), .mode_normal(mode), .sum_l(sl), .sum_r(sr));
  dm_adder_tree #(.COLS(64))  dut64 (.w(w[63:0]), .a_bits(a), .b_bits(b), .mode_normal(mode), .sum_l(sl64), .sum_r(sr64));

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 300; it++) begin
      longint el, er;
      for (int c = 0; c < 128; c++) w[c] = 16'($urandom);
      a = {$urandom, $urandom}; b = {$urandom, $urandom};
      if (it == 0) begin a = '1; b = '1; for (int c = 0; c < 128; c++) w[c] = 16'h8000; end
      mode = it[0];
      #1;
      el = 0; er = 0;
      for (int c = 0; c < 64; c++) begin
        if (a[c]) el += longint'($signed(w[c]));
        if (b[c]) er += longint'($signed(w[64+c]));
      end
      if (mode) begin
        check("normal sum", sl, el + er);
        check("normal sum_r", sr, 0);
      end else begin
        check("hybrid left", sl, el);
        check("hybrid right", sr, er);
      end
      check("64-col sum", sl64, el);
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
