// tb_qk_cim_macro: loads 32 random weight rows of 64 INT16 words, streams
// random 64-element INT16 input rows bit-serially (MSB first) and checks all
// 32 dot products, and that res_valid arrives exactly 2 cycles after the
// last plane.
module tb_qk_cim_macro;
  import sdcim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en;
  logic [4:0] wr_row;
  vec_t wr_data;
  act_t act;
  logic signed [ACC_W-1:0] res [TILE_ROWS];
  logic res_valid;
  logic signed [15:0] W [32][64];
  logic signed [15:0] x [64];

  qk_cim_macro dut (.clk, .rst_n, .wr_en, .wr_row, .wr_data, .act, .res, .res_valid);

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_row = 0; wr_data = '0; act = ACT_IDLE;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 32; r++) begin
      @(negedge clk);
      wr_en = 1; wr_row = 5'(r);
      for (int c = 0; c < 64; c++) begin W[r][c] = 16'($urandom); wr_data[c] = W[r][c]; end
    end
    @(negedge clk); wr_en = 0;
    for (int it = 0; it < 20; it++) begin
      int lat;
      for (int c = 0; c < 64; c++) x[c] = (it == 0) ? -16'sd32768 : 16'($urandom);
      for (int k = 0; k < 16; k++) begin
        @(negedge clk);
        act.valid = 1; act.msb = (k == 0); act.last = (k == 15);
        for (int c = 0; c < 64; c++) act.bits[c] = x[c][15-k];
      end
      @(negedge clk); act = ACT_IDLE;
      lat = 1;
      while (!res_valid && lat < 10) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 2) begin failures++; $display("FAIL latency %0d", lat); end
      for (int r = 0; r < 32; r++) begin
        longint e;
        e = 0;
        for (int c = 0; c < 64; c++) e += longint'(W[r][c]) * longint'(x[c]);
        checks++;
        if (longint'(res[r]) != e) begin failures++; $display("FAIL row %0d got %0d exp %0d", r, res[r], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
