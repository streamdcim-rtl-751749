// tb_cim_array: writes random rows into both halves of a 128-column array,
// reads them back, then applies random bit planes in normal and hybrid mode
// with random half enables and checks the four registered row sums one cycle
// later against sums formed here.
module tb_cim_array;
  import sdcim_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en, wr_half, en_l, en_r, mode;
  logic [1:0] wr_row, rd_row;
  vec_t wr_data, rd_l, rd_r;
  logic [63:0] a, b;
  logic signed [PSUM_W-1:0] pl [ROWS], pr [ROWS];
  logic [15:0] m [ROWS][128];

  cim_array #(.COLS(128)) dut (.clk, .wr_en, .wr_row, .wr_half, .wr_data, .rd_row, .rd_l, .rd_r,
    .a_bits(a), .b_bits(b), .en_l, .en_r, .mode_normal(mode), .psum_l(pl), .psum_r(pr));

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_half = 0; wr_row = 0; rd_row = 0; wr_data = '0; a = '0; b = '0;
    en_l = 1; en_r = 1; mode = 1;
    for (int r = 0; r < ROWS; r++)
      for (int h = 0; h < 2; h++) begin
        @(negedge clk);
        wr_en = 1; wr_row = 2'(r); wr_half = h[0];
        for (int c = 0; c < LANES; c++) begin wr_data[c] = 16'($urandom); m[r][h*64+c] = wr_data[c]; end
      end
    @(negedge clk); wr_en = 0;
    for (int r = 0; r < ROWS; r++) begin
      rd_row = 2'(r); #1;
      for (int c = 0; c < LANES; c++) begin
        checks += 2;
        if (rd_l[c] != m[r][c])    begin failures++; $display("FAIL read l r%0d c%0d", r, c); end
        if (rd_r[c] != m[r][64+c]) begin failures++; $display("FAIL read r r%0d c%0d", r, c); end
      end
    end
    for (int it = 0; it < 200; it++) begin
      longint el [ROWS], er [ROWS];
      @(negedge clk);
      a = {$urandom, $urandom}; b = {$urandom, $urandom};
      mode = it[0]; en_l = (it % 5 != 1); en_r = (it % 7 != 2);
      for (int r = 0; r < ROWS; r++) begin
        el[r] = 0; er[r] = 0;
        for (int c = 0; c < 64; c++) begin
          if (a[c] && en_l) el[r] += longint'($signed(m[r][c]));
          if (b[c] && en_r) er[r] += longint'($signed(m[r][64+c]));
        end
      end
      @(posedge clk); #1;
      for (int r = 0; r < ROWS; r++) begin
        checks += 2;
        if (mode) begin
          if (pl[r] != el[r] + er[r] || pr[r] != 0) begin failures++; $display("FAIL normal row %0d", r); end
        end else begin
          if (pl[r] != el[r]) begin failures++; $display("FAIL hybrid left row %0d", r); end
          if (pr[r] != er[r]) begin failures++; $display("FAIL hybrid right row %0d", r); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
