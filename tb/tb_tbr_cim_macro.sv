// tb_tbr_cim_macro: exercises the TBR-CIM macro in both modes.
//  1. Fills the 32 tile rows of both halves through the rewriting select
//     MUX, each row from a randomly chosen one of the four sources.
//  2. Read-out: for several rows, fwd_start must produce 16 planes on fwd_i
//     (left half) and fwd_w (right half) that rebuild the stored row.
//  3. Normal mode: a 128-element input on the scheduler ("initial") streams
//     A and B gives 32 128-term dot products in res[0..31], res_valid 2
//     cycles after the last plane.
//  4. Hybrid mode with the "last CIM" streams: res[0..31] are the left-half
//     dot products with stream A, res[32..63] the right-half products with
//     stream B; with en_l low the left results are 0.
module tb_tbr_cim_macro;
  import sdcim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic mode_normal, wr_en, wr_half, sel_last, en_l, en_r, fwd_start, res_valid;
  src_sel_e wr_sel;
  vec_t wr_src [4];
  logic [4:0] wr_row, fwd_row;
  act_t a_init, b_init, a_last, b_last, fwd_i, fwd_w;
  logic signed [ACC_W-1:0] res [64];
  logic signed [15:0] L [32][64], R [32][64];
  logic signed [15:0] xa [64], xb [64];

  tbr_cim_macro dut (.clk, .rst_n, .mode_normal, .wr_en, .wr_sel, .wr_src, .wr_row, .wr_half,
    .act_a_init(a_init), .act_b_init(b_init), .act_a_last(a_last), .act_b_last(b_last),
    .sel_last, .en_l, .en_r, .fwd_start, .fwd_row, .fwd_i, .fwd_w, .res, .res_valid);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  // Stream xa on A and xb on B (to the init or the last-CIM inputs), then
  // wait for res_valid and return the latency after the last plane.
  task automatic run(input logic use_last, output int lat);
    for (int k = 0; k < 16; k++) begin
      act_t pa, pb;
      @(negedge clk);
      pa.valid = 1; pa.msb = (k == 0); pa.last = (k == 15);
      pb = pa;
      for (int c = 0; c < 64; c++) begin pa.bits[c] = xa[c][15-k]; pb.bits[c] = xb[c][15-k]; end
      // the unused pair carries noise that must be ignored
      if (use_last) begin a_last = pa; b_last = pb; a_init = pb; b_init = pa; end
      else          begin a_init = pa; b_init = pb; a_last = pb; b_last = pa; end
    end
    @(negedge clk);
    a_init = ACT_IDLE; b_init = ACT_IDLE; a_last = ACT_IDLE; b_last = ACT_IDLE;
    lat = 1;
    while (!res_valid && lat < 10) begin @(negedge clk); lat++; end
  endtask

  initial begin
    int lat;
    mode_normal = 1; wr_en = 0; wr_half = 0; wr_row = 0; sel_last = 0; en_l = 1; en_r = 1;
    fwd_start = 0; fwd_row = 0; wr_sel = SRC_INPUT;
    a_init = ACT_IDLE; b_init = ACT_IDLE; a_last = ACT_IDLE; b_last = ACT_IDLE;
    for (int s = 0; s < 4; s++) wr_src[s] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // 1. rewrite through the MUX
    for (int r = 0; r < 32; r++)
      for (int h = 0; h < 2; h++) begin
        int s;
        @(negedge clk);
        s = $urandom_range(0, 3);
        for (int q = 0; q < 4; q++)
          for (int c = 0; c < 64; c++) wr_src[q][c] = 16'($urandom_range(0, 2000) - 1000);
        wr_en = 1; wr_sel = src_sel_e'(s); wr_row = 5'(r); wr_half = h[0];
        for (int c = 0; c < 64; c++) if (h == 0) L[r][c] = wr_src[s][c]; else R[r][c] = wr_src[s][c];
      end
    @(negedge clk); wr_en = 0;
    // 2. read-out for forwarding
    for (int t = 0; t < 6; t++) begin
      int r;
      logic [15:0] gi [64], gw [64];
      r = (t == 0) ? 0 : (t == 1) ? 31 : $urandom_range(0, 31);
      @(negedge clk); fwd_start = 1; fwd_row = 5'(r);
      @(negedge clk); fwd_start = 0;
      for (int k = 0; k < 16; k++) begin
        chk("fwd valid", fwd_i.valid && fwd_w.valid, 1);
        chk("fwd framing", {fwd_i.msb, fwd_i.last}, {k == 0, k == 15});
        for (int c = 0; c < 64; c++) begin gi[c][15-k] = fwd_i.bits[c]; gw[c][15-k] = fwd_w.bits[c]; end
        @(negedge clk);
      end
      chk("fwd idle after 16 planes", fwd_i.valid, 0);
      for (int c = 0; c < 64; c++) begin
        chk("fwd_i data", $signed(gi[c]), L[r][c]);
        chk("fwd_w data", $signed(gw[c]), R[r][c]);
      end
    end
    // 3. normal mode
    for (int it = 0; it < 6; it++) begin
      for (int c = 0; c < 64; c++) begin xa[c] = 16'($urandom); xb[c] = 16'($urandom); end
      mode_normal = 1; sel_last = 0; en_l = 1; en_r = 1;
      run(0, lat);
      chk("normal latency", lat, 2);
      for (int r = 0; r < 32; r++) begin
        longint e;
        e = 0;
        for (int c = 0; c < 64; c++) e += longint'(L[r][c]) * xa[c] + longint'(R[r][c]) * xb[c];
        chk("normal dot", res[r], e);
      end
    end
    // 4. hybrid mode
    for (int it = 0; it < 6; it++) begin
      for (int c = 0; c < 64; c++) begin xa[c] = 16'($urandom); xb[c] = 16'($urandom); end
      mode_normal = 0; sel_last = 1; en_l = (it != 2); en_r = (it != 4);
      run(1, lat);
      chk("hybrid latency", lat, 2);
      for (int r = 0; r < 32; r++) begin
        longint el, er;
        el = 0; er = 0;
        for (int c = 0; c < 64; c++) begin el += longint'(L[r][c]) * xa[c]; er += longint'(R[r][c]) * xb[c]; end
        chk("hybrid left", res[r], en_l ? el : 0);
        chk("hybrid right", res[32+r], en_r ? er : 0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
