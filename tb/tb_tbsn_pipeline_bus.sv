// tb_tbsn_pipeline_bus: for every source macro and both directions, puts a
// distinct tagged stream on the source's fwd_i / fwd_w (and noise on the
// other macros' outputs) and checks that macro j receives the source's input
// row on B and weight row on A exactly |j - src| cycles later, and that the
// half enables select the consumers of the mixed-stationary dataflow.
module tb_tbsn_pipeline_bus;
  import sdcim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic active, dir;
  logic [2:0] src;
  act_t fwd_i [MACROS], fwd_w [MACROS], a_last [MACROS], b_last [MACROS];
  logic [MACROS-1:0] en_l, en_r;

  tbsn_pipeline_bus dut (.clk, .rst_n, .active, .src, .dir, .fwd_i, .fwd_w,
    .act_a_last(a_last), .act_b_last(b_last), .en_l, .en_r);

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic act_t tag(int s, int k, int which);
    act_t a;
    a.valid = 1; a.msb = (k == 0); a.last = (k == 15);
    a.bits = {32'(s * 1000 + k), 32'(which ? 32'hAAAA0000 : 32'h5555FFFF)};
    return a;
  endfunction

  initial begin
    active = 0; dir = 0; src = 0;
    for (int m = 0; m < MACROS; m++) begin fwd_i[m] = ACT_IDLE; fwd_w[m] = ACT_IDLE; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk("inactive enables", {en_l, en_r}, 16'hFFFF);
    for (int d = 0; d < 2; d++)
      for (int s = 0; s < MACROS; s++) begin
        act_t seen_i [MACROS][24], seen_w [MACROS][24];
        @(negedge clk);
        active = 1; dir = d[0]; src = 3'(s);
        #1;
        for (int j = 0; j < MACROS; j++) begin
          chk("en_r", en_r[j], d ? (j <= s) : (j >= s));
          chk("en_l", en_l[j], d ? (j < s) : (j > s));
        end
        for (int t = 0; t < 24; t++) begin
          for (int m = 0; m < MACROS; m++) begin
            if (m == s && t < 16) begin fwd_i[m] = tag(s, t, 0); fwd_w[m] = tag(s, t, 1); end
            else if (m != s) begin fwd_i[m] = tag(99, t, 0); fwd_w[m] = tag(99, t, 1); end
            else begin fwd_i[m] = ACT_IDLE; fwd_w[m] = ACT_IDLE; end
          end
          #1;
          for (int j = 0; j < MACROS; j++) begin seen_i[j][t] = b_last[j]; seen_w[j][t] = a_last[j]; end
          @(negedge clk);
        end
        for (int j = 0; j < MACROS; j++) begin
          int dl;
          dl = (j > s) ? j - s : s - j;
          for (int k = 0; k < 16; k++) begin
            chk("B gets input row", seen_i[j][k + dl] == tag(s, k, 0), 1);
            chk("A gets weight row", seen_w[j][k + dl] == tag(s, k, 1), 1);
          end
        end
        for (int m = 0; m < MACROS; m++) begin fwd_i[m] = ACT_IDLE; fwd_w[m] = ACT_IDLE; end
        repeat (10) @(negedge clk);
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
