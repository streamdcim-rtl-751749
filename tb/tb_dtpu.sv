// tb_dtpu: feeds rows of random attention probabilities (some rows while
// snoop_valid is low, which must be ignored), then finalizes with several
// keep counts and checks the keep mask against a ranking of the column sums
// done here by sorting; also checks clear and the mask_valid pulse.
module tb_dtpu;
  import sdcim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear, snoop_valid, finalize, mask_valid;
  vec_t snoop_data;
  logic [6:0] keep_cnt;
  logic [63:0] keep_mask;

  dtpu dut (.clk, .rst_n, .clear, .snoop_valid, .snoop_data, .finalize, .keep_cnt, .keep_mask, .mask_valid);

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

  initial begin
    clear = 0; snoop_valid = 0; finalize = 0; keep_cnt = 0; snoop_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk("reset keeps all", keep_mask == '1, 1);
    for (int round = 0; round < 4; round++) begin
      longint s [64];
      int order [64];
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      chk("clear keeps all", keep_mask == '1, 1);
      for (int c = 0; c < 64; c++) s[c] = 0;
      for (int r = 0; r < 20; r++) begin
        @(negedge clk);
        snoop_valid = (r % 6 != 5);
        for (int c = 0; c < 64; c++) begin
          snoop_data[c] = 16'($urandom_range(0, (round == 3) ? 3 : 1200));
          if (snoop_valid) s[c] += longint'(snoop_data[c]);
        end
      end
      @(negedge clk); snoop_valid = 0;
      // rank by sorting indices: larger sum first, lower index first on ties
      for (int c = 0; c < 64; c++) order[c] = c;
      for (int i = 0; i < 64; i++)
        for (int j = 0; j < 63 - i; j++)
          if (s[order[j+1]] > s[order[j]] || (s[order[j+1]] == s[order[j]] && order[j+1] < order[j])) begin
            int tmp;
            tmp = order[j]; order[j] = order[j+1]; order[j+1] = tmp;
          end
      for (int k = 0; k < 3; k++) begin
        int kc;
        logic [63:0] exp_mask;
        kc = (k == 0) ? 1 : (k == 1) ? $urandom_range(2, 63) : 64;
        exp_mask = '0;
        for (int i = 0; i < kc; i++) exp_mask[order[i]] = 1'b1;
        @(negedge clk); finalize = 1; keep_cnt = 7'(kc);
        @(negedge clk); finalize = 0;
        chk("mask_valid", mask_valid, 1);
        chk("keep mask", keep_mask == exp_mask, 1);
        chk("kept count", $countones(keep_mask), kc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
