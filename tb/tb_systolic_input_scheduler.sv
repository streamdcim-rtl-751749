// tb_systolic_input_scheduler: a pass of 12 tokens with some pruned tokens.
// A buffer model answers the reads one cycle later; a collector model stays
// busy for a random time after each token, so the scheduler has to wait.
// Checks: only kept tokens are sent, in order; each macro k rebuilds the
// expected A and B rows from its planes; macro k's first plane comes exactly
// k cycles after macro 0's; tok_idx names the token; stall was seen; done.
module tb_systolic_input_scheduler;
  import sdcim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, rd_en, coll_idle, tok_issue, stall, busy, done;
  logic [ADDR_W-1:0] addr_a, addr_b, rd_addr;
  logic [6:0] n_tok, tok_idx;
  logic [63:0] keep_mask;
  vec_t rd_data;
  act_t act_a [MACROS], act_b [MACROS];
  vec_t mem [512];

  systolic_input_scheduler dut (.clk, .rst_n, .start, .addr_a, .addr_b, .n_tok, .keep_mask,
    .rd_en, .rd_addr, .rd_data, .coll_idle, .act_a, .act_b, .tok_issue, .tok_idx, .stall, .busy, .done);

  always_ff @(posedge clk) if (rd_en) rd_data <= mem[rd_addr];

  // collector model: busy from a token's first plane for 20..60 cycles
  int busy_cnt = 0;
  always_ff @(posedge clk) begin
    if (tok_issue) busy_cnt <= 20 + int'($urandom_range(0, 40));
    else if (busy_cnt > 0) busy_cnt <= busy_cnt - 1;
  end
  assign coll_idle = (busy_cnt == 0) && !tok_issue;

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  // per-macro plane capture
  int cyc = 0;
  always_ff @(posedge clk) cyc <= cyc + 1;
  int first_cyc [MACROS][$];
  logic [15:0] ga [MACROS][64], gb [MACROS][64];
  int kk [MACROS];
  vec_t rows_a [MACROS][$], rows_b [MACROS][$];
  always @(posedge clk) begin
    for (int m = 0; m < MACROS; m++) begin
      if (act_a[m].valid) begin
        if (act_a[m].msb) begin kk[m] = 0; first_cyc[m].push_back(cyc); end
        for (int c = 0; c < 64; c++) begin ga[m][c][15-kk[m]] = act_a[m].bits[c]; gb[m][c][15-kk[m]] = act_b[m].bits[c]; end
        if (act_a[m].last) begin
          vec_t va, vb;
          for (int c = 0; c < 64; c++) begin va[c] = ga[m][c]; vb[c] = gb[m][c]; end
          rows_a[m].push_back(va); rows_b[m].push_back(vb);
        end
        kk[m]++;
      end
    end
  end

  int issued [$];
  int stalls = 0, dones = 0;
  always @(posedge clk) begin
    if (tok_issue) issued.push_back(int'(tok_idx));
    if (stall) stalls++;
    if (done) dones++;
  end

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int kept [$];
    for (int a = 0; a < 512; a++) for (int c = 0; c < 64; c++) mem[a][c] = 16'($urandom);
    start = 0; addr_a = 9'd10; addr_b = 9'd300; n_tok = 7'd12;
    keep_mask = '1; keep_mask[0] = 0; keep_mask[5] = 0; keep_mask[6] = 0; keep_mask[11] = 0;
    for (int t = 0; t < 12; t++) if (keep_mask[t]) kept.push_back(t);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    chk("busy after start", busy, 1);
    while (busy) @(negedge clk);
    repeat (20) @(negedge clk);
    chk("tokens sent", issued.size(), kept.size());
    for (int i = 0; i < kept.size() && i < issued.size(); i++) chk("token order", issued[i], kept[i]);
    for (int m = 0; m < MACROS; m++) begin
      chk("rows seen by macro", rows_a[m].size(), kept.size());
      for (int i = 0; i < kept.size() && i < rows_a[m].size(); i++) begin
        chk("row A", rows_a[m][i] == mem[10 + kept[i]], 1);
        chk("row B", rows_b[m][i] == mem[300 + kept[i]], 1);
        chk("systolic skew", first_cyc[m][i] - first_cyc[0][i], m);
      end
    end
    chk("stall seen", stalls > 0, 1);
    chk("one done", dones, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
