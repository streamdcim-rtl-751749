// tb_pingpong_buffer: writes random words across both banks, then reads them
// back on both read ports (different addresses at once) and checks data and
// the one-cycle read latency; a write and a read of another word in the same
// cycle must not disturb each other.
module tb_pingpong_buffer;
  import sdcim_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we, re0, re1;
  logic [ADDR_W-1:0] waddr, raddr0, raddr1;
  vec_t wdata, rdata0, rdata1;
  vec_t model [2*BANK_WORDS];

  pingpong_buffer dut (.clk, .we, .waddr, .wdata, .re0, .raddr0, .rdata0, .re1, .raddr1, .rdata1);

  function automatic vec_t rnd();
    vec_t v;
    for (int i = 0; i < LANES; i++) v[i] = 16'($urandom);
    return v;
  endfunction

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re0 = 0; re1 = 0; waddr = '0; raddr0 = '0; raddr1 = '0; wdata = '0;
    for (int a = 0; a < 2*BANK_WORDS; a++) begin
      @(negedge clk);
      we = 1; waddr = ADDR_W'(a); wdata = rnd(); model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int it = 0; it < 600; it++) begin
      int a0, a1, aw;
      a0 = $urandom_range(0, 2*BANK_WORDS-1);
      a1 = $urandom_range(0, 2*BANK_WORDS-1);
      aw = $urandom_range(0, 2*BANK_WORDS-1);
      if (aw == a0 || aw == a1) aw = (a0 + 1 == a1) ? a1 + 1 : a0 + 1;
      aw = aw % (2*BANK_WORDS);
      if (aw == a0 || aw == a1) aw = (aw + 3) % (2*BANK_WORDS);
      @(negedge clk);
      re0 = 1; raddr0 = ADDR_W'(a0); re1 = 1; raddr1 = ADDR_W'(a1);
      we = 1; waddr = ADDR_W'(aw); wdata = rnd();
      @(posedge clk); #1;
      model[aw] = wdata;
      checks += 2;
      if (rdata0 != model[a0]) begin failures++; $display("FAIL port0 addr %0d", a0); end
      if (rdata1 != model[a1]) begin failures++; $display("FAIL port1 addr %0d", a1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
