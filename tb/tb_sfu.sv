// tb_sfu: sends random words through softmax, GELU and pass-through and
// checks every lane against a lane-by-lane model of the same fixed-point
// approximations, checks that softmax outputs sum to about 1.0 (32768) and
// stay within 8% of 32768 of exact softmax, checks the cycle count of a
// softmax word (130 cycles from acceptance to output), and holds out_ready
// low for a while to check that the output waits.
module tb_sfu;
  import sdcim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready;
  vec_t in_data, out_data;
  sfu_func_e in_func;
  logic [ADDR_W-1:0] in_tag, out_tag;

  sfu dut (.clk, .rst_n, .in_valid, .in_ready, .in_data, .in_func, .in_tag,
           .out_valid, .out_ready, .out_data, .out_tag);

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  function automatic longint asr(longint v, int s);
    return v >>> s;
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 1; in_data = '0; in_func = SFU_PASS; in_tag = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 24; it++) begin
      longint x [64], e [64], sum, mx;
      real rs, rp;
      int lat;
      sfu_func_e f;
      f = sfu_func_e'(it % 3);
      for (int c = 0; c < 64; c++) begin
        x[c] = longint'($urandom_range(0, 4000)) - 2000;     // Q8.8, about -8..8
        if (it == 1) x[c] = 0;
        in_data[c] = 16'(x[c]);
      end
      @(negedge clk);
      in_valid = 1; in_func = f; in_tag = 9'(it * 7);
      chk("in_ready when idle", in_ready, 1);
      @(negedge clk);
      in_valid = 0;
      lat = 1;
      out_ready = (it % 4 != 3);
      while (!out_valid && lat < 400) begin @(negedge clk); lat++; end
      if (!out_ready) begin
        repeat (5) @(negedge clk);
        chk("output held", out_valid, 1);
        out_ready = 1;
      end
      chk("tag", out_tag, it * 7);
      if (f == SFU_PASS) begin
        chk("pass latency", lat, 1);
        for (int c = 0; c < 64; c++) chk("pass", longint'($signed(out_data[c])), x[c]);
      end else if (f == SFU_GELU) begin
        chk("gelu latency", lat, 2);
        for (int c = 0; c < 64; c++) begin
          longint h, p;
          h = asr(x[c], 2) + 128;
          if (h < 0) h = 0;
          if (h > 256) h = 256;
          p = asr(x[c] * h, 8);
          if (p > 32767) p = 32767;
          if (p < -32768) p = -32768;
          chk("gelu", longint'($signed(out_data[c])), p);
        end
      end else begin
        chk("softmax latency", lat, 130);
        mx = x[0];
        for (int c = 1; c < 64; c++) if (x[c] > mx) mx = x[c];
        sum = 0; rs = 0.0;
        for (int c = 0; c < 64; c++) begin
          longint t, ip, fr;
          t  = asr((x[c] - mx) * 369, 8);
          ip = asr(t, 8);
          fr = t & 255;
          e[c] = (ip < -15) ? 0 : (((256 + fr) << 7) >> (-ip));
          sum += e[c];
          rs += $exp(real'(x[c] - mx) / 256.0);
        end
        begin
          longint tot;
          tot = 0;
          for (int c = 0; c < 64; c++) begin
            longint p;
            p = (e[c] << 15) / sum;
            if (p > 32767) p = 32767;
            chk("softmax", longint'(out_data[c]), p);
            tot += longint'(out_data[c]);
            rp = $exp(real'(x[c] - mx) / 256.0) / rs * 32768.0;
            checks++;
            if ((real'(out_data[c]) - rp) > 2600.0 || (rp - real'(out_data[c])) > 2600.0) begin
              failures++; $display("FAIL softmax accuracy lane %0d got %0d exact %f", c, out_data[c], rp);
            end
          end
          checks++;
          if (tot < 32768 - 70 || tot > 32768) begin failures++; $display("FAIL softmax sum %0d", tot); end
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
