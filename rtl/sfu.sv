// sfu: special function unit (softmax, GELU) on the result path.
//
// Takes one 64-lane word (valid/ready handshake) with a function code and a
// tag that travels with it, and returns one word:
//  * SFU_PASS:    the word unchanged (1 cycle).
//  * SFU_GELU:    per lane y = x * clamp(x/4 + 1/2, 0, 1) on Q8.8 values,
//                 a piecewise approximation of GELU (2 cycles: the
//                 word is held one cycle, then converted).
//  * SFU_SOFTMAX: softmax across the 64 lanes. Inputs are Q8.8 scores,
//                 outputs Q0.15 probabilities. exp is taken base 2:
//                 e = 2^((x - max) * log2(e)) with 2^f ~ 1 + f for the
//                 fractional part, one lane per cycle while the sum is
//                 formed; then one division per lane per cycle. A word
//                 takes 64 + 64 + 2 cycles.
// The paper names the unit and its functions (Softmax, GELU, etc.) but gives
// no circuit; number formats and approximations here are this design's.
module sfu
  import sdcim_pkg::*;
#(
  parameter int TAG_W = ADDR_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  vec_t             in_data,
  input  sfu_func_e        in_func,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  input  logic             out_ready,
  output vec_t             out_data,
  output logic [TAG_W-1:0] out_tag
);
  typedef enum logic [2:0] {F_IDLE, F_MAX, F_EXP, F_DIV, F_OUT} state_e;
  state_e state;

  vec_t              data;
  logic [TAG_W-1:0]  tag;
  logic [5:0]        idx;
  logic signed [DATA_W-1:0] mx;
  logic [DATA_W:0]   ex [LANES];     // Q1.15 exponentials, up to 2^15
  logic [22:0]       sum;
  logic              gelu_pending;  // held word is for GELU, not softmax

  // max over the lanes of the held word
  logic signed [DATA_W-1:0] mx_c;
  always_comb begin
    mx_c = $signed(data[0]);
    for (int i = 1; i < LANES; i++)
      if ($signed(data[i]) > mx_c) mx_c = $signed(data[i]);
  end

  // base-2 exponential of lane idx
  logic signed [DATA_W:0]   d;
  logic signed [DATA_W+9:0] t;
  logic signed [DATA_W+1:0] ip;     // integer part (<= 0)
  logic [7:0]               fp;
  logic [DATA_W:0]          e_c;
  always_comb begin
    d  = (DATA_W+1)'($signed(data[idx])) - (DATA_W+1)'(mx);
    t  = ((DATA_W+10)'(d) * 26'sd369) >>> 8;        // d * log2(e), Q8.8
    ip = (DATA_W+2)'(t >>> 8);
    fp = t[7:0];
    if (ip < -(DATA_W+2)'(15)) e_c = '0;
    else                       e_c = (17'({1'b1, fp}) << 7) >> 5'(-ip);
  end

  // division of lane idx
  logic [38:0] num;
  logic [38:0] q;
  always_comb begin
    num = {22'd0, ex[idx]} << 15;
    q   = (sum == '0) ? '0 : num / {16'd0, sum};
  end

  // GELU of every lane
  vec_t gelu_c;
  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      logic signed [DATA_W+1:0] h;
      logic signed [2*DATA_W+3:0] p;
      h = (DATA_W+2)'($signed(data[i]) >>> 2) + (DATA_W+2)'(128);
      if (h < 0)        h = '0;
      else if (h > 256) h = (DATA_W+2)'(256);
      p = ((2*DATA_W+4)'($signed(data[i])) * (2*DATA_W+4)'(h)) >>> 8;
      if (p > 32767)       gelu_c[i] = 16'h7fff;
      else if (p < -32768) gelu_c[i] = 16'h8000;
      else                 gelu_c[i] = 16'(p);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= F_IDLE;
      data <= '0; tag <= '0; idx <= '0; mx <= '0; sum <= '0;
      for (int i = 0; i < LANES; i++) ex[i] <= '0;
    end else begin
      unique case (state)
        F_IDLE: if (in_valid) begin
          data  <= in_data;
          tag   <= in_tag;
          state <= (in_func == SFU_PASS) ? F_OUT : F_MAX;
        end
        F_MAX: begin
          if (gelu_pending) begin
            data  <= gelu_c;
            state <= F_OUT;
          end else begin
            mx    <= mx_c;
            idx   <= '0;
            sum   <= '0;
            state <= F_EXP;
          end
        end
        F_EXP: begin
          ex[idx] <= e_c;
          sum     <= sum + 23'(e_c);
          idx     <= idx + 6'd1;
          if (idx == 6'd63) state <= F_DIV;
        end
        F_DIV: begin
          data[idx] <= (q > 39'd32767) ? 16'd32767 : q[DATA_W-1:0];
          idx       <= idx + 6'd1;
          if (idx == 6'd63) state <= F_OUT;
        end
        F_OUT: if (out_ready) state <= F_IDLE;
        default: state <= F_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                        gelu_pending <= 1'b0;
    else if (state == F_IDLE && in_valid) gelu_pending <= (in_func == SFU_GELU);
  end

  assign in_ready  = (state == F_IDLE);
  assign out_valid = (state == F_OUT);
  assign out_data  = data;
  assign out_tag   = tag;
endmodule
