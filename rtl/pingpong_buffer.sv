// pingpong_buffer: on-chip SRAM buffer of two 32 KB banks.
//
// Words are 64 INT16 lanes (1024 bits); each bank holds BANK_WORDS words
// and the top address bit selects the bank, so one bank can be filled while
// the other is read (ping-pong). One write port and two read ports; reads
// are synchronous with one cycle of latency and rdata holds its value until
// the next read on that port.
// The 2 x 32 KB organisation follows the paper; the word width and the port
// count are this design's choices. Written as an array, to be mapped to
// SRAM macros.
module pingpong_buffer
  import sdcim_pkg::*;
#(
  parameter int BANK_WORDS_P = BANK_WORDS,
  parameter int AW = $clog2(2 * BANK_WORDS_P)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  vec_t          wdata,
  input  logic          re0,
  input  logic [AW-1:0] raddr0,
  output vec_t          rdata0,
  input  logic          re1,
  input  logic [AW-1:0] raddr1,
  output vec_t          rdata1
);
  vec_t mem [2 * BANK_WORDS_P];

  always_ff @(posedge clk) begin
    if (we)  mem[waddr]  <= wdata;
    if (re0) rdata0 <= mem[raddr0];
    if (re1) rdata1 <= mem[raddr1];
  end
endmodule
