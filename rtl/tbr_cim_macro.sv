// tbr_cim_macro: tile-based reconfigurable (TBR) CIM macro.
//
// Eight 4 x 128-column SRAM-CIM arrays hold 32 tile rows (tile row r lives in
// array r/4, row r%4). In hybrid mode (mode_normal = 0) the left 64 columns
// of each row hold one row of an input-type tile (I_Y, or Q_X) and the right
// 64 columns one row of a weight-type tile (a column of W_V, or a row of
// K_Y). In normal mode (mode_normal = 1) a row holds 128 weights and the
// macro acts as a plain weight-stationary macro.
//
// Parts, in the order of the macro diagram:
//  * CIM rewriting select MUX: wr_sel picks one of four 64-lane sources
//    (I_X/I_Y, Q_X/K_X/V_X, W_Q/W_K/W_V, Q_Y/K_Y/V_Y) to write into half
//    wr_half of tile row wr_row.
//  * Input Activation A (left half) and B (right half): each takes either the
//    scheduler stream ("initial") or the pipeline-bus stream ("last CIM"),
//    chosen by sel_last.
//  * Arrays with dual-mode adder trees, then one accumulator per array.
//  * Read-out serializer: fwd_start latches tile row fwd_row and sends its
//    left half on fwd_i and its right half on fwd_w, one 64-bit plane per
//    cycle, MSB first, 16 cycles ("next CIM").
//
// Results: res[0..31] holds, per tile row, the left-half sum (hybrid) or the
// 128-term sum (normal); res[32..63] holds the right-half sums (hybrid only).
// res_valid pulses 2 cycles after the plane marked last was applied (array
// register, accumulator register).
module tbr_cim_macro
  import sdcim_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     mode_normal,
  // rewriting
  input  logic                     wr_en,
  input  src_sel_e                 wr_sel,
  input  vec_t                     wr_src [4],
  input  logic [4:0]               wr_row,
  input  logic                     wr_half,
  // input activations
  input  act_t                     act_a_init,
  input  act_t                     act_b_init,
  input  act_t                     act_a_last,
  input  act_t                     act_b_last,
  input  logic                     sel_last,
  input  logic                     en_l,
  input  logic                     en_r,
  // cross-forwarding read-out
  input  logic                     fwd_start,
  input  logic [4:0]               fwd_row,
  output act_t                     fwd_i,
  output act_t                     fwd_w,
  // results
  output logic signed [ACC_W-1:0]  res [2*TILE_ROWS],
  output logic                     res_valid
);
  // ---------------- CIM rewriting select MUX ----------------
  vec_t wr_data;
  assign wr_data = wr_src[wr_sel];

  // ---------------- input activation select ----------------
  act_t act_a, act_b;
  assign act_a = sel_last ? act_a_last : act_a_init;
  assign act_b = sel_last ? act_b_last : act_b_init;

  logic plane_valid, plane_msb, plane_last;
  assign plane_valid = act_a.valid | act_b.valid;
  assign plane_msb   = act_a.valid ? act_a.msb  : act_b.msb;
  assign plane_last  = act_a.valid ? act_a.last : act_b.last;

  logic d_valid, d_msb, d_last;   // framing aligned with the array register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) {d_valid, d_msb, d_last} <= '0;
    else        {d_valid, d_msb, d_last} <= {plane_valid, plane_msb, plane_last};
  end

  // ---------------- arrays and accumulators ----------------
  vec_t rd_l [ARRAYS];
  vec_t rd_r [ARRAYS];
  logic [ARRAYS-1:0] acc_valid;

  for (genvar a = 0; a < ARRAYS; a++) begin : g_arr
    logic signed [PSUM_W-1:0] pl [ROWS];
    logic signed [PSUM_W-1:0] pr [ROWS];
    logic signed [PSUM_W-1:0] ps [2*ROWS];
    logic signed [ACC_W-1:0]  ac [2*ROWS];

    cim_array #(.COLS(2*LANES)) u_array (
      .clk, .wr_en(wr_en && (wr_row[4:2] == 3'(a))), .wr_row(wr_row[1:0]),
      .wr_half, .wr_data,
      .rd_row(fwd_row[1:0]), .rd_l(rd_l[a]), .rd_r(rd_r[a]),
      .a_bits(act_a.valid ? act_a.bits : '0), .b_bits(act_b.valid ? act_b.bits : '0),
      .en_l, .en_r, .mode_normal, .psum_l(pl), .psum_r(pr)
    );

    always_comb begin
      for (int r = 0; r < ROWS; r++) begin
        ps[r]        = pl[r];
        ps[ROWS + r] = pr[r];
      end
    end

    macro_accumulator #(.NLANES(2*ROWS)) u_acc (
      .clk, .rst_n, .in_valid(d_valid), .in_msb(d_msb), .in_last(d_last),
      .psum(ps), .acc(ac), .out_valid(acc_valid[a])
    );

    always_comb begin
      for (int r = 0; r < ROWS; r++) begin
        res[a*ROWS + r]             = ac[r];
        res[TILE_ROWS + a*ROWS + r] = ac[ROWS + r];
      end
    end
  end

  // All arrays see the same framing, so their accumulators finish together.
  assign res_valid = &acc_valid;

  // ---------------- read-out serializer (next CIM) ----------------
  vec_t       sh_i, sh_w;
  logic [4:0] plane;      // 16 = idle
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      plane    <= 5'd16;
      sh_i     <= '0;
      sh_w     <= '0;
    end else if (fwd_start) begin
      plane    <= 5'd0;
      sh_i     <= rd_l[fwd_row[4:2]];
      sh_w     <= rd_r[fwd_row[4:2]];
    end else if (plane != 5'd16) begin
      plane <= plane + 5'd1;
    end
  end

  always_comb begin
    fwd_i = ACT_IDLE;
    fwd_w = ACT_IDLE;
    if (plane != 5'd16) begin
      fwd_i.valid = 1'b1;
      fwd_i.msb   = (plane == 5'd0);
      fwd_i.last  = (plane == 5'd15);
      for (int c = 0; c < LANES; c++) begin
        fwd_i.bits[c] = sh_i[c][4'd15 - plane[3:0]];
        fwd_w.bits[c] = sh_w[c][4'd15 - plane[3:0]];
      end
      fwd_w.valid = 1'b1;
      fwd_w.msb   = fwd_i.msb;
      fwd_w.last  = fwd_i.last;
    end
  end

  // A read-out must not be restarted while one is in flight.
  assert property (@(posedge clk) disable iff (!rst_n) fwd_start |-> plane == 5'd16 || plane == 5'd15)
    else $error("tbr_cim_macro: fwd_start during read-out");
endmodule
