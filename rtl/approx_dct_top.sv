// approx_dct_top: 4x4 approximate 2-D DCT-II and DCT-IV for transform block
// coding, without multipliers.
//
// How it works: one stream of 4x4 blocks of 8-bit samples, one row per
// clock, feeds two 2-D engines side by side, one built on the approximate
// DCT-II (C*_II, 6 additions per 1-D transform) and one on the approximate
// DCT-IV (C*_IV, 8 additions). Both engines have identical timing, so they
// share the input handshake and every accepted block is transformed both
// ways. The paper presents the two 2-D engines as separate designs; putting
// them behind one input is this design's choice, so that one top carries
// every block. The orthogonalising scale factors are left to the quantiser
// that follows, as the paper proposes.
//
// Interface:
//   in_valid/in_ready/in_row[]: row r of a block, rows 0..3 in order.
//   ii_*: columns of Y_II = C*_II X C*_II^T, column index ii_idx, last ii_last.
//   iv_*: columns of Y_IV = C*_IV X C*_IV^T, same format.
//   Outputs cannot be stalled; each column is valid for one clock.
//
// Timing: one block per eight clocks at full rate (in_ready drops for four
// clocks after each fourth row); the first output column appears three
// clocks after a block's last row is taken.
module approx_dct_top #(
  parameter int unsigned IN_W  = approx_dct_pkg::IN_W,
  parameter int unsigned OUT_W = IN_W + 2 * approx_dct_pkg::GROWTH_1D
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic signed [IN_W-1:0]  in_row  [approx_dct_pkg::N],
  output logic                    ii_valid,
  output logic                    ii_last,
  output logic [1:0]              ii_idx,
  output logic signed [OUT_W-1:0] ii_col  [approx_dct_pkg::N],
  output logic                    iv_valid,
  output logic                    iv_last,
  output logic [1:0]              iv_idx,
  output logic signed [OUT_W-1:0] iv_col  [approx_dct_pkg::N]
);

  logic ready_ii, ready_iv, take;

  assign in_ready = ready_ii && ready_iv;
  assign take     = in_valid && in_ready;

  dct2d_4x4 #(
    .KIND(approx_dct_pkg::DCT_II), .IN_W(IN_W),
    .ROW_W(IN_W + approx_dct_pkg::GROWTH_1D), .OUT_W(OUT_W)
  ) u_dct2d_ii (
    .clk, .rst_n,
    .in_valid(take), .in_ready(ready_ii), .in_row,
    .out_valid(ii_valid), .out_last(ii_last), .out_idx(ii_idx), .out_col(ii_col));

  dct2d_4x4 #(
    .KIND(approx_dct_pkg::DCT_IV), .IN_W(IN_W),
    .ROW_W(IN_W + approx_dct_pkg::GROWTH_1D), .OUT_W(OUT_W)
  ) u_dct2d_iv (
    .clk, .rst_n,
    .in_valid(take), .in_ready(ready_iv), .in_row,
    .out_valid(iv_valid), .out_last(iv_last), .out_idx(iv_idx), .out_col(iv_col));

  // The two engines run in lock step.
  assert property (@(posedge clk) disable iff (!rst_n) ready_ii == ready_iv)
    else $error("approx_dct_top: engines out of step");

endmodule
