// dct2d_4x4: 4x4 separable 2-D approximate transform, Y = C X C^T, where C
// is C*_II or C*_IV (parameter KIND).
//
// How it works: the input matrix X arrives one row per clock. A row core
// (the 1-D transform) turns each row into a row of Z = X C^T; the rows are
// stored in a transposition buffer, which then hands out the columns of Z
// one per clock to a column core, whose results are the columns of
// Y = C Z. Nothing is rounded: rows grow by two bits, columns by two more.
// The paper states only that the 1-D architectures were "extended to 4x4
// 2-D"; the row-column organisation, the single-bank buffer and the stall
// are this design's choices, made to give the paper's block rate of one
// 4x4 block per eight clocks (125 MHz of blocks at 1 GHz).
//
// Interface (valid/ready on the input, valid only on the output):
//   in_valid/in_ready/in_row[]: a row X[r][0..3] is taken on a clock where
//     both are high; rows of one block come in order r = 0..3.
//   out_valid/out_col[]/out_idx/out_last: column k of Y (out_col[m] =
//     Y[m][k]) for k = out_idx = 0..3; out_last marks k = 3. The output
//     cannot be stalled.
//
// Timing: after the fourth row of a block is taken, in_ready is low for four
// clocks while the buffer drains (the stall), so a continuous stream runs at
// exactly eight clocks per block. Column 0 of Y appears three clocks after
// the fourth row is taken, and columns 1..3 follow on consecutive clocks.
module dct2d_4x4 #(
  parameter approx_dct_pkg::kind_e KIND = approx_dct_pkg::DCT_II,
  parameter int unsigned IN_W  = approx_dct_pkg::IN_W,
  parameter int unsigned ROW_W = IN_W + approx_dct_pkg::GROWTH_1D,
  parameter int unsigned OUT_W = ROW_W + approx_dct_pkg::GROWTH_1D
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic signed [IN_W-1:0]  in_row  [approx_dct_pkg::N],
  output logic                    out_valid,
  output logic                    out_last,
  output logic [1:0]              out_idx,
  output logic signed [OUT_W-1:0] out_col [approx_dct_pkg::N]
);

  localparam int unsigned N = approx_dct_pkg::N;

  // ---------------------------------------------------------------- control
  // ACCEPT: take up to four rows. HOLD: four clocks with in_ready low while
  // the last row passes the row core and the buffer drains.
  typedef enum logic {ACCEPT, HOLD} ctrl_e;
  ctrl_e      ctrl;
  logic [1:0] row_cnt;
  logic [1:0] hold_cnt;
  logic       take;

  assign in_ready = (ctrl == ACCEPT);
  assign take     = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctrl     <= ACCEPT;
      row_cnt  <= '0;
      hold_cnt <= '0;
    end else begin
      unique case (ctrl)
        ACCEPT: if (take) begin
          row_cnt <= row_cnt + 2'd1;
          if (row_cnt == 2'(N - 1)) begin
            ctrl     <= HOLD;
            hold_cnt <= '0;
          end
        end
        HOLD: begin
          hold_cnt <= hold_cnt + 2'd1;
          if (hold_cnt == 2'(N - 1)) ctrl <= ACCEPT;
        end
        default: ctrl <= ACCEPT;
      endcase
    end
  end

  // --------------------------------------------------------------- datapath
  logic                    row_valid;
  logic signed [ROW_W-1:0] row_res [N];
  logic                    tb_valid, tb_last, tb_draining;
  logic signed [ROW_W-1:0] tb_col  [N];
  logic                    col_last_q;
  logic [1:0]              col_idx_q;

  if (KIND == approx_dct_pkg::DCT_II) begin : g_dct2
    dct2_4pt #(.IN_W(IN_W),  .OUT_W(ROW_W)) u_row (
      .clk, .rst_n, .in_valid(take), .x(in_row),
      .out_valid(row_valid), .X(row_res));
    dct2_4pt #(.IN_W(ROW_W), .OUT_W(OUT_W)) u_col (
      .clk, .rst_n, .in_valid(tb_valid), .x(tb_col),
      .out_valid(out_valid), .X(out_col));
  end else begin : g_dct4
    dct4_4pt #(.IN_W(IN_W),  .OUT_W(ROW_W)) u_row (
      .clk, .rst_n, .in_valid(take), .x(in_row),
      .out_valid(row_valid), .X(row_res));
    dct4_4pt #(.IN_W(ROW_W), .OUT_W(OUT_W)) u_col (
      .clk, .rst_n, .in_valid(tb_valid), .x(tb_col),
      .out_valid(out_valid), .X(out_col));
  end

  transpose4x4 #(.W(ROW_W)) u_tbuf (
    .clk, .rst_n,
    .wr_en(row_valid), .wr_row(row_res),
    .rd_valid(tb_valid), .rd_last(tb_last), .rd_col(tb_col),
    .draining(tb_draining));

  // Column index and last flag travel alongside the column core's register.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col_last_q <= 1'b0;
      col_idx_q  <= '0;
    end else if (tb_valid) begin
      col_last_q <= tb_last;
      col_idx_q  <= col_idx_q + 2'd1;
    end
  end

  assign out_last = out_valid && col_last_q;
  assign out_idx  = col_idx_q - 2'd1;

  // The hold phase must cover the drain: no row result may reach the buffer
  // while it is draining.
  assert property (@(posedge clk) disable iff (!rst_n) row_valid |-> !tb_draining)
    else $error("dct2d_4x4: row result while the buffer drains");

endmodule
