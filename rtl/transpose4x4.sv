// transpose4x4: 4x4 transposition buffer between the row and the column
// stage of the separable 2-D transform.
//
// How it works: the buffer alternates between two phases. In FILL it stores
// one row of four words per write (wr_en), in order row 0..3. After the
// fourth row it enters DRAIN for exactly four clocks and presents column
// 0..3 of the stored matrix on rd_col[], with rd_valid high and rd_last on
// column 3; then it returns to FILL. There is a single bank, so a write
// during DRAIN is a protocol error (checked by an assertion); the writer
// must hold off, which is what limits the 2-D engine to one 4x4 block every
// eight clocks.
//
// Interface: wr_en/wr_row[] write side, rd_valid/rd_col[]/rd_last read side,
// draining tells the writer that the bank is busy.
//
// Timing: a row written at clock edge k is readable from the next clock on;
// the first column is presented in the clock after the fourth write, read
// combinationally from the storage registers. The paper does not describe
// how its 2-D engine transposes; this single-bank buffer is the simplest
// one that meets its 125 MHz block rate at 1 GHz.
module transpose4x4 #(
  parameter int unsigned W = approx_dct_pkg::IN_W + approx_dct_pkg::GROWTH_1D
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                wr_en,
  input  logic signed [W-1:0] wr_row [approx_dct_pkg::N],
  output logic                rd_valid,
  output logic                rd_last,
  output logic signed [W-1:0] rd_col [approx_dct_pkg::N],
  output logic                draining
);

  localparam int unsigned N = approx_dct_pkg::N;

  typedef enum logic {FILL, DRAIN} phase_e;

  phase_e       phase;
  logic [1:0]   wr_ptr;   // next row to write
  logic [1:0]   rd_ptr;   // column being presented
  logic signed [W-1:0] mem [N][N];   // mem[row][col]

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase  <= FILL;
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      unique case (phase)
        FILL: if (wr_en) begin
          wr_ptr <= wr_ptr + 2'd1;
          if (wr_ptr == 2'(N - 1)) phase <= DRAIN;
        end
        DRAIN: begin
          rd_ptr <= rd_ptr + 2'd1;
          if (rd_ptr == 2'(N - 1)) phase <= FILL;
        end
        default: phase <= FILL;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en && phase == FILL) mem[wr_ptr] <= wr_row;
  end

  always_comb begin
    for (int r = 0; r < N; r++) rd_col[r] = mem[r][rd_ptr];
  end

  assign rd_valid = (phase == DRAIN);
  assign rd_last  = (phase == DRAIN) && (rd_ptr == 2'(N - 1));
  assign draining = (phase == DRAIN);

  // A row may only be written while the bank is filling.
  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> phase == FILL)
    else $error("transpose4x4: write while draining");

endmodule
