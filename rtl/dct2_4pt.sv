// dct2_4pt: 4-point multiplierless approximate DCT-II, X = C*_II x, with
//
//            [ 1  1  1  1 ]
//   C*_II =  [ 1  0  0 -1 ]
//            [ 1 -1 -1  1 ]
//            [ 0 -1  1  0 ]
//
// How it works: a first butterfly forms x0+x3, x1+x2, x0-x3 and x2-x1 (four
// adders); a second butterfly forms (x0+x3)+(x1+x2) and (x0+x3)-(x1+x2) (two
// adders). X1 and X3 are the first-stage differences themselves, so the core
// uses 6 additions and no multiplications or shifts, as in the paper's signal
// flow graph. The orthogonalising scale diag(1/2,1/sqrt2,1/2,1/sqrt2) is not
// applied: the paper leaves it to the quantiser.
//
// Interface: one 4-sample vector per clock on x[] with in_valid; no
// back-pressure. Samples are signed two's complement, IN_W bits; outputs are
// OUT_W bits, exact when OUT_W >= IN_W+2 (the default).
//
// Timing: the adder network is combinational and its result is registered,
// so X[] and out_valid appear one clock after the input (latency 1,
// throughput one vector per clock). The single output register and the
// active-low asynchronous reset of out_valid are this design's choices; the
// paper gives no pipelining.
module dct2_4pt #(
  parameter int unsigned IN_W  = approx_dct_pkg::IN_W,
  parameter int unsigned OUT_W = IN_W + approx_dct_pkg::GROWTH_1D
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  x   [approx_dct_pkg::N],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] X   [approx_dct_pkg::N]
);

  // First butterfly (4 additions), evaluated at output width.
  logic signed [OUT_W-1:0] s03, s12, d03, d21;
  // Second butterfly (2 additions).
  logic signed [OUT_W-1:0] y0, y2;

  always_comb begin
    s03 = OUT_W'(x[0]) + OUT_W'(x[3]);
    s12 = OUT_W'(x[1]) + OUT_W'(x[2]);
    d03 = OUT_W'(x[0]) - OUT_W'(x[3]);
    d21 = OUT_W'(x[2]) - OUT_W'(x[1]);
    y0  = s03 + s12;
    y2  = s03 - s12;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      X[0] <= y0;
      X[1] <= d03;
      X[2] <= y2;
      X[3] <= d21;
    end
  end

  initial begin
    assert (OUT_W >= IN_W + approx_dct_pkg::GROWTH_1D)
      else $warning("dct2_4pt: OUT_W=%0d < IN_W+2, results may wrap", OUT_W);
  end

endmodule
