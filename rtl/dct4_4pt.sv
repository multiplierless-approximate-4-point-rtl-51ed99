// dct4_4pt: 4-point multiplierless approximate DCT-IV, X = C*_IV x, with
//
//            [ 1  1  1  0 ]
//   C*_IV =  [ 1  0 -1 -1 ]
//            [ 1 -1  0  1 ]
//            [ 0 -1  1 -1 ]
//
// How it works: every output is a signed sum of three inputs, formed by two
// adders, so the core uses 8 additions and no multiplications or shifts, the
// count the paper gives for this approximation. The rows share no partial
// sum, which is why its signal flow graph has no butterfly stage. The
// orthogonalising scale 1/sqrt(3) is not applied: the paper leaves it to the
// quantiser.
//
// Interface: one 4-sample vector per clock on x[] with in_valid; no
// back-pressure. Samples are signed two's complement, IN_W bits; outputs are
// OUT_W bits, exact when OUT_W >= IN_W+2 (the default).
//
// Timing: combinational adders followed by one output register, so X[] and
// out_valid appear one clock after the input (latency 1, one vector per
// clock). The register and the asynchronous active-low reset of out_valid
// are this design's choices; the paper gives no pipelining.
module dct4_4pt #(
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

  logic signed [OUT_W-1:0] e0, e1, e2, e3;
  logic signed [OUT_W-1:0] y0, y1, y2, y3;

  always_comb begin
    e0 = OUT_W'(x[0]);
    e1 = OUT_W'(x[1]);
    e2 = OUT_W'(x[2]);
    e3 = OUT_W'(x[3]);
    y0 = e0 + e1 + e2;   // [ 1  1  1  0 ]
    y1 = e0 - e2 - e3;   // [ 1  0 -1 -1 ]
    y2 = e0 - e1 + e3;   // [ 1 -1  0  1 ]
    y3 = e2 - e1 - e3;   // [ 0 -1  1 -1 ]
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      X[0] <= y0;
      X[1] <= y1;
      X[2] <= y2;
      X[3] <= y3;
    end
  end

  initial begin
    assert (OUT_W >= IN_W + approx_dct_pkg::GROWTH_1D)
      else $warning("dct4_4pt: OUT_W=%0d < IN_W+2, results may wrap", OUT_W);
  end

endmodule
