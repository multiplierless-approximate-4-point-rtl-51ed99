// tb_dct2_4pt: self-checking testbench for the 4-point approximate DCT-II
// core dct2_4pt.
//
// The expected result is an integer matrix-vector product with the matrix
// typed in here from its definition (C*_II rows [1 1 1 1] [1 0 0 -1] [1 -1 -1 1] [0 -1 1 0]),
// independent of the core's adder network. Stimulus: corner vectors (all
// +127, all -128, alternating signs) then random vectors with random gaps in
// in_valid. Every clock the testbench checks that out_valid follows in_valid
// by exactly one clock (the core's latency) and, when valid, all four
// outputs. A watchdog ends the run if it hangs.
module tb_dct2_4pt;
  localparam int IN_W  = 8;
  localparam int OUT_W = 10;
  localparam int NVEC  = 4000;
  localparam int C [4][4] = '{'{1,1,1,1}, '{1,0,0,-1}, '{1,-1,-1,1}, '{0,-1,1,0}};

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                    in_valid;
  logic signed [IN_W-1:0]  x [4];
  logic                    out_valid;
  logic signed [OUT_W-1:0] X [4];

  dct2_4pt dut (.clk, .rst_n, .in_valid, .x, .out_valid, .X);

  int checks = 0;
  int failures = 0;
  int cycles = 0;

  // What was presented at the last rising edge.
  logic exp_valid;
  int   exp_val [4];

  task automatic drive(input logic v, input int a0, a1, a2, a3);
    @(negedge clk);
    in_valid = v;
    x[0] = IN_W'(a0); x[1] = IN_W'(a1); x[2] = IN_W'(a2); x[3] = IN_W'(a3);
  endtask

  // Capture at the edge, check just after it.
  always @(posedge clk) begin
    if (rst_n) begin
      exp_valid <= in_valid;
      for (int m = 0; m < 4; m++) begin
        int acc;
        acc = 0;
        for (int n = 0; n < 4; n++) acc += C[m][n] * int'(x[n]);
        exp_val[m] <= acc;
      end
      #1;
      checks++;
      if (out_valid !== exp_valid) begin
        failures++;
        $display("FAIL cycle %0d: out_valid=%0b expected %0b", cycles, out_valid, exp_valid);
      end
      if (exp_valid) begin
        for (int m = 0; m < 4; m++) begin
          checks++;
          if (int'(X[m]) != exp_val[m]) begin
            failures++;
            $display("FAIL cycle %0d: X[%0d]=%0d expected %0d", cycles, m, X[m], exp_val[m]);
          end
        end
      end
      cycles++;
    end
  end

  initial begin
    in_valid = 1'b0;
    foreach (x[i]) x[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    drive(1, 127, 127, 127, 127);
    drive(1, -128, -128, -128, -128);
    drive(1, 127, -128, 127, -128);
    drive(1, -128, 127, -128, 127);
    drive(1, 127, -128, -128, 127);
    drive(1, -128, 127, 127, -128);
    drive(0, 0, 0, 0, 0);
    for (int i = 0; i < NVEC; i++) begin
      drive(($urandom_range(3) != 0), $urandom_range(255) - 128, $urandom_range(255) - 128,
            $urandom_range(255) - 128, $urandom_range(255) - 128);
    end
    drive(0, 0, 0, 0, 0);
    repeat (3) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (NVEC + 1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
