// tb_dct2d_4x4: self-checking testbench for the 4x4 2-D engine, run with
// one DCT-II and one DCT-IV instance fed from the same row stream.
//
// The reference is Y = C X C^T computed in integers from the matrices typed
// in below. Blocks come in two styles: "burst", where in_valid stays high
// into the next burst block, and "gappy", with random idle clocks. Checked:
//   - every output column, its index and the last flag;
//   - latency: column 0 leaves three clocks after the fourth row is taken;
//   - rate: in a burst the four rows are taken on consecutive clocks and the
//     next block's first row five clocks after the last one (eight clocks
//     per block), with in_ready low for the four clocks in between;
//   - that every block comes out, and nothing more.
// A watchdog ends the run if it hangs.
module tb_dct2d_4x4;
  import approx_dct_pkg::*;
  localparam int IN_W  = 8;
  localparam int OUT_W = 12;
  localparam int NBLK  = 600;
  localparam int C2 [4][4] = '{'{1,1,1,1}, '{1,0,0,-1}, '{1,-1,-1,1}, '{0,-1,1,0}};
  localparam int C4 [4][4] = '{'{1,1,1,0}, '{1,0,-1,-1}, '{1,-1,0,1}, '{0,-1,1,-1}};

  typedef int mat_t [4][4];

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                    in_valid;
  logic signed [IN_W-1:0]  in_row [4];
  logic                    rdy2, rdy4;
  logic                    ov2, ol2, ov4, ol4;
  logic [1:0]              oi2, oi4;
  logic signed [OUT_W-1:0] oc2 [4];
  logic signed [OUT_W-1:0] oc4 [4];

  dct2d_4x4 #(.KIND(DCT_II)) dut2 (.clk, .rst_n, .in_valid, .in_ready(rdy2), .in_row,
    .out_valid(ov2), .out_last(ol2), .out_idx(oi2), .out_col(oc2));
  dct2d_4x4 #(.KIND(DCT_IV)) dut4 (.clk, .rst_n, .in_valid, .in_ready(rdy4), .in_row,
    .out_valid(ov4), .out_last(ol4), .out_idx(oi4), .out_col(oc4));

  int checks = 0;
  int failures = 0;
  int cyc = 0;
  int stalls = 0;
  int full_rate_pairs = 0;

  mat_t exp2_q [$];
  mat_t exp4_q [$];
  int   last_take_q2 [$];
  int   last_take_q4 [$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL cycle %0d: %s", cyc, what);
    end
  endtask

  function automatic mat_t xform(input int c [4][4], input mat_t x);
    mat_t y;
    for (int m = 0; m < 4; m++)
      for (int k = 0; k < 4; k++) begin
        y[m][k] = 0;
        for (int i = 0; i < 4; i++)
          for (int j = 0; j < 4; j++)
            y[m][k] += c[m][i] * x[i][j] * c[k][j];
      end
    return y;
  endfunction

  always @(posedge clk) cyc <= cyc + 1;

  // Output checkers, one per engine, sampling just before each edge's update.
  int col2 = 0, col4 = 0;
  always @(posedge clk) if (rst_n) begin
    if (ov2) begin
      check(exp2_q.size() > 0, "DCT-II output with no block pending");
      if (exp2_q.size() > 0) begin
        if (col2 == 0) begin
          check(cyc - last_take_q2[0] == 3,
                $sformatf("DCT-II latency %0d, expected 3", cyc - last_take_q2[0]));
        end
        check(oi2 == 2'(col2), $sformatf("DCT-II out_idx=%0d expected %0d", oi2, col2));
        check(ol2 == (col2 == 3), "DCT-II out_last");
        for (int m = 0; m < 4; m++)
          check(int'(oc2[m]) == exp2_q[0][m][col2],
                $sformatf("DCT-II Y[%0d][%0d]=%0d expected %0d", m, col2, oc2[m], exp2_q[0][m][col2]));
        if (col2 == 3) begin
          void'(exp2_q.pop_front());
          void'(last_take_q2.pop_front());
          col2 = 0;
        end else col2++;
      end
    end
    if (ov4) begin
      check(exp4_q.size() > 0, "DCT-IV output with no block pending");
      if (exp4_q.size() > 0) begin
        if (col4 == 0) begin
          check(cyc - last_take_q4[0] == 3,
                $sformatf("DCT-IV latency %0d, expected 3", cyc - last_take_q4[0]));
        end
        check(oi4 == 2'(col4), $sformatf("DCT-IV out_idx=%0d expected %0d", oi4, col4));
        check(ol4 == (col4 == 3), "DCT-IV out_last");
        for (int m = 0; m < 4; m++)
          check(int'(oc4[m]) == exp4_q[0][m][col4],
                $sformatf("DCT-IV Y[%0d][%0d]=%0d expected %0d", m, col4, oc4[m], exp4_q[0][m][col4]));
        if (col4 == 3) begin
          void'(exp4_q.pop_front());
          void'(last_take_q4.pop_front());
          col4 = 0;
        end else col4++;
      end
    end
  end

  initial begin
    mat_t x;
    bit   burst, prev_burst;
    int   first_take, last_take, prev_last_take;
    in_valid = 1'b0;
    foreach (in_row[i]) in_row[i] = '0;
    prev_burst = 0;
    prev_last_take = -100;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < NBLK; b++) begin
      burst = (b % 4 != 3) && ($urandom_range(3) != 0);
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++)
          case (b)
            0: x[i][j] = 127;
            1: x[i][j] = -128;
            2: x[i][j] = ((i + j) % 2) ? -128 : 127;
            default: x[i][j] = $urandom_range(255) - 128;
          endcase
      for (int r = 0; r < 4; r++) begin
        bit taken;
        taken = 0;
        while (!taken) begin
          @(negedge clk);
          in_valid = burst ? 1'b1 : ($urandom_range(2) == 0);
          for (int j = 0; j < 4; j++) in_row[j] = IN_W'(x[r][j]);
          #1;
          check(rdy2 == rdy4, "engines disagree on in_ready");
          if (in_valid && !rdy2) stalls++;
          taken = in_valid && rdy2;
        end
        // cyc still holds the number of the coming edge, where the row is taken.
        if (r == 0) first_take = cyc;
        last_take = cyc;
      end
      if (burst) check(last_take - first_take == 3, "burst rows not on consecutive clocks");
      if (burst && prev_burst) begin
        check(first_take - prev_last_take == 5,
              $sformatf("block period %0d, expected 8", first_take - prev_last_take + 3));
        full_rate_pairs++;
      end
      exp2_q.push_back(xform(C2, x));
      exp4_q.push_back(xform(C4, x));
      last_take_q2.push_back(last_take);
      last_take_q4.push_back(last_take);
      prev_burst = burst;
      prev_last_take = last_take;
      if (!burst) begin
        @(negedge clk);
        in_valid = 1'b0;
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (12) @(negedge clk);
    check(exp2_q.size() == 0, "DCT-II blocks missing at the output");
    check(exp4_q.size() == 0, "DCT-IV blocks missing at the output");
    check(stalls > 0, "no stall happened");
    check(full_rate_pairs > 0, "no back-to-back blocks at full rate");
    $display("tb_dct2d_4x4: %0d blocks, %0d stall clocks, %0d full-rate block pairs",
             NBLK, stalls, full_rate_pairs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (NBLK * 40 + 200) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
