// tb_approx_dct_top: end-to-end testbench for approx_dct_top at its default
// parameters (8-bit samples, 12-bit coefficients).
//
// A stream of 4x4 blocks, one row per clock, goes into the top; both output
// streams are checked column by column against Y = C X C^T computed here in
// integers. Each output block is also inverted with the orthogonalising
// scale the paper leaves to the quantiser, which must return the input
// exactly:
//   DCT-II: 16 X = C^T (E Y E) C with E = diag(1,2,1,2)
//           (from D_II^2 = diag(1/4,1/2,1/4,1/2));
//   DCT-IV:  9 X = C^T Y C (from D_IV^2 = I/3).
// The run counts the mechanisms the design has and fails if one never
// happened: stall clocks (in_valid high, in_ready low), idle clocks inside a
// block, blocks taken at the full rate of eight clocks per block, and blocks
// whose coefficients reach the ends of the 12-bit range. Latency (first
// column three clocks after the fourth row) is checked for every block.
module tb_approx_dct_top;
  localparam int IN_W  = 8;
  localparam int OUT_W = 12;
  localparam int NBLK  = 3000;
  localparam int C2 [4][4] = '{'{1,1,1,1}, '{1,0,0,-1}, '{1,-1,-1,1}, '{0,-1,1,0}};
  localparam int C4 [4][4] = '{'{1,1,1,0}, '{1,0,-1,-1}, '{1,-1,0,1}, '{0,-1,1,-1}};
  localparam int E2 [4]    = '{1, 2, 1, 2};

  typedef int mat_t [4][4];

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                    in_valid, in_ready;
  logic signed [IN_W-1:0]  in_row [4];
  logic                    ii_valid, ii_last, iv_valid, iv_last;
  logic [1:0]              ii_idx, iv_idx;
  logic signed [OUT_W-1:0] ii_col [4];
  logic signed [OUT_W-1:0] iv_col [4];

  approx_dct_top dut (.clk, .rst_n, .in_valid, .in_ready, .in_row,
    .ii_valid, .ii_last, .ii_idx, .ii_col, .iv_valid, .iv_last, .iv_idx, .iv_col);

  int checks = 0;
  int failures = 0;
  int cyc = 0;
  int n_stall = 0, n_gap = 0, n_full_rate = 0, n_extreme = 0;
  int n_ii_blocks = 0, n_iv_blocks = 0;

  mat_t in_q2 [$];
  mat_t in_q4 [$];
  int   take_q2 [$];
  int   take_q4 [$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL cycle %0d: %s", cyc, what);
    end
  endtask

  // y = a x b^T
  function automatic mat_t abt(input mat_t a, input mat_t v, input mat_t b);
    mat_t p;
    for (int m = 0; m < 4; m++)
      for (int k = 0; k < 4; k++) begin
        p[m][k] = 0;
        for (int i = 0; i < 4; i++)
          for (int j = 0; j < 4; j++)
            p[m][k] += a[m][i] * v[i][j] * b[k][j];
      end
    return p;
  endfunction

  function automatic mat_t transp(input mat_t a);
    mat_t t;
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++) t[i][j] = a[j][i];
    return t;
  endfunction

  always @(posedge clk) cyc <= cyc + 1;

  // Collect one output block per engine and check it when complete.
  mat_t got2, got4;
  int   col2 = 0, col4 = 0;

  task automatic finish_block(input bit is_iv, input mat_t y);
    mat_t xin, exp_y, back, c, ey;
    int   scale;
    bit   extreme;
    if (is_iv) begin
      c = C4;
      xin = in_q4[0];
      in_q4.delete(0);
    end else begin
      c = C2;
      xin = in_q2[0];
      in_q2.delete(0);
    end
    exp_y = abt(c, xin, c);
    for (int m = 0; m < 4; m++)
      for (int k = 0; k < 4; k++)
        check(y[m][k] == exp_y[m][k],
              $sformatf("%s Y[%0d][%0d]=%0d expected %0d", is_iv ? "DCT-IV" : "DCT-II",
                        m, k, y[m][k], exp_y[m][k]));
    // Inverse through the orthogonalising scale.
    ey = y;
    if (!is_iv)
      for (int m = 0; m < 4; m++)
        for (int k = 0; k < 4; k++) ey[m][k] = E2[m] * y[m][k] * E2[k];
    back  = abt(transp(c), ey, transp(c));
    scale = is_iv ? 9 : 16;
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++)
        check(back[i][j] == scale * xin[i][j],
              $sformatf("%s round trip X[%0d][%0d]: %0d/%0d expected %0d",
                        is_iv ? "DCT-IV" : "DCT-II", i, j, back[i][j], scale, xin[i][j]));
    extreme = 0;
    for (int m = 0; m < 4; m++)
      for (int k = 0; k < 4; k++)
        if (y[m][k] == -(1 << (OUT_W - 1)) || y[m][k] >= (1 << (OUT_W - 1)) - 16) extreme = 1;
    if (extreme) n_extreme++;
    if (is_iv) n_iv_blocks++; else n_ii_blocks++;
  endtask

  always @(posedge clk) if (rst_n) begin
    if (ii_valid) begin
      check(in_q2.size() > 0, "DCT-II output with no block pending");
      if (in_q2.size() > 0) begin
        if (col2 == 0) check(cyc - take_q2.pop_front() == 3, "DCT-II latency not 3");
        check(ii_idx == 2'(col2) && ii_last == (col2 == 3), "DCT-II column index/last");
        for (int m = 0; m < 4; m++) got2[m][col2] = int'(ii_col[m]);
        if (col2 == 3) begin
          finish_block(0, got2);
          col2 = 0;
        end else col2++;
      end
    end
    if (iv_valid) begin
      check(in_q4.size() > 0, "DCT-IV output with no block pending");
      if (in_q4.size() > 0) begin
        if (col4 == 0) check(cyc - take_q4.pop_front() == 3, "DCT-IV latency not 3");
        check(iv_idx == 2'(col4) && iv_last == (col4 == 3), "DCT-IV column index/last");
        for (int m = 0; m < 4; m++) got4[m][col4] = int'(iv_col[m]);
        if (col4 == 3) begin
          finish_block(1, got4);
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
      burst = (b % 5 != 4) && ($urandom_range(2) != 0);
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++)
          case (b % 97)
            0: x[i][j] = 127;
            1: x[i][j] = -128;
            2: x[i][j] = ((i + j) % 2) ? -128 : 127;
            3: x[i][j] = (j == 1 || j == 2) ? 127 : -128;
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
          if (in_valid && !in_ready) n_stall++;
          if (!in_valid && r > 0) n_gap++;
          taken = in_valid && in_ready;
        end
        if (r == 0) first_take = cyc;
        last_take = cyc;
      end
      if (burst) check(last_take - first_take == 3, "burst rows not on consecutive clocks");
      if (burst && prev_burst) begin
        check(first_take - prev_last_take == 5, "block period not 8 clocks");
        n_full_rate++;
      end
      in_q2.push_back(x);
      in_q4.push_back(x);
      take_q2.push_back(last_take);
      take_q4.push_back(last_take);
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
    check(in_q2.size() == 0 && n_ii_blocks == NBLK, "DCT-II blocks missing");
    check(in_q4.size() == 0 && n_iv_blocks == NBLK, "DCT-IV blocks missing");
    check(n_stall > 0,     "mechanism never seen: stall");
    check(n_gap > 0,       "mechanism never seen: idle clock inside a block");
    check(n_full_rate > 0, "mechanism never seen: full-rate block pair");
    check(n_extreme > 0,   "mechanism never seen: coefficient at the end of its range");
    $display("tb_approx_dct_top: blocks II=%0d IV=%0d, stall clocks=%0d, idle clocks in blocks=%0d, full-rate pairs=%0d, extreme blocks=%0d",
             n_ii_blocks, n_iv_blocks, n_stall, n_gap, n_full_rate, n_extreme);
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
