// tb_transpose4x4: self-checking testbench for the 4x4 transposition buffer.
//
// Each round writes four random rows, with random idle clocks between the
// writes, then checks that the buffer presents the four columns of that
// matrix on the four clocks right after the last write (rd_valid high,
// rd_last on column 3, draining high), and that rd_valid is low at all
// other times. A watchdog ends the run if it hangs.
module tb_transpose4x4;
  localparam int W = 10;
  localparam int NBLK = 300;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                wr_en;
  logic signed [W-1:0] wr_row [4];
  logic                rd_valid, rd_last, draining;
  logic signed [W-1:0] rd_col [4];

  transpose4x4 #(.W(W)) dut (.clk, .rst_n, .wr_en, .wr_row, .rd_valid, .rd_last,
                             .rd_col, .draining);

  int checks = 0;
  int failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    int m [4][4];
    wr_en = 1'b0;
    foreach (wr_row[i]) wr_row[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < NBLK; b++) begin
      for (int r = 0; r < 4; r++) begin
        int gap;
        gap = (b % 3 == 0) ? 0 : $urandom_range(2);
        repeat (gap) begin
          @(negedge clk);
          wr_en = 1'b0;
          #1 check(!rd_valid, "rd_valid while filling");
        end
        @(negedge clk);
        wr_en = 1'b1;
        for (int c = 0; c < 4; c++) begin
          m[r][c] = $urandom_range((1 << W) - 1) - (1 << (W - 1));
          wr_row[c] = W'(m[r][c]);
        end
        #1 check(!rd_valid, "rd_valid while filling");
      end
      for (int c = 0; c < 4; c++) begin
        @(negedge clk);
        wr_en = 1'b0;
        #1;
        check(rd_valid && draining, $sformatf("block %0d column %0d not valid", b, c));
        check(rd_last == (c == 3), $sformatf("block %0d column %0d rd_last=%0b", b, c, rd_last));
        for (int r = 0; r < 4; r++)
          check(int'(rd_col[r]) == m[r][c],
                $sformatf("block %0d col %0d row %0d: %0d expected %0d", b, c, r, rd_col[r], m[r][c]));
      end
    end
    @(negedge clk);
    #1 check(!rd_valid, "rd_valid after last block");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (NBLK * 20 + 100) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
