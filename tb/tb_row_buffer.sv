// tb_row_buffer: streams three random 10 x 12 frames (radius 2) with random
// idle cycles into the row buffer and checks, for every pixel of row 4 and
// below, that the column it returns holds rows r-4 .. r of the current frame
// at column c, one clock edge after the pixel.
module tb_row_buffer;
  import fimd_pkg::*;

  localparam int R = 2, FW = 10, FH = 12, N = 2 * R + 1;

  logic clk = 0, rst_n = 0, in_valid = 0;
  pix_t in_pix = '0;
  logic [3:0] in_row = '0;
  logic [3:0] in_col = '0;
  logic col_valid;
  pix_t [N-1:0] col_pix;
  logic [3:0] col_row, col_col;
  int checks = 0, failures = 0;
  byte unsigned img [FH][FW];

  always #5 clk = ~clk;

  row_buffer #(.RHO(R), .W(FW), .H(FH)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < 3; f++) begin
      foreach (img[r, c]) img[r][c] = byte'($urandom);
      for (int r = 0; r < FH; r++) begin
        for (int c = 0; c < FW; c++) begin
          while ($urandom_range(0, 3) == 0) begin
            in_valid <= 0;
            @(posedge clk);
          end
          in_valid <= 1;
          in_pix   <= img[r][c];
          in_row   <= 4'(r);
          in_col   <= 4'(c);
          @(posedge clk);
          in_valid <= 0;
          #1;
          check(col_valid && col_row == 4'(r) && col_col == 4'(c),
                $sformatf("column for (%0d,%0d) not presented after one edge", r, c));
          if (r >= 2 * R) begin
            for (int j = 0; j < N; j++)
              check(col_pix[j] == img[r - 2 * R + j][c],
                    $sformatf("frame %0d (%0d,%0d) row %0d: %h vs %h", f, r, c, r - 2 * R + j,
                              col_pix[j], img[r - 2 * R + j][c]));
          end
        end
      end
    end
    @(posedge clk);
    #1;
    check(!col_valid, "col_valid without input");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
