// tb_circle_mask: after reset the circle table must become ready within the
// FSM's run time and hold exactly the midpoint circle of the reference
// model; checked for radius 3 (the default) and radius 4.
module tb_circle_mask;
  import fimd_pkg::*;
  import fimd_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic ready3, ready4;
  logic [6:0][6:0] mask3;
  logic [8:0][8:0] mask4;
  int checks = 0, failures = 0;
  int cyc = 0, t3 = -1, t4 = -1;

  always #5 clk = ~clk;

  circle_mask dut3 (.clk(clk), .rst_n(rst_n), .ready(ready3), .mask(mask3));
  circle_mask #(.RHO(4)) dut4 (.clk(clk), .rst_n(rst_n), .ready(ready4), .mask(mask4));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n) cyc <= cyc + 1;
    if (ready3 && t3 < 0) t3 <= cyc;
    if (ready4 && t4 < 0) t4 <= cyc;
  end

  initial begin
    cmask_t r3, r4;
    r3 = circle_ref(3);
    r4 = circle_ref(4);
    repeat (3) @(posedge clk);
    check(!ready3 && !ready4, "ready during reset");
    rst_n <= 1;
    repeat (60) @(posedge clk);
    check(ready3 && ready4, "not ready after 60 cycles");
    // 16 points + start + update + done flag: ready within 20 cycles.
    check(t3 > 0 && t3 <= 20, $sformatf("radius 3 ready after %0d cycles", t3));
    check(t4 > 0 && t4 <= 24, $sformatf("radius 4 ready after %0d cycles", t4));
    for (int x = 0; x < 7; x++)
      for (int y = 0; y < 7; y++)
        check(mask3[x][y] == r3[x + 4][y + 4], $sformatf("radius 3 mask[%0d][%0d]", x, y));
    for (int x = 0; x < 9; x++)
      for (int y = 0; y < 9; y++)
        check(mask4[x][y] == r4[x + 3][y + 3], $sformatf("radius 4 mask[%0d][%0d]", x, y));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
