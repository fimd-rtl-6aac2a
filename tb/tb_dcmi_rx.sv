// tb_dcmi_rx: drives two small frames (9 x 5 pixels) on the camera bus with
// line and frame blanking and checks that every pixel comes out once, in
// order, with its row, column and upper 8 data bits, two clock edges after
// it was on the bus; also checks the frame start and end pulses.
module tb_dcmi_rx;
  import fimd_pkg::*;

  localparam int FW = 9, FH = 5;

  logic clk = 0, rst_n = 0, vsync = 0, hsync = 0;
  logic [9:0] data = '0;
  logic px_valid, frame_start, frame_end;
  pix_t px_data;
  logic [8:0] px_row;
  logic [9:0] px_col;
  int checks = 0, failures = 0;
  int cyc = 0;

  typedef struct { int t; int r; int c; logic [9:0] d; } exp_t;
  exp_t exp_q[$], drv_q[$];
  int n_fs = 0, n_fe = 0, n_px = 0;

  always #5 clk = ~clk;

  dcmi_rx dut (.pclk(clk), .rst_n(rst_n), .vsync(vsync), .hsync(hsync), .data(data),
               .px_valid(px_valid), .px_data(px_data), .px_row(px_row), .px_col(px_col),
               .frame_start(frame_start), .frame_end(frame_end));

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

  always @(posedge clk) cyc <= cyc + 1;

  // Stamp each pixel with the cycle of the edge that samples it.
  always @(posedge clk) begin
    if (vsync && hsync && drv_q.size() > 0) begin
      exp_t e;
      e = drv_q.pop_front();
      e.t = cyc;
      exp_q.push_back(e);
    end
  end

  always @(posedge clk) begin
    #1;
    if (px_valid) begin
      exp_t e;
      n_px++;
      if (exp_q.size() == 0) check(0, "unexpected pixel");
      else begin
        e = exp_q.pop_front();
        check(px_row == 9'(e.r) && px_col == 10'(e.c) && px_data == e.d[9:2],
              $sformatf("pixel (%0d,%0d) got (%0d,%0d) %h", e.r, e.c, px_row, px_col, px_data));
        check(cyc == e.t + 2, $sformatf("pixel latency %0d", cyc - e.t));
      end
    end
    if (frame_start) n_fs++;
    if (frame_end) n_fe++;
  end

  task automatic drive_frame(bit hs_at_vs);
    vsync <= 1;
    if (!hs_at_vs) repeat (4) @(posedge clk);
    for (int r = 0; r < FH; r++) begin
      for (int c = 0; c < FW; c++) begin
        logic [9:0] d;
        d = 10'($urandom);
        hsync <= 1;
        data  <= d;
        drv_q.push_back('{t: 0, r: r, c: c, d: d});
        @(posedge clk);
      end
      hsync <= 0;
      data  <= 10'($urandom);
      repeat (3 + r) @(posedge clk);
    end
    vsync <= 0;
    repeat (6) @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (3) @(posedge clk);
    drive_frame(0);
    drive_frame(1);
    repeat (5) @(posedge clk);
    check(exp_q.size() == 0, "pixels missing");
    check(n_px == 2 * FW * FH, $sformatf("%0d pixels out", n_px));
    check(n_fs == 2, $sformatf("%0d frame starts", n_fs));
    check(n_fe == 2, $sformatf("%0d frame ends", n_fe));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
