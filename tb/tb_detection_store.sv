// tb_detection_store: with limits L_M = 4 and L_S = 6, pushes random
// detections over three frames and checks counts, list contents read back
// through the read port (one edge of read latency), that storing of both
// kinds stops as soon as either list is full, that the overflow flag rises
// on the first dropped detection, and that a new frame clears everything.
module tb_detection_store;
  import fimd_pkg::*;

  localparam int LM = 4, LS = 6;

  logic clk = 0, rst_n = 0, frame_start = 0, det_valid = 0;
  det_kind_e det_kind = DET_MARKER, rd_kind = DET_MARKER;
  logic [8:0] det_row = '0;
  logic [9:0] det_col = '0;
  logic [2:0] rd_addr = '0;
  logic [18:0] rd_data;
  logic [2:0] count_m;
  logic [2:0] count_s;
  logic full, overflow;
  int checks = 0, failures = 0;
  int n_ovf_frames = 0, n_full_m = 0, n_full_s = 0;

  always #5 clk = ~clk;

  detection_store #(.L_M(LM), .L_S(LS)) dut (.*);

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
    logic [18:0] mq[$], sq[$];
    bit stopped, dropped;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < 4; f++) begin
      frame_start <= 1;
      @(posedge clk);
      frame_start <= 0;
      #1;
      check(count_m == 0 && count_s == 0 && !overflow, "frame start does not clear");
      mq.delete(); sq.delete();
      stopped = 0;
      dropped = 0;
      for (int k = 0; k < 3 + 3 * f; k++) begin
        logic [18:0] e;
        e = 19'($urandom);
        det_valid <= 1;
        det_kind  <= det_kind_e'((f == 1) ? 1'b0 : (f == 2) ? 1'b1 : 1'($urandom));
        det_row   <= e[18:10];
        det_col   <= e[9:0];
        #1;
        if (!stopped) begin
          if (det_kind == DET_MARKER) mq.push_back(e); else sq.push_back(e);
          if (mq.size() == LM || sq.size() == LS) stopped = 1;
        end else dropped = 1;
        @(posedge clk);
        det_valid <= 0;
        #1;
        check(count_m == 3'(mq.size()) && count_s == 3'(sq.size()),
              $sformatf("frame %0d counts %0d/%0d expected %0d/%0d", f, count_m, count_s, mq.size(), sq.size()));
        check(full == stopped, "full flag");
        check(overflow == dropped, "overflow flag");
        if ($urandom_range(0, 1)) @(posedge clk);
      end
      if (overflow) n_ovf_frames++;
      if (count_m == LM) n_full_m++;
      if (count_s == LS) n_full_s++;
      foreach (mq[i]) begin
        rd_kind <= DET_MARKER;
        rd_addr <= 3'(i);
        @(posedge clk);
        #1;
        check(rd_data == mq[i], $sformatf("marker %0d reads %h, expected %h", i, rd_data, mq[i]));
      end
      foreach (sq[i]) begin
        rd_kind <= DET_SUN;
        rd_addr <= 3'(i);
        @(posedge clk);
        #1;
        check(rd_data == sq[i], $sformatf("sun point %0d reads %h, expected %h", i, rd_data, sq[i]));
      end
    end
    check(n_ovf_frames > 0, "overflow never happened");
    check(n_full_m > 0 && n_full_s > 0, "a list never filled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
