// tb_segment_eval: feeds the evaluator image columns built directly from
// 32 x 20 test frames (radius 3, circle table from the reference model) and
// compares the stream of detections with the reference segment test on the
// whole frame: same kind, same centre, same order. Idle cycles are mixed
// into the stream. Also checked: exactly one evaluation per pixel of row 6
// and below and column 6 and right, each one clock edge after its column;
// and that markers near the left border are found although the previous row
// ends in a bright band. Thresholds: T_m = 120, T_s = 240, T_d = 60.
module tb_segment_eval;
  import fimd_pkg::*;
  import fimd_ref_pkg::*;

  localparam int R = 3, FW = 32, FH = 20, N = 2 * R + 1;
  localparam int TM = 120, TS = 240, TD = 60;

  logic clk = 0, rst_n = 0, col_valid = 0;
  thr_cfg_t cfg;
  logic [N-1:0][N-1:0] mask;
  pix_t [N-1:0] col_pix;
  logic [4:0] col_row = '0;
  logic [4:0] col_col = '0;
  logic eval_valid, det_valid;
  det_kind_e det_kind;
  logic [4:0] det_row;
  logic [4:0] det_col;
  int checks = 0, failures = 0;
  byte unsigned img[];
  det_t exp_q[$];
  int n_eval = 0, n_mark = 0, n_sun = 0, n_left = 0;

  always #5 clk = ~clk;

  segment_eval #(.RHO(R), .W(FW), .H(FH)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #1;
    if (det_valid) begin
      if (exp_q.size() == 0) check(0, $sformatf("extra detection at (%0d,%0d)", det_row, det_col));
      else begin
        det_t e;
        e = exp_q.pop_front();
        check(det_kind == det_kind_e'(e.kind) && det_row == 5'(e.row) && det_col == 5'(e.col),
              $sformatf("got %0d at (%0d,%0d), expected %0d at (%0d,%0d)",
                        det_kind, det_row, det_col, e.kind, e.row, e.col));
        if (det_kind == DET_MARKER) n_mark++; else n_sun++;
        if (det_kind == DET_MARKER && det_col <= 5'(2 * R)) n_left++;
      end
    end
    if (eval_valid) n_eval++;
  end

  initial begin
    cmask_t cm;
    cm = circle_ref(R);
    for (int x = 0; x < N; x++)
      for (int y = 0; y < N; y++)
        mask[x][y] = cm[x + 7 - R][y + 7 - R];
    cfg = '{t_m: 8'(TM), t_s: 8'(TS), t_d: 8'(TD)};
    col_pix = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < 4; f++) begin
      make_frame(img, FW, FH, 3, (f % 2 == 0) ? 4 : 0, $urandom_range(5, FH - 6), $urandom_range(5, FW - 6));
      plant_marker(img, FW, FH, 6, R);
      plant_marker(img, FW, FH, 14, R + 1);
      detect_ref(img, FW, FH, R, TM, TS, TD, exp_q);
      $display("frame %0d: %0d expected detections", f, exp_q.size());
      n_eval = 0;
      for (int r = 0; r < FH; r++) begin
        for (int c = 0; c < FW; c++) begin
          while ($urandom_range(0, 4) == 0) begin
            col_valid <= 0;
            @(posedge clk);
          end
          col_valid <= 1;
          col_row   <= 5'(r);
          col_col   <= 5'(c);
          for (int j = 0; j < N; j++)
            col_pix[j] <= (r - 2 * R + j >= 0) ? pix_t'(img[(r - 2 * R + j) * FW + c]) : pix_t'($urandom);
          @(posedge clk);
          col_valid <= 0;
          #2;
          check(eval_valid == (r >= 2 * R && c >= 2 * R),
                $sformatf("eval_valid wrong after pixel (%0d,%0d)", r, c));
        end
      end
      repeat (3) @(posedge clk);
      check(exp_q.size() == 0, $sformatf("frame %0d: %0d detections missing", f, exp_q.size()));
      exp_q.delete();
      check(n_eval == (FH - 2 * R) * (FW - 2 * R), $sformatf("frame %0d: %0d evaluations", f, n_eval));
    end
    $display("markers %0d (near left border %0d), sun points %0d", n_mark, n_left, n_sun);
    check(n_mark > 0, "no marker detected");
    check(n_sun > 0, "no sun point detected");
    check(n_left > 0, "no marker near the left border");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
