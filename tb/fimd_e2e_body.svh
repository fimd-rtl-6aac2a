// Body shared by the end-to-end testbenches of fimd_top. The including
// module declares the localparams FW, FH, R, LM, LS, HB (line blanking in
// clocks), the frame plan arrays N_MARK[NF] and SUN_R[NF], and instantiates
// the DUT on the signals declared here.
//
// Frame 0 starts right after reset, before the circle table is ready, and
// must be ignored entirely. Every later frame is sent on the camera bus with
// line and frame blanking; the streamed detections must equal the
// reference segment test on the whole frame, in order; the number of
// evaluations must be one per pixel with a full window; the decision for
// the first segment must appear exactly three edges after its last pixel was
// sampled; after frame_done the stored lists must hold the reference
// detections up to the point where either list filled, and overflow must be
// set exactly when detections were dropped. Each mechanism is counted and
// must occur at least once. The body raises tb_done after printing the
// result line; the including module then ends the simulation.

  import fimd_pkg::*;
  import fimd_ref_pkg::*;

  localparam int TM = 120, TS = 240, TD = 60;
  localparam int RWD = $clog2(FH), CWD = $clog2(FW);
  localparam int AW = $clog2(LM > LS ? LM : LS);

  bit tb_done = 0;
  logic pclk = 0, rst_n = 0, cam_vsync = 0, cam_hsync = 0;
  logic [9:0] cam_data = '0;
  thr_cfg_t cfg;
  logic ready, eval_valid, det_valid, frame_done, overflow;
  det_kind_e det_kind, rd_kind;
  logic [RWD-1:0] det_row;
  logic [CWD-1:0] det_col;
  logic [AW-1:0] rd_addr;
  logic [RWD+CWD-1:0] rd_data;
  logic [$clog2(LM+1)-1:0] count_m;
  logic [$clog2(LS+1)-1:0] count_s;

  int checks = 0, failures = 0;
  int cyc = 0;
  byte unsigned img[];
  det_t exp_q[$], ref_all[$];
  int n_eval = 0, px_in_frame = 0, t_first_px = -1, t_first_eval = -1;
  int n_mark = 0, n_sun = 0, n_ovf = 0, n_ignored = 0, n_gap = 0, n_left = 0, n_lat = 0;
  bit frame_checking = 0;

  always #5 pclk = ~pclk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  always @(posedge pclk) cyc <= cyc + 1;

  // Sampling-edge monitor: the pixel that completes the first segment.
  always @(posedge pclk) begin
    if (cam_vsync && cam_hsync) begin
      if (px_in_frame == 2 * R * (FW + 1)) t_first_px = cyc;
      px_in_frame++;
    end
    if (cam_vsync && !cam_hsync) n_gap++;
  end

  always @(posedge pclk) begin
    #1;
    if (eval_valid) begin
      n_eval++;
      if (t_first_eval < 0) t_first_eval = cyc;
    end
    if (det_valid) begin
      if (!frame_checking) check(0, "detection in an ignored frame");
      else if (exp_q.size() == 0) check(0, $sformatf("extra detection at (%0d,%0d)", det_row, det_col));
      else begin
        det_t e;
        e = exp_q.pop_front();
        check(det_kind == det_kind_e'(e.kind) && int'(det_row) == e.row && int'(det_col) == e.col,
              $sformatf("got %0d at (%0d,%0d), expected %0d at (%0d,%0d)",
                        det_kind, det_row, det_col, e.kind, e.row, e.col));
        if (det_kind == DET_MARKER) n_mark++; else n_sun++;
        if (det_kind == DET_MARKER && int'(det_col) <= 2 * R) n_left++;
      end
    end
  end

  task automatic send_frame();
    cam_vsync <= 1;
    repeat (5) @(posedge pclk);
    for (int r = 0; r < FH; r++) begin
      for (int c = 0; c < FW; c++) begin
        cam_hsync <= 1;
        cam_data  <= {img[r * FW + c], 2'($urandom)};
        @(posedge pclk);
      end
      cam_hsync <= 0;
      cam_data  <= 10'($urandom);
      repeat (HB) @(posedge pclk);
    end
    cam_vsync <= 0;
  endtask

  task automatic wait_done();
    int guard;
    guard = 0;
    while (!frame_done && guard < 100) begin @(posedge pclk); guard++; end
    check(frame_done, "frame_done missing");
    @(posedge pclk);
  endtask

  initial begin
    #(64'd20 * (64'd8 * FH * (FW + HB + 8) + 1000) * NF);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    tb_done = 1;
  end

  initial begin
    cfg = '{t_m: 8'(TM), t_s: 8'(TS), t_d: 8'(TD)};
    rd_kind = DET_MARKER;
    rd_addr = '0;
    repeat (3) @(posedge pclk);
    rst_n <= 1;
    // Frame 0: starts before the circle table is ready.
    make_frame(img, FW, FH, 4, 0, 0, 0);
    check(!ready, "circle table ready too early for the test");
    n_eval = 0;
    send_frame();
    wait_done();
    check(ready, "circle table never became ready");
    check(n_eval == 0, $sformatf("ignored frame produced %0d evaluations", n_eval));
    if (n_eval == 0) n_ignored++;
    repeat (20) @(posedge pclk);
    for (int f = 1; f < NF; f++) begin
      int sm, ss;
      bit stop, dropped;
      make_frame(img, FW, FH, N_MARK[f], SUN_R[f], $urandom_range(SUN_R[f] + 2, FH - SUN_R[f] - 3),
                 $urandom_range(SUN_R[f] + 2, FW - SUN_R[f] - 5));
      plant_marker(img, FW, FH, 2 * R + 1, R);
      detect_ref(img, FW, FH, R, TM, TS, TD, ref_all);
      exp_q = ref_all;
      n_eval = 0;
      px_in_frame = 0;
      t_first_px = -1;
      t_first_eval = -1;
      frame_checking = 1;
      send_frame();
      wait_done();
      frame_checking = 0;
      check(exp_q.size() == 0, $sformatf("frame %0d: %0d detections missing", f, exp_q.size()));
      check(n_eval == (FH - 2 * R) * (FW - 2 * R), $sformatf("frame %0d: %0d evaluations", f, n_eval));
      check(t_first_eval - t_first_px == 4,
            $sformatf("frame %0d: first decision %0d cycles after its pixel", f, t_first_eval - t_first_px));
      if (t_first_eval - t_first_px == 4) n_lat++;
      // Stored lists: reference detections until either list is full.
      sm = 0; ss = 0; stop = 0; dropped = 0;
      foreach (ref_all[i]) begin
        if (stop) begin dropped = 1; continue; end
        if (ref_all[i].kind == 0) begin
          rd_kind <= DET_MARKER;
          rd_addr <= AW'(sm);
          sm++;
        end else begin
          rd_kind <= DET_SUN;
          rd_addr <= AW'(ss);
          ss++;
        end
        @(posedge pclk);
        #1;
        check(rd_data == {RWD'(ref_all[i].row), CWD'(ref_all[i].col)},
              $sformatf("frame %0d: stored entry %0d differs", f, i));
        if (sm == LM || ss == LS) stop = 1;
      end
      check(int'(count_m) == sm && int'(count_s) == ss,
            $sformatf("frame %0d: counts %0d/%0d, expected %0d/%0d", f, count_m, count_s, sm, ss));
      check(overflow == dropped, $sformatf("frame %0d: overflow flag %0d", f, overflow));
      if (overflow) n_ovf++;
      $display("frame %0d: %0d reference detections, stored %0d markers %0d sun points, overflow %0d",
               f, ref_all.size(), count_m, count_s, overflow);
      repeat (20) @(posedge pclk);
    end
    $display("mechanisms: markers %0d, sun points %0d, left-border markers %0d, line-blanking cycles %0d,",
             n_mark, n_sun, n_left, n_gap);
    $display("            list overflows %0d, frames ignored before ready %0d, latency checks %0d",
             n_ovf, n_ignored, n_lat);
    check(n_mark > 0, "no marker detected");
    check(n_sun > 0, "no sun point detected");
    check(n_left > 0, "no marker next to the left border");
    check(n_gap > 0, "no blanking");
    check(n_ovf > 0, "no list overflow");
    check(n_ignored > 0, "no frame ignored before the table was ready");
    check(n_lat > 0, "latency never checked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    tb_done = 1;
  end
