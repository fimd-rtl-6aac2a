// tb_fimd_full: end-to-end test of the detector at its default size:
// 752 x 480 frames, radius 3, lists of 256 markers and 1024 sun points.
// After the ignored early frame, one full frame with 40 markers and a sun
// disk of radius 25 is streamed through the camera bus; the sun disk yields
// more sun points than the list holds, so the overflow path is exercised.
// The checks are described in fimd_e2e_body.svh.
module tb_fimd_full;
  localparam int FW = 752, FH = 480, R = 3, LM = 256, LS = 1024, HB = 6, NF = 2;
  localparam int N_MARK [NF] = '{0, 40};
  localparam int SUN_R  [NF] = '{0, 25};

  `include "fimd_e2e_body.svh"

  initial begin
    wait (tb_done);
    $finish;
  end

  fimd_top dut (.*);
endmodule
