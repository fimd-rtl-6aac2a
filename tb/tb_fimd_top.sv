// tb_fimd_top: end-to-end test of the detector on reduced 40 x 30 frames
// (radius 3, lists of 8 markers and 32 sun points) driven through the
// camera bus. Frame plan: an early frame that must be ignored, a frame with
// a few markers and a small sun, a crowded frame that overflows the marker
// list, and a frame with a large sun that overflows the sun-point list.
// The checks are described in fimd_e2e_body.svh.
module tb_fimd_top;
  localparam int FW = 40, FH = 30, R = 3, LM = 8, LS = 32, HB = 6, NF = 4;
  localparam int N_MARK [NF] = '{0, 4, 14, 3};
  localparam int SUN_R  [NF] = '{0, 5, 0, 9};

  `include "fimd_e2e_body.svh"

  initial begin
    wait (tb_done);
    $finish;
  end

  fimd_top #(.RHO(R), .W(FW), .H(FH), .L_M(LM), .L_S(LS)) dut (.*);
endmodule
