// tb_fimd_rho4: end-to-end test of the detector built for radius 4 (a 9-row
// window and the 20-point circle) on 48 x 36 frames with lists of 16 markers
// and 64 sun points. Same frame plan and checks as tb_fimd_top, described in
// fimd_e2e_body.svh.
module tb_fimd_rho4;
  localparam int FW = 48, FH = 36, R = 4, LM = 16, LS = 64, HB = 6, NF = 4;
  localparam int N_MARK [NF] = '{0, 4, 22, 3};
  localparam int SUN_R  [NF] = '{0, 6, 0, 11};

  `include "fimd_e2e_body.svh"

  initial begin
    wait (tb_done);
    $finish;
  end

  fimd_top #(.RHO(R), .W(FW), .H(FH), .L_M(LM), .L_S(LS)) dut (.*);
endmodule
