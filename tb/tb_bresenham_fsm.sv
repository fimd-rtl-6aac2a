// tb_bresenham_fsm: checks the circle-point FSM for radii 1..4.
// For each radius the emitted points must be exactly the midpoint circle of
// the reference model, with no point repeated, one point per cycle, done one
// cycle after the last point. The point counts for radii 3 and 4 are also
// checked against 4*floor(sqrt(2)*rho) (16 and 20).
module tb_bresenham_fsm;
  import fimd_pkg::*;
  import fimd_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  logic [2:0] rho = 3'd1;
  logic busy, pt_valid, done;
  rel_t pt_dx, pt_dy;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  bresenham_fsm #(.RHO_MAX(4)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int r = 1; r <= 4; r++) begin
      cmask_t ref_m, got;
      int npts, cycles, dups;
      ref_m = circle_ref(r);
      got = '0;
      npts = 0; cycles = 0; dups = 0;
      rho   <= 3'(r);
      start <= 1;
      @(posedge clk);
      start <= 0;
      forever begin
        @(negedge clk);
        if (pt_valid) begin
          if (got[7 + pt_dx][7 + pt_dy]) dups++;
          got[7 + pt_dx][7 + pt_dy] = 1;
          npts++;
        end
        @(posedge clk);
        cycles++;
        #1;
        if (done) break;
        if (cycles > 100) break;
      end
      check(got == ref_m, $sformatf("rho=%0d point set differs from midpoint circle", r));
      check(dups == 0, $sformatf("rho=%0d %0d repeated points", r, dups));
      check(npts == circle_count(ref_m), $sformatf("rho=%0d %0d points, expected %0d", r, npts, circle_count(ref_m)));
      check(cycles == npts + 1, $sformatf("rho=%0d took %0d cycles for %0d points", r, cycles, npts));
      if (r == 3) check(npts == 16, "rho=3 must give 16 points");
      if (r == 4) check(npts == 20, "rho=4 must give 20 points");
      check(!busy, "busy after done");
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
