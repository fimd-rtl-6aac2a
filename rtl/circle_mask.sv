// circle_mask: table of the circle boundary used by the segment test.
//
// After reset the module starts the Bresenham FSM once with radius RHO and
// marks every point it emits in a (2*RHO+1) x (2*RHO+1) bit table,
// mask[x+RHO][y+RHO] for the relative column offset x and row offset y.
// When the FSM reports done, ready rises and stays high; the table then does
// not change until the next reset. The streaming evaluator reads the table to
// know which rows of each column of a segment lie on the circle boundary.
// The published architecture calls the point generator inside every pixel
// step; generating the points once into a table gives the same set of points
// each step and is this design's own realisation of that loop.
//
// Timing: ready rises about 4*floor(sqrt(2)*RHO)+3 cycles after reset is
// released (19 cycles for RHO = 3).
module circle_mask
  import fimd_pkg::*;
#(
  parameter int unsigned RHO = 3
) (
  input  logic                   clk,
  input  logic                   rst_n,
  output logic                   ready,
  output logic [2*RHO:0][2*RHO:0] mask   // [x+RHO][y+RHO]
);

  localparam int unsigned RW = $clog2(RHO + 1);

  logic  start_q, started_q;
  logic  pt_valid, done;
  rel_t  pt_dx, pt_dy;

  bresenham_fsm #(.RHO_MAX(RHO)) u_fsm (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (start_q),
    .rho      (RW'(RHO)),
    .busy     (),
    .pt_valid (pt_valid),
    .pt_dx    (pt_dx),
    .pt_dy    (pt_dy),
    .done     (done)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start_q   <= 1'b0;
      started_q <= 1'b0;
      ready     <= 1'b0;
      mask      <= '0;
    end else begin
      start_q <= 1'b0;
      if (!started_q) begin
        start_q   <= 1'b1;
        started_q <= 1'b1;
      end
      if (pt_valid) begin
        mask[int'(pt_dx) + RHO][int'(pt_dy) + RHO] <= 1'b1;
      end
      if (done) ready <= 1'b1;
    end
  end

endmodule
