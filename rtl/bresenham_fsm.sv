// bresenham_fsm: generator of the points of a Bresenham (midpoint) circle,
// one point per clock.
//
// The machine walks one octant of the circle with the classic decision
// variable P and emits the octant's point under every one of the eight
// symmetries in turn. State 0 is the internal update (x += 1, y and P
// adjusted); states 1..8 each emit one mirrored point; state 9 terminates.
// State 0 falls straight through to state 1 in the same step, so every step
// before termination yields exactly one point. When x = y or x = 0 the
// mirrored copies that would duplicate a point are skipped.
// The state numbering, the update rule, the symmetric copy emitted by each
// state and the skipping conditions are those of the published FSM; the
// clocked start/busy/done handshake around it is this design's own.
//
// Interface: pulse start (with rho held stable, 1..RHO_MAX) to initialise
// s=1, x=0, y=rho, P=3-2rho. While busy, each cycle presents one point on
// pt_dx/pt_dy with pt_valid high. done pulses one cycle after the last
// point. A circle of radius rho has about 4*floor(sqrt(2)*rho) points and
// takes that many cycles plus one for the final update step.
module bresenham_fsm
  import fimd_pkg::*;
#(
  parameter int unsigned RHO_MAX = 4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [$clog2(RHO_MAX+1)-1:0] rho,
  output logic                         busy,
  output logic                         pt_valid,
  output rel_t                         pt_dx,
  output rel_t                         pt_dy,
  output logic                         done
);

  typedef enum logic [3:0] {
    S_UPD = 4'd0, S_1 = 4'd1, S_2 = 4'd2, S_3 = 4'd3, S_4 = 4'd4,
    S_5 = 4'd5, S_6 = 4'd6, S_7 = 4'd7, S_8 = 4'd8, S_END = 4'd9
  } st_e;

  st_e               s_q, s_eff, s_d;
  logic signed [5:0] x_q, y_q, x_eff, y_eff;
  logic signed [8:0] p_q, p_eff;
  logic              run_q;

  // State 0 (update) is resolved combinationally before the emitting step.
  always_comb begin
    x_eff = x_q;
    y_eff = y_q;
    p_eff = p_q;
    s_eff = s_q;
    if (s_q == S_UPD) begin
      x_eff = x_q + 6'sd1;
      if (p_q < 0) begin
        p_eff = p_q + (9'(x_eff) <<< 2) + 9'sd6;
      end else begin
        y_eff = y_q - 6'sd1;
        p_eff = p_q + (9'(x_eff - y_eff) <<< 2) + 9'sd10;
      end
      s_eff = (x_eff <= y_eff) ? S_1 : S_END;
    end
  end

  always_comb begin
    s_d      = s_eff;
    pt_valid = run_q;
    pt_dx    = '0;
    pt_dy    = '0;
    unique case (s_eff)
      S_1: begin s_d = S_2; pt_dx = rel_t'(y_eff);  pt_dy = rel_t'(-x_eff); end
      S_2: begin
        if (x_eff < y_eff)  s_d = S_3;
        else if (x_eff > 0) s_d = S_5;
        else                s_d = S_UPD;
        pt_dx = rel_t'(-y_eff); pt_dy = rel_t'(x_eff);
      end
      S_3: begin s_d = S_4; pt_dx = rel_t'(x_eff);  pt_dy = rel_t'(-y_eff); end
      S_4: begin
        s_d = (x_eff > 0) ? S_5 : S_UPD;
        pt_dx = rel_t'(-x_eff); pt_dy = rel_t'(y_eff);
      end
      S_5: begin s_d = S_6; pt_dx = rel_t'(y_eff);  pt_dy = rel_t'(x_eff); end
      S_6: begin
        s_d = (x_eff < y_eff) ? S_7 : S_UPD;
        pt_dx = rel_t'(-y_eff); pt_dy = rel_t'(-x_eff);
      end
      S_7: begin s_d = S_8;   pt_dx = rel_t'(x_eff);  pt_dy = rel_t'(y_eff); end
      S_8: begin s_d = S_UPD; pt_dx = rel_t'(-x_eff); pt_dy = rel_t'(-y_eff); end
      default: begin s_d = S_END; pt_valid = 1'b0; end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_q   <= S_END;
      x_q   <= '0;
      y_q   <= '0;
      p_q   <= '0;
      run_q <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        s_q   <= S_1;
        x_q   <= '0;
        y_q   <= 6'(rho);
        p_q   <= 9'sd3 - 9'(2 * rho);
        run_q <= 1'b1;
      end else if (run_q) begin
        s_q <= s_d;
        x_q <= x_eff;
        y_q <= y_eff;
        p_q <= p_eff;
        if (s_eff == S_END) begin
          run_q <= 1'b0;
          done  <= 1'b1;
        end
      end
    end
  end

  assign busy = run_q;

endmodule
