// segment_eval: streaming segment test for isolated markers and sun points.
//
// Every valid pixel (r, c) finishes image column c of the rows r-2*RHO .. r.
// That column belongs to the 2*RHO+1 overlapping square segments whose
// centres lie on row r-RHO, in columns c-RHO .. c+RHO. For each of them the
// column's boundary pixels (the rows that the circle table marks for the
// column offset x = c - centre) are reduced to a minimum and a maximum and
// merged into that segment's running B_min / B_max entry. The entry of the
// segment centred at column cc sits at index (cc + RHO) mod (2*RHO+1), so all
// 2*RHO+1 entries are touched once per pixel, each by a different column
// offset. The central pixel value is stored into P at the same index when the
// column through the centre passes. When c = cc + RHO the segment is
// complete, and the unit decides for the centre (r-RHO, c-RHO):
//   marker     if P > T_m and P - B_max >= T_d (all boundary pixels darker
//              by at least T_d),
//   sun point  else if P > T_m, P > T_s and P - B_min < T_d (no boundary
//              pixel darker by T_d or more).
// Decisions are made only once r >= 2*RHO and c >= 2*RHO, the processing
// delay of 2*RHO*(W+1) pixels. One segment is evaluated per valid pixel.
//
// Follows the paper: the P, B_min, B_max arrays of 2*RHO+1 entries, the
// modulo indexing, the max/min summarisation of the boundary, the threshold
// tests and their order, and the output coordinates. This design's own
// choices: an entry is loaded, instead of merged, by the leftmost column of
// its segment (x = -RHO). Inside a row this equals the published reset of
// the entry right after its evaluation; it also keeps columns from the end
// of one row out of the first segments of the next row. The decision is
// registered.
//
// Timing: det_valid/eval_valid appear one clock edge after the column that
// completes the segment is presented.
module segment_eval
  import fimd_pkg::*;
#(
  parameter int unsigned RHO = 3,
  parameter int unsigned W   = 752,
  parameter int unsigned H   = 480
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  thr_cfg_t                  cfg,
  input  logic [2*RHO:0][2*RHO:0]   mask,     // [x+RHO][y+RHO]
  input  logic                      col_valid,
  input  pix_t  [2*RHO:0]           col_pix,  // rows r-2*RHO .. r
  input  logic [$clog2(H)-1:0]      col_row,
  input  logic [$clog2(W)-1:0]      col_col,
  output logic                      eval_valid,
  output logic                      det_valid,
  output det_kind_e                 det_kind,
  output logic [$clog2(H)-1:0]      det_row,
  output logic [$clog2(W)-1:0]      det_col
);

  localparam int unsigned N  = 2 * RHO + 1;
  localparam int unsigned SW = $clog2(N);

  pix_t p_q    [N];
  pix_t bmax_q [N];
  pix_t bmin_q [N];
  pix_t p_n    [N];
  pix_t bmax_n [N];
  pix_t bmin_n [N];
  pix_t cmax   [N];   // per column offset x+RHO
  pix_t cmin   [N];

  logic [SW-1:0] s_c;
  logic          do_eval, is_marker, is_sun;
  pix_t          pc, fmax, fmin;

  assign s_c = SW'(col_col % N);

  always_comb begin
    // Reduce the column to the boundary minimum and maximum for every
    // column offset of the circle.
    for (int xi = 0; xi < N; xi++) begin
      cmax[xi] = PIX_MIN;
      cmin[xi] = PIX_MAX;
      for (int yi = 0; yi < N; yi++) begin
        if (mask[xi][yi]) begin
          if (col_pix[yi] > cmax[xi]) cmax[xi] = col_pix[yi];
          if (col_pix[yi] < cmin[xi]) cmin[xi] = col_pix[yi];
        end
      end
    end
    // Merge each offset into the entry of the segment it belongs to.
    for (int k = 0; k < N; k++) begin
      bmax_n[k] = bmax_q[k];
      bmin_n[k] = bmin_q[k];
      p_n[k]    = p_q[k];
    end
    for (int xi = 0; xi < N; xi++) begin
      automatic logic [SW-1:0] slot = SW'((int'(s_c) + 2 * RHO - xi) % N);
      if (xi == 0) begin
        bmax_n[slot] = cmax[xi];
        bmin_n[slot] = cmin[xi];
      end else begin
        if (cmax[xi] > bmax_q[slot]) bmax_n[slot] = cmax[xi];
        if (cmin[xi] < bmin_q[slot]) bmin_n[slot] = cmin[xi];
      end
    end
    p_n[(int'(s_c) + RHO) % N] = col_pix[RHO];
  end

  // Decision for the segment completed by this column.
  always_comb begin
    pc        = p_q[s_c];
    fmax      = bmax_n[s_c];
    fmin      = bmin_n[s_c];
    do_eval   = col_valid && (int'(col_row) >= 2 * RHO) && (int'(col_col) >= 2 * RHO);
    is_marker = 1'b0;
    is_sun    = 1'b0;
    if (pc > cfg.t_m) begin
      if ({1'b0, pc} >= {1'b0, fmax} + {1'b0, cfg.t_d}) begin
        is_marker = 1'b1;
      end else if ((pc > cfg.t_s) && ({1'b0, pc} < {1'b0, fmin} + {1'b0, cfg.t_d})) begin
        is_sun = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N; k++) begin
        p_q[k]    <= PIX_MIN;
        bmax_q[k] <= PIX_MIN;
        bmin_q[k] <= PIX_MAX;
      end
      eval_valid <= 1'b0;
      det_valid  <= 1'b0;
      det_kind   <= DET_MARKER;
      det_row    <= '0;
      det_col    <= '0;
    end else begin
      if (col_valid) begin
        p_q    <= p_n;
        bmax_q <= bmax_n;
        bmin_q <= bmin_n;
      end
      eval_valid <= do_eval;
      det_valid  <= do_eval && (is_marker || is_sun);
      det_kind   <= is_sun ? DET_SUN : DET_MARKER;
      det_row    <= col_row - $clog2(H)'(RHO);
      det_col    <= col_col - $clog2(W)'(RHO);
    end
  end

endmodule
