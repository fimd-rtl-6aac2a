// fimd_top: streaming detector of isolated UV markers and sun points.
//
// The detector sits directly on the parallel pixel bus of a CMOS camera and
// evaluates one circular segment test per pixel clock, so a frame is fully
// processed when its last pixel has been received. Data flow:
//   dcmi_rx         samples VSYNC/HSYNC/data and numbers the pixels (r, c);
//   row_buffer      keeps the last 2*RHO+1 rows and returns, for each pixel,
//                   the column of rows r-2*RHO .. r that it completes;
//   circle_mask     after reset runs the Bresenham circle FSM once and holds
//                   which pixels of the (2*RHO+1)^2 window lie on the circle;
//   segment_eval    keeps P, B_min, B_max for the 2*RHO+1 segments that the
//                   column overlaps and decides marker / sun point for the
//                   segment centred at (r-RHO, c-RHO);
//   detection_store keeps the per-frame lists of markers and sun points.
// Every detection is also presented on the det_* stream as it is found.
// Frames that begin before the circle table is ready are ignored whole.
// The structure, array sizes and per-pixel rate follow the published FPGA
// architecture; the gating of early frames, result list sizes and the
// host-side read port are this design's own choices. Clustering of the
// detected pixels and rejection of markers near sun points are left to the
// host that reads the lists.
//
// Timing: a pixel sampled on the camera bus at edge k completes a segment
// whose decision appears on det_* / eval_valid after edge k+3. The frame's
// lists are complete when frame_done pulses (VSYNC falling plus two edges).
module fimd_top
  import fimd_pkg::*;
#(
  parameter int unsigned RHO      = 3,
  parameter int unsigned W        = 752,
  parameter int unsigned H        = 480,
  parameter int unsigned PIX_IN_W = 10,
  parameter int unsigned L_M      = 256,
  parameter int unsigned L_S      = 1024
) (
  input  logic                                     pclk,
  input  logic                                     rst_n,
  // camera parallel interface
  input  logic                                     cam_vsync,
  input  logic                                     cam_hsync,
  input  logic [PIX_IN_W-1:0]                      cam_data,
  // thresholds
  input  thr_cfg_t                                 cfg,
  // detection stream
  output logic                                     ready,
  output logic                                     eval_valid,
  output logic                                     det_valid,
  output det_kind_e                                det_kind,
  output logic [$clog2(H)-1:0]                     det_row,
  output logic [$clog2(W)-1:0]                     det_col,
  output logic                                     frame_done,
  // result lists
  input  det_kind_e                                rd_kind,
  input  logic [$clog2(L_M > L_S ? L_M : L_S)-1:0] rd_addr,
  output logic [$clog2(H)+$clog2(W)-1:0]           rd_data,
  output logic [$clog2(L_M+1)-1:0]                 count_m,
  output logic [$clog2(L_S+1)-1:0]                 count_s,
  output logic                                     overflow
);

  localparam int unsigned RWD = $clog2(H);
  localparam int unsigned CWD = $clog2(W);

  logic                    px_valid, frame_start, frame_end;
  pix_t                    px_data;
  logic [RWD-1:0]          px_row;
  logic [CWD-1:0]          px_col;
  logic                    frame_on_q, px_take;
  logic [2*RHO:0][2*RHO:0] mask;
  logic                    col_valid;
  pix_t [2*RHO:0]          col_pix;
  logic [RWD-1:0]          col_row;
  logic [CWD-1:0]          col_col;

  dcmi_rx #(.PIX_IN_W(PIX_IN_W), .MAX_W(W), .MAX_H(H)) u_dcmi (
    .pclk        (pclk),
    .rst_n       (rst_n),
    .vsync       (cam_vsync),
    .hsync       (cam_hsync),
    .data        (cam_data),
    .px_valid    (px_valid),
    .px_data     (px_data),
    .px_row      (px_row),
    .px_col      (px_col),
    .frame_start (frame_start),
    .frame_end   (frame_end)
  );

  circle_mask #(.RHO(RHO)) u_mask (
    .clk   (pclk),
    .rst_n (rst_n),
    .ready (ready),
    .mask  (mask)
  );

  // A frame is processed only if the circle table was ready at its start.
  always_ff @(posedge pclk or negedge rst_n) begin
    if (!rst_n)           frame_on_q <= 1'b0;
    else if (frame_start) frame_on_q <= ready;
  end

  assign px_take = px_valid && (frame_start ? ready : frame_on_q);

  row_buffer #(.RHO(RHO), .W(W), .H(H)) u_rows (
    .clk       (pclk),
    .rst_n     (rst_n),
    .in_valid  (px_take),
    .in_pix    (px_data),
    .in_row    (px_row),
    .in_col    (px_col),
    .col_valid (col_valid),
    .col_pix   (col_pix),
    .col_row   (col_row),
    .col_col   (col_col)
  );

  segment_eval #(.RHO(RHO), .W(W), .H(H)) u_eval (
    .clk        (pclk),
    .rst_n      (rst_n),
    .cfg        (cfg),
    .mask       (mask),
    .col_valid  (col_valid),
    .col_pix    (col_pix),
    .col_row    (col_row),
    .col_col    (col_col),
    .eval_valid (eval_valid),
    .det_valid  (det_valid),
    .det_kind   (det_kind),
    .det_row    (det_row),
    .det_col    (det_col)
  );

  detection_store #(.W(W), .H(H), .L_M(L_M), .L_S(L_S)) u_store (
    .clk         (pclk),
    .rst_n       (rst_n),
    .frame_start (frame_start),
    .det_valid   (det_valid),
    .det_kind    (det_kind),
    .det_row     (det_row),
    .det_col     (det_col),
    .rd_kind     (rd_kind),
    .rd_addr     (rd_addr),
    .rd_data     (rd_data),
    .count_m     (count_m),
    .count_s     (count_s),
    .full        (),
    .overflow    (overflow)
  );

  // The last segment decision of a frame leaves the evaluator two edges
  // after the last pixel; frame_done follows VSYNC falling by two edges.
  logic frame_end_q;
  always_ff @(posedge pclk or negedge rst_n) begin
    if (!rst_n) begin
      frame_end_q <= 1'b0;
      frame_done  <= 1'b0;
    end else begin
      frame_end_q <= frame_end;
      frame_done  <= frame_end_q;
    end
  end

endmodule
