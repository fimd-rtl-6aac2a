// detection_store: per-frame lists of detected markers and sun points.
//
// Detections from the streaming evaluator are appended to one of two arrays:
// M (markers, L_M entries) or S (sun points, L_S entries), each entry being
// the packed {row, column} of the circle centre. Counts c_m and c_s are
// cleared at the start of every frame. As soon as either count reaches its
// limit, the frame is treated as saturated: no further detection of either
// kind is stored and dropped detections raise the overflow flag. A host
// reads the lists between frames through a registered read port.
// Following the paper: the two result arrays with their counts and count
// limits, and stopping the whole frame's detection when either limit is
// reached (as the sequential and shader versions of the detector do). This
// design's own choices: the limit values, the packed entry format, clearing
// on frame start and the read port.
//
// Timing: a detection is stored on the edge where det_valid is high; counts
// are visible after that edge. rd_data is valid one edge after rd_addr.
module detection_store
  import fimd_pkg::*;
#(
  parameter int unsigned W   = 752,
  parameter int unsigned H   = 480,
  parameter int unsigned L_M = 256,
  parameter int unsigned L_S = 1024
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  frame_start,
  input  logic                                  det_valid,
  input  det_kind_e                             det_kind,
  input  logic [$clog2(H)-1:0]                  det_row,
  input  logic [$clog2(W)-1:0]                  det_col,
  input  det_kind_e                             rd_kind,
  input  logic [$clog2(L_M > L_S ? L_M : L_S)-1:0] rd_addr,
  output logic [$clog2(H)+$clog2(W)-1:0]        rd_data,
  output logic [$clog2(L_M+1)-1:0]              count_m,
  output logic [$clog2(L_S+1)-1:0]              count_s,
  output logic                                  full,
  output logic                                  overflow
);

  localparam int unsigned EW = $clog2(H) + $clog2(W);

  logic [EW-1:0] m_mem [L_M];
  logic [EW-1:0] s_mem [L_S];
  logic          store_m, store_s;

  assign full    = (count_m == $clog2(L_M+1)'(L_M)) || (count_s == $clog2(L_S+1)'(L_S));
  assign store_m = det_valid && !full && (det_kind == DET_MARKER);
  assign store_s = det_valid && !full && (det_kind == DET_SUN);

  always_ff @(posedge clk) begin
    if (store_m) m_mem[count_m[$clog2(L_M)-1:0]] <= {det_row, det_col};
    if (store_s) s_mem[count_s[$clog2(L_S)-1:0]] <= {det_row, det_col};
    if (rd_kind == DET_MARKER) rd_data <= m_mem[rd_addr[$clog2(L_M)-1:0]];
    else                       rd_data <= s_mem[rd_addr[$clog2(L_S)-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count_m  <= '0;
      count_s  <= '0;
      overflow <= 1'b0;
    end else if (frame_start) begin
      count_m  <= '0;
      count_s  <= '0;
      overflow <= 1'b0;
    end else begin
      if (store_m) count_m <= count_m + 1'b1;
      if (store_s) count_s <= count_s + 1'b1;
      if (det_valid && full) overflow <= 1'b1;
    end
  end

endmodule
