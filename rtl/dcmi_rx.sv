// dcmi_rx: receiver for the parallel camera interface of a CMOS sensor.
//
// The sensor drives VSYNC (frame valid), HSYNC (line valid) and a PIX_IN_W
// bit pixel bus, all sampled on the rising edge of the pixel clock, which is
// also this module's clock. A pixel is valid on an edge where both VSYNC and
// HSYNC are active, and pixels arrive in row-major order. The module
// registers the bus and produces for each valid pixel its 8-bit value and
// its row and column in the frame. Columns restart at the end of every line
// (HSYNC falling); rows restart when VSYNC rises.
// Following the paper: one pixel per valid pixel-clock edge, row-major, valid
// while VSYNC and HSYNC are both active, 10-bit input bus. This design's own
// choices: both syncs active high, the 8 most significant bits of the 10-bit
// sample form the 8-bit pixel, frame_start/frame_end pulses on the VSYNC
// edges, and counter widths sized for MAX_W x MAX_H.
//
// Timing: a pixel sampled on edge k is presented on px_* after edge k+1
// (two register stages). frame_end is presented one cycle after the last
// pixel of the frame has been presented.
module dcmi_rx
  import fimd_pkg::*;
#(
  parameter int unsigned PIX_IN_W = 10,
  parameter int unsigned MAX_W    = 752,
  parameter int unsigned MAX_H    = 480
) (
  input  logic                       pclk,
  input  logic                       rst_n,
  input  logic                       vsync,
  input  logic                       hsync,
  input  logic [PIX_IN_W-1:0]        data,
  output logic                       px_valid,
  output pix_t                       px_data,
  output logic [$clog2(MAX_H)-1:0]   px_row,
  output logic [$clog2(MAX_W)-1:0]   px_col,
  output logic                       frame_start,
  output logic                       frame_end
);

  localparam int unsigned RWD = $clog2(MAX_H);
  localparam int unsigned CWD = $clog2(MAX_W);

  logic                vs_q, hs_q, vs_d, hs_d;
  pix_t                data_q;   // upper PIX_W bits of the bus
  logic [RWD-1:0]      row_cnt;
  logic [CWD-1:0]      col_cnt;
  logic                line_had_px;

  // Input sampling stage.
  always_ff @(posedge pclk or negedge rst_n) begin
    if (!rst_n) begin
      vs_q   <= 1'b0;
      hs_q   <= 1'b0;
      vs_d   <= 1'b0;
      hs_d   <= 1'b0;
      data_q <= '0;
    end else begin
      vs_q   <= vsync;
      hs_q   <= hsync;
      vs_d   <= vs_q;
      hs_d   <= hs_q;
      data_q <= data[PIX_IN_W-1 -: PIX_W];
    end
  end

  // Coordinate counters and output stage.
  always_ff @(posedge pclk or negedge rst_n) begin
    if (!rst_n) begin
      row_cnt     <= '0;
      col_cnt     <= '0;
      line_had_px <= 1'b0;
      px_valid    <= 1'b0;
      px_data     <= '0;
      px_row      <= '0;
      px_col      <= '0;
      frame_start <= 1'b0;
      frame_end   <= 1'b0;
    end else begin
      px_valid    <= vs_q && hs_q;
      px_data     <= data_q;
      px_row      <= (vs_q && !vs_d) ? '0 : row_cnt;
      px_col      <= (vs_q && !vs_d) ? '0 : col_cnt;
      frame_start <= vs_q && !vs_d;
      frame_end   <= !vs_q && vs_d;
      if (vs_q && !vs_d) begin
        row_cnt     <= '0;
        col_cnt     <= CWD'(hs_q);
        line_had_px <= hs_q;
      end else if (vs_q && hs_q) begin
        col_cnt     <= col_cnt + 1'b1;
        line_had_px <= 1'b1;
      end else if (!hs_q && hs_d && line_had_px) begin
        col_cnt     <= '0;
        row_cnt     <= row_cnt + 1'b1;
        line_had_px <= 1'b0;
      end
    end
  end

endmodule
