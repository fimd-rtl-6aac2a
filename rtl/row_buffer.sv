// row_buffer: circular buffer of the last 2*RHO+1 image rows.
//
// The buffer is 2*RHO+1 banks of W pixels, one bank per row, used as a
// circular FIFO of rows: row r lives in bank s_r = r mod (2*RHO+1). At every
// valid pixel (r, c) all banks are read at address c in parallel and the new
// pixel is written into bank s_r at address c (read before write, so the row
// being overwritten, r-2*RHO-1, is what that bank returns and is dropped).
// The output is the image column c of rows r-2*RHO .. r, i.e. the column of
// a (2*RHO+1)-row segment that the current pixel finishes:
//   col_pix[j] = pixel(r - 2*RHO + j, c),  j = 0 .. 2*RHO,
// where col_pix[2*RHO] is the incoming pixel itself.
// Following the paper: the row array R[2*RHO+1][W] in RAM, (2*RHO+1)*W
// bytes, the modulo row index and the parallel read of all rows. This
// design's own choices: one registered read stage and the ordering of the
// output column. For rows r < 2*RHO the upper entries hold stale data of the
// previous frame; the evaluator ignores those segments.
//
// Timing: the column for a pixel presented on edge k appears after edge k+1
// together with col_valid, col_row = r and col_col = c.
module row_buffer
  import fimd_pkg::*;
#(
  parameter int unsigned RHO = 3,
  parameter int unsigned W   = 752,
  parameter int unsigned H   = 480
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  pix_t                      in_pix,
  input  logic [$clog2(H)-1:0]      in_row,
  input  logic [$clog2(W)-1:0]      in_col,
  output logic                      col_valid,
  output pix_t  [2*RHO:0]           col_pix,
  output logic [$clog2(H)-1:0]      col_row,
  output logic [$clog2(W)-1:0]      col_col
);

  localparam int unsigned N  = 2 * RHO + 1;
  localparam int unsigned SW = $clog2(N);

  logic [SW-1:0] s_r, s_r_q;
  pix_t          rd_q [N];
  pix_t          pix_q;

  assign s_r = SW'(in_row % N);

  pix_t mem [N][W];

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int k = 0; k < N; k++) rd_q[k] <= mem[k][in_col];
      mem[s_r][in_col] <= in_pix;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col_valid <= 1'b0;
      col_row   <= '0;
      col_col   <= '0;
      s_r_q     <= '0;
      pix_q     <= '0;
    end else begin
      col_valid <= in_valid;
      if (in_valid) begin
        col_row <= in_row;
        col_col <= in_col;
        s_r_q   <= s_r;
        pix_q   <= in_pix;
      end
    end
  end

  // Row r-2*RHO+j lives in bank (s_r + 1 + j) mod N; the newest row is the
  // pixel that was just written.
  always_comb begin
    for (int j = 0; j < N; j++) begin
      if (j == N - 1) col_pix[j] = pix_q;
      else            col_pix[j] = rd_q[(int'(s_r_q) + 1 + j) % N];
    end
  end

endmodule
