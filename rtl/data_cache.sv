// data_cache: register storage for the current atom's image vectors.
//
// mat1[r] holds row r of the 31x31 projector kernel and mat2[r] row r of the
// atom's local image window, each as 31 decoded 32-bit elements; in_img[r][c]
// records whether window element (r,c) came from a pixel inside the camera
// image. All 2x31 vectors are presented at once to the 31 vector units of the
// image convolution, which is why the store is built from flip-flops rather
// than a RAM.
//
// Write port (one vector row per clock): wr_en writes the elements of row
// wr_row selected by wr_be with wr_data; wr_sel = 0 targets mat1, 1 targets
// mat2 (and then also writes wr_inside into the selected mask bits).
// clr (one clock) zeroes all of mat2 and the mask; it takes precedence over a
// write in the same clock. Reads are combinational from the registers.
// The pairing of mat1/mat2 vectors follows the published block diagram; the
// port set is this design's choice.
module data_cache
  import recon_pkg::*;
#(
  parameter int unsigned K = KSIZE
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clr,
  input  logic                   wr_en,
  input  logic                   wr_sel,
  input  logic [$clog2(K)-1:0]   wr_row,
  input  logic [K-1:0]           wr_be,
  input  elem_t                  wr_data [K],
  input  logic                   wr_inside,
  output elem_t                  mat1    [K][K],
  output elem_t                  mat2    [K][K],
  output logic [K-1:0]           in_img  [K]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < K; r++) begin
        in_img[r] <= '0;
        for (int c = 0; c < K; c++) begin
          mat1[r][c] <= '0;
          mat2[r][c] <= '0;
        end
      end
    end else begin
      if (clr) begin
        for (int r = 0; r < K; r++) begin
          in_img[r] <= '0;
          for (int c = 0; c < K; c++) mat2[r][c] <= '0;
        end
      end else if (wr_en && wr_sel) begin
        for (int c = 0; c < K; c++) if (wr_be[c]) begin
          mat2[wr_row][c]   <= wr_data[c];
          in_img[wr_row][c] <= wr_inside;
        end
      end
      if (wr_en && !wr_sel) begin
        for (int c = 0; c < K; c++) if (wr_be[c]) mat1[wr_row][c] <= wr_data[c];
      end
    end
  end

  always_ff @(posedge clk) if (rst_n && wr_en) assert (int'(wr_row) < K) else $error("row out of range");

endmodule
