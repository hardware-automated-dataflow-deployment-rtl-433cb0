// neighborhood_extractor: presents the K x K neighbourhood of a raster pixel
// stream, one new window per accepted pixel.
//
// Structure (after the 3x3 drawing of the paper, generalised to K): K rows of K
// registers. The incoming pixel enters row K-1 at column K-1; each row shifts
// towards column 0, and the pixel leaving column 0 of row r goes through a line
// buffer of IMG_W-K pixels before entering column K-1 of row r-1. Row 0 therefore
// holds the oldest image line and column 0 the leftmost pixel, so win[p][q] is
// the image pixel at (row i+p, column j+q) when the window's top-left corner is at
// (i, j). Everything advances only when in_valid is high.
//
// A column and a row counter follow the raster position of the incoming pixel.
// win_valid marks windows that lie wholly inside the image (the newest pixel is
// at column >= K-1 and row >= K-1), i.e. a 'valid' convolution without padding.
// win_col/win_row give the position of that newest pixel, for subsampling.
//
// Timing: the window and win_valid appear one clock after the pixel that
// completes them. Frames follow each other back to back; the counters wrap at
// IMG_W x IMG_H and are cleared by the synchronous active-low reset. The
// counters and the valid flag are this design's own framing choice.
module neighborhood_extractor
  import cnn_pkg::*;
#(
  parameter int K     = 5,
  parameter int IMG_W = 28,
  parameter int IMG_H = 28
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  pixel_t in_data,
  output pixel_t win [K][K],
  output logic   win_valid,
  output logic [$clog2(IMG_W)-1:0] win_col,
  output logic [$clog2(IMG_H)-1:0] win_row
);

  localparam int CW = $clog2(IMG_W);
  localparam int RW = $clog2(IMG_H);

  pixel_t regs [K][K];
  pixel_t lb_out [K];      // lb_out[r]: output of the buffer feeding row r (r < K-1)

  logic [CW-1:0] col;
  logic [RW-1:0] row;

  // Register rows.
  for (genvar r = 0; r < K; r++) begin : g_row
    always_ff @(posedge clk) begin
      if (in_valid) begin
        regs[r][K-1] <= lb_out[r];
        for (int q = 0; q < K-1; q++) regs[r][q] <= regs[r][q+1];
      end
    end
    if (r < K-1) begin : g_lb
      line_buffer #(.DEPTH(IMG_W - K), .WIDTH(BITWIDTH)) u_lb (
        .clk  (clk),
        .rst_n(rst_n),
        .en   (in_valid),
        .din  (regs[r+1][0]),
        .dout (lb_out[r])
      );
    end else begin : g_nolb
      assign lb_out[r] = in_data;
    end
  end

  assign win = regs;

  // Raster position of the incoming pixel.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      col       <= '0;
      row       <= '0;
      win_valid <= 1'b0;
      win_col   <= '0;
      win_row   <= '0;
    end else begin
      win_valid <= in_valid && (col >= CW'(K - 1)) && (row >= RW'(K - 1));
      if (in_valid) begin
        win_col <= col;
        win_row <= row;
        if (col == CW'(IMG_W - 1)) begin
          col <= '0;
          row <= (row == RW'(IMG_H - 1)) ? '0 : row + 1'b1;
        end else begin
          col <= col + 1'b1;
        end
      end
    end
  end

  initial assert (IMG_W > K && IMG_H >= K)
    else $error("neighborhood_extractor: image must be wider than the kernel");

endmodule
