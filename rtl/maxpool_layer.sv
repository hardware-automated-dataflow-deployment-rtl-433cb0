// maxpool_layer: max-pooling (subsampling) of C feature maps.
//
// Each channel has its own neighbourhood extractor with a POOL x POOL window; a
// comparator tree takes the window's maximum. Only windows whose top-left corner
// falls on a multiple of STRIDE in both directions are passed on, so each map
// shrinks from IMG_W x IMG_H to ((IMG_W-POOL)/STRIDE+1) x ((IMG_H-POOL)/STRIDE+1).
// With the default 2 x 2 window and stride 2 a 24 x 24 map becomes 12 x 12.
//
// Latency 2 clocks (extractor, registered maximum); one input pixel per clock.
// The paper gives the max-pooling function; the window size, the stride and
// reusing the extractor are this design's choices.
module maxpool_layer
  import cnn_pkg::*;
#(
  parameter int C      = 20,
  parameter int POOL   = 2,
  parameter int STRIDE = 2,
  parameter int IMG_W  = 24,
  parameter int IMG_H  = 24
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  pixel_t in_data [C],
  output logic   out_valid,
  output pixel_t out_data [C]
);

  localparam int CW = $clog2(IMG_W);
  localparam int RW = $clog2(IMG_H);

  pixel_t       win [C][POOL][POOL];
  logic [C-1:0] win_valid;
  logic [CW-1:0] win_col;
  logic [RW-1:0] win_row;
  logic          keep;

  for (genvar c = 0; c < C; c++) begin : g_ch
    if (c == 0) begin : g_pos
      neighborhood_extractor #(.K(POOL), .IMG_W(IMG_W), .IMG_H(IMG_H)) u_ne (
        .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_data(in_data[c]),
        .win(win[c]), .win_valid(win_valid[c]), .win_col(win_col), .win_row(win_row)
      );
    end else begin : g_nopos
      neighborhood_extractor #(.K(POOL), .IMG_W(IMG_W), .IMG_H(IMG_H)) u_ne (
        .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_data(in_data[c]),
        .win(win[c]), .win_valid(win_valid[c]), .win_col(), .win_row()
      );
    end

    // Maximum of the window.
    pixel_t m;
    always_comb begin
      m = win[c][0][0];
      for (int p = 0; p < POOL; p++)
        for (int q = 0; q < POOL; q++)
          if (win[c][p][q] > m) m = win[c][p][q];
    end

    always_ff @(posedge clk) begin
      out_data[c] <= m;
    end
  end

  // Window's top-left corner = newest pixel position - (POOL-1).
  assign keep = (((int'(win_col) - (POOL - 1)) % STRIDE) == 0) &&
                (((int'(win_row) - (POOL - 1)) % STRIDE) == 0);

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= win_valid[0] && keep;
  end

  // The per-channel extractors share one stream, so their windows are valid together.
  a_win_valid_agree : assert property (@(posedge clk) disable iff (!rst_n)
    (win_valid == '0) || (win_valid == '1));

endmodule
