// sobel_edge_detector: streaming 3x3 Sobel edge detector.
//
// Pixels arrive one per clock, row by row, as from an image sensor. The
// pixel cache keeps the last two rows and presents a 3x3 window; only its
// newest column is read, because both Sobel kernels are separable and the
// column results are cached inside the two datapaths:
//   x: column sum p13 + 2 p23 + p33, kept two columns; gx = col(t) - col(t-2)
//   y: column difference p33 - p13, kept two columns;
//      gy = d(t) + 2 d(t-1) + d(t-2)
// Each direction needs one 4:2 compressor (two 3:2 layers that absorb the
// doubling and the subtraction) and one look-ahead adder. The cache
// controller stalls the pipeline in blanking, clears it at frame_start and
// marks which windows lie inside the frame.
//
// Interface: drive pix_in with pix_valid high for each pixel of a frame in
// raster order; pulse frame_start (with pix_valid low) before each frame.
// edge_valid is high for one clock per result; edge_x/edge_y are the signed
// x and y intensities of pixel (edge_row, edge_col). Results exist for all
// pixels except the outer ring of the image.
//
// Timing: the result for pixel (r-1, c-1) appears two clocks after pixel
// (r, c) is accepted (one clock to shift it into the cache, one output
// register), whatever the blanking. Throughput is one result per pixel.
//
// The cache, the separated datapaths, the compressors and the adder follow
// the published architecture. The output register, the controller and the
// separate signed x/y outputs are this design's choices; the two directions
// are not combined into one magnitude here.
module sobel_edge_detector #(
  parameter int unsigned PIX_W  = edge_pkg::PIX_W,
  parameter int unsigned IMG_W  = edge_pkg::IMG_W,
  parameter int unsigned IMG_H  = edge_pkg::IMG_H,
  parameter int unsigned GRAD_W = PIX_W + 3,
  localparam int unsigned COL_W = $clog2(IMG_W),
  localparam int unsigned ROW_W = $clog2(IMG_H)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     frame_start,
  input  logic                     pix_valid,
  input  logic        [PIX_W-1:0]  pix_in,
  output logic                     edge_valid,
  output logic signed [GRAD_W-1:0] edge_x,
  output logic signed [GRAD_W-1:0] edge_y,
  output logic        [ROW_W-1:0]  edge_row,
  output logic        [COL_W-1:0]  edge_col
);
  logic             ena, clr;
  logic             win_valid;
  logic [ROW_W-1:0] win_row;
  logic [COL_W-1:0] win_col;
  logic [PIX_W-1:0] win [3][3];
  logic signed [GRAD_W-1:0] gx, gy;

  cache_control #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_ctrl (
    .clk, .rst_n, .frame_start, .pix_valid,
    .ena, .clr, .win_valid, .win_row, .win_col
  );

  pixel_cache #(.PIX_W(PIX_W), .IMG_W(IMG_W)) u_cache (
    .clk, .rst_n, .ena, .clr, .pix_in, .win
  );

  sobel_x_path #(.PIX_W(PIX_W), .GRAD_W(GRAD_W)) u_xpath (
    .clk, .ena, .clr, .p13(win[0][2]), .p23(win[1][2]), .p33(win[2][2]), .gx
  );

  sobel_y_path #(.PIX_W(PIX_W), .GRAD_W(GRAD_W)) u_ypath (
    .clk, .ena, .clr, .p13(win[0][2]), .p33(win[2][2]), .gy
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      edge_valid <= 1'b0;
      edge_x     <= '0;
      edge_y     <= '0;
      edge_row   <= '0;
      edge_col   <= '0;
    end else begin
      edge_valid <= win_valid && !clr;
      if (win_valid) begin
        edge_x   <= gx;
        edge_y   <= gy;
        edge_row <= win_row;
        edge_col <= win_col;
      end
    end
  end
endmodule
