// pixel_cache: 3x3 window of an image streamed in row by row.
//
// Nine window registers and two row shift registers form one chain:
//   pix_in -> 3,3 -> 3,2 -> 3,1 -> row buffer -> 2,3 -> 2,2 -> 2,1
//          -> row buffer -> 1,3 -> 1,2 -> 1,1
// Register r,c holds the pixel that Sobel coefficient (r,c) multiplies, so
// 3,3 is the newest pixel (bottom right of the window) and 1,1 the oldest.
// Each row buffer delays by IMG_W - 3, so each window row is one image row
// above the next. Only one pixel enters per clock, straight from the
// sensor stream.
//
// win[r][c] is register (r+1),(c+1). Every register has an enable (ena)
// and a synchronous clear (clr, which wins over ena). The row buffers are
// not cleared; after clr the window holds stale pixels until two rows and
// three pixels have entered, which the cache controller accounts for.
//
// Timing: after an enabled clock with pixel p(r,c) on pix_in, win[2][2] is
// p(r,c), win[1][2] is p(r-1,c) and win[0][2] is p(r-2,c).
//
// The structure, register naming and ENA/CLR inputs follow the published
// architecture; the synchronous clear and the RAM-style row buffers are
// this design's choices.
module pixel_cache #(
  parameter int unsigned PIX_W = edge_pkg::PIX_W,
  parameter int unsigned IMG_W = edge_pkg::IMG_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ena,
  input  logic             clr,
  input  logic [PIX_W-1:0] pix_in,
  output logic [PIX_W-1:0] win [3][3]
);
  initial begin
    assert (IMG_W >= 4) else $error("pixel_cache: IMG_W must be at least 4");
  end

  // Inputs to the first register of each window row (column index 2).
  logic [PIX_W-1:0] row_in [3];

  assign row_in[2] = pix_in;

  row_shift_register #(.DATA_W(PIX_W), .DEPTH(IMG_W - 3)) u_buf_lower (
    .clk, .rst_n, .ena, .din(win[2][0]), .dout(row_in[1])
  );
  row_shift_register #(.DATA_W(PIX_W), .DEPTH(IMG_W - 3)) u_buf_upper (
    .clk, .rst_n, .ena, .din(win[1][0]), .dout(row_in[0])
  );

  always_ff @(posedge clk) begin
    for (int r = 0; r < 3; r++) begin
      if (clr) begin
        win[r][0] <= '0;
        win[r][1] <= '0;
        win[r][2] <= '0;
      end else if (ena) begin
        win[r][2] <= row_in[r];
        win[r][1] <= win[r][2];
        win[r][0] <= win[r][1];
      end
    end
  end
endmodule
