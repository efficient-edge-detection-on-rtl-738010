// cache_control: primes, stalls and flushes the pixel-cache pipeline.
//
// A video stream has horizontal blanking between rows and vertical blanking
// between frames, so the cache cannot simply shift every clock:
//  - stall:  ena = pix_valid. The cache and the datapath registers advance
//            only when a pixel arrives and hold through blanking.
//  - flush:  clr = frame_start. A pulse in vertical blanking clears the
//            window and datapath registers and the position counters.
//  - prime:  counters track the row and column of each incoming pixel. The
//            window it completes is wholly inside the current frame only
//            when the pixel is at row >= 2 and column >= 2; until then, and
//            for windows that wrap round the left image border, win_valid
//            stays low. The outer ring of the image gets no result.
//
// Timing: win_valid, win_row and win_col are registered on the clock that
// shifts the pixel in, so they describe the window now held by the cache
// (centre at row-1, column-1 of that pixel) for exactly one clock.
// frame_start must not coincide with pix_valid.
//
// The need for prime, stall and flush comes from the published design;
// how they are done here is this design's own, minimal choice.
module cache_control #(
  parameter int unsigned IMG_W = edge_pkg::IMG_W,
  parameter int unsigned IMG_H = edge_pkg::IMG_H,
  localparam int unsigned COL_W = $clog2(IMG_W),
  localparam int unsigned ROW_W = $clog2(IMG_H)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             frame_start,
  input  logic             pix_valid,
  output logic             ena,
  output logic             clr,
  output logic             win_valid,
  output logic [ROW_W-1:0] win_row,
  output logic [COL_W-1:0] win_col
);
  logic [ROW_W-1:0] row;  // position of the next pixel to arrive
  logic [COL_W-1:0] col;

  assign ena = pix_valid;
  assign clr = frame_start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row       <= '0;
      col       <= '0;
      win_valid <= 1'b0;
      win_row   <= '0;
      win_col   <= '0;
    end else if (frame_start) begin
      row       <= '0;
      col       <= '0;
      win_valid <= 1'b0;
    end else begin
      win_valid <= pix_valid && (row >= ROW_W'(2)) && (col >= COL_W'(2));
      if (pix_valid) begin
        win_row <= row - 1'b1;
        win_col <= col - 1'b1;
        if (col == COL_W'(IMG_W - 1)) begin
          col <= '0;
          row <= (row == ROW_W'(IMG_H - 1)) ? '0 : row + 1'b1;
        end else begin
          col <= col + 1'b1;
        end
      end
    end
  end

  // A frame is cleared only in blanking, never while a pixel is delivered.
  assert property (@(posedge clk) disable iff (!rst_n) !(frame_start && pix_valid))
    else $error("cache_control: frame_start during a valid pixel");
endmodule
