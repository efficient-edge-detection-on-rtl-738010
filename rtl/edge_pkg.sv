// edge_pkg: sizes shared by the Sobel edge detector.
//
// The detector takes an 8-bit greyscale stream of 512 x 512 images, one
// pixel per clock, row by row. Both Sobel results lie in -1020..+1020 for
// 8-bit pixels (4 * 255 either way), so every datapath word is an 11-bit
// two's complement number. The image size and pixel width are the ones the
// design was evaluated with; the 11-bit word width is this design's choice,
// the smallest that holds every result.
package edge_pkg;
  parameter int unsigned PIX_W  = 8;    // bits per pixel
  parameter int unsigned IMG_W  = 512;  // pixels per row
  parameter int unsigned IMG_H  = 512;  // rows per frame
  parameter int unsigned GRAD_W = PIX_W + 3;  // signed Sobel result width
endpackage
