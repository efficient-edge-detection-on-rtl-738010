// sobel_y_path: vertical-gradient (y-direction) Sobel datapath.
//
// The y kernel separates into a column [-1 0 1] and a row [1 2 1]. Here the
// column step is the cheap one, a difference of two pixels, so it is what
// gets cached: an adder forms d(t) = p33 - p13 for the newest window column
// and two registers keep d(t-1) and d(t-2). The 4:2 compressor then folds
// the row weights and the newest difference into one step,
//   gy = p33 + 2*d(t-1) + d(t-2) - p13 = d(t) + 2*d(t-1) + d(t-2)
//                                         (bottom row minus top row)
// and the look-ahead adder adds its two output words.
//
// Interface: p13/p33 are registers 1,3 and 3,3 of the pixel cache; ena
// advances the difference registers with the cache, clr clears them. gy is
// a signed GRAD_W-bit result, combinational; after the enabled clock that
// loads pixel p(r,c), gy is the y-gradient of the window centred at
// (r-1, c-1).
//
// The published block diagram gives the structure (cache adder, two
// registers, two compressor layers, adder); which wire enters which
// compressor input is this design's choice, made so that the result is the
// y Sobel kernel.
module sobel_y_path #(
  parameter int unsigned PIX_W  = edge_pkg::PIX_W,
  parameter int unsigned GRAD_W = edge_pkg::GRAD_W
) (
  input  logic                     clk,
  input  logic                     ena,
  input  logic                     clr,
  input  logic        [PIX_W-1:0]  p13,
  input  logic        [PIX_W-1:0]  p33,
  output logic signed [GRAD_W-1:0] gy
);
  logic [GRAD_W-1:0] col_diff;          // p33 - p13 of the newest column
  logic [GRAD_W-1:0] diff_d1, diff_d2;  // differences one and two columns back
  logic [GRAD_W-1:0] sint, cint, sout, cout;

  assign col_diff = GRAD_W'(p33) - GRAD_W'(p13);

  always_ff @(posedge clk) begin
    if (clr) begin
      diff_d1 <= '0;
      diff_d2 <= '0;
    end else if (ena) begin
      diff_d1 <= col_diff;
      diff_d2 <= diff_d1;
    end
  end

  // Interim words are not needed in this direction.
  compressor_4_2 #(.N(GRAD_W)) u_comp (
    .w(GRAD_W'(p33)), .x(diff_d1), .y(diff_d2), .z(GRAD_W'(p13)),
    .sint(sint), .cint(cint), .sout, .cout
  );

  lookahead_adder #(.N(GRAD_W)) u_add (.a(sout), .b(cout), .sum(gy));
endmodule
