// sobel_x_path: horizontal-gradient (x-direction) Sobel datapath.
//
// The x kernel separates into a column [1 2 1] and a row [-1 0 1]. Each
// clock the newest window column (registers 1,3, 2,3 and 3,3) is weighted
// [1 2 1] by the first compressor layer. That column sum is also completed
// by an ordinary adder and kept in two registers, so the column two steps
// back is always at hand; the second compressor layer subtracts it:
//   col(t) = p13 + 2*p23 + p33
//   gx     = col(t) - col(t-2)        (right column minus left column)
// and the look-ahead adder adds the two compressor words. Each column sum
// is computed once and reused, instead of convolving all nine pixels.
//
// Interface: p13/p23/p33 are the newest column of the pixel cache; ena
// advances the two column-sum registers together with the cache, clr
// clears them. gx is a signed GRAD_W-bit result, combinational from the
// cache and column registers: after the enabled clock that loads pixel
// p(r,c) into the cache, gx is the x-gradient of the window centred at
// (r-1, c-1).
//
// The structure (compressor, cache adder, two registers, compressor,
// adder) follows the published block diagram; word widths, signed output
// and the plain cache adder are this design's choices.
module sobel_x_path #(
  parameter int unsigned PIX_W  = edge_pkg::PIX_W,
  parameter int unsigned GRAD_W = edge_pkg::GRAD_W
) (
  input  logic                     clk,
  input  logic                     ena,
  input  logic                     clr,
  input  logic        [PIX_W-1:0]  p13,
  input  logic        [PIX_W-1:0]  p23,
  input  logic        [PIX_W-1:0]  p33,
  output logic signed [GRAD_W-1:0] gx
);
  logic [GRAD_W-1:0] sint, cint, sout, cout;
  logic [GRAD_W-1:0] col_sum;           // p13 + 2*p23 + p33 of the newest column
  logic [GRAD_W-1:0] col_d1, col_d2;    // column sums one and two columns back

  compressor_4_2 #(.N(GRAD_W)) u_comp (
    .w(GRAD_W'(p13)), .x(GRAD_W'(p23)), .y(GRAD_W'(p33)), .z(col_d2),
    .sint, .cint, .sout, .cout
  );

  assign col_sum = sint + cint;

  always_ff @(posedge clk) begin
    if (clr) begin
      col_d1 <= '0;
      col_d2 <= '0;
    end else if (ena) begin
      col_d1 <= col_sum;
      col_d2 <= col_d1;
    end
  end

  lookahead_adder #(.N(GRAD_W)) u_add (.a(sout), .b(cout), .sum(gx));
endmodule
