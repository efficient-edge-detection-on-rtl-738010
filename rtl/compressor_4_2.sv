// compressor_4_2: two-level 4:2 compressor for the separated Sobel kernels.
//
// Reduces the four operands of one separated Sobel step, W + 2X + Y - Z, to
// two words whose sum (modulo 2^N) is the result, so that a single adder
// completes the convolution. The first layer (csa_p2pp) folds in the
// doubling of X, the second (csa_ppn) the subtraction of Z, so neither a
// shift nor a negation is needed ahead of the compressor:
//   sint + cint = w + 2x + y
//   sout + cout = sint + cint - z = w + 2x + y - z
// The interim words are outputs too, because the x-direction path also
// adds them to cache the column sum.
//
// Purely combinational; all words are N-bit two's complement.
module compressor_4_2 #(
  parameter int unsigned N = edge_pkg::GRAD_W
) (
  input  logic [N-1:0] w,
  input  logic [N-1:0] x,
  input  logic [N-1:0] y,
  input  logic [N-1:0] z,
  output logic [N-1:0] sint,
  output logic [N-1:0] cint,
  output logic [N-1:0] sout,
  output logic [N-1:0] cout
);
  csa_p2pp #(.N(N)) u_level1 (.w, .x, .y, .sint, .cint);
  csa_ppn  #(.N(N)) u_level2 (.a(sint), .b(cint), .z, .sout, .cout);
endmodule
