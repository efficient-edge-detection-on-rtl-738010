// csa_p2pp: "P2PP:PP" 3:2 compressor, the first layer of the 4:2 compressor.
//
// Reduces W + 2X + Y to an interim sum word and an interim carry word
// (sint + cint == w + 2x + y, modulo 2^N) with no carry propagation: each bit
// is an independent full adder. The doubling of X costs nothing; it is only
// wiring, bit i of the adder taking X from bit i-1 and bit 0 taking 0:
//   sint[i]   = w[i] ^ x[i-1] ^ y[i]
//   cint[i+1] = majority(w[i], x[i-1], y[i]),   cint[0] = 0
// The carry out of the top bit is dropped, so the block works modulo 2^N and
// any two's complement operands may be used as long as the final result
// fits in N bits.
//
// Purely combinational. Equations and bit placement follow the published
// compressor; the name X for the doubled operand follows its bit-level
// drawing.
module csa_p2pp #(
  parameter int unsigned N = edge_pkg::GRAD_W
) (
  input  logic [N-1:0] w,
  input  logic [N-1:0] x,
  input  logic [N-1:0] y,
  output logic [N-1:0] sint,
  output logic [N-1:0] cint
);
  logic [N-1:0] x2;  // X doubled: X_{i-1} at bit i, 0 at bit 0

  assign x2 = {x[N-2:0], 1'b0};

  always_comb begin
    cint[0] = 1'b0;
    for (int i = 0; i < N; i++) begin
      sint[i] = w[i] ^ x2[i] ^ y[i];
      if (i < N - 1)
        cint[i+1] = (w[i] & x2[i]) | (w[i] & y[i]) | (x2[i] & y[i]);
    end
  end
endmodule
