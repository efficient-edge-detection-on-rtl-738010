// csa_ppn: "PPN:PP" 3:2 compressor, the second layer of the 4:2 compressor.
//
// Reduces A + B - Z to a sum word and a carry word (sout + cout == a + b - z,
// modulo 2^N). Subtraction is A + B + ~Z + 1: each bit is a full adder on
// A, B and the inverted Z, and the +1 enters as a carry word whose bit 0,
// which no full adder drives, is tied to 1:
//   sout[i]   = ~(a[i] ^ b[i] ^ z[i])
//   cout[i+1] = majority(a[i], b[i], ~z[i]),   cout[0] = 1
// The carry out of the top bit is dropped (modulo 2^N).
//
// Purely combinational. The sum equation and the carry-in of 1 follow the
// published compressor. Its printed carry equation does not produce the
// carry of A + B + ~Z; the majority function above, which the subtraction
// requires, is used instead.
module csa_ppn #(
  parameter int unsigned N = edge_pkg::GRAD_W
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  input  logic [N-1:0] z,
  output logic [N-1:0] sout,
  output logic [N-1:0] cout
);
  always_comb begin
    cout[0] = 1'b1;
    for (int i = 0; i < N; i++) begin
      sout[i] = ~(a[i] ^ b[i] ^ z[i]);
      if (i < N - 1)
        cout[i+1] = (a[i] & b[i]) | (a[i] & ~z[i]) | (b[i] & ~z[i]);
    end
  end
endmodule
