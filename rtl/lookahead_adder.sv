// lookahead_adder: two-word adder split in halves with carry prediction.
//
// Adds the two words left by the 4:2 compressor. A plain ripple adder waits
// for the carry to travel all N bits. Here the adder is split at bit
// H = N/2: the lower half ripples from bit 0, and the carry into bit H is
// not taken from bit H-1 but predicted from the two bits below the split,
// which a single 4-input LUT can do:
//   G  = a[H-1]b[H-1] + (a[H-1]^b[H-1]) a[H-2]b[H-2]   (2-bit generate)
//   P  = (a[H-1]^b[H-1]) (a[H-2]^b[H-2])               (2-bit propagate)
//   C_H = G + P C_{H-2}
// where C_{H-2} is the carry into bit H-2 from the lower ripple. The upper
// half then ripples from C_H, so the longest chain is about H bits plus one
// LUT instead of N bits.
//
// Purely combinational: sum = a + b modulo 2^N, carry-in 0, carry out
// dropped. The split and the G/P equations follow the published adder;
// reading its C_{i-1} term as the carry into the 2-bit group is this
// design's interpretation.
module lookahead_adder #(
  parameter int unsigned N = edge_pkg::GRAD_W
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  output logic [N-1:0] sum
);
  localparam int unsigned H = N / 2;

  initial begin
    assert (N >= 4) else $error("lookahead_adder: N must be at least 4");
  end

  logic g_la, p_la;  // 2-bit group generate / propagate below the split

  assign g_la = (a[H-1] & b[H-1]) | ((a[H-1] ^ b[H-1]) & a[H-2] & b[H-2]);
  assign p_la = (a[H-1] ^ b[H-1]) & (a[H-2] ^ b[H-2]);

  always_comb begin
    logic [N:0] c;  // c[i] is the carry into bit i
    c = '0;
    for (int i = 0; i < N; i++) begin
      if (i == H)
        c[i] = g_la | (p_la & c[H-2]);  // predicted carry into the upper half
      sum[i]  = a[i] ^ b[i] ^ c[i];
      c[i+1]  = (a[i] & b[i]) | (c[i] & (a[i] ^ b[i]));
    end
  end
endmodule
