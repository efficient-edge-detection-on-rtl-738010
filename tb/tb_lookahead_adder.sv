// tb_lookahead_adder: checks the split adder against a + b modulo 2^N,
// exhaustively for the default 11-bit width (all 2^22 operand pairs), and
// counts how often the predicted carry into the upper half was 1 through
// each of its two terms (group generate, and group propagate with a carry
// from the lower ripple); both must occur.
module tb_lookahead_adder;
  localparam int unsigned N = 11;
  localparam int unsigned H = N / 2;

  logic [N-1:0] a, b, sum;
  int checks = 0, failures = 0;
  int n_gen = 0, n_prop = 0;

  lookahead_adder #(.N(N)) dut (.*);

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < (1 << N); i++)
      for (int j = 0; j < (1 << N); j++) begin
        a = N'(i); b = N'(j);
        #1;
        checks++;
        if (sum !== N'(i + j)) begin
          failures++;
          if (failures < 10) $display("%0d + %0d: got %0d", i, j, sum);
        end
        if (((i >> (H - 2)) & 3) + ((j >> (H - 2)) & 3) >= 4) n_gen++;
        else if ((((i >> (H - 2)) & 3) + ((j >> (H - 2)) & 3) == 3) &&
                 ((i & ((1 << (H - 2)) - 1)) + (j & ((1 << (H - 2)) - 1)) >= (1 << (H - 2))))
          n_prop++;
      end
    $display("carry predicted by generate %0d times, by propagate %0d times", n_gen, n_prop);
    if (n_gen == 0 || n_prop == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
