// tb_compressor_4_2: checks the two-level 4:2 compressor. For random N-bit
// operands, and for the operand ranges of the two Sobel directions (8-bit
// pixels, signed column sums/differences), sout + cout must equal
// w + 2x + y - z and sint + cint must equal w + 2x + y, modulo 2^N; for
// the Sobel ranges the signed result must also be exact.
module tb_compressor_4_2;
  localparam int unsigned N = 11;

  logic [N-1:0] w, x, y, z, sint, cint, sout, cout;
  int checks = 0, failures = 0;

  compressor_4_2 #(.N(N)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int tw, tx, ty, tz);
    int exp_v;
    logic signed [N-1:0] got;
    w = N'(tw); x = N'(tx); y = N'(ty); z = N'(tz);
    #1;
    exp_v = tw + 2 * tx + ty - tz;
    got = N'(sout + cout);
    checks++;
    if (N'(got) !== N'(exp_v)) begin
      failures++;
      if (failures < 10) $display("w=%0d x=%0d y=%0d z=%0d: got %0d expected %0d",
                                  tw, tx, ty, tz, got, exp_v);
    end
    checks++;
    if (N'(sint + cint) !== N'(tw + 2 * tx + ty)) failures++;
  endtask

  initial begin
    for (int i = 0; i < 10000; i++)
      check(int'($urandom_range(0, 2047)), int'($urandom_range(0, 2047)),
            int'($urandom_range(0, 2047)), int'($urandom_range(0, 2047)));
    // x direction: three pixels, minus a column sum 0..1020.
    for (int i = 0; i < 10000; i++)
      check(int'($urandom_range(0, 255)), int'($urandom_range(0, 255)),
            int'($urandom_range(0, 255)), int'($urandom_range(0, 1020)));
    // y direction: pixel, two signed differences, minus a pixel.
    for (int i = 0; i < 10000; i++)
      check(int'($urandom_range(0, 255)), int'($urandom_range(0, 510)) - 255,
            int'($urandom_range(0, 510)) - 255, int'($urandom_range(0, 255)));
    check(255, 255, 255, 0);
    check(0, 0, 0, 1020);
    check(255, 255, 255, 255);
    check(0, -255, -255, 255);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
