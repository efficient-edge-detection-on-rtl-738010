// tb_csa_ppn: checks the PPN:PP compressor against a + b - z computed with
// integer arithmetic modulo 2^N, exhaustively for a 4-bit instance and
// randomly for the 11-bit default, and checks the forced carry-in
// cout[0] = 1 and the inverted sum bits.
module tb_csa_ppn;
  localparam int unsigned N = 11;

  logic [N-1:0] a, b, z, sout, cout;
  logic [3:0]   a4, b4, z4, sout4, cout4;
  int checks = 0, failures = 0;

  csa_ppn #(.N(N)) dut (.*);
  csa_ppn #(.N(4)) dut4 (.a(a4), .b(b4), .z(z4), .sout(sout4), .cout(cout4));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < 16; j++)
        for (int k = 0; k < 16; k++) begin
          a4 = 4'(i); b4 = 4'(j); z4 = 4'(k);
          #1;
          checks++;
          if (4'(sout4 + cout4) !== 4'(i + j - k)) failures++;
        end
    for (int i = 0; i < 20000; i++) begin
      a = N'($urandom); b = N'($urandom); z = N'($urandom);
      #1;
      checks++;
      if (N'(sout + cout) !== N'(int'(a) + int'(b) - int'(z))) begin
        failures++;
        if (failures < 10) $display("a=%0d b=%0d z=%0d: got %0d", a, b, z, N'(sout + cout));
      end
      checks++;
      if (cout[0] !== 1'b1 || sout !== ~(a ^ b ^ z)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
