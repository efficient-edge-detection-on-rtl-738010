// tb_csa_p2pp: checks the P2PP:PP compressor against w + 2x + y, computed
// with ordinary integer arithmetic modulo 2^N, for random operands and the
// all-zero/all-one corners, and checks that it does not propagate carries:
// every sum bit must equal w[i] ^ x[i-1] ^ y[i] and cint[0] must be 0.
module tb_csa_p2pp;
  localparam int unsigned N = 11;

  logic [N-1:0] w, x, y, sint, cint;
  int checks = 0, failures = 0;

  csa_p2pp #(.N(N)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [N-1:0] tw, tx, ty);
    logic [N-1:0] exp_sum;
    logic [N-1:0] x_sh;
    w = tw; x = tx; y = ty;
    #1;
    exp_sum = N'(int'(tw) + 2 * int'(tx) + int'(ty));
    x_sh = tx << 1;
    checks++;
    if (N'(sint + cint) !== exp_sum) begin
      failures++;
      if (failures < 10) $display("w=%0d x=%0d y=%0d: sint+cint=%0d expected %0d",
                                  tw, tx, ty, N'(sint + cint), exp_sum);
    end
    checks++;
    if (sint !== (tw ^ x_sh ^ ty) || cint[0] !== 1'b0) failures++;
  endtask

  initial begin
    check('0, '0, '0);
    check('1, '1, '1);
    for (int i = 0; i < 20000; i++)
      check(N'($urandom), N'($urandom), N'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
