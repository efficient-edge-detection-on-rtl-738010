// tb_sobel_y_path: feeds random pixel pairs (cache registers 1,3 and 3,3)
// with random stalls and checks gy after every enabled clock against
// d(t) + 2 d(t-1) + d(t-2) with d = p33 - p13 computed here. Extreme
// columns reach both ends of the range (+1020, -1020), and clr must empty
// the difference cache.
module tb_sobel_y_path;
  localparam int unsigned PIX_W = 8;
  localparam int unsigned GRAD_W = 11;

  logic clk = 1'b0, ena = 1'b0, clr = 1'b0;
  logic [PIX_W-1:0] p13 = '0, p33 = '0;
  logic signed [GRAD_W-1:0] gy;
  int checks = 0, failures = 0;
  int diffs [$];
  int n_max = 0, n_min = 0;

  sobel_y_path #(.PIX_W(PIX_W), .GRAD_W(GRAD_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic column(input int top, bottom);
    int exp_v, k;
    p13 = PIX_W'(top); p33 = PIX_W'(bottom);
    diffs.push_back(bottom - top);
    k = diffs.size();
    #1;
    exp_v = diffs[k - 1] + 2 * diffs[k - 2] + diffs[k - 3];
    checks++;
    if (int'(gy) != exp_v) begin
      failures++;
      if (failures < 10) $display("column %0d: gy=%0d expected %0d", k, gy, exp_v);
    end
    if (exp_v == 1020) n_max++;
    if (exp_v == -1020) n_min++;
    while ($urandom_range(0, 3) == 0) begin
      @(negedge clk);
      checks++;
      if (int'(gy) != exp_v) failures++;
    end
    ena = 1'b1;
    @(negedge clk);
    ena = 1'b0;
  endtask

  initial begin
    clr = 1'b1;
    @(negedge clk);
    clr = 1'b0;
    diffs.push_back(0);
    diffs.push_back(0);
    for (int i = 0; i < 2000; i++)
      column(int'($urandom_range(0, 255)), int'($urandom_range(0, 255)));
    repeat (3) column(0, 255);
    repeat (3) column(255, 0);
    checks++;
    if (n_max == 0 || n_min == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
