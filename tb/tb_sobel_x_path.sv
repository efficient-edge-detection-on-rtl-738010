// tb_sobel_x_path: feeds random pixel columns (the newest cache column
// p13, p23, p33) with random stalls and checks gx after every enabled
// clock against col(t) - col(t-2), where col = p13 + 2*p23 + p33 is
// computed here from the columns fed. Also drives the extreme columns
// (all 255 then all 0) to reach both ends of the result range, and checks
// that clr empties the column cache.
module tb_sobel_x_path;
  localparam int unsigned PIX_W = 8;
  localparam int unsigned GRAD_W = 11;

  logic clk = 1'b0, ena = 1'b0, clr = 1'b0;
  logic [PIX_W-1:0] p13 = '0, p23 = '0, p33 = '0;
  logic signed [GRAD_W-1:0] gx;
  int checks = 0, failures = 0;
  int cols [$];
  int n_pos = 0, n_neg = 0;

  sobel_x_path #(.PIX_W(PIX_W), .GRAD_W(GRAD_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Present a column on the inputs (they model the cache registers, so the
  // column is "now in the cache"); clock it into the column registers.
  task automatic column(input int a, b, c);
    int exp_v;
    p13 = PIX_W'(a); p23 = PIX_W'(b); p33 = PIX_W'(c);
    cols.push_back(a + 2 * b + c);
    #1;
    if (cols.size() >= 3) begin
      exp_v = cols[cols.size() - 1] - cols[cols.size() - 3];
      checks++;
      if (int'(gx) != exp_v) begin
        failures++;
        if (failures < 10) $display("column %0d: gx=%0d expected %0d", cols.size(), gx, exp_v);
      end
      if (exp_v > 0) n_pos++;
      if (exp_v < 0) n_neg++;
    end
    // random stall: result must not move while ena is low
    while ($urandom_range(0, 3) == 0) begin
      @(negedge clk);
      if (cols.size() >= 3) begin
        checks++;
        if (int'(gx) != exp_v) failures++;
      end
    end
    ena = 1'b1;
    @(negedge clk);
    ena = 1'b0;
  endtask

  initial begin
    clr = 1'b1;
    @(negedge clk);
    clr = 1'b0;
    // After clr the cache holds two zero columns.
    cols.push_back(0);
    cols.push_back(0);
    for (int i = 0; i < 2000; i++)
      column(int'($urandom_range(0, 255)), int'($urandom_range(0, 255)), int'($urandom_range(0, 255)));
    column(255, 255, 255); column(255, 255, 255); column(0, 0, 0); column(0, 0, 0);
    column(255, 255, 255);
    // +1020 and -1020 must both have been seen
    checks++;
    if (n_pos == 0 || n_neg == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
