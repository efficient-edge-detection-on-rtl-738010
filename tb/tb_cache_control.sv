// tb_cache_control: drives a 6 x 5 frame twice with random horizontal
// blanking, stalls inside rows and a frame_start pulse between frames, and
// checks ena/clr and, one clock after each accepted pixel, win_valid with
// the window-centre coordinates computed from the pixel's own row and
// column. Outputs for the first two rows and the first two pixels of each
// row (priming and left-border wrap) must be suppressed.
module tb_cache_control;
  localparam int unsigned IMG_W = 6;
  localparam int unsigned IMG_H = 5;

  logic clk = 1'b0, rst_n = 1'b0, frame_start = 1'b0, pix_valid = 1'b0;
  logic ena, clr, win_valid;
  logic [$clog2(IMG_H)-1:0] win_row;
  logic [$clog2(IMG_W)-1:0] win_col;
  int checks = 0, failures = 0;
  int n_valid = 0, n_suppressed = 0, n_stall = 0;

  cache_control #(.IMG_W(IMG_W), .IMG_H(IMG_H)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < 2; f++) begin
      frame_start = 1'b1;
      @(negedge clk);
      expect_eq(int'(clr), 1, "clr during frame_start");
      expect_eq(int'(win_valid), 0, "no window after frame_start");
      frame_start = 1'b0;
      repeat ($urandom_range(0, 3)) @(negedge clk);
      for (int r = 0; r < int'(IMG_H); r++) begin
        for (int c = 0; c < int'(IMG_W); c++) begin
          while ($urandom_range(0, 3) == 0) begin   // stall inside a row
            pix_valid = 1'b0;
            @(negedge clk);
            expect_eq(int'(ena), 0, "ena in stall");
            expect_eq(int'(win_valid), 0, "win_valid after stall");
            n_stall++;
          end
          pix_valid = 1'b1;
          #1 expect_eq(int'(ena), 1, "ena with pixel");
          @(negedge clk);
          if (r >= 2 && c >= 2) begin
            expect_eq(int'(win_valid), 1, "win_valid");
            expect_eq(int'(win_row), r - 1, "win_row");
            expect_eq(int'(win_col), c - 1, "win_col");
            n_valid++;
          end else begin
            expect_eq(int'(win_valid), 0, "suppressed window");
            n_suppressed++;
          end
        end
        pix_valid = 1'b0;                 // horizontal blanking
        repeat ($urandom_range(1, 4)) @(negedge clk);
      end
    end
    expect_eq(n_valid, 2 * (IMG_W - 2) * (IMG_H - 2), "number of valid windows");
    if (n_stall == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
