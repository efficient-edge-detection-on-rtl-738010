// tb_pixel_cache: streams random pixels into an 8-pixel-wide cache with
// random stalls and checks all nine window registers after every clock
// against the list of accepted pixels: register r,c must hold the pixel
// accepted (2-c) + (2-r)*IMG_W enabled clocks before the newest one. Also
// checks that clr zeroes the window and that a stalled clock changes
// nothing.
module tb_pixel_cache;
  localparam int unsigned PIX_W = 8;
  localparam int unsigned IMG_W = 8;
  localparam int unsigned NPIX  = 12 * IMG_W;

  logic clk = 1'b0, rst_n = 1'b0, ena = 1'b0, clr = 1'b0;
  logic [PIX_W-1:0] pix_in = '0;
  logic [PIX_W-1:0] win [3][3];
  int checks = 0, failures = 0;
  logic [PIX_W-1:0] hist [NPIX];
  int n = 0;

  pixel_cache #(.PIX_W(PIX_W), .IMG_W(IMG_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_window();
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++) begin
        int idx = n - 1 - (2 - c) - (2 - r) * int'(IMG_W);
        if (idx >= 0) begin
          checks++;
          if (win[r][c] !== hist[idx]) begin
            failures++;
            if (failures < 10)
              $display("after %0d pixels: reg %0d,%0d = %h expected %h",
                       n, r + 1, c + 1, win[r][c], hist[idx]);
          end
        end
      end
  endtask

  initial begin
    @(negedge clk);
    rst_n = 1'b1;
    clr = 1'b1;
    @(negedge clk);
    clr = 1'b0;
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++) begin
        checks++;
        if (win[r][c] !== '0) failures++;
      end
    while (n < NPIX) begin
      ena = ($urandom_range(0, 4) != 0);
      pix_in = PIX_W'($urandom);
      if (ena) begin
        hist[n] = pix_in;
        n++;
      end
      @(negedge clk);
      check_window();
    end
    // clr wins over ena and empties the window.
    ena = 1'b1;
    clr = 1'b1;
    @(negedge clk);
    ena = 1'b0;
    clr = 1'b0;
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++) begin
        checks++;
        if (win[r][c] !== '0) failures++;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
