// tb_sobel_full_frame: one full 512 x 512 frame through the edge detector
// at its default parameters. The frame is a synthetic horizon scene: a
// bright sky above a gently sloping, rippled horizon line, a darker ground
// below, plus a little noise, so the strongest (negative y) responses run along the
// horizon. Each row is followed by horizontal blanking and a few random
// stalls occur inside rows.
//
// Every result is compared with a direct 3x3 Sobel convolution of the
// stored frame and must arrive exactly two clocks after the pixel that
// completes its window; all 510 x 510 interior pixels must get one.
module tb_sobel_full_frame;
  localparam int unsigned IMG_W = 512;
  localparam int unsigned IMG_H = 512;

  typedef struct {
    int due;
    int row, col, gx, gy;
  } result_t;

  logic clk = 1'b0, rst_n = 1'b0, frame_start = 1'b0, pix_valid = 1'b0;
  logic [7:0] pix_in = '0;
  logic edge_valid;
  logic signed [10:0] edge_x, edge_y;
  logic [8:0] edge_row, edge_col;

  int checks = 0, failures = 0;
  int cyc = 0;
  int img [IMG_H][IMG_W];
  result_t expq [$];
  int n_results = 0, n_stall = 0, n_strong = 0;

  sobel_edge_detector dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int scene(input int r, c);
    int horizon, v;
    horizon = 200 + c / 8 + ((c / 16) % 2) * 3;
    v = (r < horizon) ? 200 - r / 8 : 70 + (c % 32);
    v = v + int'($urandom_range(0, 6)) - 3;
    return (v < 0) ? 0 : (v > 255) ? 255 : v;
  endfunction

  function automatic void sobel(input int r, c, output int gx, gy);
    gx = -img[r-1][c-1] + img[r-1][c+1] - 2 * img[r][c-1] + 2 * img[r][c+1]
         - img[r+1][c-1] + img[r+1][c+1];
    gy = -img[r-1][c-1] - 2 * img[r-1][c] - img[r-1][c+1]
         + img[r+1][c-1] + 2 * img[r+1][c] + img[r+1][c+1];
  endfunction

  always @(negedge clk) begin
    if (rst_n && edge_valid) begin
      result_t e;
      checks++;
      if (expq.size() == 0) begin
        failures++;
      end else begin
        e = expq.pop_front();
        if (cyc != e.due || int'(edge_row) != e.row || int'(edge_col) != e.col ||
            int'(edge_x) != e.gx || int'(edge_y) != e.gy) begin
          failures++;
          if (failures < 10)
            $display("cycle %0d: (%0d,%0d) x=%0d y=%0d, expected (%0d,%0d) x=%0d y=%0d",
                     cyc, edge_row, edge_col, edge_x, edge_y, e.row, e.col, e.gx, e.gy);
        end
        if (e.gy < -200) n_strong++;  // sky above, darker ground below
        n_results++;
      end
    end
    if (rst_n && expq.size() != 0 && cyc > expq[0].due) begin
      failures++;
      void'(expq.pop_front());
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    frame_start = 1'b1;
    @(negedge clk);
    frame_start = 1'b0;
    for (int r = 0; r < int'(IMG_H); r++) begin
      for (int c = 0; c < int'(IMG_W); c++) begin
        if ($urandom_range(0, 99) == 0) begin
          pix_valid = 1'b0;
          n_stall++;
          @(negedge clk);
        end
        img[r][c] = scene(r, c);
        pix_in = 8'(img[r][c]);
        pix_valid = 1'b1;
        if (r >= 2 && c >= 2) begin
          result_t e;
          e.due = cyc + 2;
          e.row = r - 1;
          e.col = c - 1;
          sobel(r - 1, c - 1, e.gx, e.gy);
          expq.push_back(e);
        end
        @(negedge clk);
      end
      pix_valid = 1'b0;
      repeat (8) @(negedge clk);
    end
    repeat (4) @(negedge clk);
    checks++;
    if (n_results != int'((IMG_W - 2) * (IMG_H - 2)) || expq.size() != 0) failures++;
    checks++;
    if (n_stall == 0 || n_strong == 0) failures++;
    $display("results %0d, stalls %0d, strong horizon responses %0d", n_results, n_stall, n_strong);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
