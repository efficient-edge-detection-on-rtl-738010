// tb_sobel_edge_detector: end-to-end test of the edge detector on a small
// 16 x 10 image size, three frames in a row. Frame 0 is random, frame 1 is
// made of black and white blocks (full-scale positive and negative edges in
// both directions), frame 2 is random and dim. The stream has random stalls
// inside rows, horizontal blanking after every row and vertical blanking
// with a frame_start pulse between frames.
//
// The reference is a direct 3x3 convolution of the stored frame with the
// two Sobel kernels. Every result must arrive, in raster order, exactly two
// clocks after the pixel that completes its window, with the right
// coordinates and both intensities; no result may appear for border pixels
// or for windows that are still being primed. The test also counts each
// mechanism (stall, horizontal blanking, frame flush, priming, positive and
// negative edges in x and y) and fails if one never happened.
module tb_sobel_edge_detector;
  localparam int unsigned PIX_W  = 8;
  localparam int unsigned IMG_W  = 16;
  localparam int unsigned IMG_H  = 10;
  localparam int unsigned GRAD_W = 11;
  localparam int unsigned NFRAMES = 3;

  typedef struct {
    int due;   // clock count at which the result must be on the outputs
    int row, col, gx, gy;
  } result_t;

  logic clk = 1'b0, rst_n = 1'b0, frame_start = 1'b0, pix_valid = 1'b0;
  logic [PIX_W-1:0] pix_in = '0;
  logic edge_valid;
  logic signed [GRAD_W-1:0] edge_x, edge_y;
  logic [$clog2(IMG_H)-1:0] edge_row;
  logic [$clog2(IMG_W)-1:0] edge_col;

  int checks = 0, failures = 0;
  int cyc = 0;
  int img [IMG_H][IMG_W];
  result_t expq [$];
  int n_results = 0, n_stall = 0, n_hblank = 0, n_flush = 0, n_primed = 0;
  int n_xpos = 0, n_xneg = 0, n_ypos = 0, n_yneg = 0;
  bit done = 1'b0;

  sobel_edge_detector #(.PIX_W(PIX_W), .IMG_W(IMG_W), .IMG_H(IMG_H), .GRAD_W(GRAD_W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int pixel(input int f, r, c);
    case (f)
      0:       return int'($urandom_range(0, 255));
      1:       return ((((r / 3) + (c / 4)) % 2) == 1) ? 255 : 0;
      default: return int'($urandom_range(0, 40));
    endcase
  endfunction

  // Reference Sobel of the window centred at (r, c).
  function automatic void sobel(input int r, c, output int gx, gy);
    gx = -img[r-1][c-1] + img[r-1][c+1] - 2 * img[r][c-1] + 2 * img[r][c+1]
         - img[r+1][c-1] + img[r+1][c+1];
    gy = -img[r-1][c-1] - 2 * img[r-1][c] - img[r-1][c+1]
         + img[r+1][c-1] + 2 * img[r+1][c] + img[r+1][c+1];
  endfunction

  // Output monitor: compares each result with the head of the queue.
  always @(negedge clk) begin
    if (rst_n && edge_valid) begin
      result_t e;
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("unexpected result at (%0d,%0d)", edge_row, edge_col);
      end else begin
        e = expq.pop_front();
        if (cyc != e.due || int'(edge_row) != e.row || int'(edge_col) != e.col ||
            int'(edge_x) != e.gx || int'(edge_y) != e.gy) begin
          failures++;
          if (failures < 10)
            $display("cycle %0d (due %0d): (%0d,%0d) x=%0d y=%0d, expected (%0d,%0d) x=%0d y=%0d",
                     cyc, e.due, edge_row, edge_col, edge_x, edge_y, e.row, e.col, e.gx, e.gy);
        end
        n_results++;
      end
    end
    if (rst_n && expq.size() != 0 && cyc > expq[0].due) begin
      failures++;
      $display("result for (%0d,%0d) missing", expq[0].row, expq[0].col);
      void'(expq.pop_front());
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int f = 0; f < int'(NFRAMES); f++) begin
      repeat ($urandom_range(2, 5)) @(negedge clk);     // vertical blanking
      frame_start = 1'b1;
      n_flush++;
      @(negedge clk);
      frame_start = 1'b0;
      repeat ($urandom_range(1, 4)) @(negedge clk);
      for (int r = 0; r < int'(IMG_H); r++) begin
        for (int c = 0; c < int'(IMG_W); c++) begin
          while ($urandom_range(0, 5) == 0) begin      // stall inside a row
            pix_valid = 1'b0;
            n_stall++;
            @(negedge clk);
          end
          img[r][c] = pixel(f, r, c);
          pix_in = PIX_W'(img[r][c]);
          pix_valid = 1'b1;
          if (r >= 2 && c >= 2) begin
            result_t e;
            e.due = cyc + 2;
            e.row = r - 1;
            e.col = c - 1;
            sobel(r - 1, c - 1, e.gx, e.gy);
            if (e.gx > 0) n_xpos++;
            if (e.gx < 0) n_xneg++;
            if (e.gy > 0) n_ypos++;
            if (e.gy < 0) n_yneg++;
            expq.push_back(e);
          end else begin
            n_primed++;
          end
          @(negedge clk);
        end
        pix_valid = 1'b0;                              // horizontal blanking
        repeat ($urandom_range(1, 3)) begin
          n_hblank++;
          @(negedge clk);
        end
      end
    end
    repeat (4) @(negedge clk);
    checks++;
    if (expq.size() != 0 || n_results != int'(NFRAMES * (IMG_W - 2) * (IMG_H - 2))) begin
      failures++;
      $display("%0d results, %0d still expected", n_results, expq.size());
    end
    $display("results %0d, stalls %0d, blanking clocks %0d, flushes %0d, primed/border pixels %0d",
             n_results, n_stall, n_hblank, n_flush, n_primed);
    $display("edges: x+ %0d x- %0d y+ %0d y- %0d", n_xpos, n_xneg, n_ypos, n_yneg);
    if (n_stall == 0)  begin failures++; $display("no stall happened"); end
    if (n_hblank == 0) begin failures++; $display("no blanking happened"); end
    if (n_flush < 2)   begin failures++; $display("no flush between frames"); end
    if (n_primed == 0) begin failures++; $display("no priming happened"); end
    if (n_xpos == 0 || n_xneg == 0 || n_ypos == 0 || n_yneg == 0) begin
      failures++;
      $display("an edge polarity never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
