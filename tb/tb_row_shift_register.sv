// tb_row_shift_register: checks the row buffer's delay of exactly DEPTH
// enabled clocks at the default depth (512-pixel rows), with ena dropping
// at random. A software queue of every accepted word is the reference:
// before each clock, once DEPTH words have gone in, dout must equal the
// word accepted DEPTH enabled clocks earlier; with ena low it must hold.
module tb_row_shift_register;
  localparam int unsigned DATA_W = 8;
  localparam int unsigned DEPTH  = 509;
  localparam int unsigned NWORDS = 3 * DEPTH + 17;

  logic clk = 1'b0, rst_n = 1'b0, ena = 1'b0;
  logic [DATA_W-1:0] din = '0, dout;
  int checks = 0, failures = 0;
  logic [DATA_W-1:0] hist [NWORDS];
  int n = 0, stalls = 0;

  row_shift_register #(.DATA_W(DATA_W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    while (n < NWORDS) begin
      @(negedge clk);
      if (n >= int'(DEPTH)) begin
        checks++;
        if (dout !== hist[n - DEPTH]) begin
          failures++;
          if (failures < 10) $display("word %0d: dout=%h expected %h", n, dout, hist[n - DEPTH]);
        end
      end
      ena = ($urandom_range(0, 3) != 0);
      din = DATA_W'($urandom);
      if (ena) begin
        hist[n] = din;
        n++;
      end else begin
        stalls++;
      end
    end
    @(negedge clk);
    ena = 1'b0;
    if (stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
