// row_shift_register: RAM-based delay line holding the rest of an image row.
//
// Sits between two rows of window registers in the pixel cache. Every clock
// with ena high it accepts din and presents, on dout, the word it accepted
// DEPTH enabled clocks earlier. With DEPTH = image width - 3 and the three
// window registers of a cache row, a pixel needs exactly one image width of
// enabled clocks to move from one window row to the next.
//
// It is built like a vendor RAM shift register: a memory of DEPTH words and
// a pointer that walks round it. dout is the word under the pointer (read
// combinationally), and an enabled clock overwrites that word with din and
// advances the pointer, so only one word is written per clock and no data
// moves. The memory is never cleared; the cache controller ignores the
// windows that would contain stale words. The pointer is reset to 0 so that
// the delay is exact from the first enabled clock after reset.
//
// Timing: dout changes only after an enabled clock; ena low holds it.
module row_shift_register #(
  parameter int unsigned DATA_W = edge_pkg::PIX_W,
  parameter int unsigned DEPTH  = edge_pkg::IMG_W - 3
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ena,
  input  logic [DATA_W-1:0] din,
  output logic [DATA_W-1:0] dout
);
  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [DATA_W-1:0] mem [DEPTH];
  logic [PTR_W-1:0]  ptr;

  initial begin
    assert (DEPTH >= 1) else $error("row_shift_register: DEPTH must be at least 1");
  end

  assign dout = mem[ptr];

  always_ff @(posedge clk) begin
    if (ena) mem[ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                            ptr <= '0;
    else if (ena) begin
      if (ptr == PTR_W'(DEPTH - 1))        ptr <= '0;
      else                                 ptr <= ptr + 1'b1;
    end
  end
endmodule
