// delay_line: the FIFO memory that forms the delay loop of the reservoir.
//
// It holds the last DEPTH states written into it. Each shift writes din in
// place of the oldest entry and advances the pointer; dout always shows the
// oldest entry still held, i.e. the value written DEPTH shifts before the
// next shift. The memory is a circular buffer with one write and one
// registered read per clock, so it maps to block RAM. After reset the block
// spends DEPTH clocks writing zeros (ready low); the delay loop therefore
// starts from an all-zero history.
//
// Timing: dout is valid in the clock after a shift. The reservoir uses
// DEPTH = N - 1 plus one register of its own to delay by N steps.
//
// A FIFO delay line is what the original design describes; the circular
// buffer, the clearing after reset and the registered read are this design's
// choices.
module delay_line
  import rc_pkg::*;
#(
  parameter int unsigned DEPTH = 599,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  shift,
  input  fix_t  din,
  output fix_t  dout,
  output logic  ready
);
  fix_t          mem [DEPTH];
  logic [AW-1:0] ptr;
  logic [AW-1:0] nxt;

  assign nxt = (ptr == AW'(DEPTH - 1)) ? '0 : ptr + 1'b1;

  always_ff @(posedge clk) begin
    if (!ready) mem[ptr] <= '0;
    else if (shift) mem[ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr   <= '0;
      ready <= 1'b0;
      dout  <= '0;
    end else if (!ready) begin
      ptr <= nxt;
      if (ptr == AW'(DEPTH - 1)) ready <= 1'b1;
    end else if (shift) begin
      ptr  <= nxt;
      dout <= (DEPTH == 1) ? din : mem[nxt];
    end
  end
endmodule
