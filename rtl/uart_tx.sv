// uart_tx: serial transmitter for the host link (8 data bits, LSB first, no
// parity, one stop bit).
//
// A byte offered on in_data/in_req is taken (in_ack high for one clock) when
// the transmitter is idle, then shifted out as start bit, eight data bits and
// stop bit, each CLKS_PER_BIT = CLK_HZ / BAUD clocks long: one byte per 10 bit
// times. txd idles high. Frame format and baud rate are this design's choice;
// the UART link to the host follows the original design.
module uart_tx #(
  parameter int unsigned CLK_HZ = 100_000_000,
  parameter int unsigned BAUD   = 115_200
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] in_data,
  input  logic       in_req,
  output logic       in_ack,
  output logic       txd
);
  localparam int unsigned CLKS_PER_BIT = CLK_HZ / BAUD;
  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  logic          busy;
  logic [9:0]    frame;     // stop, data[7:0], start; sent LSB first
  logic [3:0]    bit_idx;
  logic [CW-1:0] cnt;

  assign in_ack = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      frame   <= '1;
      bit_idx <= '0;
      cnt     <= '0;
      txd     <= 1'b1;
    end else if (!busy) begin
      txd <= 1'b1;
      if (in_req) begin
        frame   <= {1'b1, in_data, 1'b0};
        txd     <= 1'b0;            // start bit goes out at once
        busy    <= 1'b1;
        bit_idx <= '0;
        cnt     <= '0;
      end
    end else begin
      if (cnt == CW'(CLKS_PER_BIT - 1)) begin
        cnt <= '0;
        if (bit_idx == 4'd9) begin
          busy <= 1'b0;
          txd  <= 1'b1;
        end else begin
          bit_idx <= bit_idx + 1'b1;
          txd     <= frame[bit_idx + 1'b1];
        end
      end else cnt <= cnt + 1'b1;
    end
  end
endmodule
