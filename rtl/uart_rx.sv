// uart_rx: serial receiver for the host link (8 data bits, LSB first, no
// parity, one stop bit).
//
// The line is passed through a two-flop synchroniser. A falling edge starts a
// frame; the start bit is re-checked at its middle and each data bit is
// sampled in the middle of its bit time, CLKS_PER_BIT = CLK_HZ / BAUD clocks
// apart. A frame with a good stop bit places its byte on out_data with out_req
// high until out_ack takes it (req/ack link, see rc_stream_if). If a new byte
// completes while the previous one is still waiting, the new byte is dropped
// and the sticky overrun flag is set. A frame lasts 10 bit times.
//
// The UART host link itself follows the original design; frame format, baud
// rate and clock frequency are this design's own choices.
module uart_rx #(
  parameter int unsigned CLK_HZ = 100_000_000,
  parameter int unsigned BAUD   = 115_200
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rxd,
  output logic [7:0] out_data,
  output logic       out_req,
  input  logic       out_ack,
  output logic       overrun
);
  localparam int unsigned CLKS_PER_BIT = CLK_HZ / BAUD;
  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  typedef enum logic [1:0] {S_IDLE, S_START, S_DATA, S_STOP} state_t;
  state_t state;

  logic        rx_s1, rx_s2;
  logic [CW-1:0] cnt;
  logic [2:0]  bit_idx;
  logic [7:0]  shreg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_s1 <= 1'b1;
      rx_s2 <= 1'b1;
    end else begin
      rx_s1 <= rxd;
      rx_s2 <= rx_s1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cnt      <= '0;
      bit_idx  <= '0;
      shreg    <= '0;
      out_data <= '0;
      out_req  <= 1'b0;
      overrun  <= 1'b0;
    end else begin
      if (out_req && out_ack) out_req <= 1'b0;
      unique case (state)
        S_IDLE: begin
          cnt <= '0;
          if (!rx_s2) state <= S_START;
        end
        S_START: begin
          if (cnt == CW'(CLKS_PER_BIT / 2 - 1)) begin
            cnt     <= '0;
            bit_idx <= '0;
            state   <= rx_s2 ? S_IDLE : S_DATA;   // glitch: back to idle
          end else cnt <= cnt + 1'b1;
        end
        S_DATA: begin
          if (cnt == CW'(CLKS_PER_BIT - 1)) begin
            cnt   <= '0;
            shreg <= {rx_s2, shreg[7:1]};
            if (bit_idx == 3'd7) state <= S_STOP;
            bit_idx <= bit_idx + 1'b1;
          end else cnt <= cnt + 1'b1;
        end
        S_STOP: begin
          if (cnt == CW'(CLKS_PER_BIT - 1)) begin
            cnt   <= '0;
            state <= S_IDLE;
            if (rx_s2) begin
              if (out_req && !out_ack) overrun <= 1'b1;
              else begin
                out_data <= shreg;
                out_req  <= 1'b1;
              end
            end
          end else cnt <= cnt + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
