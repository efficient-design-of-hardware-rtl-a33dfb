// byte_to_word: packs pairs of bytes from the UART receiver into 16-bit words,
// most significant byte first (byte order is this design's choice).
//
// The first byte of a pair is held in a register; when the second arrives the
// word is presented on out_data with out_req until out_ack. While a word waits,
// no byte is taken (in_ack low), so back-pressure reaches the receiver. Both
// sides use the req/ack link of rc_stream_if.
module byte_to_word (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  in_data,
  input  logic        in_req,
  output logic        in_ack,
  output logic [15:0] out_data,
  output logic        out_req,
  input  logic        out_ack
);
  logic       have_hi;
  logic [7:0] hi;

  assign in_ack = !out_req;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_hi  <= 1'b0;
      hi       <= '0;
      out_data <= '0;
      out_req  <= 1'b0;
    end else begin
      if (out_req && out_ack) out_req <= 1'b0;
      if (in_req && in_ack) begin
        if (!have_hi) begin
          hi      <= in_data;
          have_hi <= 1'b1;
        end else begin
          out_data <= {hi, in_data};
          out_req  <= 1'b1;
          have_hi  <= 1'b0;
        end
      end
    end
  end
endmodule
