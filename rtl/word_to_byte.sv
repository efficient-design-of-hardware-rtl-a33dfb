// word_to_byte: splits 16-bit result words into two bytes for the UART
// transmitter, most significant byte first (this design's choice).
//
// A word is taken when the splitter is empty; its high byte is offered first,
// then its low byte, each with out_req until out_ack. Both sides use the
// req/ack link of rc_stream_if.
module word_to_byte (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] in_data,
  input  logic        in_req,
  output logic        in_ack,
  output logic [7:0]  out_data,
  output logic        out_req,
  input  logic        out_ack
);
  logic [15:0] word;
  logic [1:0]  left;   // bytes still to send

  assign in_ack   = (left == 2'd0);
  assign out_req  = (left != 2'd0);
  assign out_data = (left == 2'd2) ? word[15:8] : word[7:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      word <= '0;
      left <= '0;
    end else if (left == 2'd0) begin
      if (in_req) begin
        word <= in_data;
        left <= 2'd2;
      end
    end else if (out_ack) begin
      left <= left - 1'b1;
    end
  end
endmodule
