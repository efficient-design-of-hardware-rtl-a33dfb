// tb_byte_to_word: self-checking test of the byte packer. Random bytes are
// offered with random gaps and taken words with random back-pressure; each
// word must equal the two bytes sent, high byte first.
module tb_byte_to_word;
  logic clk = 0, rst_n = 0;
  logic [7:0] in_data = 0;
  logic in_req = 0, in_ack;
  logic [15:0] out_data;
  logic out_req, out_ack = 0;
  int checks = 0, failures = 0;
  logic [7:0] bytes_q[$];
  int n_words = 0;

  byte_to_word dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ack <= ($urandom_range(0, 2) != 0);

  always @(posedge clk) if (rst_n && out_req && out_ack) begin
    logic [15:0] w;
    w = {bytes_q[0], bytes_q[1]};
    void'(bytes_q.pop_front()); void'(bytes_q.pop_front());
    checks++;
    if (out_data !== w) begin failures++; $display("FAIL: got %h want %h", out_data, w); end
    n_words++;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 200; k++) begin
      repeat ($urandom_range(0, 2)) @(negedge clk);
      in_data = 8'($urandom);
      in_req = 1;
      @(posedge clk);
      while (!in_ack) @(posedge clk);
      bytes_q.push_back(in_data);
      @(negedge clk);
      in_req = 0;
    end
    repeat (20) @(negedge clk);
    checks++;
    if (n_words != 100) begin failures++; $display("FAIL: %0d words", n_words); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
