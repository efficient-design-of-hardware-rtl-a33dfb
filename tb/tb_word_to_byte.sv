// tb_word_to_byte: self-checking test of the word splitter. Random words are
// offered with random gaps, bytes taken with random back-pressure; the byte
// stream must be each word's high byte then its low byte.
module tb_word_to_byte;
  logic clk = 0, rst_n = 0;
  logic [15:0] in_data = 0;
  logic in_req = 0, in_ack;
  logic [7:0] out_data;
  logic out_req, out_ack = 0;
  int checks = 0, failures = 0;
  logic [7:0] exp_q[$];
  int n_bytes = 0;

  word_to_byte dut (.*);
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
    logic [7:0] b;
    b = exp_q.pop_front();
    checks++;
    if (out_data !== b) begin failures++; $display("FAIL: got %h want %h", out_data, b); end
    n_bytes++;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 100; k++) begin
      repeat ($urandom_range(0, 3)) @(negedge clk);
      in_data = 16'($urandom);
      in_req = 1;
      @(posedge clk);
      while (!in_ack) @(posedge clk);
      exp_q.push_back(in_data[15:8]);
      exp_q.push_back(in_data[7:0]);
      @(negedge clk);
      in_req = 0;
    end
    repeat (20) @(negedge clk);
    checks++;
    if (n_bytes != 200) begin failures++; $display("FAIL: %0d bytes", n_bytes); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
