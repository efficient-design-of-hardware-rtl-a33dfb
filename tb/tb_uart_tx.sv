// tb_uart_tx: self-checking test of the UART transmitter.
// Offers random bytes at random times, decodes txd by sampling each bit in its
// middle and compares with the bytes offered; checks the start and stop bits
// and that a frame lasts 10 bit times (the next byte is taken 10*CPB clocks
// after the previous one when offered at once).
module tb_uart_tx;
  localparam int CLK_HZ = 1_000_000, BAUD = 100_000, CPB = CLK_HZ / BAUD;
  logic clk = 0, rst_n = 0;
  logic [7:0] in_data = 0;
  logic in_req = 0, in_ack, txd;
  int checks = 0, failures = 0;
  logic [7:0] sent[$];
  int take_times[$];
  int cyc = 0;

  uart_tx #(.CLK_HZ(CLK_HZ), .BAUD(BAUD)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (in_req && in_ack) take_times.push_back(cyc);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // driver
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 30; k++) begin
      repeat ((k < 10) ? 0 : $urandom_range(0, 3 * CPB)) @(negedge clk);
      in_data = 8'($urandom);
      in_req = 1;
      sent.push_back(in_data);
      @(posedge clk);
      while (!in_ack) @(posedge clk);
      @(negedge clk);
      in_req = 0;
    end
  end

  // receiver model
  initial begin
    logic [7:0] b;
    logic [7:0] exp_b;
    @(posedge rst_n);
    check(txd == 1'b1, "line idles high");
    for (int k = 0; k < 30; k++) begin
      @(negedge txd);
      repeat (CPB / 2) @(posedge clk);
      check(txd == 1'b0, "start bit");
      for (int i = 0; i < 8; i++) begin
        repeat (CPB) @(posedge clk);
        b[i] = txd;
      end
      repeat (CPB) @(posedge clk);
      check(txd == 1'b1, "stop bit");
      exp_b = sent.pop_front();
      check(b == exp_b, $sformatf("byte %0d: got %h want %h", k, b, exp_b));
    end
    for (int k = 1; k < 10; k++)
      check(take_times[k] - take_times[k-1] == 10 * CPB + 1,
            $sformatf("byte spacing %0d clocks", take_times[k] - take_times[k-1]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
