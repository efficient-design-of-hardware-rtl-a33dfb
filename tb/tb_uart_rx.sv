// tb_uart_rx: self-checking test of the UART receiver.
// Sends random bytes as 8N1 frames at 10 clocks per bit, takes them with a
// randomly delayed ack and compares each with the byte sent; checks that a
// byte is ready within 10 bit times of its start bit, that a framing error
// (stop bit low) yields no byte, and that a byte not taken in time sets the
// overrun flag.
module tb_uart_rx;
  localparam int CLK_HZ = 1_000_000, BAUD = 100_000, CPB = CLK_HZ / BAUD;
  logic clk = 0, rst_n = 0, rxd = 1;
  logic [7:0] out_data;
  logic out_req, out_ack = 0, overrun;
  int checks = 0, failures = 0;

  uart_rx #(.CLK_HZ(CLK_HZ), .BAUD(BAUD)) dut (.*);

  always #5 clk = ~clk;

  task automatic send_byte(input logic [7:0] b, input logic stop = 1'b1);
    rxd = 1'b0; repeat (CPB) @(negedge clk);
    for (int i = 0; i < 8; i++) begin rxd = b[i]; repeat (CPB) @(negedge clk); end
    rxd = stop; repeat (CPB) @(negedge clk);
    rxd = 1'b1;
  endtask

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

  initial begin
    logic [7:0] b;
    int t0, wait_cycles;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    for (int k = 0; k < 40; k++) begin
      b = 8'($urandom);
      t0 = 0;
      fork
        send_byte(b);
        begin
          while (!out_req) begin @(negedge clk); t0++; end
        end
      join
      check(t0 <= 10 * CPB + 4, $sformatf("byte ready after %0d clocks", t0));
      wait_cycles = $urandom_range(0, 3);
      repeat (wait_cycles) @(negedge clk);
      check(out_req && out_data == b, $sformatf("byte %0d: got %h want %h", k, out_data, b));
      out_ack = 1; @(negedge clk); out_ack = 0;
      check(!out_req, "req drops after ack");
      repeat ($urandom_range(0, 2 * CPB)) @(negedge clk);
    end
    check(!overrun, "no overrun while bytes are taken");
    // framing error: stop bit low, no byte expected
    send_byte(8'h5A, 1'b0);
    repeat (3 * CPB) @(negedge clk);
    check(!out_req, "framing error gives no byte");
    repeat (10 * CPB) @(negedge clk);
    // overrun: two bytes, none taken
    send_byte(8'h11);
    send_byte(8'h22);
    repeat (CPB) @(negedge clk);
    check(overrun, "overrun flag set");
    check(out_req && out_data == 8'h11, "first byte kept on overrun");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
