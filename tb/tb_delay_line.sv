// tb_delay_line: self-checking test of the delay FIFO. After the clearing
// phase (ready must rise after DEPTH clocks) random values are shifted in at
// random times; dout must always equal the value shifted in DEPTH shifts
// earlier, zero for the first DEPTH shifts.
module tb_delay_line;
  import rc_pkg::*;
  localparam int DEPTH = 7;
  logic clk = 0, rst_n = 0, shift = 0, ready;
  fix_t din = 0, dout;
  int checks = 0, failures = 0;
  fix_t hist[$];
  int t_ready = 0;

  delay_line #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) hist.push_back('0);
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (!ready) begin @(negedge clk); t_ready++; end
    checks++;
    if (t_ready != DEPTH) begin failures++; $display("FAIL: ready after %0d clocks", t_ready); end
    for (int k = 0; k < 200; k++) begin
      checks++;
      if (dout !== hist[0]) begin failures++; $display("FAIL: shift %0d dout %0d want %0d", k, dout, hist[0]); end
      din = fix_t'($urandom);
      shift = 1;
      @(negedge clk);
      shift = 0;
      void'(hist.pop_front());
      hist.push_back(din);
      repeat ($urandom_range(0, 2)) begin
        checks++;
        if (dout !== hist[0]) begin failures++; $display("FAIL: idle dout"); end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
