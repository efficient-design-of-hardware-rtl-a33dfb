// tb_readout: self-checking test of the readout y = W^R x. Loads random
// weights into a reduced N x Q readout, streams random node states with
// random gaps for several vectors, takes outputs with random back-pressure
// and compares each y_q with the integer dot product worked out here
// (truncated to 13 fraction bits, saturated). With data offered at once it
// checks the rate of one state every 2 clocks.
module tb_readout;
  localparam int N = 9, Q = 4;
  logic clk = 0, rst_n = 0;
  logic [15:0] in_data = 0;
  logic in_req = 0, in_ack;
  logic [15:0] out_data;
  logic out_req, out_ack = 0;
  logic coef_we = 0;
  logic [3:0] coef_row = 0;
  logic [1:0] coef_col = 0;
  logic [15:0] coef_wdata = 0;
  int checks = 0, failures = 0;
  logic signed [15:0] W [Q][N];
  logic signed [15:0] exp_q[$];
  int cyc = 0;

  readout #(.N(N), .Q(Q)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ack <= ($urandom_range(0, 2) != 0);

  always @(posedge clk) if (rst_n && out_req && out_ack) begin
    logic signed [15:0] e;
    e = exp_q.pop_front();
    checks++;
    if (out_data !== e) begin failures++; $display("FAIL: y got %0d want %0d", $signed(out_data), e); end
  end

  task automatic send_vec(input bit big, input bit no_gaps);
    logic signed [15:0] x[N];
    longint s;
    int t0;
    for (int i = 0; i < N; i++) x[i] = big ? 16'($urandom) : 16'($signed($urandom_range(0, 16384)) - 8192);
    for (int q = 0; q < Q; q++) begin
      s = 0;
      for (int i = 0; i < N; i++) s += longint'(W[q][i]) * longint'(x[i]);
      s = s >>> 13;
      if (s > 32767) s = 32767;
      if (s < -32768) s = -32768;
      exp_q.push_back(16'(s));
    end
    t0 = cyc;
    for (int i = 0; i < N; i++) begin
      if (!no_gaps) repeat ($urandom_range(0, 2)) @(negedge clk);
      in_data = x[i]; in_req = 1;
      @(posedge clk);
      while (!in_ack) @(posedge clk);
      @(negedge clk);
      in_req = 0;
    end
    if (no_gaps) begin
      checks++;
      if (cyc - t0 > 2 * N + 2) begin failures++; $display("FAIL: %0d clocks for %0d states", cyc - t0, N); end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int q = 0; q < Q; q++)
      for (int i = 0; i < N; i++) begin
        W[q][i] = 16'($signed($urandom_range(0, 16384)) - 8192);
        coef_we = 1; coef_row = 4'(i); coef_col = 2'(q); coef_wdata = W[q][i];
        @(negedge clk);
      end
    coef_we = 0;
    for (int v = 0; v < 6; v++) begin
      send_vec(v == 3, v == 4);
      wait (exp_q.size() == 0);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
