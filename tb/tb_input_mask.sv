// tb_input_mask: self-checking test of the masking matrix-vector product.
// Fills the coefficient memory of a reduced N x M mask with random Q3.13
// values, sends random input vectors (with random gaps, and the next vector
// while the previous one is still being computed) and takes the outputs with
// random back-pressure. Every u_i is compared with sum_j W[i][j] c_j worked
// out here with integer arithmetic (truncated to 13 fraction bits,
// saturated). With out_ack held high it also checks the rate: one u every 3
// clocks.
module tb_input_mask;
  localparam int N = 12, M = 3;
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
  logic signed [15:0] W [N][M];
  logic signed [15:0] exp_q[$];
  bit free_run = 0;
  int last_t = -1, cyc = 0, gaps_ok = 0, gaps_bad = 0, n_out = 0;

  input_mask #(.N(N), .M(M)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [15:0] ref_dot(input int i, input logic signed [15:0] c[M]);
    longint s = 0;
    for (int j = 0; j < M; j++) s += longint'(W[i][j]) * longint'(c[j]);
    s = s >>> 13;
    if (s > 32767) s = 32767;
    if (s < -32768) s = -32768;
    return 16'(s);
  endfunction

  always @(negedge clk) out_ack <= free_run ? 1'b1 : ($urandom_range(0, 3) != 0);

  always @(posedge clk) begin
    cyc++;
    if (rst_n && out_req && out_ack) begin
      logic signed [15:0] e;
      e = exp_q.pop_front();
      checks++;
      if (out_data !== e) begin failures++; $display("FAIL: u got %0d want %0d", $signed(out_data), e); end
      // gaps inside a vector must be 3 clocks; the first output of a vector is not timed
      if (free_run && last_t >= 0 && (n_out % N) != 0) begin
        if (cyc - last_t == 3) gaps_ok++; else gaps_bad++;
      end
      last_t = cyc;
      n_out++;
    end
  end

  task automatic send_vec(input bit big);
    logic signed [15:0] c[M];
    for (int j = 0; j < M; j++) c[j] = big ? 16'($urandom) : 16'($signed($urandom_range(0, 16384)) - 8192);
    for (int i = 0; i < N; i++) exp_q.push_back(ref_dot(i, c));
    for (int j = 0; j < M; j++) begin
      repeat ($urandom_range(0, 2)) @(negedge clk);
      in_data = c[j]; in_req = 1;
      @(posedge clk);
      while (!in_ack) @(posedge clk);
      @(negedge clk);
      in_req = 0;
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < M; j++) begin
        W[i][j] = 16'($signed($urandom_range(0, 8192)) - 4096);   // [-0.5, 0.5]
        coef_we = 1; coef_row = 4'(i); coef_col = 2'(j); coef_wdata = W[i][j];
        @(negedge clk);
      end
    coef_we = 0;
    for (int v = 0; v < 8; v++) send_vec(v == 5);   // vector 5: full-range, saturates
    wait (exp_q.size() == 0);
    repeat (5) @(negedge clk);
    free_run = 1;
    last_t = -1;
    n_out = 0;
    for (int v = 0; v < 2; v++) send_vec(0);
    wait (exp_q.size() == 0);
    repeat (5) @(negedge clk);
    checks++;
    if (gaps_bad != 0 || gaps_ok != 2 * (N - 1)) begin
      failures++; $display("FAIL: rate, %0d gaps of 3 clocks, %0d other", gaps_ok, gaps_bad);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
