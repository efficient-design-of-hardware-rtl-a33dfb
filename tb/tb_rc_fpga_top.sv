// tb_rc_fpga_top: end-to-end test of the reservoir computer at its default
// size (N = 600 nodes, M = 7 input components, Q = 11 outputs, 100 MHz clock,
// 115200 baud), driven only through its pins.
//
// 1. Random mask and readout coefficients are written through the coefficient
//    ports; the dynamics are set to eps = 1.28, beta = -1.09375,
//    phi0 = -3.3125, rho = 1.5.
// 2. Training mode: two input vectors are sent back to back over the serial
//    line; the 2 x 600 node states that come back over the serial line are
//    compared with a double-precision model (masking worked out with integers,
//    reservoir integrated with Heun's method) and must lie within 2^-8.
// 3. The mode is switched and two more vectors are sent; the 11 outputs of
//    each must equal y = W^R x computed here from the node states seen inside
//    the design, and those states must again follow the model.
// Mechanisms counted (each must occur): vectors in each mode, mode switches,
// reservoir stalls on a busy output link, input words taken while the mask is
// still computing (double-buffered input), reservoir steps whose delayed state
// came from an earlier vector (feedback across vectors).
module tb_rc_fpga_top;
  import rc_pkg::*;
  import rc_model_pkg::*;
  localparam int N = 600, M = 7, Q = 11;
  localparam int CPB = 100_000_000 / 115_200;

  logic clk = 0, rst_n = 0;
  logic uart_rxd = 1, uart_txd, rx_overrun, train_mode = 1;
  fix_t eps = 16'sd10486, beta = -16'sd8960, phi0 = -16'sd27136, rho = 16'sd12288;
  logic mask_coef_we = 0;
  logic [9:0] mask_coef_row = 0;
  logic [2:0] mask_coef_col = 0;
  logic [15:0] mask_coef_wdata = 0;
  logic rdo_coef_we = 0;
  logic [9:0] rdo_coef_row = 0;
  logic [3:0] rdo_coef_col = 0;
  logic [15:0] rdo_coef_wdata = 0;

  rc_fpga_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  real worst = 0.0;
  logic signed [15:0] Wm [N][M];
  logic signed [15:0] Wr [Q][N];
  logic [7:0]  rx_bytes[$];          // bytes received from the design
  real         exp_states[$];        // model states, in order
  logic signed [15:0] seen_x[$];     // states seen on the reservoir output
  int n_stall = 0, n_overlap = 0, n_switch = 0, n_train = 0, n_test = 0, n_steps = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Mechanism counters, from inside the design.
  always @(posedge clk) if (rst_n) begin
    if (dut.s_x.req && !dut.s_x.ack) n_stall++;
    if (dut.s_c.req && dut.s_c.ack && dut.u_mask.state != dut.u_mask.S_IDLE) n_overlap++;
    if (dut.s_x.req && dut.s_x.ack) begin
      seen_x.push_back(dut.s_x.data);
      n_steps++;
    end
  end

  // Serial receiver model on uart_txd.
  initial begin
    logic [7:0] b;
    forever begin
      @(negedge uart_txd);
      repeat (CPB / 2) @(posedge clk);
      for (int i = 0; i < 8; i++) begin
        repeat (CPB) @(posedge clk);
        b[i] = uart_txd;
      end
      repeat (CPB) @(posedge clk);
      if (uart_txd !== 1'b1) begin failures++; $display("FAIL: stop bit"); end
      rx_bytes.push_back(b);
    end
  end

  task automatic send_byte(input logic [7:0] b);
    uart_rxd = 1'b0; repeat (CPB) @(negedge clk);
    for (int i = 0; i < 8; i++) begin uart_rxd = b[i]; repeat (CPB) @(negedge clk); end
    uart_rxd = 1'b1; repeat (CPB) @(negedge clk);
  endtask

  // Sends one input vector and extends the model by its N states.
  task automatic send_vec(ref reservoir_model m);
    logic signed [15:0] c[M];
    longint s;
    for (int j = 0; j < M; j++) c[j] = 16'($signed($urandom_range(0, 16384)) - 8192);
    for (int i = 0; i < N; i++) begin
      s = 0;
      for (int j = 0; j < M; j++) s += longint'(Wm[i][j]) * longint'(c[j]);
      s = s >>> 13;
      if (s > 32767) s = 32767;
      if (s < -32768) s = -32768;
      exp_states.push_back(m.step(q2r(16'(s))));
    end
    for (int j = 0; j < M; j++) begin
      send_byte(c[j][15:8]);
      send_byte(c[j][7:0]);
    end
  endtask

  function automatic logic signed [15:0] get_word();
    logic [7:0] hi, lo;
    hi = rx_bytes.pop_front();
    lo = rx_bytes.pop_front();
    return {hi, lo};
  endfunction

  task automatic check_state(input logic signed [15:0] g, input int k);
    real e, d;
    e = exp_states.pop_front();
    d = q2r(g) - e;
    if (d < 0) d = -d;
    if (d > worst) worst = d;
    check(d <= 1.0 / 256.0, $sformatf("state %0d: got %f want %f", k, q2r(g), e));
  endtask

  initial begin
    reservoir_model m;
    repeat (5) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < M; j++) begin
        Wm[i][j] = 16'($signed($urandom_range(0, 4915)) - 2458);      // [-0.3, 0.3]
        mask_coef_we = 1; mask_coef_row = 10'(i); mask_coef_col = 3'(j); mask_coef_wdata = Wm[i][j];
        @(negedge clk);
      end
    mask_coef_we = 0;
    for (int q = 0; q < Q; q++)
      for (int i = 0; i < N; i++) begin
        Wr[q][i] = 16'($signed($urandom_range(0, 328)) - 164);        // [-0.02, 0.02]
        rdo_coef_we = 1; rdo_coef_row = 10'(i); rdo_coef_col = 4'(q); rdo_coef_wdata = Wr[q][i];
        @(negedge clk);
      end
    rdo_coef_we = 0;
    m = new(N, q2r(eps), q2r(beta), q2r(phi0), q2r(rho));

    // Training mode: node states come back over the serial line.
    train_mode = 1;
    send_vec(m);
    send_vec(m);
    n_train = 2;
    wait (rx_bytes.size() == 2 * 2 * N);
    for (int k = 0; k < 2 * N; k++) check_state(get_word(), k);
    seen_x.delete();

    // Normal operation: readout outputs come back.
    @(negedge clk);
    train_mode = 0;
    n_switch++;
    for (int v = 0; v < 2; v++) begin
      send_vec(m);
      wait (rx_bytes.size() == 2 * Q);
      n_test++;
      check(seen_x.size() == N, $sformatf("%0d states seen", seen_x.size()));
      for (int q = 0; q < Q; q++) begin
        longint s;
        logic signed [15:0] y, e;
        s = 0;
        for (int i = 0; i < N; i++) s += longint'(Wr[q][i]) * longint'(seen_x[i]);
        s = s >>> 13;
        if (s > 32767) s = 32767;
        if (s < -32768) s = -32768;
        e = 16'(s);
        y = get_word();
        check(y == e, $sformatf("vector %0d output %0d: got %0d want %0d", v, q, y, e));
      end
      for (int i = 0; i < N; i++) check_state(seen_x[i], 2 * N + v * N + i);
      seen_x.delete();
    end
    repeat (20) @(negedge clk);
    check(rx_bytes.size() == 0, "no extra output bytes");
    check(!rx_overrun, "no serial overrun");

    $display("largest state deviation from the real-valued model %g", worst);
    $display("mechanisms: train vectors %0d, test vectors %0d, mode switches %0d, reservoir stalls %0d, input words during compute %0d, steps %0d",
             n_train, n_test, n_switch, n_stall, n_overlap, n_steps);
    check(n_train > 0, "training mode used");
    check(n_test > 0, "normal mode used");
    check(n_switch > 0, "mode switched");
    check(n_stall > 0, "reservoir stalled on output");
    check(n_overlap > 0, "input taken while mask busy");
    check(n_steps > N, "delayed feedback across vectors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
