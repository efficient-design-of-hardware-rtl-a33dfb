// rc_fpga_top: standalone FPGA reservoir computer.
//
// Data path (one req/ack word link between each pair of blocks):
//
//   uart_rxd -> uart_rx -> byte_to_word -> input_mask -> reservoir -+-> readout --+
//                                                                    |             |
//                                                                    +-(training)--+-> word_to_byte -> uart_tx -> uart_txd
//
// The host sends each input vector as M compressed components (two bytes per
// Q3.13 word, high byte first). input_mask expands it to N masked samples,
// the reservoir turns each sample into the state of one virtual node, and in
// normal operation readout reduces the N states to Q outputs, which go back
// to the host as 2*Q bytes. With train_mode high the readout is bypassed: all
// N node states of each vector are sent to the host, which computes the
// readout weights from them. train_mode must only change while no vector is
// in flight. The three stages run concurrently, each waiting on its links.
//
// Dynamics parameters (eps = h/tau, beta, phi0, rho) and the mask and readout
// coefficient memories are set through top-level ports; how a host sets them
// is left to the system around this module. rx_overrun reports a byte lost on
// the serial input (the host sent faster than the design consumed).
//
// Timing: the reservoir needs 4 clocks per node; with the default 100 MHz
// clock and 115200 baud a vector of M = 7 words takes about 1.2 ms to arrive,
// its N = 600 nodes 24 us to compute, and, in training mode, 104 ms to send.
//
// The pipeline of masking, delay dynamics and readout, the host link over a
// UART, the 16-bit fixed point and the training mode without readout follow
// the original design; the clock, baud rate, byte order, Q = 11 and the
// configuration ports are this design's choices.
module rc_fpga_top
  import rc_pkg::*;
#(
  parameter int unsigned N      = 600,
  parameter int unsigned M      = 7,
  parameter int unsigned Q      = 11,
  parameter int unsigned CLK_HZ = 100_000_000,
  parameter int unsigned BAUD   = 115_200,
  localparam int unsigned RW  = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned MCW = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned QW  = (Q > 1) ? $clog2(Q) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  // serial link to the host
  input  logic           uart_rxd,
  output logic           uart_txd,
  output logic           rx_overrun,
  // 1: send node states (training), 0: send readout outputs
  input  logic           train_mode,
  // reservoir dynamics, Q3.13
  input  fix_t           eps,
  input  fix_t           beta,
  input  fix_t           phi0,
  input  fix_t           rho,
  // input mask coefficients W[row][col]
  input  logic           mask_coef_we,
  input  logic [RW-1:0]  mask_coef_row,
  input  logic [MCW-1:0] mask_coef_col,
  input  logic [15:0]    mask_coef_wdata,
  // readout weights W^R[col][row]
  input  logic           rdo_coef_we,
  input  logic [RW-1:0]  rdo_coef_row,
  input  logic [QW-1:0]  rdo_coef_col,
  input  logic [15:0]    rdo_coef_wdata
);
  rc_stream_if #(.W(8))  s_rxb  (.clk(clk), .rst_n(rst_n));   // received bytes
  rc_stream_if #(.W(16)) s_c    (.clk(clk), .rst_n(rst_n));   // input components
  rc_stream_if #(.W(16)) s_u    (.clk(clk), .rst_n(rst_n));   // masked samples
  rc_stream_if #(.W(16)) s_x    (.clk(clk), .rst_n(rst_n));   // node states
  rc_stream_if #(.W(16)) s_xr   (.clk(clk), .rst_n(rst_n));   // states to readout
  rc_stream_if #(.W(16)) s_y    (.clk(clk), .rst_n(rst_n));   // readout outputs
  rc_stream_if #(.W(16)) s_out  (.clk(clk), .rst_n(rst_n));   // words to host
  rc_stream_if #(.W(8))  s_txb  (.clk(clk), .rst_n(rst_n));   // bytes to host

  uart_rx #(.CLK_HZ(CLK_HZ), .BAUD(BAUD)) u_rx (
    .clk(clk), .rst_n(rst_n), .rxd(uart_rxd),
    .out_data(s_rxb.data), .out_req(s_rxb.req), .out_ack(s_rxb.ack),
    .overrun(rx_overrun)
  );

  byte_to_word u_b2w (
    .clk(clk), .rst_n(rst_n),
    .in_data(s_rxb.data), .in_req(s_rxb.req), .in_ack(s_rxb.ack),
    .out_data(s_c.data), .out_req(s_c.req), .out_ack(s_c.ack)
  );

  input_mask #(.N(N), .M(M)) u_mask (
    .clk(clk), .rst_n(rst_n),
    .in_data(s_c.data), .in_req(s_c.req), .in_ack(s_c.ack),
    .out_data(s_u.data), .out_req(s_u.req), .out_ack(s_u.ack),
    .coef_we(mask_coef_we), .coef_row(mask_coef_row),
    .coef_col(mask_coef_col), .coef_wdata(mask_coef_wdata)
  );

  reservoir #(.N(N)) u_res (
    .clk(clk), .rst_n(rst_n),
    .eps(eps), .beta(beta), .phi0(phi0), .rho(rho),
    .in_data(s_u.data), .in_req(s_u.req), .in_ack(s_u.ack),
    .out_data(s_x.data), .out_req(s_x.req), .out_ack(s_x.ack)
  );

  // Mode switch: states go either to the readout or straight to the host.
  assign s_xr.data = s_x.data;
  assign s_xr.req  = s_x.req && !train_mode;

  readout #(.N(N), .Q(Q)) u_rdo (
    .clk(clk), .rst_n(rst_n),
    .in_data(s_xr.data), .in_req(s_xr.req), .in_ack(s_xr.ack),
    .out_data(s_y.data), .out_req(s_y.req), .out_ack(s_y.ack),
    .coef_we(rdo_coef_we), .coef_row(rdo_coef_row),
    .coef_col(rdo_coef_col), .coef_wdata(rdo_coef_wdata)
  );

  always_comb begin
    if (train_mode) begin
      s_out.data = s_x.data;
      s_out.req  = s_x.req;
      s_x.ack    = s_out.ack;
      s_y.ack    = 1'b0;
    end else begin
      s_out.data = s_y.data;
      s_out.req  = s_y.req;
      s_x.ack    = s_xr.ack;
      s_y.ack    = s_out.ack;
    end
  end

  word_to_byte u_w2b (
    .clk(clk), .rst_n(rst_n),
    .in_data(s_out.data), .in_req(s_out.req), .in_ack(s_out.ack),
    .out_data(s_txb.data), .out_req(s_txb.req), .out_ack(s_txb.ack)
  );

  uart_tx #(.CLK_HZ(CLK_HZ), .BAUD(BAUD)) u_tx (
    .clk(clk), .rst_n(rst_n),
    .in_data(s_txb.data), .in_req(s_txb.req), .in_ack(s_txb.ack),
    .txd(uart_txd)
  );
endmodule
