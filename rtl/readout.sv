// readout: the linear output layer, y = W^R x.
//
// The N node states x_1 .. x_N of one input vector arrive one at a time on
// in_*. Q multiply-accumulate units work side by side: when x_i is taken,
// every output q adds W^R[q][i] * x_i to its 48-bit accumulator. The weights
// sit in Q column memories of N words; the row for the next state is read
// ahead, so each state costs two clocks (one to take it, one for the next
// row to be read). After x_N the Q sums are truncated to Q3.13, saturated,
// and sent one by one on out_* (y_1 first); the accumulators are then cleared
// for the next vector. Weights are written through coef_*; they come from
// ridge regression on the host.
//
// The readout as a product of a trained matrix with the state vector is the
// original design's; the parallel MAC structure, the output order, Q = 11 and
// the writable weight memory are this design's choices.
module readout
  import rc_pkg::*;
#(
  parameter int unsigned N = 600,
  parameter int unsigned Q = 11,
  localparam int unsigned RW = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned QW = (Q > 1) ? $clog2(Q) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [15:0]   in_data,
  input  logic          in_req,
  output logic          in_ack,
  output logic [15:0]   out_data,
  output logic          out_req,
  input  logic          out_ack,
  input  logic          coef_we,
  input  logic [RW-1:0] coef_row,
  input  logic [QW-1:0] coef_col,
  input  logic [15:0]   coef_wdata
);
  typedef enum logic {S_ACC, S_OUT} state_t;
  state_t state;

  logic [RW-1:0]      idx;
  logic               w_valid;
  logic [QW-1:0]      oq;
  fix_t               w   [Q];
  logic signed [47:0] acc [Q];

  for (genvar q = 0; q < Q; q++) begin : g_col
    fix_t mem [N];
    always_ff @(posedge clk) begin
      if (coef_we && coef_col == QW'(q)) mem[coef_row] <= fix_t'(coef_wdata);
      w[q] <= mem[idx];
    end
  end

  assign in_ack   = (state == S_ACC) && w_valid;
  assign out_req  = (state == S_OUT);
  assign out_data = sat_fix(acc[oq] >>> FRAC_W);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_ACC;
      idx     <= '0;
      w_valid <= 1'b0;
      oq      <= '0;
      for (int q = 0; q < Q; q++) acc[q] <= '0;
    end else begin
      w_valid <= 1'b1;
      unique case (state)
        S_ACC: if (in_req && in_ack) begin
          for (int q = 0; q < Q; q++)
            acc[q] <= acc[q] + 48'(w[q]) * 48'(signed'(in_data));
          w_valid <= 1'b0;
          if (idx == RW'(N - 1)) begin
            idx   <= '0;
            oq    <= '0;
            state <= S_OUT;
          end else idx <= idx + 1'b1;
        end
        S_OUT: if (out_ack) begin
          if (oq == QW'(Q - 1)) begin
            for (int q = 0; q < Q; q++) acc[q] <= '0;
            state <= S_ACC;
          end else oq <= oq + 1'b1;
        end
        default: state <= S_ACC;
      endcase
    end
  end
endmodule
