// input_mask: input masking of the reservoir computer, u = W * c.
//
// Each input vector c holds M compressed components (the host has already
// projected the raw features onto M principal components). The block
// multiplies it by the fused matrix W = W^I * W_c^T (N x M: random mask times
// PCA decompression) and emits the N products u_1 .. u_N in order; u_i is the
// input held at the reservoir during virtual node i.
//
// Structure: M column memories of N coefficients, read one row per step; M
// multipliers and one adder form the dot product of a row with the current
// vector in a single clock. Components arrive one word at a time on in_*;
// they fill a second register bank while the current vector is being
// processed, so a new vector can be received during computation and started
// as soon as the last u of the previous one has been taken. Coefficients are
// written through coef_* (any time; rows in use must not be changed).
//
// Timing: one u every 3 clocks when out_ack is held high; a vector takes 3*N
// clocks. Words are Q3.13 (see rc_pkg); dot products are truncated to 13
// fraction bits and saturated.
//
// The fused single matrix-vector product on multiply-accumulate logic follows
// the original design; the parallel-multiplier row engine, the double input
// bank and the writable coefficient memory (the original speaks of a
// read-only memory whose contents come from the data) are this design's
// choices.
module input_mask
  import rc_pkg::*;
#(
  parameter int unsigned N = 600,
  parameter int unsigned M = 7,
  localparam int unsigned RW = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned CW = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // compressed input components c_1 .. c_M, one per transfer
  input  logic [15:0]   in_data,
  input  logic          in_req,
  output logic          in_ack,
  // masked samples u_1 .. u_N
  output logic [15:0]   out_data,
  output logic          out_req,
  input  logic          out_ack,
  // coefficient write port: W[coef_row][coef_col] <= coef_wdata
  input  logic          coef_we,
  input  logic [RW-1:0] coef_row,
  input  logic [CW-1:0] coef_col,
  input  logic [15:0]   coef_wdata
);
  typedef enum logic [1:0] {S_IDLE, S_READ, S_CALC, S_OUT} state_t;
  state_t state;

  fix_t          inbuf [M];
  fix_t          work  [M];
  logic [CW:0]   in_cnt;
  logic [RW-1:0] row;
  fix_t          rdata [M];

  // Column memories, one per input component.
  for (genvar j = 0; j < M; j++) begin : g_col
    fix_t mem [N];
    always_ff @(posedge clk) begin
      if (coef_we && coef_col == CW'(j)) mem[coef_row] <= fix_t'(coef_wdata);
      rdata[j] <= mem[row];
    end
  end

  // Dot product of the row just read with the working vector.
  logic signed [47:0] dot;
  always_comb begin
    dot = '0;
    for (int j = 0; j < M; j++) dot += 48'(rdata[j]) * 48'(work[j]);
  end

  logic start;
  assign in_ack = (in_cnt != (CW+1)'(M));
  assign start  = (state == S_IDLE) && !in_ack;   // a full vector is waiting

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      in_cnt   <= '0;
      row      <= '0;
      out_data <= '0;
      out_req  <= 1'b0;
      for (int j = 0; j < M; j++) begin
        inbuf[j] <= '0;
        work[j]  <= '0;
      end
    end else begin
      if (in_req && in_ack) begin
        inbuf[in_cnt[CW-1:0]] <= fix_t'(in_data);
        in_cnt <= in_cnt + 1'b1;
      end
      unique case (state)
        S_IDLE: if (start) begin
          for (int j = 0; j < M; j++) work[j] <= inbuf[j];
          in_cnt <= '0;
          row    <= '0;
          state  <= S_READ;
        end
        S_READ: state <= S_CALC;     // row address goes to the memories
        S_CALC: begin
          out_data <= sat_fix(dot >>> FRAC_W);
          out_req  <= 1'b1;
          state    <= S_OUT;
        end
        S_OUT: if (out_ack) begin
          out_req <= 1'b0;
          if (row == RW'(N - 1)) state <= S_IDLE;
          else begin
            row   <= row + 1'b1;
            state <= S_READ;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
