// bdsa -- BenDi systolic array: N x N BPEs running the DiP dataflow.
//
// Weight stationary. Weights are shifted into the array from the top, one
// row per cycle while w_load is high, and pass straight down the columns;
// the row presented last ends up in row 0. Partial sums flow down the
// columns and leave at the bottom. Activations are not skewed: a whole input
// row enters the top row at once and then moves diagonally, from BPE (i,j)
// to BPE (i+1, j-1), with the left-most column wrapping round to the
// right-most column of the next row. BPE (i,j) therefore sees input element
// (i+j) mod N, and computes column j of X*W when it holds the permuted
// weight W[(i+j) mod N][j]. The host is expected to supply weights in that
// permuted order, as in the paper's mapping. All of this is the paper's DiP
// dataflow; the weight ordering convention (last row loaded sits on top) is
// this design's choice.
//
// Because activations and partial sums both advance one row per cycle, every
// column of an output row leaves the bottom in the same cycle: no input or
// output synchronisation buffers are needed.
//
// Timing: an input row presented with x_valid in cycle t appears on
// out_psum with out_valid in cycle t+N+1 (N rows plus the input register),
// with the same x_tag on out_tag. One row can enter every cycle.
// x_fwd* is the top row's activation register (the input row delayed by one
// cycle) so a neighbouring array can share this array's activations.
// A weight load must not overlap a stream whose results are wanted; the
// paper gives no rule, this design leaves it to the host.
module bdsa
  import bendi_pkg::*;
#(
  parameter int unsigned N     = ARRAY_N,
  parameter int unsigned TAG_W = 9
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // weight loading
  input  logic                            w_load,
  input  bp9_t  [N-1:0]                   w_row,
  // activation rows
  input  logic                            x_valid,
  input  logic  [TAG_W-1:0]               x_tag,
  input  bp9_t  [N-1:0]                   x_row,
  // activations forwarded to a neighbouring array (one cycle later)
  output logic                            x_fwd_valid,
  output logic  [TAG_W-1:0]               x_fwd_tag,
  output bp9_t  [N-1:0]                   x_fwd,
  // output rows
  output logic                            out_valid,
  output logic  [TAG_W-1:0]               out_tag,
  output logic signed [N-1:0][PSUM_W-1:0] out_psum
);
  bp9_t               w_d   [N][N];  // weight leaving BPE (i,j)
  bp9_t               x_d   [N][N];  // activation leaving BPE (i,j)
  logic signed [PSUM_W-1:0] ps_d [N][N];  // partial sum leaving BPE (i,j)

  for (genvar i = 0; i < N; i++) begin : g_row
    for (genvar j = 0; j < N; j++) begin : g_col
      bp9_t               w_i, x_i;
      logic signed [PSUM_W-1:0] ps_i;
      if (i == 0) begin : g_top
        assign w_i  = w_row[j];
        assign x_i  = x_row[j];
        assign ps_i = '0;
      end else begin : g_inner
        assign w_i  = w_d[i-1][j];
        assign x_i  = x_d[i-1][(j+1) % N];   // diagonal, wrapping at column 0
        assign ps_i = ps_d[i-1][j];
      end
      bpe u_bpe (
        .clk, .rst_n,
        .w_load,
        .w_in    (w_i),
        .w_out   (w_d[i][j]),
        .x_in    (x_i),
        .x_out   (x_d[i][j]),
        .psum_in (ps_i),
        .psum_out(ps_d[i][j])
      );
    end
    for (genvar j = 0; j < N; j++) begin : g_out
      if (i == N-1) begin : g_bottom
        assign out_psum[j] = ps_d[N-1][j];
      end
      if (i == 0) begin : g_fwd
        assign x_fwd[j] = x_d[0][j];
      end
    end
  end

  // valid/tag travel alongside the data: N+1 stages
  logic [N:0]           vld_q;
  logic [TAG_W-1:0]     tag_q [N+1];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      vld_q <= '0;
      for (int k = 0; k <= N; k++) tag_q[k] <= '0;
    end else begin
      vld_q    <= {vld_q[N-1:0], x_valid};
      tag_q[0] <= x_tag;
      for (int k = 1; k <= N; k++) tag_q[k] <= tag_q[k-1];
    end
  end

  assign x_fwd_valid = vld_q[0];
  assign x_fwd_tag   = tag_q[0];
  assign out_valid   = vld_q[N];
  assign out_tag     = tag_q[N];
endmodule
