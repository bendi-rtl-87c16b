// bendi_top -- BenDi quasi-stochastic systolic architecture.
//
// Four BenDi systolic arrays (BDSAs) of 16x16 BP9 processing elements, an
// accumulator and a host interface. Multiplication happens in the
// quasi-stochastic Bent-Pyramid domain inside the BPEs; everything from the
// BPE adders on is binary.
//
// The host gives each array its own command every cycle (see
// bendi_interface), so arrays can run different layers at once, for example
// one array being loaded with the next layer's weights while others stream.
//
// Array numbering: arrays 0 .. N_ARR/2-1 sit next to the interface (the
// right-hand column of the paper's floor plan); array a + N_ARR/2 is the
// left-hand partner of array a. The paper draws a link from each right-hand
// array to its left-hand partner; here it carries activations: with
// share_act[a] set, array a+N_ARR/2 takes array a's activation rows (and
// their tags) one cycle late instead of its own lane from the interface, so
// the pair acts as one 16x32 array over a shared input (different output
// columns, same rows). All four arrays also have their own lane from the
// interface, so they can run independent tiles in parallel; that, the data
// carried by the link and the command set are this design's choices.
//
// Each array's output rows go, with their tags (row address and "first"
// flag), to that array's bank in the accumulator. The host reads finished
// rows back through the interface, summing the banks of arrays that worked
// on different reduction tiles of the same outputs.
//
// Timing: a stream command presented in cycle t writes the accumulator at
// the end of cycle t+1+N+1 (t+N+3 for a left array fed through the link).
// A read request in cycle t returns data in cycle t+2.
module bendi_top
  import bendi_pkg::*;
#(
  parameter int unsigned N     = ARRAY_N,
  parameter int unsigned N_ARR = N_ARRAYS,
  parameter int unsigned DEPTH = ACC_DEPTH,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned TAG_W = AW + 1,
  localparam int unsigned OUT_W = ACC_W + $clog2(N_ARR),
  localparam int unsigned HALF  = N_ARR / 2
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // host commands, one per array
  input  op_e         [N_ARR-1:0]        host_op,
  input  logic        [N_ARR-1:0][AW-1:0] host_addr,
  input  logic        [N_ARR-1:0]        host_first,
  input  bp9_t        [N_ARR-1:0][N-1:0] host_data,
  // activation sharing from right-hand to left-hand arrays
  input  logic        [HALF-1:0]         share_act,
  // read-out
  input  logic                           host_rd_en,
  input  logic        [AW-1:0]           host_rd_addr,
  input  logic        [N_ARR-1:0]        host_rd_mask,
  output logic                           host_rd_valid,
  output logic signed [N-1:0][OUT_W-1:0] host_rd_data
);
  logic        [N_ARR-1:0]             w_load;
  bp9_t        [N_ARR-1:0][N-1:0]      w_row;
  logic        [N_ARR-1:0]             if_x_valid;
  logic        [N_ARR-1:0][TAG_W-1:0]  if_x_tag;
  bp9_t        [N_ARR-1:0][N-1:0]      if_x_row;

  logic        [N_ARR-1:0]             x_valid;
  logic        [N_ARR-1:0][TAG_W-1:0]  x_tag;
  bp9_t        [N_ARR-1:0][N-1:0]      x_row;

  logic        [N_ARR-1:0]             fwd_valid;
  logic        [N_ARR-1:0][TAG_W-1:0]  fwd_tag;
  bp9_t        [N_ARR-1:0][N-1:0]      fwd_row;

  logic        [N_ARR-1:0]             out_valid;
  logic        [N_ARR-1:0][TAG_W-1:0]  out_tag;
  logic signed [N_ARR-1:0][N-1:0][PSUM_W-1:0] out_psum;

  logic        [N_ARR-1:0][AW-1:0]     wr_addr;
  logic        [N_ARR-1:0]             wr_first;

  logic                                acc_rd_en;
  logic        [AW-1:0]                acc_rd_addr;
  logic        [N_ARR-1:0]             acc_rd_mask;
  logic                                acc_rd_valid;
  logic signed [N-1:0][OUT_W-1:0]      acc_rd_data;

  bendi_interface #(.N(N), .N_ARR(N_ARR), .DEPTH(DEPTH)) u_if (
    .clk, .rst_n,
    .host_op, .host_addr, .host_first, .host_data,
    .host_rd_en, .host_rd_addr, .host_rd_mask, .host_rd_valid, .host_rd_data,
    .arr_w_load (w_load),
    .arr_w_row  (w_row),
    .arr_x_valid(if_x_valid),
    .arr_x_tag  (if_x_tag),
    .arr_x_row  (if_x_row),
    .acc_rd_en, .acc_rd_addr, .acc_rd_mask, .acc_rd_valid, .acc_rd_data
  );

  // activation source of each array
  for (genvar a = 0; a < N_ARR; a++) begin : g_src
    if (a >= HALF) begin : g_left
      assign x_valid[a] = share_act[a-HALF] ? fwd_valid[a-HALF] : if_x_valid[a];
      assign x_tag[a]   = share_act[a-HALF] ? fwd_tag[a-HALF]   : if_x_tag[a];
      assign x_row[a]   = share_act[a-HALF] ? fwd_row[a-HALF]   : if_x_row[a];
    end else begin : g_right
      assign x_valid[a] = if_x_valid[a];
      assign x_tag[a]   = if_x_tag[a];
      assign x_row[a]   = if_x_row[a];
    end
  end

  for (genvar a = 0; a < N_ARR; a++) begin : g_arr
    bdsa #(.N(N), .TAG_W(TAG_W)) u_bdsa (
      .clk, .rst_n,
      .w_load     (w_load[a]),
      .w_row      (w_row[a]),
      .x_valid    (x_valid[a]),
      .x_tag      (x_tag[a]),
      .x_row      (x_row[a]),
      .x_fwd_valid(fwd_valid[a]),
      .x_fwd_tag  (fwd_tag[a]),
      .x_fwd      (fwd_row[a]),
      .out_valid  (out_valid[a]),
      .out_tag    (out_tag[a]),
      .out_psum   (out_psum[a])
    );
    assign wr_addr[a]  = out_tag[a][TAG_W-1:1];
    assign wr_first[a] = out_tag[a][0];
  end

  accumulator #(.N_ARR(N_ARR), .COLS(N), .IN_W(PSUM_W), .W(ACC_W), .DEPTH(DEPTH)) u_acc (
    .clk, .rst_n,
    .wr_valid(out_valid),
    .wr_addr,
    .wr_first,
    .wr_data (out_psum),
    .rd_en   (acc_rd_en),
    .rd_addr (acc_rd_addr),
    .rd_mask (acc_rd_mask),
    .rd_valid(acc_rd_valid),
    .rd_data (acc_rd_data)
  );
endmodule
