// accumulator -- binary accumulation of BDSA output rows.
//
// The BDSAs produce one 16-wide row of partial sums per cycle. A layer whose
// reduction dimension is larger than one array is split into tiles: either
// over time (the same array is reloaded with the next weight tile and the
// same output rows are streamed again) or over arrays (several arrays work
// on different reduction tiles of the same output rows at once). The
// accumulator handles both:
//   * one bank per BDSA, DEPTH rows of COLS words each. A valid row from
//     array a is written to bank a at wr_addr[a]: overwritten when
//     wr_first[a] is set, otherwise added to what is stored (temporal
//     accumulation). Each bank does one read-modify-write per cycle, so all
//     arrays can write every cycle, in any cycle alignment.
//   * on read-out, the selected banks (rd_mask) are summed column by column,
//     which combines reduction tiles that ran on different arrays.
// The paper names the accumulator and says arrays work in parallel on tiles;
// the bank organisation, word width, depth and read-out summing are this
// design's choices. Words wrap on overflow (no saturation).
//
// Timing: a write takes effect at the next clock edge. rd_data/rd_valid
// appear one cycle after rd_en. A read in the same cycle as a write to the
// same row returns the value before the write.
module accumulator
  import bendi_pkg::*;
#(
  parameter int unsigned N_ARR = N_ARRAYS,
  parameter int unsigned COLS  = ARRAY_N,
  parameter int unsigned IN_W  = PSUM_W,
  parameter int unsigned W     = ACC_W,
  parameter int unsigned DEPTH = ACC_DEPTH,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned OUT_W = W + $clog2(N_ARR)
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // one write port per BDSA
  input  logic        [N_ARR-1:0]           wr_valid,
  input  logic        [N_ARR-1:0][AW-1:0]   wr_addr,
  input  logic        [N_ARR-1:0]           wr_first,
  input  logic signed [N_ARR-1:0][COLS-1:0][IN_W-1:0] wr_data,
  // read-out
  input  logic                              rd_en,
  input  logic        [AW-1:0]              rd_addr,
  input  logic        [N_ARR-1:0]           rd_mask,
  output logic                              rd_valid,
  output logic signed [COLS-1:0][OUT_W-1:0] rd_data
);
  typedef logic signed [COLS-1:0][W-1:0] row_t;

  row_t rd_rows [N_ARR];

  for (genvar a = 0; a < N_ARR; a++) begin : g_bank
    row_t mem [DEPTH];
    row_t old_row, new_row;

    assign old_row = mem[wr_addr[a]];

    always_comb begin
      for (int c = 0; c < COLS; c++) begin
        if (wr_first[a]) new_row[c] = W'(signed'(wr_data[a][c]));
        else             new_row[c] = old_row[c] + W'(signed'(wr_data[a][c]));
      end
    end

    always_ff @(posedge clk) begin
      if (wr_valid[a]) mem[wr_addr[a]] <= new_row;
    end

    assign rd_rows[a] = mem[rd_addr];
  end

  logic signed [COLS-1:0][OUT_W-1:0] sum;
  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      sum[c] = '0;
      for (int a = 0; a < N_ARR; a++)
        if (rd_mask[a]) sum[c] = sum[c] + OUT_W'(signed'(rd_rows[a][c]));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_valid <= 1'b0;
      rd_data  <= '0;
    end else begin
      rd_valid <= rd_en;
      if (rd_en) rd_data <= sum;
    end
  end
endmodule
