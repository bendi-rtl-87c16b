// bendi_interface -- host interface of the BenDi architecture.
//
// The host gives every array its own command each cycle, so one array can
// be loaded with the next layer's weights while others stream (the source
// hides a layer's latency by pre-loading the next one this way).
// host_op[a] = OP_LOAD_W shifts weight row host_data[a] into array a;
// OP_STREAM_X presents activation row host_data[a] to array a, with the
// accumulator row address host_addr[a] and a "first" flag host_first[a]
// (overwrite rather than add) that travel with the row through the array as
// its tag; OP_NOP leaves the array alone. Read requests for the accumulator
// are passed on with the banks to be summed, and the summed row comes back
// on host_rd_data.
// The paper only names the interface block; the command set, the per-array
// data lanes and the tag are this design's choices. Weights must be sent in
// the DiP permuted order (see bdsa) and in BP9, which the paper's software
// flow produces.
//
// Timing: commands and read requests are registered once here, so an array
// sees a command one cycle after the host presents it. Read data returns
// combinationally from the accumulator's output register (two cycles after
// host_rd_en in total), so host_rd_* are wired straight through. There is no
// back-pressure: the arrays accept a row every cycle.
module bendi_interface
  import bendi_pkg::*;
#(
  parameter int unsigned N     = ARRAY_N,
  parameter int unsigned N_ARR = N_ARRAYS,
  parameter int unsigned DEPTH = ACC_DEPTH,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned TAG_W = AW + 1,
  localparam int unsigned OUT_W = ACC_W + $clog2(N_ARR)
) (
  input  logic                                clk,
  input  logic                                rst_n,
  // host commands, one per array
  input  op_e         [N_ARR-1:0]             host_op,
  input  logic        [N_ARR-1:0][AW-1:0]     host_addr,
  input  logic        [N_ARR-1:0]             host_first,
  input  bp9_t        [N_ARR-1:0][N-1:0]      host_data,
  // host read-out
  input  logic                                host_rd_en,
  input  logic        [AW-1:0]                host_rd_addr,
  input  logic        [N_ARR-1:0]             host_rd_mask,
  output logic                                host_rd_valid,
  output logic signed [N-1:0][OUT_W-1:0]      host_rd_data,
  // to the arrays
  output logic        [N_ARR-1:0]             arr_w_load,
  output bp9_t        [N_ARR-1:0][N-1:0]      arr_w_row,
  output logic        [N_ARR-1:0]             arr_x_valid,
  output logic        [N_ARR-1:0][TAG_W-1:0]  arr_x_tag,
  output bp9_t        [N_ARR-1:0][N-1:0]      arr_x_row,
  // to / from the accumulator
  output logic                                acc_rd_en,
  output logic        [AW-1:0]                acc_rd_addr,
  output logic        [N_ARR-1:0]             acc_rd_mask,
  input  logic                                acc_rd_valid,
  input  logic signed [N-1:0][OUT_W-1:0]      acc_rd_data
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      arr_w_load  <= '0;
      arr_x_valid <= '0;
      arr_x_tag   <= '0;
      arr_w_row   <= '0;
      arr_x_row   <= '0;
      acc_rd_en   <= 1'b0;
      acc_rd_addr <= '0;
      acc_rd_mask <= '0;
    end else begin
      for (int a = 0; a < N_ARR; a++) begin
        arr_w_load[a]  <= (host_op[a] == OP_LOAD_W);
        arr_x_valid[a] <= (host_op[a] == OP_STREAM_X);
        if (host_op[a] == OP_LOAD_W) arr_w_row[a] <= host_data[a];
        if (host_op[a] == OP_STREAM_X) begin
          arr_x_row[a] <= host_data[a];
          arr_x_tag[a] <= {host_addr[a], host_first[a]};
        end
      end
      acc_rd_en   <= host_rd_en;
      acc_rd_addr <= host_rd_addr;
      acc_rd_mask <= host_rd_mask;
    end
  end

  assign host_rd_valid = acc_rd_valid;
  assign host_rd_data  = acc_rd_data;

  // Every command must be one of the defined operations, and a read must
  // select at least one bank.
  for (genvar a = 0; a < N_ARR; a++) begin : g_chk
    a_legal_op: assert property (@(posedge clk) disable iff (!rst_n)
        host_op[a] inside {OP_NOP, OP_LOAD_W, OP_STREAM_X})
      else $error("bendi_interface: illegal command for array %0d", a);
  end
  a_read_has_bank: assert property (@(posedge clk) disable iff (!rst_n)
      host_rd_en |-> host_rd_mask != '0)
    else $error("bendi_interface: read with empty bank mask");
endmodule
