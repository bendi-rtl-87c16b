// tb_bendi_interface -- self-checking test of the host interface.
// Random load, stream and no-op commands, independently per array, and
// random read requests are applied every cycle. One cycle later each array's
// load and valid strobes must match its command, the data lane of an array
// must be captured only for the matching command (otherwise it keeps its old
// value), the tag must be {address, first}, and the read request must be
// forwarded. Cycles where one array loads while another streams are counted
// and must occur. Read data from the accumulator side must reach the host
// unchanged in the same cycle.
module tb_bendi_interface;
  import bendi_pkg::*;

  localparam int N  = ARRAY_N;
  localparam int NA = N_ARRAYS;
  localparam int AW = $clog2(ACC_DEPTH);
  localparam int TW = AW + 1;
  localparam int OW = ACC_W + $clog2(NA);

  logic clk = 0, rst_n = 0;
  op_e  [NA-1:0] host_op;
  logic [NA-1:0][AW-1:0] host_addr;
  logic [NA-1:0] host_first;
  bp9_t [NA-1:0][N-1:0] host_data;
  logic host_rd_en;
  logic [AW-1:0] host_rd_addr;
  logic [NA-1:0] host_rd_mask;
  logic host_rd_valid;
  logic signed [N-1:0][OW-1:0] host_rd_data;
  logic [NA-1:0] arr_w_load;
  bp9_t [NA-1:0][N-1:0] arr_w_row;
  logic [NA-1:0] arr_x_valid;
  logic [NA-1:0][TW-1:0] arr_x_tag;
  bp9_t [NA-1:0][N-1:0] arr_x_row;
  logic acc_rd_en;
  logic [AW-1:0] acc_rd_addr;
  logic [NA-1:0] acc_rd_mask;
  logic acc_rd_valid;
  logic signed [N-1:0][OW-1:0] acc_rd_data;
  int checks = 0, failures = 0;

  bendi_interface dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint g, longint e);
    checks++;
    if (g != e) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d at %0t", what, g, e, $time);
    end
  endtask

  bp9_t [NA-1:0][N-1:0] exp_w, exp_x;
  logic [NA-1:0][TW-1:0] exp_tag;
  logic [NA-1:0] exp_wl, exp_xv;
  logic exp_rd_en;
  logic [AW-1:0] exp_rd_addr;
  logic [NA-1:0] exp_rd_mask;
  int n_load = 0, n_stream = 0, n_overlap = 0;

  initial begin
    host_op = '{default: OP_NOP}; host_addr = '0; host_first = '0;
    host_data = '0; host_rd_en = 0; host_rd_addr = '0; host_rd_mask = '0;
    acc_rd_valid = 0; acc_rd_data = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    exp_w = '0; exp_x = '0; exp_tag = '0;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      for (int a = 0; a < NA; a++) begin
        host_op[a]   = op_e'($urandom % 3);
        host_addr[a] = AW'($urandom);
      end
      host_first = NA'($urandom);
      for (int a = 0; a < NA; a++)
        for (int j = 0; j < N; j++) host_data[a][j] = bp9_t'($urandom);
      host_rd_en   = 1'($urandom);
      host_rd_addr = AW'($urandom);
      host_rd_mask = NA'($urandom);
      if (host_rd_mask == '0) host_rd_mask[0] = 1'b1;
      acc_rd_valid = 1'($urandom);
      for (int j = 0; j < N; j++) acc_rd_data[j] = OW'($urandom);
      #1;
      check("host_rd_valid", host_rd_valid, acc_rd_valid);
      for (int j = 0; j < N; j++) check("host_rd_data", host_rd_data[j], acc_rd_data[j]);
      // expected register contents after this edge
      for (int a = 0; a < NA; a++) begin
        exp_wl[a] = (host_op[a] == OP_LOAD_W);
        exp_xv[a] = (host_op[a] == OP_STREAM_X);
        if (exp_wl[a]) exp_w[a] = host_data[a];
        if (exp_xv[a]) begin
          exp_x[a]   = host_data[a];
          exp_tag[a] = {host_addr[a], host_first[a]};
        end
      end
      if (exp_wl != 0) n_load++;
      if (exp_xv != 0) n_stream++;
      if (exp_wl != 0 && exp_xv != 0) n_overlap++;
      exp_rd_en = host_rd_en; exp_rd_addr = host_rd_addr; exp_rd_mask = host_rd_mask;
      @(posedge clk);
      #1;
      check("arr_w_load", arr_w_load, exp_wl);
      check("arr_x_valid", arr_x_valid, exp_xv);
      for (int a = 0; a < NA; a++) begin
        check("arr_x_tag", arr_x_tag[a], exp_tag[a]);
        for (int j = 0; j < N; j++) begin
          check("arr_w_row", arr_w_row[a][j], exp_w[a][j]);
          check("arr_x_row", arr_x_row[a][j], exp_x[a][j]);
        end
      end
      check("acc_rd_en", acc_rd_en, exp_rd_en);
      check("acc_rd_addr", acc_rd_addr, exp_rd_addr);
      check("acc_rd_mask", acc_rd_mask, exp_rd_mask);
    end
    check("loads seen", int'(n_load > 0), 1);
    check("streams seen", int'(n_stream > 0), 1);
    check("load and stream in one cycle seen", int'(n_overlap > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
