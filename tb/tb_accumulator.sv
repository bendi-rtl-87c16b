// tb_accumulator -- self-checking test of the banked output accumulator.
// Every cycle each bank may receive a random row, either overwriting
// (first) or adding to the stored row, and a random read with a random bank
// mask may be issued. A reference model in the testbench keeps the expected
// contents; a read must return, one cycle later, the column-wise sum of the
// selected banks as they were before that cycle's writes.
module tb_accumulator;
  import bendi_pkg::*;

  localparam int NA = N_ARRAYS;
  localparam int C  = ARRAY_N;
  localparam int D  = ACC_DEPTH;
  localparam int AW = $clog2(D);
  localparam int OW = ACC_W + $clog2(NA);

  logic clk = 0, rst_n = 0;
  logic        [NA-1:0]         wr_valid;
  logic        [NA-1:0][AW-1:0] wr_addr;
  logic        [NA-1:0]         wr_first;
  logic signed [NA-1:0][C-1:0][PSUM_W-1:0] wr_data;
  logic                         rd_en;
  logic        [AW-1:0]         rd_addr;
  logic        [NA-1:0]         rd_mask;
  logic                         rd_valid;
  logic signed [C-1:0][OW-1:0]  rd_data;
  int checks = 0, failures = 0;

  accumulator dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int  model   [NA][D][C];
  bit  written [NA][D];
  int  exp_rd  [C];
  bit  exp_vld;
  int  adds = 0, multi_reads = 0;

  task automatic check(string what, int g, int e);
    checks++;
    if (g != e) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d at %0t", what, g, e, $time);
    end
  endtask

  // addresses used: a few low rows and the top rows
  function automatic logic [AW-1:0] pick_addr();
    return ($urandom % 2) ? AW'($urandom % 8) : AW'(D - 1 - ($urandom % 4));
  endfunction

  initial begin
    wr_valid = '0; wr_addr = '0; wr_first = '0; wr_data = '0;
    rd_en = 0; rd_addr = '0; rd_mask = '0;
    exp_vld = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      for (int a = 0; a < NA; a++) begin
        wr_valid[a] = ($urandom % 3) != 0;
        wr_addr[a]  = pick_addr();
        wr_first[a] = !written[a][wr_addr[a]] || (($urandom % 8) == 0);
        for (int c = 0; c < C; c++) wr_data[a][c] = PSUM_W'(int'($urandom % 4001) - 2000);
      end
      rd_en   = ($urandom % 2) != 0;
      rd_addr = pick_addr();
      rd_mask = '0;
      for (int a = 0; a < NA; a++) if (written[a][rd_addr] && ($urandom % 2)) rd_mask[a] = 1'b1;
      #1;
      // expected read value: contents before this cycle's writes
      if (rd_en) begin
        for (int c = 0; c < C; c++) begin
          exp_rd[c] = 0;
          for (int a = 0; a < NA; a++) if (rd_mask[a]) exp_rd[c] += model[a][rd_addr][c];
        end
        if ($countones(rd_mask) > 1) multi_reads++;
      end
      exp_vld = rd_en;
      @(posedge clk);
      // update the model with this cycle's writes
      for (int a = 0; a < NA; a++) if (wr_valid[a]) begin
        for (int c = 0; c < C; c++) begin
          if (wr_first[a]) model[a][wr_addr[a]][c] = int'(signed'(wr_data[a][c]));
          else             model[a][wr_addr[a]][c] += int'(signed'(wr_data[a][c]));
        end
        if (!wr_first[a]) adds++;
        written[a][wr_addr[a]] = 1;
      end
      #1;
      check("rd_valid", int'(rd_valid), int'(exp_vld));
      if (exp_vld)
        for (int c = 0; c < C; c++) check("rd_data", int'(signed'(rd_data[c])), exp_rd[c]);
    end
    check("accumulating writes seen", int'(adds > 0), 1);
    check("multi-bank reads seen", int'(multi_reads > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
