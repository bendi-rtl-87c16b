// tb_bpe -- self-checking test of one BP9 processing element.
// Random BP9 activations and weights and random partial sums are applied
// every cycle. The testbench models the registers itself: the output partial
// sum after a clock edge must equal the partial sum input of the previous
// cycle plus the signed count of ones of (activation & weight) captured two
// edges earlier. It also checks that the weight register only changes while
// w_load is high and that both registers are visible on x_out / w_out.
module tb_bpe;
  import bendi_pkg::*;

  logic clk = 0, rst_n = 0;
  logic w_load;
  bp9_t w_in, w_out, x_in, x_out;
  logic signed [PSUM_W-1:0] psum_in, psum_out;
  int checks = 0, failures = 0;

  bpe dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bp9_t rand_bp9();
    bp9_t v;
    v.sign = 1'($urandom);
    v.mag  = 8'($urandom);
    return v;
  endfunction

  function automatic int ref_mul(bp9_t a, bp9_t b);
    int n = 0;
    for (int k = 0; k < 8; k++) n += int'(a.mag[k] & b.mag[k]);
    return (a.sign != b.sign) ? -n : n;
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  bp9_t x_q, w_q;            // model of the BPE registers
  int   exp_psum;
  int   neg_seen = 0;

  initial begin
    w_load = 0; w_in = '0; x_in = '0; psum_in = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    x_q = '0; w_q = '0;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      // drive this cycle's inputs
      w_load  = ($urandom % 4) == 0;
      w_in    = rand_bp9();
      x_in    = rand_bp9();
      psum_in = PSUM_W'($urandom % 4000) - PSUM_W'(2000);
      #1;
      exp_psum = int'(psum_in) + ref_mul(x_q, w_q);
      if (ref_mul(x_q, w_q) < 0) neg_seen++;
      @(posedge clk);
      #1;
      // update the register model
      x_q = x_in;
      if (w_load) w_q = w_in;
      check("psum_out", int'(psum_out), exp_psum);
      check("x_out", int'(x_out), int'(x_q));
      check("w_out", int'(w_out), int'(w_q));
    end
    check("negative products seen", int'(neg_seen > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
