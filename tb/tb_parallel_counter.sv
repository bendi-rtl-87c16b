// tb_parallel_counter -- exhaustive check of the 8-input ones counter.
// Applies all 256 input patterns and compares the 4-bit count with the
// number of ones computed by the testbench.
module tb_parallel_counter;
  logic [7:0] bits;
  logic [3:0] count;
  int checks = 0, failures = 0;

  parallel_counter dut (.bits(bits), .count(count));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 256; v++) begin
      int ones;
      bits = 8'(v);
      ones = 0;
      for (int b = 0; b < 8; b++) ones += (v >> b) & 1;
      #1;
      checks++;
      if (int'(count) != ones) begin
        failures++;
        $display("FAIL bits=%b count=%0d expected=%0d", bits, count, ones);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
