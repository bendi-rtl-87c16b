// tb_bdsa -- self-checking test of one BenDi systolic array (DiP dataflow).
// Loads a random BP9 weight matrix W (N x N) in the permuted DiP order
// (BPE (i,j) holds W[(i+j) mod N][j], row N-1 sent first), then streams
// M random activation rows back to back. Each output row must equal the row
// of X*W computed by the testbench with the BP9 product (signed count of
// ones of the AND of the magnitude codes), must come out exactly N+1 cycles
// after its input row with the same tag, and the forwarded activations must
// be the input row one cycle late. A second weight matrix is then loaded and
// a second batch streamed, to check that reloading works.
module tb_bdsa;
  import bendi_pkg::*;

  localparam int N = ARRAY_N;
  localparam int TAG_W = 9;
  localparam int M = 40;

  logic clk = 0, rst_n = 0;
  logic w_load;
  bp9_t [N-1:0] w_row, x_row, x_fwd;
  logic x_valid, x_fwd_valid, out_valid;
  logic [TAG_W-1:0] x_tag, x_fwd_tag, out_tag;
  logic signed [N-1:0][PSUM_W-1:0] out_psum;
  int checks = 0, failures = 0;

  bdsa #(.N(N), .TAG_W(TAG_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bp9_t W [N][N];
  bp9_t X [M][N];
  int   cyc = 0;
  int   sent_cyc [M];
  int   got = 0;
  int   neg_outputs = 0;

  always @(posedge clk) cyc <= cyc + 1;

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

  task automatic check(string what, int g, int e);
    checks++;
    if (g != e) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d at cycle %0d", what, g, e, cyc);
    end
  endtask

  // output monitor
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int r;
      r = int'(out_tag);
      check("out_tag in range", int'(r < M), 1);
      if (r < M) begin
        check("latency", cyc - sent_cyc[r], N + 1);
        for (int j = 0; j < N; j++) begin
          int e;
          e = 0;
          for (int k = 0; k < N; k++) e += ref_mul(X[r][k], W[k][j]);
          check("out_psum", int'(signed'(out_psum[j])), e);
          if (e < 0) neg_outputs++;
        end
      end
      got++;
    end
  end

  // forwarded activations: input of the previous cycle
  bp9_t [N-1:0] x_prev;
  logic         v_prev;
  always @(posedge clk) begin
    if (rst_n && v_prev) begin
      check("x_fwd_valid", int'(x_fwd_valid), 1);
      for (int j = 0; j < N; j++) check("x_fwd", int'(x_fwd[j]), int'(x_prev[j]));
    end
    x_prev <= x_row;
    v_prev <= x_valid;
  end

  task automatic run_batch();
    for (int k = 0; k < N; k++)
      for (int j = 0; j < N; j++) W[k][j] = rand_bp9();
    for (int r = 0; r < M; r++)
      for (int k = 0; k < N; k++) X[r][k] = rand_bp9();
    // weight load: PE row N-1 first
    for (int i = N-1; i >= 0; i--) begin
      w_load = 1;
      for (int j = 0; j < N; j++) w_row[j] = W[(i+j) % N][j];
      @(posedge clk); #1;
    end
    w_load = 0;
    got = 0;
    for (int r = 0; r < M; r++) begin
      x_valid = 1; x_tag = TAG_W'(r);
      for (int k = 0; k < N; k++) x_row[k] = X[r][k];
      sent_cyc[r] = cyc;
      @(posedge clk); #1;
    end
    x_valid = 0; x_row = '0;
    repeat (N + 4) @(posedge clk);
    #1;
    check("rows received", got, M);
  endtask

  initial begin
    w_load = 0; w_row = '0; x_valid = 0; x_tag = '0; x_row = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    run_batch();
    run_batch();
    check("negative outputs seen", int'(neg_outputs > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
