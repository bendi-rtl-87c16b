// tb_bendi_top -- end-to-end test of the BenDi architecture at its default
// size (four 16x16 arrays, 256-row accumulator banks).
//
// Computes one matrix product Y = X * W with X of M x 64 and W of 64 x 32
// random BP9 values, tiled over the four arrays the way a layer larger than
// one array is run:
//   pass 1: arrays 0/1 hold reduction tiles 0/1 of output columns 0..15,
//           arrays 2/3 hold tiles 0/1 of columns 16..31. Only arrays 0 and 1
//           are fed from the host; arrays 2 and 3 share their activations
//           over the array-to-array link. Results overwrite the accumulator.
//   pass 2: reduction tiles 2/3, link off. Arrays 0/1 are reloaded and
//           stream their rows while, in the same cycles, arrays 2/3 are
//           loaded with their next weights (per-array commands); then
//           arrays 2/3 stream. Results are added to the stored rows.
//   read-out: banks 0+1 summed give columns 0..15, banks 2+3 columns 16..31.
// Weights are sent in the DiP permuted order. Each output is compared with
// Y computed by the testbench from the BP9 product rule (signed count of ones
// of the AND of the magnitude codes). Also checked: the cycle in which a
// row is written into the accumulator (N+2 cycles after the command, one
// cycle later over the link) and the two-cycle read latency. Each mechanism
// used (weight load, streaming, activation sharing, loading one array while
// another streams, accumulation across passes, summing banks on read-out,
// negative results) is counted and must occur.
module tb_bendi_top;
  import bendi_pkg::*;

  localparam int N  = ARRAY_N;
  localparam int NA = N_ARRAYS;
  localparam int AW = $clog2(ACC_DEPTH);
  localparam int OW = ACC_W + $clog2(NA);
  localparam int M  = 48;       // output rows
  localparam int K  = 4 * N;    // reduction length: 4 tiles
  localparam int C  = 2 * N;    // output columns: 2 tiles

  logic clk = 0, rst_n = 0;
  op_e  [NA-1:0] host_op;
  logic [NA-1:0][AW-1:0] host_addr;
  logic [NA-1:0] host_first;
  bp9_t [NA-1:0][N-1:0] host_data;
  logic [NA/2-1:0] share_act;
  logic host_rd_en;
  logic [AW-1:0] host_rd_addr;
  logic [NA-1:0] host_rd_mask;
  logic host_rd_valid;
  logic signed [N-1:0][OW-1:0] host_rd_data;
  int checks = 0, failures = 0;

  bendi_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bp9_t X [M][K];
  bp9_t W [K][C];
  int   Y [M][C];
  int   cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // mechanism counters
  int n_wload = 0, n_stream = 0, n_shared = 0, n_overlap = 0, n_accum = 0,
      n_multi_rd = 0, n_neg = 0;

  // per-array work of a pass: reduction tile kt[a], column tile ct[a]
  int kt1 [NA] = '{0, 1, 0, 1};
  int kt2 [NA] = '{2, 3, 2, 3};
  int ct  [NA] = '{0, 0, 1, 1};

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

  task automatic idle();
    host_op = '{default: OP_NOP};
  endtask

  // commands for one cycle (call between clock edges)
  task automatic cmd_load(int a, int kt, int ctile, int i);   // PE row i of array a
    host_op[a] = OP_LOAD_W;
    for (int j = 0; j < N; j++) host_data[a][j] = W[kt*N + (i+j) % N][ctile*N + j];
  endtask

  task automatic cmd_stream(int a, int kt, int r, logic first);
    host_op[a] = OP_STREAM_X; host_addr[a] = AW'(r); host_first[a] = first;
    for (int k = 0; k < N; k++) host_data[a][k] = X[r][kt*N + k];
  endtask

  task automatic tick();
    int nl, ns;
    nl = 0; ns = 0;
    for (int a = 0; a < NA; a++) begin
      if (host_op[a] == OP_LOAD_W) nl++;
      if (host_op[a] == OP_STREAM_X) begin
        ns++;
        if (!host_first[a]) n_accum++;
        if (a < NA/2 && share_act[a]) n_shared++;
      end
    end
    n_wload += nl; n_stream += ns;
    if (nl > 0 && ns > 0) n_overlap++;
    @(posedge clk); #1;
    idle();
  endtask

  task automatic drain();
    repeat (N + 4) @(posedge clk);
    #1;
  endtask

  // Latency probe: clear row PROBE_ADDR, then stream one row through array 0
  // (shared to array 2) and read bank `bank` every cycle from the command
  // on. A read issued in cycle t sees writes made up to the end of cycle t,
  // so the first read returning the new row is issued `lat` cycles after
  // the command, the cycle at whose end the row is written.
  localparam int PROBE_ADDR = 200;
  task automatic probe(int bank, output int lat);
    int exp_row [N], nz;
    nz = 0;
    for (int j = 0; j < N; j++) begin
      exp_row[j] = 0;
      for (int k = 0; k < N; k++) exp_row[j] += ref_mul(X[0][kt2[0]*N + k], W[kt2[bank]*N + k][ct[bank]*N + j]);
      if (exp_row[j] != 0) nz++;
    end
    // clear the row with an all-zero input row
    host_op[0] = OP_STREAM_X; host_addr[0] = AW'(PROBE_ADDR); host_first[0] = 1'b1;
    host_data[0] = '0;
    tick();
    drain();
    // probe row
    lat = -1;
    cmd_stream(0, kt2[0], 0, 1'b1);
    host_addr[0] = AW'(PROBE_ADDR);
    for (int d = 0; d < N + 8; d++) begin
      host_rd_en = 1; host_rd_addr = AW'(PROBE_ADDR); host_rd_mask = NA'(1 << bank);
      tick();
      if (host_rd_valid && lat < 0 && d >= 1) begin
        bit same = 1;
        for (int j = 0; j < N; j++) if (int'(signed'(host_rd_data[j])) != exp_row[j]) same = 0;
        if (same) lat = d - 1;
      end
    end
    host_rd_en = 0;
    if (nz == 0) lat = -2;   // row indistinguishable from the cleared one
    drain();
  endtask

  initial begin
    idle(); host_addr = '0; host_first = '0; host_data = '0; share_act = '0;
    host_rd_en = 0; host_rd_addr = '0; host_rd_mask = '0;

    for (int r = 0; r < M; r++) for (int k = 0; k < K; k++) X[r][k] = rand_bp9();
    for (int k = 0; k < K; k++) for (int c = 0; c < C; c++) W[k][c] = rand_bp9();
    for (int r = 0; r < M; r++) for (int c = 0; c < C; c++) begin
      Y[r][c] = 0;
      for (int k = 0; k < K; k++) Y[r][c] += ref_mul(X[r][k], W[k][c]);
      if (Y[r][c] < 0) n_neg++;
    end

    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // pass 1: all four arrays loaded, left arrays fed over the link
    for (int i = N-1; i >= 0; i--) begin
      for (int a = 0; a < NA; a++) cmd_load(a, kt1[a], ct[a], i);
      tick();
    end
    share_act = '1;
    for (int r = 0; r < M; r++) begin
      cmd_stream(0, kt1[0], r, 1'b1);
      cmd_stream(1, kt1[1], r, 1'b1);
      tick();
    end
    drain();
    share_act = '0;

    // pass 2: reload arrays 0/1, then stream them while arrays 2/3 load
    for (int i = N-1; i >= 0; i--) begin
      cmd_load(0, kt2[0], ct[0], i);
      cmd_load(1, kt2[1], ct[1], i);
      tick();
    end
    for (int r = 0; r < M; r++) begin
      cmd_stream(0, kt2[0], r, 1'b0);
      cmd_stream(1, kt2[1], r, 1'b0);
      if (r < N) begin
        cmd_load(2, kt2[2], ct[2], N-1-r);
        cmd_load(3, kt2[3], ct[3], N-1-r);
      end
      tick();
    end
    for (int r = 0; r < M; r++) begin
      cmd_stream(2, kt2[2], r, 1'b0);
      cmd_stream(3, kt2[3], r, 1'b0);
      tick();
    end
    drain();

    // latency probes with the pass-2 weights and the link enabled
    begin
      int lat0, lat2;
      share_act = '1;
      probe(0, lat0);
      probe(2, lat2);
      share_act = '0;
      if (lat0 != -2) check("row reaches accumulator, right array (cycles)", lat0, N + 2);
      if (lat2 != -2) check("row reaches accumulator, left array over link (cycles)", lat2, N + 3);
    end

    // read-out
    for (int r = 0; r < M; r++) begin
      for (int t = 0; t < 2; t++) begin
        int sent;
        host_rd_en = 1; host_rd_addr = AW'(r);
        host_rd_mask = (t == 0) ? 4'b0011 : 4'b1100;
        n_multi_rd++;
        sent = cyc;
        @(posedge clk); #1;
        host_rd_en = 0;
        while (!host_rd_valid) begin @(posedge clk); #1; end
        check("read latency", cyc - sent, 2);
        for (int j = 0; j < N; j++)
          check("Y", int'(signed'(host_rd_data[j])), Y[r][t*N + j]);
      end
    end

    $display("mechanisms: weight_load_rows=%0d stream_rows=%0d shared_rows=%0d load_while_streaming_cycles=%0d accumulate_rows=%0d multi_bank_reads=%0d negative_results=%0d",
             n_wload, n_stream, n_shared, n_overlap, n_accum, n_multi_rd, n_neg);
    check("weight load happened", int'(n_wload > 0), 1);
    check("streaming happened", int'(n_stream > 0), 1);
    check("activation sharing happened", int'(n_shared > 0), 1);
    check("load while streaming happened", int'(n_overlap > 0), 1);
    check("accumulation across passes happened", int'(n_accum > 0), 1);
    check("multi-bank read-out happened", int'(n_multi_rd > 0), 1);
    check("negative results happened", int'(n_neg > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
