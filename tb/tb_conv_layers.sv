// tb_conv_layers -- runs 1-D convolution and fully connected layers of the
// kind the architecture targets through bendi_top and compares every output
// with a direct convolution computed by the testbench.
//
// A layer with Cin input channels, kernel length KS, F filters and ifmap
// length L is lowered with im2col: output position r becomes one activation
// row [x_0[r..r+KS-1], x_1[r..r+KS-1], ...] zero-padded to a multiple of 16,
// and filter f becomes weight column f (channel-major, tap-minor), as in the
// mapping where each array column holds one filter and produces one output
// feature map. The reduction is cut into KT tiles of 16 and the filters into
// CT tiles of 16. With G = 4/CT arrays per filter tile, array a works on
// filter tile a/G and on reduction tiles a%G, a%G+G, ... in successive
// passes; pass 0 overwrites the accumulator, later passes add, and the
// read-out sums the banks of one filter tile. Weights are sent in the DiP
// permuted order.
//
// Layers run (filter counts and class count as in the ECG models; kernel
// length 5 and the lengths are this test's choices):
//   * 3 ifmaps, kernel 5, 16 filters    (the mapping example, one array)
//   * 16 ifmaps, kernel 5, 32 filters   (second conv layer of the arrhythmia model)
//   * 128 inputs, 5 outputs, batch 8    (a final classifier layer, kernel 1)
// Finally an overlapped schedule: a classifier layer streams on two arrays
// while a third is loaded with the first conv layer of the next input, so
// the classifier's streaming time is hidden under that weight load.
module tb_conv_layers;
  import bendi_pkg::*;

  localparam int N  = ARRAY_N;
  localparam int NA = N_ARRAYS;
  localparam int AW = $clog2(ACC_DEPTH);
  localparam int OW = ACC_W + $clog2(NA);

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

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
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

  task automatic run_layer(string name, int cin, int ks, int f, int len);
    int m, k, kt, ct, g, passes, used_arrays;
    bp9_t x [][];        // [channel][position]
    bp9_t w [][][];      // [filter][channel][tap]
    bp9_t arow [];       // im2col row buffer
    int   y [][];        // reference [position][filter]
    int   t_start, stream_cycles;
    m  = len - ks + 1;
    k  = cin * ks;
    kt = (k + N - 1) / N;
    ct = (f + N - 1) / N;
    g  = NA / ct;
    passes = (kt + g - 1) / g;
    used_arrays = 0;
    x = new[cin];
    foreach (x[c]) begin x[c] = new[len]; foreach (x[c][l]) x[c][l] = rand_bp9(); end
    w = new[f];
    foreach (w[i]) begin
      w[i] = new[cin];
      foreach (w[i][c]) begin w[i][c] = new[ks]; foreach (w[i][c][t]) w[i][c][t] = rand_bp9(); end
    end
    // reference: direct convolution
    y = new[m];
    foreach (y[r]) begin
      y[r] = new[f];
      foreach (y[r][o]) begin
        y[r][o] = 0;
        for (int c = 0; c < cin; c++)
          for (int t = 0; t < ks; t++) y[r][o] += ref_mul(x[c][r+t], w[o][c][t]);
      end
    end
    arow = new[kt * N];
    stream_cycles = 0;

    for (int p = 0; p < passes; p++) begin
      logic [NA-1:0] mask;
      mask = '0;
      for (int a = 0; a < NA; a++) if ((a % g) + p * g < kt && a / g < ct) mask[a] = 1'b1;
      if (p == 0) used_arrays = $countones(mask);
      // weight load: PE row N-1 first; weight (kk, col) of array a
      for (int i = N-1; i >= 0; i--) begin
        for (int a = 0; a < NA; a++) host_op[a] = mask[a] ? OP_LOAD_W : OP_NOP;
        for (int a = 0; a < NA; a++)
          for (int j = 0; j < N; j++) begin
            int kk, col;
            kk  = ((a % g) + p * g) * N + (i + j) % N;
            col = (a / g) * N + j;
            if (mask[a] && kk < k && col < f) host_data[a][j] = w[col][kk / ks][kk % ks];
            else                              host_data[a][j] = '0;
          end
        @(posedge clk); #1;
      end
      idle();
      // stream the im2col rows
      t_start = cyc;
      for (int r = 0; r < m; r++) begin
        foreach (arow[q]) arow[q] = (q < k) ? x[q / ks][r + q % ks] : '0;
        for (int a = 0; a < NA; a++) begin
          host_op[a]    = mask[a] ? OP_STREAM_X : OP_NOP;
          host_addr[a]  = AW'(r);
          host_first[a] = (p == 0);
        end
        for (int a = 0; a < NA; a++)
          for (int q = 0; q < N; q++)
            host_data[a][q] = mask[a] ? arow[((a % g) + p * g) * N + q] : '0;
        @(posedge clk); #1;
      end
      idle();
      stream_cycles += cyc - t_start;
      repeat (N + 4) @(posedge clk);
      #1;
    end
    // one activation row per cycle per pass
    check({name, ": stream cycles"}, stream_cycles, passes * m);

    // read-out
    for (int r = 0; r < m; r++)
      for (int c2 = 0; c2 < ct; c2++) begin
        logic [NA-1:0] rm;
        rm = '0;
        for (int a = c2 * g; a < (c2 + 1) * g; a++) if ((a % g) < kt) rm[a] = 1'b1;
        host_rd_en = 1; host_rd_addr = AW'(r); host_rd_mask = rm;
        @(posedge clk); #1;
        host_rd_en = 0;
        @(posedge clk); #1;
        check({name, ": read valid"}, int'(host_rd_valid), 1);
        for (int j = 0; j < N; j++)
          if (c2 * N + j < f) check({name, ": output"}, int'(signed'(host_rd_data[j])), y[r][c2 * N + j]);
      end
    $display("%s: Cin=%0d K=%0d filters=%0d positions=%0d -> %0d reduction tiles, %0d filter tiles, %0d arrays, %0d passes",
             name, cin, ks, f, m, kt, ct, used_arrays, passes);
  endtask


  // Overlapped schedule: a small classifier layer (FCIN inputs, FCOUT
  // outputs, FCB samples) runs on arrays 0/1 (one reduction tile each) while
  // array 2 is pre-loaded with a first conv layer (1 ifmap, kernel CK, 16
  // filters) for the next input; the conv layer then streams at once. The
  // command cycles must be 16 (FC load) + 16 (conv load, FC stream hidden
  // inside it) + conv rows, and both results must be right.
  task automatic run_overlap();
    localparam int FCIN = 2 * N, FCOUT = 5, FCB = 8, CK = 5, CLEN = 40, CM = CLEN - CK + 1;
    bp9_t fx [FCB][FCIN];
    bp9_t fw [FCIN][FCOUT];
    bp9_t cx [CLEN];
    bp9_t cw [16][CK];
    int   fy [FCB][FCOUT];
    int   cy [CM][16];
    int   t0, hidden;
    foreach (fx[b, i]) fx[b][i] = rand_bp9();
    foreach (fw[i, o]) fw[i][o] = rand_bp9();
    foreach (cx[l]) cx[l] = rand_bp9();
    foreach (cw[f2, t]) cw[f2][t] = rand_bp9();
    foreach (fy[b, o]) begin
      fy[b][o] = 0;
      for (int i = 0; i < FCIN; i++) fy[b][o] += ref_mul(fx[b][i], fw[i][o]);
    end
    foreach (cy[r, f2]) begin
      cy[r][f2] = 0;
      for (int t = 0; t < CK; t++) cy[r][f2] += ref_mul(cx[r + t], cw[f2][t]);
    end
    t0 = cyc;
    hidden = 0;
    // FC weights into arrays 0/1 (reduction tiles 0/1)
    for (int i = N-1; i >= 0; i--) begin
      for (int a = 0; a < 2; a++) begin
        host_op[a] = OP_LOAD_W;
        for (int j = 0; j < N; j++)
          host_data[a][j] = (j < FCOUT) ? fw[a*N + (i+j) % N][j] : '0;
      end
      @(posedge clk); #1; idle();
    end
    // conv weights into array 2 while the FC rows stream on arrays 0/1
    for (int c = 0; c < N; c++) begin
      int i, kk;
      i = N-1-c;
      host_op[2] = OP_LOAD_W;
      for (int j = 0; j < N; j++) begin
        kk = (i + j) % N;
        host_data[2][j] = (kk < CK) ? cw[j][kk] : '0;
      end
      if (c < FCB) begin
        hidden++;
        for (int a = 0; a < 2; a++) begin
          host_op[a] = OP_STREAM_X; host_addr[a] = AW'(c); host_first[a] = 1'b1;
          for (int q = 0; q < N; q++) host_data[a][q] = fx[c][a*N + q];
        end
      end
      @(posedge clk); #1; idle();
    end
    // conv rows stream on array 2 straight away
    for (int r = 0; r < CM; r++) begin
      host_op[2] = OP_STREAM_X; host_addr[2] = AW'(r); host_first[2] = 1'b1;
      for (int q = 0; q < N; q++) host_data[2][q] = (q < CK) ? cx[r + q] : '0;
      @(posedge clk); #1; idle();
    end
    check("overlap: command cycles", cyc - t0, 2 * N + CM);
    check("overlap: FC rows hidden under the conv weight load", hidden, FCB);
    repeat (N + 4) @(posedge clk); #1;
    // read-out
    for (int r = 0; r < FCB; r++) begin
      host_rd_en = 1; host_rd_addr = AW'(r); host_rd_mask = 4'b0011;
      @(posedge clk); #1; host_rd_en = 0; @(posedge clk); #1;
      for (int o = 0; o < FCOUT; o++) check("overlap: FC output", int'(signed'(host_rd_data[o])), fy[r][o]);
    end
    for (int r = 0; r < CM; r++) begin
      host_rd_en = 1; host_rd_addr = AW'(r); host_rd_mask = 4'b0100;
      @(posedge clk); #1; host_rd_en = 0; @(posedge clk); #1;
      for (int f2 = 0; f2 < 16; f2++) check("overlap: conv output", int'(signed'(host_rd_data[f2])), cy[r][f2]);
    end
    $display("overlap: FC %0dx%0d (batch %0d) on arrays 0/1 with conv 1x%0dx16 loaded into array 2 meanwhile: %0d FC rows hidden",
             FCIN, FCOUT, FCB, CK, hidden);
  endtask

  initial begin
    idle(); host_addr = '0; host_first = '0; host_data = '0; share_act = '0;
    host_rd_en = 0; host_rd_addr = '0; host_rd_mask = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    run_layer("conv_3x5x16", 3, 5, 16, 40);
    run_layer("conv_16x5x32", 16, 5, 32, 60);
    run_layer("fc_128x5", 128, 1, 5, 8);
    run_overlap();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
