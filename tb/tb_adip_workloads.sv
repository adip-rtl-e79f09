// tb_adip_workloads: attention-layer slices on the core at its default size.
//
// Three slices of the attention workloads the architecture targets, each
// computed as block matrix products (64 x 64 weight tiles, K split into
// 64-wide tiles whose partial products are summed here, outside the core):
//   1. BitNet-style Q/K/V projection, 8b x 2b, three ternary weight matrices
//      interleaved in one load (n_tiles = 3): X(ROWS x 128) x Wq/Wk/Wv(128 x 64).
//   2. BERT-style 4-bit projection, 8b x 4b, two heads' W_Q tiles interleaved:
//      X(ROWS x 128) x Wq_h0/Wq_h1(128 x 64).
//   3. Attention scores, 8b x 8b activation-to-activation:
//      Q(ROWS x 64) x K^T(64 x 64), with K^T written as the weight tile.
// Every output element is compared with an integer reference; the number of
// array cycles per tile is checked against 2 + ROWS + N + E (streaming plus
// fill and drain).
module tb_adip_workloads;
  import adip_pkg::*;
  localparam int unsigned N      = 64;
  localparam int unsigned PSUM_W = psum_w(N);
  localparam int unsigned OUT_W  = out_w(N);
  localparam int unsigned AW     = $clog2(N);
  localparam int unsigned ROWS   = 128;
  localparam int unsigned KT     = 2;      // K tiles for the projections

  logic clk = 0, rst_n = 0;
  logic wr_en;
  logic [1:0] wr_tile;
  logic [AW-1:0] wr_row;
  logic [DW-1:0] wr_data [N];
  logic load_start, load_ready, loaded;
  mode_e mode, mode_q;
  logic [2:0] n_tiles;
  logic in_valid, in_ready;
  logic [DW-1:0] in_data [N];
  logic signed [PSUM_W-1:0] psum_in [N][GROUPS];
  logic out_ready, out_valid;
  logic signed [OUT_W-1:0] out_data [N][GROUPS];

  adip_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  int x   [ROWS][KT*N];          // activations
  int w   [4][KT*N][N];          // up to four weight matrices
  int acc [ROWS][4][N];          // accumulated core results
  int n_got;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 12) $display("FAIL %s", what);
    end
  endtask

  // collect one tile pass: rows leave in order
  always @(posedge clk)
    if (rst_n && out_valid && out_ready) begin
      for (int c = 0; c < N; c++)
        for (int t = 0; t < 4; t++) acc[n_got][t][c] += int'(out_data[c][t]);
      n_got++;
    end

  // load K-tile kt of nt matrices and stream all rows through it
  task automatic pass(mode_e m, int nt, int kt);
    longint t0;
    for (int t = 0; t < 4; t++)
      for (int r = 0; r < N; r++) begin
        @(negedge clk);
        wr_en = 1; wr_tile = 2'(t); wr_row = AW'(r);
        for (int c = 0; c < N; c++) wr_data[c] = (t < nt) ? DW'(w[t][kt*N + r][c]) : 8'hAA;
      end
    @(negedge clk);
    wr_en = 0;
    while (!load_ready) @(negedge clk);
    mode = m; n_tiles = 3'(nt); load_start = 1;
    @(negedge clk);
    load_start = 0;
    while (!loaded) @(negedge clk);
    n_got = 0;
    t0 = cycle;
    for (int i = 0; i < ROWS; i++) begin
      in_valid = 1;
      for (int k = 0; k < N; k++) in_data[k] = DW'(x[i][kt*N + k]);
      @(negedge clk);
      check(in_ready, "row accepted without wait");
    end
    in_valid = 0;
    while (n_got < ROWS && cycle - t0 < 4 * ROWS) @(negedge clk);
    check(n_got == ROWS, "all rows returned");
    check(cycle - t0 == longint'(ROWS + N + 1 + ext_stages(m)),
          $sformatf("tile pass took %0d cycles, expected %0d", cycle - t0, ROWS + N + 1 + ext_stages(m)));
  endtask

  task automatic compare(mode_e m, int nt, int kts, string name);
    int bad = 0;
    for (int i = 0; i < ROWS; i++)
      for (int t = 0; t < nt; t++)
        for (int c = 0; c < N; c++) begin
          int ref_v = 0;
          for (int k = 0; k < kts * N; k++) ref_v += x[i][k] * w[t][k][c];
          checks++;
          if (acc[i][t][c] != ref_v) begin
            bad++;
            failures++;
            if (bad < 4) $display("FAIL %s row %0d matrix %0d col %0d got %0d exp %0d",
                                  name, i, t, c, acc[i][t][c], ref_v);
          end
        end
    $display("%s: %0d x %0d x %0d per matrix, %0d matrices, %0d mismatches",
             name, ROWS, kts * N, N, nt, bad);
  endtask

  task automatic run(mode_e m, int nt, int kts, int wlo, int whi, string name);
    foreach (x[i, k]) x[i][k] = int'($urandom_range(0, 255)) - 128;
    foreach (w[t, k, c]) w[t][k][c] = int'($urandom_range(0, whi - wlo)) + wlo;
    foreach (acc[i, t, c]) acc[i][t][c] = 0;
    for (int kt = 0; kt < kts; kt++) pass(m, nt, kt);
    compare(m, nt, kts, name);
  endtask

  initial begin
    wr_en = 0; wr_tile = 0; wr_row = 0; load_start = 0; mode = MODE_8X8; n_tiles = 1;
    in_valid = 0; out_ready = 1; n_got = 0;
    foreach (wr_data[c]) wr_data[c] = 0;
    foreach (in_data[c]) in_data[c] = 0;
    foreach (psum_in[c, g]) psum_in[c][g] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(MODE_8X2, 3, KT, -1, 1,    "QKV projection 8b x 2b (ternary)");
    run(MODE_8X4, 2, KT, -8, 7,    "two-head projection 8b x 4b");
    run(MODE_8X8, 1, 1, -128, 127, "attention scores 8b x 8b");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40 * ROWS + 20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
