// tb_adip_weight_prep: self-checking test of weight preprocessing.
// Four random tiles are written in natural order. For every mode and tile
// count the loader output is captured and compared with the expected
// permuted, interleaved words: the k-th word (k = 0..N-1) of column c is the
// stationary row r = N-1-k, built from W_t[(r + c) mod N][c] of tiles
// t < n_tiles, cut to 8/4/2 bits and packed with tile 1 lowest.
// Also checked: first word two cycles after load_start, N consecutive words,
// busy covering the whole load and load_start ignored while busy.
module tb_adip_weight_prep;
  import adip_pkg::*;
  localparam int unsigned N  = 8;
  localparam int unsigned AW = $clog2(N);

  logic clk = 0, rst_n = 0;
  logic wr_en;
  logic [1:0] wr_tile;
  logic [AW-1:0] wr_row;
  logic [7:0] wr_data [N];
  logic load_start;
  mode_e mode;
  logic [2:0] n_tiles;
  logic busy, w_valid;
  logic [7:0] w_o [N];
  int checks = 0, failures = 0;

  adip_weight_prep #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  logic [7:0] tile [4][N][N];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic logic [7:0] expect_word(mode_e m, int nt, int r, int c);
    logic [7:0] w = '0;
    int row = (r + c) % N;
    case (m)
      MODE_8X8: w = tile[0][row][c];
      MODE_8X4: for (int t = 0; t < nt && t < 2; t++) w[4*t +: 4] = tile[t][row][c][3:0];
      default:  for (int t = 0; t < nt; t++) w[2*t +: 2] = tile[t][row][c][1:0];
    endcase
    return w;
  endfunction

  initial begin
    wr_en = 0; wr_tile = 0; wr_row = 0; load_start = 0; mode = MODE_8X8; n_tiles = 1;
    foreach (wr_data[c]) wr_data[c] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      // write four tiles
      for (int t = 0; t < 4; t++)
        for (int r = 0; r < N; r++) begin
          @(negedge clk);
          wr_en = 1; wr_tile = 2'(t); wr_row = AW'(r);
          foreach (wr_data[c]) begin
            tile[t][r][c] = 8'($urandom);
            wr_data[c] = tile[t][r][c];
          end
        end
      @(negedge clk);
      wr_en = 0;
      for (int m = 0; m < 3; m++)
        for (int nt = 1; nt <= 4; nt++) begin
          int k, waitc;
          mode = mode_e'(m); n_tiles = 3'(nt);
          check(!busy, "idle before load");
          load_start = 1;
          @(negedge clk);
          load_start = 0;
          // garble inputs: must be latched at load_start
          mode = mode_e'((m + 1) % 3); n_tiles = 3'((nt % 4) + 1);
          check(busy && !w_valid, "busy, no word one cycle after start");
          @(negedge clk);
          load_start = 1; // ignored while busy
          k = 0;
          waitc = 0;
          while (busy && waitc < 4 * N) begin
            if (w_valid) begin
              for (int c = 0; c < N; c++)
                check(w_o[c] == expect_word(mode_e'(m), nt, N - 1 - k, c),
                      $sformatf("mode %0d nt %0d word %0d col %0d got %h exp %h", m, nt, k, c,
                                w_o[c], expect_word(mode_e'(m), nt, N - 1 - k, c)));
              k++;
            end else check(k == N, "words are consecutive");
            @(negedge clk);
            waitc++;
          end
          load_start = 0;
          check(k == N, $sformatf("word count %0d", k));
          @(negedge clk);
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
