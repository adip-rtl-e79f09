// tb_adip_top_full: the end-to-end test of tb_adip_top run on the core at its
// default size (64 x 64 PEs): one complete tile in each precision mode,
// including the three-tile interleave, with the same reference model and
// latency checks. The mechanism counters are printed but not required here;
// tb_adip_top requires them at a small size.
//
// Each operation writes four random weight tiles, loads them in one precision
// mode with a given tile count, streams random activation rows and compares
// every result with C_t[i][c] = sum_k A[i][k] * W_t[k][c] (+ the psum_in
// contribution), computed here from integers on the natural, unpermuted
// tiles. Weights are drawn from the mode's range: 8-bit, 4-bit or 2-bit signed.
//
// Mechanisms exercised and counted (each must occur at least once):
//   loads, mode switches, 8b x 8b / 8b x 4b / 8b x 2b operations,
//   the three-tile (Q, K, V) interleave, input bubbles, output stalls,
//   psum_in injection and load requests refused while rows are in flight.
// In stall-free operations every row must leave exactly N + 1 + E cycles after
// it was accepted, and a back-to-back tile of N rows must finish 2N + E
// cycles after its first row (E = 2, 1, 0 for 8x8, 8x4, 8x2).
module tb_adip_top_full;
  import adip_pkg::*;
  localparam int unsigned N      = 64;
  localparam int unsigned PSUM_W = psum_w(N);
  localparam int unsigned OUT_W  = out_w(N);
  localparam int unsigned AW     = $clog2(N);

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

  // mechanism counters
  int n_load, n_switch, n_m88, n_m84, n_m82, n_qkv, n_bubble, n_stall, n_psum, n_refused;

  typedef struct { int r [N*GROUPS]; longint t_acc; } exp_t;
  exp_t q [$];
  int w [4][N][N];
  mode_e cur_mode;
  bit    check_lat;
  longint first_acc, last_out;
  int    n_out;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 12) $display("FAIL %s (cycle %0d)", what, cycle);
    end
  endtask

  function automatic int rand_w(mode_e m);
    case (m)
      MODE_8X8: return int'($urandom_range(0, 255)) - 128;
      MODE_8X4: return int'($urandom_range(0, 15)) - 8;
      default:  return int'($urandom_range(0, 3)) - 2;
    endcase
  endfunction

  // acceptance flag sampled at the clock edge
  bit accepted_last;
  always @(posedge clk) accepted_last <= in_valid && in_ready;

  // output monitor
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      if (q.size() == 0) check(0, "unexpected output");
      else begin
        exp_t e;
        e = q.pop_front();
        for (int c = 0; c < N; c++)
          for (int g = 0; g < GROUPS; g++)
            check(int'(out_data[c][g]) == e.r[g + GROUPS * c],
                  $sformatf("mode %0d col %0d slot %0d got %0d exp %0d", cur_mode, c, g,
                            out_data[c][g], e.r[g + GROUPS * c]));
        if (check_lat)
          check(cycle - e.t_acc == longint'(N + 1 + ext_stages(cur_mode)),
                $sformatf("row latency %0d", cycle - e.t_acc));
        last_out = cycle;
        n_out++;
      end
    end
  end

  task automatic run_op(mode_e m, int nt, int rows, int stall_pct, int bubble_pct, bit use_psum);
    // write tiles (all four, so that unused tiles hold junk that must be ignored)
    for (int t = 0; t < 4; t++)
      for (int r = 0; r < N; r++) begin
        @(negedge clk);
        wr_en = 1; wr_tile = 2'(t); wr_row = AW'(r);
        for (int c = 0; c < N; c++) begin
          w[t][r][c] = rand_w(m);
          wr_data[c] = DW'(w[t][r][c]);
        end
      end
    @(negedge clk);
    wr_en = 0;
    while (!load_ready) @(negedge clk);
    if (m != cur_mode) n_switch++;
    mode = m; n_tiles = 3'(nt); load_start = 1;
    @(negedge clk);
    load_start = 0;
    cur_mode = m;
    n_load++;
    while (!loaded) @(negedge clk);
    check(mode_q == m, "mode latched");
    case (m)
      MODE_8X8: n_m88++;
      MODE_8X4: n_m84++;
      default:  if (nt == 3) n_qkv++; else n_m82++;
    endcase
    check_lat = (stall_pct == 0);
    n_out = 0;
    first_acc = -1;
    // stream rows
    for (int i = 0; i < rows; ) begin
      logic [DW-1:0] a [N];
      int p [N][GROUPS];
      bit bub;
      @(negedge clk);
      out_ready = ($urandom_range(0, 99) >= stall_pct);
      if (!out_ready && q.size() > 0) n_stall++;
      bub = ($urandom_range(0, 99) < bubble_pct);
      if (bub) begin
        in_valid = 0;
        n_bubble++;
      end else begin
        in_valid = 1;
        foreach (a[k]) begin a[k] = DW'($urandom); in_data[k] = a[k]; end
        foreach (p[c, g]) begin
          p[c][g] = use_psum ? int'($urandom_range(0, 200)) - 100 : 0;
          psum_in[c][g] = PSUM_W'(p[c][g]);
        end
      end
      // a load request now must be refused while rows are in flight
      if (q.size() > 0 && i == rows / 2) begin
        load_start = 1; mode = mode_e'((int'(m) + 1) % 3);
      end
      @(posedge clk);
      #1;
      if (load_start) begin
        check(loaded && mode_q == m, "load refused while rows in flight");
        n_refused++;
        load_start = 0; mode = m;
      end
      // acceptance happened at the edge if in_valid && in_ready were high before it
      if (!bub && accepted_last) begin
        exp_t e;
        if (first_acc < 0) first_acc = cycle - 1;
        e.t_acc = cycle - 1;
        for (int c = 0; c < N; c++) begin
          int s [GROUPS];
          for (int t = 0; t < GROUPS; t++) begin
            s[t] = 0;
            for (int k = 0; k < N; k++) s[t] += int'($signed(a[k])) * w[t][k][c];
          end
          for (int g = 0; g < GROUPS; g++) e.r[g + GROUPS * c] = 0;
          case (m)
            MODE_8X8: e.r[GROUPS * c] = s[0] + p[c][0] + 4 * p[c][1] + 16 * p[c][2] + 64 * p[c][3];
            MODE_8X4: begin
              e.r[GROUPS * c]     = (nt > 0 ? s[0] : 0) + p[c][0] + 4 * p[c][1];
              e.r[GROUPS * c + 1] = (nt > 1 ? s[1] : 0) + p[c][2] + 4 * p[c][3];
            end
            default:
              for (int g = 0; g < GROUPS; g++)
                e.r[GROUPS * c + g] = (g < nt ? s[g] : 0) + p[c][g];
          endcase
        end
        if (use_psum) n_psum++;
        q.push_back(e);
        i++;
      end
    end
    @(negedge clk);
    in_valid = 0;
    out_ready = 1;
    for (int k = 0; k < 4 * N && q.size() > 0; k++) @(negedge clk);
    check(q.size() == 0, "all rows delivered");
    if (check_lat && bubble_pct == 0 && rows == N)
      check(last_out - first_acc == longint'(2 * N + ext_stages(m)),
            $sformatf("tile latency %0d, expected %0d", last_out - first_acc, 2 * N + ext_stages(m)));
  endtask


  initial begin
    wr_en = 0; wr_tile = 0; wr_row = 0; load_start = 0; mode = MODE_8X8; n_tiles = 1;
    in_valid = 0; out_ready = 1; cur_mode = MODE_8X8;
    foreach (wr_data[c]) wr_data[c] = 0;
    foreach (in_data[c]) in_data[c] = 0;
    foreach (psum_in[c, g]) psum_in[c][g] = 0;
    {n_load, n_switch, n_m88, n_m84, n_m82, n_qkv, n_bubble, n_stall, n_psum, n_refused} = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // one complete tile in each precision mode at full array size
    run_op(MODE_8X8, 1, N, 0, 0, 0);
    run_op(MODE_8X4, 2, N, 20, 10, 1);
    run_op(MODE_8X2, 3, N, 0, 0, 0);
    run_op(MODE_8X2, 4, N, 0, 0, 0);
    $display("mechanisms: loads=%0d switches=%0d 8x8=%0d 8x4=%0d 8x2=%0d qkv=%0d bubbles=%0d stalls=%0d psum=%0d refused=%0d",
             n_load, n_switch, n_m88, n_m84, n_m82, n_qkv, n_bubble, n_stall, n_psum, n_refused);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int mech [10];
  always_comb mech = '{n_load, n_switch, n_m88, n_m84, n_m82, n_qkv, n_bubble, n_stall, n_psum, n_refused};

  initial begin
    repeat (200 * N + 20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
