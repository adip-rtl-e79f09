// adip_top: ADiP adaptive-precision systolic array core.
//
// Computes C = A x W for an input (activation) matrix A streamed one row per
// cycle and a stationary N x N weight tile W. In 8b x 8b mode W is one tile of
// 8-bit weights and each column c returns one result C[i][c]. In 8b x 4b mode
// two tiles of 4-bit weights, and in 8b x 2b mode up to four tiles of 2-bit
// weights, are interleaved into the array at once; the same activation row is
// then multiplied by all of them and column c returns 2 or 4 results
// (out_data[c][t] = row i of A times column c of tile t). Throughput therefore
// grows 2x and 4x at the lower weight precisions.
//
// Blocks: adip_weight_prep (multi-bank weight store, permutation and
// interleaving, loading), adip_array (N x N reconfigurable PEs) and one
// adip_shift_acc per column (shared shifters and accumulators).
//
// Use:
//  1. write weight tiles with wr_en / wr_tile / wr_row / wr_data (natural order);
//  2. pulse load_start while load_ready is high, with mode and n_tiles set;
//     mode is latched and used until the next load; loading takes N+1 cycles;
//  3. stream activation rows: in_data[k] = A[i][k], accepted when
//     in_valid && in_ready. psum_in[c][g] is added to psum lane g of column c
//     for the same row (drive 0 for a plain product);
//  4. results leave on out_data when out_valid is high.
// Back-pressure: while out_ready is low the whole compute pipeline holds
// (every input and psum register is an enabled register) and in_ready is low.
//
// Timing: a row accepted in cycle t appears on out_data in cycle
// t + N + 1 + E, with E = 2 (8b x 8b), 1 (8b x 4b) or 0 (8b x 2b), counting
// only cycles with out_ready high. A tile of N rows streamed back to back
// finishes 2N + E cycles after its first row was presented, which is the
// paper's latency model N + N + S + E - 2 with S = 2 (input register and psum
// register of a PE).
//
// load_start is only taken when no row is in flight, so a mode change never
// mixes with rows of the previous mode. This handshake, the write port and the
// psum_in alignment register are this design's choices; the array structure,
// the dataflow and the column units follow the paper.
// The two assertions at the end are disabled during reset, which is why a lint
// tool may note rst_n being used both asynchronously and synchronously; the
// synchronous use is confined to those checks.
module adip_top
  import adip_pkg::*;
#(
  parameter int unsigned N      = 64,
  localparam int unsigned PSUM_W = psum_w(N),
  localparam int unsigned OUT_W  = out_w(N),
  localparam int unsigned AW     = (N > 1) ? $clog2(N) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // weight tile write port
  input  logic                     wr_en,
  input  logic [1:0]               wr_tile,
  input  logic [AW-1:0]            wr_row,
  input  logic [DW-1:0]            wr_data  [N],
  // weight load
  input  logic                     load_start,
  input  mode_e                    mode,
  input  logic [2:0]               n_tiles,
  output logic                     load_ready,
  output logic                     loaded,
  output mode_e                    mode_q,
  // activation rows
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [DW-1:0]            in_data  [N],
  input  logic signed [PSUM_W-1:0] psum_in  [N][GROUPS],
  // results
  input  logic                     out_ready,
  output logic                     out_valid,
  output logic signed [OUT_W-1:0]  out_data [N][GROUPS]
);
  localparam int unsigned CW = $clog2(N + 8) + 1;

  logic                     en, accept, load_go, loading;
  logic                     wp_busy, w_load;
  logic [DW-1:0]            w_word   [N];
  logic [DW-1:0]            act_in   [N];
  logic signed [PSUM_W-1:0] psum_q   [N][GROUPS];
  logic signed [PSUM_W-1:0] psum_bot [N][GROUPS];
  logic [N:0]               vpipe;
  logic [N-1:0]             col_valid;
  logic [CW-1:0]            inflight;

  assign en         = out_ready;
  assign load_ready = !wp_busy && (inflight == '0);
  assign load_go    = load_start && load_ready;
  assign in_ready   = en && loaded && !wp_busy;
  assign accept     = in_valid && in_ready;
  assign act_in     = in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_q   <= MODE_8X8;
      loaded   <= 1'b0;
      loading  <= 1'b0;
      vpipe    <= '0;
      inflight <= '0;
      for (int c = 0; c < N; c++)
        for (int g = 0; g < GROUPS; g++) psum_q[c][g] <= '0;
    end else begin
      if (load_go) begin
        mode_q  <= mode;
        loaded  <= 1'b0;
        loading <= 1'b1;
      end else if (loading && !wp_busy) begin
        loading <= 1'b0;
        loaded  <= 1'b1;
      end
      if (en) begin
        vpipe <= {vpipe[N-1:0], accept};
        psum_q <= psum_in;
      end
      inflight <= inflight + CW'(accept) - CW'(out_valid && out_ready);
    end
  end

  adip_weight_prep #(.N(N)) u_prep (
    .clk        (clk),
    .rst_n      (rst_n),
    .wr_en      (wr_en),
    .wr_tile    (wr_tile),
    .wr_row     (wr_row),
    .wr_data    (wr_data),
    .load_start (load_go),
    .mode       (mode),
    .n_tiles    (n_tiles),
    .busy       (wp_busy),
    .w_valid    (w_load),
    .w_o        (w_word)
  );

  adip_array #(.N(N), .PSUM_W(PSUM_W)) u_array (
    .clk    (clk),
    .rst_n  (rst_n),
    .mode   (mode_q),
    .en     (en),
    .in_i   (act_in),
    .w_load (w_load),
    .w_i    (w_word),
    .psum_i (psum_q),
    .psum_o (psum_bot)
  );

  for (genvar c = 0; c < N; c++) begin : g_col
    adip_shift_acc #(.PSUM_W(PSUM_W), .OUT_W(OUT_W)) u_sa (
      .clk     (clk),
      .rst_n   (rst_n),
      .mode    (mode_q),
      .en      (en),
      .valid_i (vpipe[N]),
      .lane_i  (psum_bot[c]),
      .valid_o (col_valid[c]),
      .res_o   (out_data[c])
    );
  end

  assign out_valid = col_valid[0];

  // all column units see the same valid and mode, so they must agree
  a_cols_agree: assert property (@(posedge clk) disable iff (!rst_n)
                                 col_valid == {N{col_valid[0]}})
    else $error("adip_top: column valid flags disagree");
  // a load names one to four tiles
  a_ntiles: assert property (@(posedge clk) disable iff (!rst_n)
                             load_go |-> (n_tiles >= 3'd1 && n_tiles <= 3'd4))
    else $error("adip_top: n_tiles must be 1..4");
endmodule
