// adip_array: N x N grid of reconfigurable PEs with ADiP's diagonal dataflow.
//
// Weights are stationary. They enter at the top of each column (w_i[c]) and
// shift down one row per cycle while w_load is high, so after N load cycles
// row r holds the word presented N-1-r load cycles before the last.
// Activations: one row of the input matrix (N elements) enters the top PE row
// in parallel, element c into column c. Every PE registers its activation and
// passes it diagonally to the next row, one column to the left:
// PE(r+1,c) takes PE(r,c+1)'s registered input, and the leftmost PE of a row
// feeds the rightmost PE of the next row. Row r of column c therefore sees
// activation element (c + r) mod N, which is why the weight tile must be
// stored with column c rotated upward by c (see adip_weight_prep).
// Psums: four lanes per column flow down, each PE adding its group products;
// the bottom row's psum registers are the array's output (psum_o).
//
// Timing: an input row presented in cycle t (with en high) appears at psum_o
// in cycle t + N + 1 (one input register stage plus N psum stages). While en
// is low every input and psum register holds (stall). No input or output
// skew buffers are needed: all N results of a row leave together.
//
// The structure follows the paper; widths, reset and the shared enable are
// this design's choices.
module adip_array
  import adip_pkg::*;
#(
  parameter int unsigned N      = 64,
  parameter int unsigned PSUM_W = psum_w(N)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  mode_e                    mode,
  input  logic                     en,
  input  logic [DW-1:0]            in_i   [N],
  input  logic                     w_load,
  input  logic [DW-1:0]            w_i    [N],
  input  logic signed [PSUM_W-1:0] psum_i [N][GROUPS],
  output logic signed [PSUM_W-1:0] psum_o [N][GROUPS]
);
  logic [DW-1:0]            act  [N][N];        // registered activation of PE(r,c)
  logic [DW-1:0]            wgt  [N][N];        // weight register of PE(r,c)
  logic signed [PSUM_W-1:0] psum [N][N][GROUPS]; // psum output of PE(r,c)

  for (genvar r = 0; r < N; r++) begin : g_row
    for (genvar c = 0; c < N; c++) begin : g_col
      logic [DW-1:0]            pe_in;
      logic [DW-1:0]            pe_w;
      logic signed [PSUM_W-1:0] pe_psum [GROUPS];

      if (r == 0) begin : g_top
        assign pe_in   = in_i[c];
        assign pe_w    = w_i[c];
        assign pe_psum = psum_i[c];
      end else begin : g_inner
        // diagonal input link with wrap-around at the right boundary
        assign pe_in   = act[r-1][(c+1) % N];
        assign pe_w    = wgt[r-1][c];
        assign pe_psum = psum[r-1][c];
      end

      adip_pe #(.PSUM_W(PSUM_W)) u_pe (
        .clk    (clk),
        .rst_n  (rst_n),
        .mode   (mode),
        .en     (en),
        .in_i   (pe_in),
        .in_o   (act[r][c]),
        .w_load (w_load),
        .w_i    (pe_w),
        .w_o    (wgt[r][c]),
        .psum_i (pe_psum),
        .psum_o (psum[r][c])
      );
    end
  end

  for (genvar c = 0; c < N; c++) begin : g_out
    assign psum_o[c] = psum[N-1][c];
  end
endmodule
