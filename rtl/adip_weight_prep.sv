// adip_weight_prep: weight preprocessing and loading for the ADiP array.
//
// ADiP needs each weight tile in a special layout before it is loaded:
//   1. permutation: column c of the tile is rotated upward by c, so the PE in
//      row r of column c holds W[(r + c) mod N][c];
//   2. interleaving: in 8b x 4b mode two tiles, in 8b x 2b mode up to four
//      tiles (e.g. three for Q, K and V) share one stationary tile; the
//      elements at the same position are cut to 4 or 2 bits and concatenated,
//      tile 1 in the least significant bits.
// This block performs both at run time. Weight tiles are written in their
// natural layout, one tile row per cycle (wr_tile, wr_row, wr_data[c] = W[row][c]),
// into N memory banks, one per array column, each holding up to four tiles.
// The permutation costs nothing: during loading, every bank is read at its
// own rotated row address (r + c) mod N. The packer then interleaves the
// elements of the n_tiles tiles (tiles at or above n_tiles are packed as 0).
// Values are truncated to 4 or 2 bits, so they must already be quantised
// to that range.
//
// Loading: a load_start pulse while busy is low latches mode and n_tiles and
// streams N packed rows, bottom array row first, one per cycle on w_o with
// w_valid high; connect w_valid to the array's w_load. The first word leaves
// two cycles after load_start; busy stays high until the last has left.
//
// From the paper: the two preprocessing steps, their order and the run-time
// rescheduling of reads over multi-bank memories. This design's own choices:
// the bank organisation, the write port, the bit packing order and the
// truncation of values.
module adip_weight_prep
  import adip_pkg::*;
#(
  parameter int unsigned N      = 64,
  parameter int unsigned NTILES = 4,
  localparam int unsigned AW    = (N > 1) ? $clog2(N) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // tile write port
  input  logic                 wr_en,
  input  logic [1:0]           wr_tile,
  input  logic [AW-1:0]        wr_row,
  input  logic [DW-1:0]        wr_data [N],
  // load control
  input  logic                 load_start,
  input  mode_e                mode,
  input  logic [2:0]           n_tiles,   // 1..4 tiles to interleave
  output logic                 busy,
  // to the array
  output logic                 w_valid,
  output logic [DW-1:0]        w_o [N]
);
  // bank c, tile t, row
  logic [DW-1:0] mem [N][NTILES][N];

  logic          active;
  logic [AW-1:0] step;
  mode_e         mode_q;
  logic [2:0]    ntiles_q;

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int c = 0; c < N; c++) mem[c][wr_tile][wr_row] <= wr_data[c];
  end

  // pack the elements of column c at stationary row r
  function automatic logic [DW-1:0] pack(input mode_e m, input logic [2:0] nt,
                                         input logic [DW-1:0] e [NTILES]);
    logic [DW-1:0] w;
    w = '0;
    case (m)
      MODE_8X8: w = e[0];
      MODE_8X4: begin
        if (nt > 0) w[3:0] = e[0][3:0];
        if (nt > 1) w[7:4] = e[1][3:0];
      end
      default:
        for (int t = 0; t < NTILES; t++)
          if (t < int'(nt)) w[2*t +: 2] = e[t][1:0];
    endcase
    return w;
  endfunction

  // bank reads at the rotated addresses, then interleaving
  logic [DW-1:0] packed_w [N];
  always_comb begin
    for (int c = 0; c < N; c++) begin
      logic [DW-1:0] e [NTILES];
      logic [AW-1:0] row;
      // stationary row N-1-step of column c holds W[(row + c) mod N][c]
      row = AW'(((N - 1 - int'(step)) + c) % N);
      for (int t = 0; t < NTILES; t++) e[t] = mem[c][t][row];
      packed_w[c] = pack(mode_q, ntiles_q, e);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active   <= 1'b0;
      step     <= '0;
      mode_q   <= MODE_8X8;
      ntiles_q <= 3'd1;
      w_valid  <= 1'b0;
      for (int c = 0; c < N; c++) w_o[c] <= '0;
    end else begin
      w_valid <= 1'b0;
      if (!busy && load_start) begin
        active   <= 1'b1;
        step     <= '0;
        mode_q   <= mode;
        ntiles_q <= n_tiles;
      end else if (active) begin
        w_o <= packed_w;
        w_valid <= 1'b1;
        if (int'(step) == N - 1) active <= 1'b0;
        step <= step + 1'b1;
      end
    end
  end

  assign busy = active | w_valid;
endmodule
