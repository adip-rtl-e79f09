// adip_pe: reconfigurable processing element of the ADiP systolic array.
//
// The PE holds one 8-bit weight register, one 8-bit input (activation)
// register and four psum registers, each with its own enable. Sixteen 2-bit
// multipliers form four groups of four. Group g multiplies the whole 8-bit
// activation (as four 2-bit digits) by weight digit w[2g+1:2g] and adds the
// four digit products with fixed shifts of 0/2/4/6, giving an exact
// 8-bit x 2-bit product. Each group product is added to psum lane g arriving
// from the PE above and registered; the four lanes leave the PE as four
// separate buses. Recombining the lanes into 8b x 4b or 8b x 8b results is
// left to the shifters/accumulators shared by the whole column (adip_shift_acc).
// The precision mode only decides which weight digits are signed.
//
// Timing: in_q and psum_q are updated on the clock edge when en is high, so an
// activation captured in cycle t reaches psum_q in cycle t+1 (one multiply per
// cycle in every mode: 16 multipliers cover 8b x 8b in a single cycle).
// Weights shift down the column through w_q when w_load is high.
//
// From the paper: 16 2-bit multipliers in four groups, four psum accumulators,
// enabled registers for weight, input and psum, four psum buses per PE and the
// per-mode weight digit assignment to the groups. This design's own choices:
// two's complement operands, the bit packing of interleaved weights (tile 1 in
// the low bits), asynchronous active-low reset, and the psum lane width.
module adip_pe
  import adip_pkg::*;
#(
  parameter int unsigned PSUM_W = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  mode_e                    mode,
  // activation path
  input  logic                     en,        // input/psum register enable
  input  logic [DW-1:0]            in_i,
  output logic [DW-1:0]            in_o,      // registered activation
  // weight path (vertical)
  input  logic                     w_load,
  input  logic [DW-1:0]            w_i,
  output logic [DW-1:0]            w_o,       // registered (stationary) weight
  // psum path (vertical), four lanes
  input  logic signed [PSUM_W-1:0] psum_i [GROUPS],
  output logic signed [PSUM_W-1:0] psum_o [GROUPS]
);
  logic [DW-1:0]            in_q, w_q;
  logic signed [PSUM_W-1:0] psum_q [GROUPS];
  logic signed [5:0]        dprod  [GROUPS][4];
  logic signed [GPROD_W-1:0] gprod [GROUPS];

  // 16 2-bit multipliers: group g, input digit d
  for (genvar g = 0; g < GROUPS; g++) begin : g_grp
    for (genvar d = 0; d < 4; d++) begin : g_dig
      adip_mul2 u_mul (
        .a        (in_q[2*d +: 2]),
        .a_signed (d == 3),
        .b        (w_q[2*g +: 2]),
        .b_signed (wdigit_signed(mode, g)),
        .p        (dprod[g][d])
      );
    end
  end

  // group accumulators: combine the four digit products of a group
  always_comb begin
    for (int g = 0; g < GROUPS; g++) begin
      gprod[g] = '0;
      for (int d = 0; d < 4; d++)
        gprod[g] += GPROD_W'(dprod[g][d]) <<< (2 * d);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_q <= '0;
      w_q  <= '0;
      for (int g = 0; g < GROUPS; g++) psum_q[g] <= '0;
    end else begin
      if (w_load) w_q <= w_i;
      if (en) begin
        in_q <= in_i;
        for (int g = 0; g < GROUPS; g++)
          psum_q[g] <= psum_i[g] + PSUM_W'(gprod[g]);
      end
    end
  end

  assign in_o   = in_q;
  assign w_o    = w_q;
  assign psum_o = psum_q;
endmodule
