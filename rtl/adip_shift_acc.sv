// adip_shift_acc: shifters and accumulators shared by one PE column.
//
// The four psum lanes leaving the bottom PE of a column hold sums of
// 8-bit x 2-bit products, one per weight digit position. This unit recombines
// them according to the precision mode:
//   shifters : lane g is shifted left by 2g (8b x 8b), 2(g mod 2) (8b x 4b)
//              or not at all (8b x 2b);
//   stage 1  : two adders, s0 = lane0' + lane1', s1 = lane2' + lane3'
//              (registered) -- these are the two 8b x 4b results;
//   stage 2  : one adder, s0 + s1 (registered) -- the 8b x 8b result.
// The output is taken straight from the input lanes (8b x 2b: four results,
// no added latency), from stage 1 (8b x 4b: two results in res[0..1],
// one cycle) or from stage 2 (8b x 8b: one result in res[0], two cycles).
// Unused result slots are zero. valid_i is delayed alongside and selected the
// same way, so valid_o marks the cycle the selected results are present.
// en stalls both stages.
//
// The shifter / two-adder / one-adder arrangement and the mode-dependent
// output tap follow the paper; the register after each adder stage and the
// valid tracking are this design's choices.
module adip_shift_acc
  import adip_pkg::*;
#(
  parameter int unsigned PSUM_W = 16,
  parameter int unsigned OUT_W  = PSUM_W + 6
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  mode_e                    mode,
  input  logic                     en,
  input  logic                     valid_i,
  input  logic signed [PSUM_W-1:0] lane_i [GROUPS],
  output logic                     valid_o,
  output logic signed [OUT_W-1:0]  res_o  [GROUPS]
);
  logic signed [OUT_W-1:0] sh [GROUPS];
  logic signed [OUT_W-1:0] s1_q [2];
  logic signed [OUT_W-1:0] s2_q;
  logic                    v1_q, v2_q;

  // reconfigurable shifters
  always_comb begin
    for (int g = 0; g < GROUPS; g++)
      sh[g] = OUT_W'(lane_i[g]) <<< lane_shift(mode, g);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_q[0] <= '0;
      s1_q[1] <= '0;
      s2_q    <= '0;
      v1_q    <= 1'b0;
      v2_q    <= 1'b0;
    end else if (en) begin
      s1_q[0] <= sh[0] + sh[1];
      s1_q[1] <= sh[2] + sh[3];
      s2_q    <= s1_q[0] + s1_q[1];
      v1_q    <= valid_i;
      v2_q    <= v1_q;
    end
  end

  // output selection by precision mode
  always_comb begin
    for (int g = 0; g < GROUPS; g++) res_o[g] = '0;
    case (mode)
      MODE_8X8: begin
        res_o[0] = s2_q;
        valid_o  = v2_q;
      end
      MODE_8X4: begin
        res_o[0] = s1_q[0];
        res_o[1] = s1_q[1];
        valid_o  = v1_q;
      end
      default: begin
        for (int g = 0; g < GROUPS; g++) res_o[g] = OUT_W'(lane_i[g]);
        valid_o = valid_i;
      end
    endcase
  end
endmodule
