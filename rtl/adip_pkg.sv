// adip_pkg: types, constants and helper functions shared by the ADiP
// adaptive-precision systolic array.
//
// The array multiplies 8-bit activations by weights held in one of three
// precision modes. In every mode the 8-bit weight register of a PE is split
// into four 2-bit digits; digit g drives multiplier group g. Tile 1 sits in the
// least significant bits (this packing order is a choice of this design):
//   MODE_8X8 : one 8-bit weight   w = W1[7:0]
//   MODE_8X4 : two 4-bit weights  w = {W2[3:0], W1[3:0]}
//   MODE_8X2 : four 2-bit weights w = {W4[1:0], W3[1:0], W2[1:0], W1[1:0]}
// All operands are two's complement. A 2-bit digit is signed when it is the
// most significant digit of its weight, unsigned otherwise.
package adip_pkg;

  typedef enum logic [1:0] {
    MODE_8X8 = 2'd0,
    MODE_8X4 = 2'd1,
    MODE_8X2 = 2'd2
  } mode_e;

  // Activation and weight-register width.
  localparam int unsigned DW = 8;
  // Number of multiplier groups (= psum lanes) per PE, and multipliers per group.
  localparam int unsigned GROUPS = 4;
  // Width of one group product: signed 8-bit x 2-bit digit fits in 10 bits.
  localparam int unsigned GPROD_W = 10;

  // Psum lane width for an N-row column: group product plus log2(N) growth.
  function automatic int unsigned psum_w(int unsigned n);
    return GPROD_W + $clog2(n);
  endfunction

  // Result width after the shared shifters/accumulators (full 8b x 8b sum).
  function automatic int unsigned out_w(int unsigned n);
    return psum_w(n) + 6;
  endfunction

  // Is weight digit g (0 = least significant) signed in this mode?
  function automatic logic wdigit_signed(mode_e mode, int unsigned g);
    case (mode)
      MODE_8X8: return (g == 3);
      MODE_8X4: return (g == 1) || (g == 3);
      default:  return 1'b1;
    endcase
  endfunction

  // Left shift applied by the shared shifter to psum lane g.
  function automatic int unsigned lane_shift(mode_e mode, int unsigned g);
    case (mode)
      MODE_8X8: return 2 * g;
      MODE_8X4: return 2 * (g % 2);
      default:  return 0;
    endcase
  endfunction

  // Number of independent results each column delivers per input row.
  function automatic int unsigned results_per_col(mode_e mode);
    case (mode)
      MODE_8X8: return 1;
      MODE_8X4: return 2;
      default:  return 4;
    endcase
  endfunction

  // Latency added by the shared shift/accumulate unit (E in the latency model).
  function automatic int unsigned ext_stages(mode_e mode);
    case (mode)
      MODE_8X8: return 2;
      MODE_8X4: return 1;
      default:  return 0;
    endcase
  endfunction

endpackage
