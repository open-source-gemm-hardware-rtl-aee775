// fdp_pkg -- constants and helper functions shared by the fused-dot-product
// (FDP) systolic array.
//
// The defaults describe the array's main configuration: a 32 x 31 array of
// bfloat16 processing elements whose fixed-point accumulator window is
// <MSB=5, LSB=-30, OVF=2>, i.e. bits of weight 2^-30 .. 2^5 plus two guard
// bits for accumulation overflow, 38 bits in all (OVF + MSB - LSB + 1).
// The segment width of the carry-save accumulator (ACC_SEG) is not given by
// the paper and is this design's own choice.
package fdp_pkg;

  // array size
  localparam int unsigned ROWS     = 32;   // N: rows of A / rows of PEs
  localparam int unsigned COLS     = 31;   // M: columns of B / columns of PEs

  // arithmetic format (bfloat16)
  localparam int unsigned EXP_W    = 8;
  localparam int unsigned FRAC_W   = 7;

  // accumulator window
  localparam int          ACC_MSB  = 5;
  localparam int          ACC_LSB  = -30;
  localparam int unsigned ACC_OVF  = 2;

  // carry-save accumulator segment width (radix 2^ACC_SEG)
  localparam int unsigned ACC_SEG  = 16;

  // Width of the accumulator for a window <ovf, msb, lsb>.
  function automatic int unsigned acc_width(int unsigned ovf, int msb, int lsb);
    return ovf + msb - lsb + 1;
  endfunction

  // Number of k-bit segments needed to cover w bits.
  function automatic int unsigned num_segments(int unsigned w, int unsigned k);
    return (w + k - 1) / k;
  endfunction

endpackage
