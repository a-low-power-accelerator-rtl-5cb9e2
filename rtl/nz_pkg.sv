// nz_pkg: sizes and types shared by the near-zero-skipping accelerator.
//
// The accelerator multiplies a 16-bit fixed-point weight matrix by a 16-bit
// input vector. Sixteen Processing Lanes each hold sixteen multipliers
// (256 in all); each lane computes one output neuron. The word width, the lane
// count, the multipliers per lane and the 5-bit threshold are the paper's
// numbers. The accumulator width and the memory depths are this design's
// own choices.
package nz_pkg;
  localparam int unsigned W      = 16;  // operand width (two's complement)
  localparam int unsigned NUM_LANES = 16;  // Processing Lanes, one neuron each
  localparam int unsigned NUM_SLOTS = 16;  // multipliers per lane = buffer slots
  localparam int unsigned TH_W   = 5;   // threshold width
  localparam int unsigned LZ_W   = 5;   // leading-zero count of one operand, 0..16
  localparam int unsigned LT_W   = 6;   // total of two counts, 0..32
  localparam int unsigned ACC_W  = 48;  // lane accumulator width
  localparam int unsigned SH_W   = 6;   // output shift amount width

  typedef logic signed [W-1:0] word_t;
  typedef logic        [W-1:0] mag_t;
  typedef logic signed [ACC_W-1:0] acc_t;
endpackage
