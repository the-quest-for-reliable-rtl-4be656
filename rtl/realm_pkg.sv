// realm_pkg: types and widths shared by the statistical-ABFT systolic array.
//
// The data path follows the MAC of a TPU-like array: signed 8-bit operands and a
// 24-bit partial-sum accumulator in every ordinary PE. The checksum path is wider:
// weight checksums (the sum of N weights) are 16 bits and the two output checksums,
// e^T*Y and e^T*W*X, are 32 bits, as printed in the array diagram. The statistic
// unit's own widths (deviation magnitude, accumulated deviation, fixed-point
// coefficient formats) are choices of this design.
package realm_pkg;

  // Operand and accumulator widths of an ordinary PE.
  localparam int unsigned X_W   = 8;   // activation width
  localparam int unsigned W_W   = 8;   // weight width
  localparam int unsigned ACC_W = 24;  // PE partial-sum width

  // Checksum widths.
  localparam int unsigned CW_W  = 16;  // weight checksum e^T*W
  localparam int unsigned CHK_W = 32;  // output checksums e^T*Y and e^T*W*X

  // Statistic unit widths.
  localparam int unsigned MAG_W = CHK_W + 1; // |e^T*Y - e^T*W*X|
  localparam int unsigned MSD_W = 40;        // accumulated deviation (saturating)
  localparam int unsigned A_W   = 8;         // coefficient a, unsigned Q2.6
  localparam int unsigned A_F   = 6;
  localparam int unsigned B_W   = 12;        // coefficient b, signed Q7.4
  localparam int unsigned B_F   = 4;
  localparam int unsigned L_F   = 4;         // fractional bits of log2 values

  // Cycles the statistic unit needs after the last pair of a window before it
  // accepts the first pair of the next one.
  localparam int unsigned STAT_GAP = 2;

  // Dataflow the accelerator runs in.
  typedef enum logic {
    DF_WS = 1'b0,  // weight stationary
    DF_OS = 1'b1   // output stationary
  } dataflow_e;

  // One checksum comparison: the sum of the computed outputs and the sum predicted
  // from the weight checksums.
  typedef struct packed {
    logic signed [CHK_W-1:0] ety;
    logic signed [CHK_W-1:0] etwx;
  } chk_pair_t;

  // Verdict of the statistic unit for one window of comparisons.
  typedef struct packed {
    logic              recompute;  // errors fall in the critical region
    logic              overflow;   // more pairs than the buffer holds
    logic [7:0]        freq_eff;   // deviations above theta_mag
    logic [MSD_W-1:0]  msd;        // accumulated deviation magnitude
    logic [MAG_W-1:0]  theta_mag;  // magnitude threshold for this window
  } stat_result_t;

endpackage
