// log2_linear: the "Log2LinearFunction" of the statistic unit.
//
// It turns the deviation accumulated over a window (MSD) into the magnitude above
// which a single deviation is counted as a critical error. The critical-region
// boundary is a straight line in the log2 domain, log2(freq) = a*log2(MSD) - b;
// this block evaluates the same linear form to obtain the threshold,
//     log2(theta_mag) = a * log2(MSD) - b,
// with a and b as run-time coefficients fitted per task and layer type.
//
// Arithmetic (this design's choice; the paper names the function only):
//   * log2(MSD) uses Mitchell's approximation: the position of the leading one is
//     the integer part and the L_F bits below it are the fraction. MSD = 0 gives 0.
//   * a is unsigned Q(A_W-A_F).A_F, b is signed Q(B_W-B_F).B_F.
//   * 2^t is formed the inverse way: (1 + frac) shifted left by the integer part,
//     truncated to an integer. t < 0 gives theta_mag = 0; a result that does not fit
//     in MAG_W bits saturates to all ones.
// Purely combinational.
module log2_linear #(
  parameter int unsigned MSD_W = realm_pkg::MSD_W,
  parameter int unsigned MAG_W = realm_pkg::MAG_W,
  parameter int unsigned A_W   = realm_pkg::A_W,
  parameter int unsigned A_F   = realm_pkg::A_F,
  parameter int unsigned B_W   = realm_pkg::B_W,
  parameter int unsigned B_F   = realm_pkg::B_F,
  parameter int unsigned L_F   = realm_pkg::L_F,
  localparam int unsigned LI_W = $clog2(MSD_W),
  localparam int unsigned L_W  = LI_W + L_F
) (
  input  logic [MSD_W-1:0]     msd,
  input  logic [A_W-1:0]       a,
  input  logic signed [B_W-1:0] b,
  output logic [L_W-1:0]       log2_msd,   // UQ(LI_W).L_F
  output logic [MAG_W-1:0]     theta_mag
);

  localparam int unsigned P_W  = A_W + L_W;       // a * log2(MSD)
  localparam int unsigned T_F  = A_F + L_F;       // fraction bits of the product
  localparam int unsigned T_W  = P_W + 2;         // signed difference
  localparam int unsigned M_W  = MAG_W + L_F;

  logic [LI_W-1:0]       lead;
  logic [MSD_W-1:0]      norm;
  logic [L_F-1:0]        frac;
  logic [P_W-1:0]        prod;
  logic signed [T_W-1:0] b_al, t;
  logic [T_W-1:0]        t_int;
  logic [L_F-1:0]        t_frac;
  logic [M_W-1:0]        mant;

  always_comb begin
    // leading-one position
    lead = '0;
    for (int i = 0; i < MSD_W; i++) if (msd[i]) lead = LI_W'(i);
    norm     = msd << (LI_W'(MSD_W - 1) - lead);
    frac     = norm[MSD_W-2 -: L_F];
    log2_msd = {lead, frac};

    prod   = P_W'(a) * P_W'(log2_msd);
    b_al   = T_W'(b) <<< (T_F - B_F);
    t      = $signed({2'b00, prod}) - b_al;
    t_int  = T_W'(t >>> T_F);
    t_frac = t[T_F-1 -: L_F];
    mant   = M_W'({1'b1, t_frac});

    if (t < 0)                   theta_mag = '0;
    else if (t_int >= T_W'(MAG_W)) theta_mag = '1;
    else begin
      mant      = mant << t_int;
      theta_mag = MAG_W'(mant >> L_F);
    end
  end

endmodule
