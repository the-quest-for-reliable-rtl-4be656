// stat_unit: statistic unit of the statistical ABFT scheme.
//
// Plain ABFT recomputes whenever a checksum mismatches. This unit instead decides
// from the statistics of a whole window of mismatches whether they matter: it
// requests recomputation only when the errors fall in the critical region, where
// large enough deviations occur often enough to hurt the model's accuracy.
//
// Datapath, following the unit's block diagram:
//   * a subtractor forms the deviation d = e^T*Y - e^T*W*X of each checksum pair;
//   * an adder with a register accumulates MSD, the sum of |d| over the window;
//   * a buffer keeps each |d| of the window;
//   * log2_linear turns MSD and the coefficients a, b into theta_mag;
//   * countif(buffer[i] > theta_mag) gives freq_eff, the number of deviations
//     large enough to count.
// The window is in the critical region, and recompute is raised, when
// freq_eff > theta_freq. theta_freq = 0 suits sensitive layers (one large error is
// enough); a larger value suits resilient layers, which tolerate sporadic errors.
// Storing |d| rather than d, accumulating |d| into MSD and the final freq_eff >
// theta_freq test are this design's reading of the diagram.
//
// Timing: one pair per cycle while ready. The pair flagged in_last closes the
// window; the next cycle computes theta_mag, the one after that counts and
// registers the result, and done pulses for one cycle with result valid until the
// next window closes. ready is low for those STAT_GAP = 2 cycles. A window holds at
// most DEPTH pairs; further pairs still add to MSD but are not buffered, and set
// result.overflow. MSD saturates at its maximum.
module stat_unit #(
  parameter int unsigned DEPTH = 32,
  parameter int unsigned CHK_W = realm_pkg::CHK_W,
  parameter int unsigned MAG_W = realm_pkg::MAG_W,
  parameter int unsigned MSD_W = realm_pkg::MSD_W,
  parameter int unsigned A_W   = realm_pkg::A_W,
  parameter int unsigned B_W   = realm_pkg::B_W,
  localparam int unsigned FW   = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     in_last,
  input  realm_pkg::chk_pair_t     in_pair,
  input  logic [A_W-1:0]           cfg_a,
  input  logic signed [B_W-1:0]    cfg_b,
  input  logic [FW-1:0]            cfg_theta_freq,
  output logic                     ready,
  output logic                     done,
  output realm_pkg::stat_result_t  result
);

  typedef enum logic [1:0] {S_ACC, S_THETA, S_COUNT} state_e;
  localparam int unsigned PW = $clog2(DEPTH + 1);
  localparam int unsigned BW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  state_e                state;
  logic [MAG_W-1:0]      buffer [DEPTH];
  logic [PW-1:0]         n_buf;
  logic [MSD_W-1:0]      msd;
  logic                  ovf;
  logic [MAG_W-1:0]      theta_q;

  // deviation of the incoming pair
  logic signed [CHK_W:0] dev;
  logic [MAG_W-1:0]      mag;
  logic [MSD_W:0]        msd_sum;
  always_comb begin
    dev     = $signed({in_pair.ety[CHK_W-1], in_pair.ety}) -
              $signed({in_pair.etwx[CHK_W-1], in_pair.etwx});
    mag     = dev[CHK_W] ? MAG_W'(-dev) : MAG_W'(dev);
    msd_sum = {1'b0, msd} + (MSD_W + 1)'(mag);
  end

  // threshold from the accumulated deviation
  logic [MAG_W-1:0] theta_d;
  logic [$clog2(MSD_W)+realm_pkg::L_F-1:0] log2_msd;
  log2_linear #(.MSD_W(MSD_W), .MAG_W(MAG_W), .A_W(A_W), .B_W(B_W)) u_log2lin (
    .msd       (msd),
    .a         (cfg_a),
    .b         (cfg_b),
    .log2_msd  (log2_msd),
    .theta_mag (theta_d)
  );

  // countif(buffer[i] > theta_mag)
  logic [FW-1:0] count_d;
  always_comb begin
    count_d = '0;
    for (int i = 0; i < DEPTH; i++)
      if (PW'(i) < n_buf && buffer[i] > theta_q) count_d = count_d + 1'b1;
  end

  assign ready = (state == S_ACC);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_ACC;
      n_buf   <= '0;
      msd     <= '0;
      ovf     <= 1'b0;
      theta_q <= '0;
      done    <= 1'b0;
      result  <= '0;
      for (int i = 0; i < DEPTH; i++) buffer[i] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_ACC: if (in_valid) begin
          msd <= msd_sum[MSD_W] ? '1 : msd_sum[MSD_W-1:0];
          if (n_buf < PW'(DEPTH)) begin
            buffer[n_buf[BW-1:0]] <= mag;
            n_buf <= n_buf + 1'b1;
          end else begin
            ovf <= 1'b1;
          end
          if (in_last) state <= S_THETA;
        end
        S_THETA: begin
          theta_q <= theta_d;
          state   <= S_COUNT;
        end
        S_COUNT: begin
          result.recompute <= (count_d > cfg_theta_freq);
          result.overflow  <= ovf;
          result.freq_eff  <= count_d;
          result.msd       <= msd;
          result.theta_mag <= theta_q;
          done             <= 1'b1;
          n_buf            <= '0;
          msd              <= '0;
          ovf              <= 1'b0;
          state            <= S_ACC;
        end
        default: state <= S_ACC;
      endcase
    end
  end

  // A pair may only arrive while the unit is ready.
  a_handshake: assert property (@(posedge clk) disable iff (!rst_n) !in_valid || ready)
    else $error("stat_unit: pair presented while closing a window");

  initial assert (DEPTH < (1 << FW)) else $error("stat_unit: DEPTH too large for freq_eff");

endmodule
