// abft_os_array: output-stationary systolic array with ABFT checksums.
//
// An N x N grid of os_pe computes the tile Y = W X, PE(i,j) accumulating Y[i][j].
// Operand k of the reduction is presented as one column of W (w_col[i] = W[i][k])
// and one row of X (x_row[j] = X[k][j]) per cycle; the array skews them so that
// W[i][k] enters row i from the left after i cycles and X[k][j] enters column j
// from the top after j cycles, and both meet at PE(i,j). Three additions check the
// tile:
//   * a column of adders on the left, one per row, chained downwards. Each stage
//     adds the weight entering its row to the running sum from above and
//     registers it; the bottom stage delivers the 16-bit weight checksum
//     e^T*W[.][k] for operand k;
//   * a row of checksum PEs at the bottom, fed with that checksum from the left and
//     with the activations leaving the bottom of each column, so checksum PE j
//     accumulates (e^T*W*X)[j];
//   * a row of 32-bit accumulators below the columns, which add up the results as
//     they are shifted out, giving (e^T*Y)[j].
//
// Sequence (an FSM of this design; the paper gives the structure, not the
// control): start clears the tile and enters FEED. Operands are accepted with
// in_valid; in_last ends the tile. FLUSH waits 2*N cycles for the last operands to
// reach the checksum row. DRAIN shifts every column down one PE per cycle for N
// cycles: y_valid/y_data give row N-1 first, row 0 last (y_row is the row index)
// and the e^T*Y accumulators sum them. CHECK then presents the N checksum pairs,
// one column per cycle, on chk_valid/chk (chk_last on column N-1), and the array
// returns to IDLE. busy is high from start to the end of CHECK.
//
// Fault injection: inj_en XORs inj_mask into the accumulator of PE(inj_row,
// inj_col) this cycle (inj_row = N is the checksum row). A port of this design,
// for reproducing timing errors in simulation.
module abft_os_array #(
  parameter int unsigned N     = 16,
  parameter int unsigned X_W   = realm_pkg::X_W,
  parameter int unsigned W_W   = realm_pkg::W_W,
  parameter int unsigned ACC_W = realm_pkg::ACC_W,
  parameter int unsigned CW_W  = realm_pkg::CW_W,
  parameter int unsigned CHK_W = realm_pkg::CHK_W,
  localparam int unsigned IW   = $clog2(N + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic                    in_valid,
  input  logic                    in_last,
  input  logic signed [W_W-1:0]   w_col [N],
  input  logic signed [X_W-1:0]   x_row [N],
  input  logic                    inj_en,
  input  logic [IW-1:0]           inj_row,
  input  logic [IW-1:0]           inj_col,
  input  logic [CHK_W-1:0]        inj_mask,
  output logic                    busy,
  output logic                    in_ready,
  output logic                    y_valid,
  output logic [IW-1:0]           y_row,
  output logic signed [ACC_W-1:0] y_data [N],
  output logic                    chk_valid,
  output logic                    chk_last,
  output realm_pkg::chk_pair_t    chk
);

  typedef enum logic [2:0] {S_IDLE, S_FEED, S_FLUSH, S_DRAIN, S_CHECK} state_e;
  localparam int unsigned CW = $clog2(2 * N + 1);
  localparam int unsigned JW = (N > 1) ? $clog2(N) : 1;

  state_e        state;
  logic [CW-1:0] cnt;
  logic          clr, drain, feed;

  assign feed     = (state == S_FEED) && in_valid;
  assign clr      = start && (state == S_IDLE);
  assign drain    = (state == S_DRAIN);
  assign busy     = (state != S_IDLE);
  assign in_ready = (state == S_FEED);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt   <= '0;
    end else begin
      unique case (state)
        S_IDLE:  if (start) state <= S_FEED;
        S_FEED:  if (in_valid && in_last) begin
                   state <= S_FLUSH;
                   cnt   <= '0;
                 end
        S_FLUSH: if (cnt == CW'(2 * N - 1)) begin
                   state <= S_DRAIN;
                   cnt   <= '0;
                 end else cnt <= cnt + 1'b1;
        S_DRAIN: if (cnt == CW'(N - 1)) begin
                   state <= S_CHECK;
                   cnt   <= '0;
                 end else cnt <= cnt + 1'b1;
        S_CHECK: if (cnt == CW'(N - 1)) begin
                   state <= S_IDLE;
                   cnt   <= '0;
                 end else cnt <= cnt + 1'b1;
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- input skew
  logic signed [W_W-1:0] w_sk [N];
  logic                  v_sk [N];
  logic signed [X_W-1:0] x_sk [N];
  for (genvar i = 0; i < N; i++) begin : g_skew
    if (i == 0) begin : g_direct
      assign w_sk[i] = feed ? w_col[i] : '0;
      assign v_sk[i] = feed;
      assign x_sk[i] = feed ? x_row[i] : '0;
    end else begin : g_delay
      logic signed [W_W-1:0] wsr [i];
      logic                  vsr [i];
      logic signed [X_W-1:0] xsr [i];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int d = 0; d < i; d++) begin
            wsr[d] <= '0;
            vsr[d] <= 1'b0;
            xsr[d] <= '0;
          end
        end else begin
          wsr[0] <= feed ? w_col[i] : '0;
          vsr[0] <= feed;
          xsr[0] <= feed ? x_row[i] : '0;
          for (int d = 1; d < i; d++) begin
            wsr[d] <= wsr[d-1];
            vsr[d] <= vsr[d-1];
            xsr[d] <= xsr[d-1];
          end
        end
      end
      assign w_sk[i] = wsr[i-1];
      assign v_sk[i] = vsr[i-1];
      assign x_sk[i] = xsr[i-1];
    end
  end

  // ---------------------------------------------------------------- weight checksum column
  logic signed [CW_W-1:0] wc_q [N];
  logic                   wv_q [N];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        wc_q[i] <= '0;
        wv_q[i] <= 1'b0;
      end
    end else begin
      wc_q[0] <= CW_W'(w_sk[0]);
      wv_q[0] <= v_sk[0];
      for (int i = 1; i < N; i++) begin
        wc_q[i] <= wc_q[i-1] + CW_W'(w_sk[i]);
        wv_q[i] <= wv_q[i-1];
      end
    end
  end

  // ---------------------------------------------------------------- PE grid
  // row index N is the checksum row
  logic signed [W_W-1:0]   w_h  [N][N+1];
  logic                    v_h  [N+1][N+1];
  logic signed [X_W-1:0]   x_v  [N+2][N];
  logic signed [ACC_W-1:0] acc  [N][N];
  logic signed [CW_W-1:0]  cw_h [N+1];
  logic signed [CHK_W-1:0] etwx [N];

  for (genvar j = 0; j < N; j++) begin : g_xin
    assign x_v[0][j] = x_sk[j];
  end

  for (genvar i = 0; i < N; i++) begin : g_row
    assign w_h[i][0] = w_sk[i];
    assign v_h[i][0] = v_sk[i];
    for (genvar j = 0; j < N; j++) begin : g_col
      logic [ACC_W-1:0] mask;
      logic signed [ACC_W-1:0] above;
      assign mask  = (inj_en && inj_row == IW'(i) && inj_col == IW'(j)) ?
                     inj_mask[ACC_W-1:0] : '0;
      if (i == 0) begin : g_first
        assign above = '0;
      end else begin : g_next
        assign above = acc[i-1][j];
      end
      os_pe #(.X_W(X_W), .W_W(W_W), .ACC_W(ACC_W)) u_pe (
        .clk, .rst_n,
        .clr, .drain,
        .valid_in  (v_h[i][j]),
        .w_in      (w_h[i][j]),
        .x_in      (x_v[i][j]),
        .acc_in    (above),
        .err_mask  (mask),
        .valid_out (v_h[i][j+1]),
        .w_out     (w_h[i][j+1]),
        .x_out     (x_v[i+1][j]),
        .acc_out   (acc[i][j])
      );
    end
  end

  // checksum row: weight checksum from the left, activations from above
  assign cw_h[0]   = wc_q[N-1];
  assign v_h[N][0] = wv_q[N-1];
  for (genvar j = 0; j < N; j++) begin : g_chk
    logic [CHK_W-1:0] mask;
    assign mask = (inj_en && inj_row == IW'(N) && inj_col == IW'(j)) ? inj_mask : '0;
    os_pe #(.X_W(X_W), .W_W(CW_W), .ACC_W(CHK_W)) u_chk_pe (
      .clk, .rst_n,
      .clr,
      .drain     (1'b0),
      .valid_in  (v_h[N][j]),
      .w_in      (cw_h[j]),
      .x_in      (x_v[N][j]),
      .acc_in    ('0),
      .err_mask  (mask),
      .valid_out (v_h[N][j+1]),
      .w_out     (cw_h[j+1]),
      .x_out     (x_v[N+1][j]),
      .acc_out   (etwx[j])
    );
  end

  // ---------------------------------------------------------------- e^T*Y accumulators
  logic signed [CHK_W-1:0] ety [N];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < N; j++) ety[j] <= '0;
    end else if (clr) begin
      for (int j = 0; j < N; j++) ety[j] <= '0;
    end else if (drain) begin
      for (int j = 0; j < N; j++) ety[j] <= ety[j] + CHK_W'(acc[N-1][j]);
    end
  end

  // ---------------------------------------------------------------- outputs
  for (genvar j = 0; j < N; j++) begin : g_y
    assign y_data[j] = acc[N-1][j];
  end
  assign y_valid   = drain;
  assign y_row     = IW'(N - 1) - IW'(cnt);
  assign chk_valid = (state == S_CHECK);
  assign chk_last  = (state == S_CHECK) && (cnt == CW'(N - 1));
  assign chk.ety   = ety[cnt[JW-1:0]];
  assign chk.etwx  = etwx[cnt[JW-1:0]];

endmodule
