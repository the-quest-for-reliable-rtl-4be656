// abft_ws_array: weight-stationary systolic array with algorithm-based fault
// tolerance (ABFT) checksums.
//
// An N x N grid of ws_pe computes y = W x for one activation vector per cycle.
// PE(r,c) holds W[c][r]: activations enter row r from the left and move right,
// partial sums move down, and column c delivers y[c] at the bottom. Two additions
// make the result checkable:
//   * a checksum column on the right. Its PE in row r holds sum_c W[c][r], so the
//     column delivers e^T*W*x (32 bits), the predicted sum of the outputs;
//   * an adder row at the bottom. Each stage adds its column's y[c] to the running
//     sum from its left and registers it, following the skew of the outputs, so
//     the last stage delivers e^T*y (32 bits), the sum actually computed.
// In an error-free pass the two are equal; the pair goes to the statistic unit.
//
// Weight loading: w_we writes one array row, the N weights W[0..N-1][w_row] that
// multiply input x[w_row]. The checksum PE of that row is loaded at the same time
// with the sum of those N weights, formed by an adder here (where the weight
// checksum is formed is not stated; computing it on load is this design's choice).
//
// Streaming: x_data is given unskewed with x_valid/x_last; the array skews it
// internally (row r delayed r cycles) and deskews y, so y_data, ety and etwx for a
// vector all appear together LATENCY = 2*N cycles after it is presented, with
// out_valid/out_last. One vector per cycle, no stalls. x_last marks the end of a
// statistics window and is passed through as out_last.
//
// Fault injection: when inj_en is set, inj_mask is XORed into the partial sum
// register of PE(inj_row, inj_col) this cycle; the vector presented t cycles
// earlier is hit when t = inj_row + inj_col. inj_col = N selects the checksum PE.
// This port is this design's, for reproducing timing errors in simulation.
module abft_ws_array #(
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
  // weight load
  input  logic                    w_we,
  input  logic [IW-1:0]           w_row,
  input  logic signed [W_W-1:0]   w_data [N],
  // activation stream
  input  logic                    x_valid,
  input  logic                    x_last,
  input  logic signed [X_W-1:0]   x_data [N],
  // fault injection
  input  logic                    inj_en,
  input  logic [IW-1:0]           inj_row,
  input  logic [IW-1:0]           inj_col,
  input  logic [CHK_W-1:0]        inj_mask,
  // results
  output logic                    out_valid,
  output logic                    out_last,
  output logic signed [ACC_W-1:0] y_data [N],
  output realm_pkg::chk_pair_t    chk
);

  localparam int unsigned LAT = 2 * N;

  // ---------------------------------------------------------------- weights
  logic signed [CW_W-1:0] w_sum;
  always_comb begin
    w_sum = '0;
    for (int c = 0; c < N; c++) w_sum += CW_W'(w_data[c]);
  end

  // ---------------------------------------------------------------- input skew
  logic signed [X_W-1:0] x_row_in [N];
  for (genvar r = 0; r < N; r++) begin : g_skew
    if (r == 0) begin : g_direct
      assign x_row_in[r] = x_data[r];
    end else begin : g_delay
      logic signed [X_W-1:0] sr [r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < r; i++) sr[i] <= '0;
        end else begin
          sr[0] <= x_data[r];
          for (int i = 1; i < r; i++) sr[i] <= sr[i-1];
        end
      end
      assign x_row_in[r] = sr[r-1];
    end
  end

  // ---------------------------------------------------------------- PE grid
  // x_h[r][c] : activation entering PE(r,c) from the left
  // ps[r][c]  : partial sum entering PE(r,c) from above (ps[N][c] = column output)
  logic signed [X_W-1:0]   x_h [N][N+2];
  logic signed [ACC_W-1:0] ps  [N+1][N];
  logic signed [CHK_W-1:0] cps [N+1];

  for (genvar r = 0; r < N; r++) begin : g_row
    assign x_h[r][0] = x_row_in[r];
    for (genvar c = 0; c < N; c++) begin : g_col
      logic [ACC_W-1:0] mask;
      assign mask = (inj_en && inj_row == IW'(r) && inj_col == IW'(c)) ?
                    inj_mask[ACC_W-1:0] : '0;
      ws_pe #(.X_W(X_W), .W_W(W_W), .ACC_W(ACC_W)) u_pe (
        .clk, .rst_n,
        .w_we     (w_we && w_row == IW'(r)),
        .w_in     (w_data[c]),
        .x_in     (x_h[r][c]),
        .psum_in  (ps[r][c]),
        .err_mask (mask),
        .x_out    (x_h[r][c+1]),
        .psum_out (ps[r+1][c])
      );
    end
    // checksum PE holding sum_c W[c][r]
    logic [CHK_W-1:0] cmask;
    assign cmask = (inj_en && inj_row == IW'(r) && inj_col == IW'(N)) ? inj_mask : '0;
    ws_pe #(.X_W(X_W), .W_W(CW_W), .ACC_W(CHK_W)) u_chk_pe (
      .clk, .rst_n,
      .w_we     (w_we && w_row == IW'(r)),
      .w_in     (w_sum),
      .x_in     (x_h[r][N]),
      .psum_in  (cps[r]),
      .err_mask (cmask),
      .x_out    (x_h[r][N+1]),
      .psum_out (cps[r+1])
    );
  end

  for (genvar c = 0; c < N; c++) begin : g_top
    assign ps[0][c] = '0;
  end
  assign cps[0] = '0;

  // ---------------------------------------------------------------- e^T*y adder row
  logic signed [CHK_W-1:0] ety_q [N];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < N; c++) ety_q[c] <= '0;
    end else begin
      ety_q[0] <= CHK_W'(ps[N][0]);
      for (int c = 1; c < N; c++) ety_q[c] <= ety_q[c-1] + CHK_W'(ps[N][c]);
    end
  end

  // ---------------------------------------------------------------- output deskew
  // column c leaves at 2N - (N - c); delay it by N - c cycles.
  for (genvar c = 0; c < N; c++) begin : g_deskew
    localparam int unsigned D = N - c;
    logic signed [ACC_W-1:0] sr [D];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < D; i++) sr[i] <= '0;
      end else begin
        sr[0] <= ps[N][c];
        for (int i = 1; i < D; i++) sr[i] <= sr[i-1];
      end
    end
    assign y_data[c] = sr[D-1];
  end

  // ---------------------------------------------------------------- valid/last
  logic [LAT-1:0] v_sr, l_sr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_sr <= '0;
      l_sr <= '0;
    end else begin
      v_sr <= {v_sr[LAT-2:0], x_valid};
      l_sr <= {l_sr[LAT-2:0], x_valid && x_last};
    end
  end
  assign out_valid = v_sr[LAT-1];
  assign out_last  = l_sr[LAT-1];
  assign chk.ety   = ety_q[N-1];
  assign chk.etwx  = cps[N];

endmodule
