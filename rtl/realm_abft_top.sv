// realm_abft_top: systolic-array accelerator with statistical ABFT.
//
// The accelerator holds both dataflows: a weight-stationary array
// (abft_ws_array) and an output-stationary array (abft_os_array), each with its
// own checksum PEs and checksum adders. The mode input selects which one runs. The
// selected array's checksum pairs (e^T*Y, e^T*W*X) go to the one statistic unit
// (stat_unit), which decides per window whether the errors seen call for
// recomputation. The recomputation itself is left to the system around the
// accelerator: recompute and stat_done are outputs.
//
// Mode: change mode only when both arrays are idle. Inputs of the array that is
// not selected are held inactive.
//
// WS mode: load weights with ws_w_we/ws_w_row/ws_w_data (one array row per
// cycle, row r = weights multiplying x[r]), then stream activation vectors with
// ws_x_valid; ws_x_last closes a statistics window. Results appear 2*N cycles
// later on ws_y_valid/ws_y_data. After a window closes, ws_x_ready is low for
// STAT_GAP cycles so the statistic unit can finish the window before the next one
// reaches it (a stall of the input; this bubble is this design's choice).
//
// OS mode: os_start, then one (W column, X row) operand per cycle with os_in_valid
// while os_in_ready, os_in_last on the last. Results drain on os_y_valid/os_y_row/
// os_y_data and the tile's N checksum pairs form one statistics window.
//
// Fault injection (inj_*) is routed to the selected array; see the arrays.
module realm_abft_top #(
  parameter int unsigned N     = 16,
  parameter int unsigned DEPTH = 32,
  localparam int unsigned X_W   = realm_pkg::X_W,
  localparam int unsigned W_W   = realm_pkg::W_W,
  localparam int unsigned ACC_W = realm_pkg::ACC_W,
  localparam int unsigned CHK_W = realm_pkg::CHK_W,
  localparam int unsigned A_W   = realm_pkg::A_W,
  localparam int unsigned B_W   = realm_pkg::B_W,
  localparam int unsigned IW    = $clog2(N + 1)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       mode,          // realm_pkg::dataflow_e
  // statistic unit configuration
  input  logic [A_W-1:0]             cfg_a,
  input  logic signed [B_W-1:0]      cfg_b,
  input  logic [7:0]                 cfg_theta_freq,
  // WS weight load and activation stream
  input  logic                       ws_w_we,
  input  logic [IW-1:0]              ws_w_row,
  input  logic signed [W_W-1:0]      ws_w_data [N],
  input  logic                       ws_x_valid,
  input  logic                       ws_x_last,
  input  logic signed [X_W-1:0]      ws_x_data [N],
  output logic                       ws_x_ready,
  output logic                       ws_y_valid,
  output logic signed [ACC_W-1:0]    ws_y_data [N],
  // OS operand stream
  input  logic                       os_start,
  input  logic                       os_in_valid,
  input  logic                       os_in_last,
  input  logic signed [W_W-1:0]      os_w_col [N],
  input  logic signed [X_W-1:0]      os_x_row [N],
  output logic                       os_in_ready,
  output logic                       os_busy,
  output logic                       os_y_valid,
  output logic [IW-1:0]              os_y_row,
  output logic signed [ACC_W-1:0]    os_y_data [N],
  // fault injection
  input  logic                       inj_en,
  input  logic [IW-1:0]              inj_row,
  input  logic [IW-1:0]              inj_col,
  input  logic [CHK_W-1:0]           inj_mask,
  // statistical ABFT verdict
  output logic                       stat_done,
  output logic                       recompute,
  output realm_pkg::stat_result_t    stat_result
);

  import realm_pkg::*;

  dataflow_e df;
  assign df = dataflow_e'(mode);

  // ------------------------------------------------------------ WS input gap
  localparam int unsigned GW = $clog2(STAT_GAP + 1);
  logic [GW-1:0] gap;
  logic          ws_fire;
  assign ws_x_ready = (df == DF_WS) && (gap == '0);
  assign ws_fire    = ws_x_valid && ws_x_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    gap <= '0;
    else if (ws_fire && ws_x_last) gap <= GW'(STAT_GAP);
    else if (gap != '0)            gap <= gap - 1'b1;
  end

  // ------------------------------------------------------------ WS array
  logic      ws_out_valid, ws_out_last;
  chk_pair_t ws_chk;

  abft_ws_array #(.N(N)) u_ws (
    .clk, .rst_n,
    .w_we      (ws_w_we && df == DF_WS),
    .w_row     (ws_w_row),
    .w_data    (ws_w_data),
    .x_valid   (ws_fire),
    .x_last    (ws_x_last),
    .x_data    (ws_x_data),
    .inj_en    (inj_en && df == DF_WS),
    .inj_row, .inj_col, .inj_mask,
    .out_valid (ws_out_valid),
    .out_last  (ws_out_last),
    .y_data    (ws_y_data),
    .chk       (ws_chk)
  );
  assign ws_y_valid = ws_out_valid;

  // ------------------------------------------------------------ OS array
  logic      os_chk_valid, os_chk_last;
  chk_pair_t os_chk;

  abft_os_array #(.N(N)) u_os (
    .clk, .rst_n,
    .start     (os_start && df == DF_OS),
    .in_valid  (os_in_valid && df == DF_OS),
    .in_last   (os_in_last),
    .w_col     (os_w_col),
    .x_row     (os_x_row),
    .inj_en    (inj_en && df == DF_OS),
    .inj_row, .inj_col, .inj_mask,
    .busy      (os_busy),
    .in_ready  (os_in_ready),
    .y_valid   (os_y_valid),
    .y_row     (os_y_row),
    .y_data    (os_y_data),
    .chk_valid (os_chk_valid),
    .chk_last  (os_chk_last),
    .chk       (os_chk)
  );

  // ------------------------------------------------------------ statistic unit
  logic      st_valid, st_last, st_ready;
  chk_pair_t st_pair;

  always_comb begin
    if (df == DF_WS) begin
      st_valid = ws_out_valid;
      st_last  = ws_out_last;
      st_pair  = ws_chk;
    end else begin
      st_valid = os_chk_valid;
      st_last  = os_chk_last;
      st_pair  = os_chk;
    end
  end

  stat_unit #(.DEPTH(DEPTH)) u_stat (
    .clk, .rst_n,
    .in_valid       (st_valid),
    .in_last        (st_last),
    .in_pair        (st_pair),
    .cfg_a, .cfg_b, .cfg_theta_freq,
    .ready          (st_ready),
    .done           (stat_done),
    .result         (stat_result)
  );
  assign recompute = stat_done && stat_result.recompute;

  // The input gap guarantees the statistic unit is never offered a pair it cannot take.
  a_handshake: assert property (@(posedge clk) disable iff (!rst_n) !st_valid || st_ready)
    else $error("realm_abft_top: checksum pair lost");

endmodule
