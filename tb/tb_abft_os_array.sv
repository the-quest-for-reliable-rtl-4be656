// tb_abft_os_array: self-checking test of the output-stationary ABFT array.
// Runs tiles of different reduction lengths (1, 7, 40) with random valid gaps,
// checks every drained row of Y against a reference product, the drain order
// (row N-1 first), the per-column checksum pairs e^T*Y and e^T*W*X, and the cycle
// counts of the FLUSH (2*N), DRAIN (N) and CHECK (N) phases. One tile injects an
// error into an ordinary PE (y and e^T*Y change, e^T*W*X does not), another into a
// checksum-row PE (only e^T*W*X changes).
module tb_abft_os_array;
  localparam int N  = 16;
  localparam int IW = $clog2(N + 1);
  localparam int KMAX = 40;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic                start, in_valid, in_last;
  logic signed [7:0]   w_col [N];
  logic signed [7:0]   x_row [N];
  logic                inj_en;
  logic [IW-1:0]       inj_row, inj_col;
  logic [31:0]         inj_mask;
  logic                busy, in_ready, y_valid, chk_valid, chk_last;
  logic [IW-1:0]       y_row;
  logic signed [23:0]  y_data [N];
  realm_pkg::chk_pair_t chk;

  abft_os_array #(.N(N)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic longint sext24(longint v);
    v = v & 64'hFFFFFF;
    return (v >= 64'h800000) ? v - 64'h1000000 : v;
  endfunction
  function automatic longint sext32(longint v);
    v = v & 64'hFFFF_FFFF;
    return (v >= 64'h8000_0000) ? v - 64'h1_0000_0000 : v;
  endfunction

  int Wt [N][KMAX];
  int Xt [KMAX][N];
  longint Yobs [N][N];

  task automatic run_tile(input int K, input int inj_kind);
    // inj_kind: 0 none, 1 ordinary PE (2,3), 2 checksum PE (N,4)
    int t_last, t_y0, t_chk0, nrow, nchk;
    longint yref, ety_exp, etwx_exp, wsum;
    for (int i = 0; i < N; i++) for (int k = 0; k < K; k++) Wt[i][k] = int'($urandom_range(255)) - 128;
    for (int k = 0; k < K; k++) for (int j = 0; j < N; j++) Xt[k][j] = int'($urandom_range(255)) - 128;
    start = 1; @(posedge clk); #1; start = 0;
    check(busy && in_ready, "FEED after start");
    for (int k = 0; k < K; k++) begin
      while ($urandom_range(3) == 0) begin in_valid = 0; @(posedge clk); #1; end
      in_valid = 1; in_last = (k == K - 1);
      for (int i = 0; i < N; i++) w_col[i] = 8'(Wt[i][k]);
      for (int j = 0; j < N; j++) x_row[j] = 8'(Xt[k][j]);
      inj_en = (k == K / 2) && (inj_kind != 0);
      inj_row = (inj_kind == 2) ? IW'(N) : IW'(2);
      inj_col = (inj_kind == 2) ? IW'(4) : IW'(3);
      inj_mask = 32'h0004_0000;
      t_last = cyc;
      @(posedge clk); #1;
      inj_en = 0;
    end
    in_valid = 0; in_last = 0;
    check(!in_ready, "operands refused after in_last");
    // drain
    while (!y_valid) begin @(posedge clk); #1; end
    t_y0 = cyc;
    check(t_y0 - t_last == 2 * N + 1, $sformatf("flush length %0d", t_y0 - t_last));
    nrow = 0;
    while (y_valid) begin
      check(y_row == IW'(N - 1 - nrow), "drain order");
      for (int j = 0; j < N; j++) Yobs[N - 1 - nrow][j] = longint'(y_data[j]);
      nrow++;
      @(posedge clk); #1;
    end
    check(nrow == N, "N rows drained");
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      yref = 0;
      for (int k = 0; k < K; k++) yref += Wt[i][k] * Xt[k][j];
      yref = sext24(yref);
      if (inj_kind == 1 && i == 2 && j == 3) check(Yobs[i][j] != yref, "injected error reaches Y");
      else check(Yobs[i][j] == yref, $sformatf("Y[%0d][%0d] got %0d exp %0d", i, j, Yobs[i][j], yref));
    end
    // checksum pairs
    check(chk_valid, "CHECK follows DRAIN");
    t_chk0 = cyc;
    nchk = 0;
    while (chk_valid) begin
      ety_exp = 0; etwx_exp = 0;
      for (int i = 0; i < N; i++) ety_exp += Yobs[i][nchk];
      for (int k = 0; k < K; k++) begin
        wsum = 0;
        for (int i = 0; i < N; i++) wsum += Wt[i][k];
        etwx_exp += wsum * Xt[k][nchk];
      end
      check(longint'(chk.ety) == sext32(ety_exp), $sformatf("ety[%0d] got %0d exp %0d", nchk, chk.ety, sext32(ety_exp)));
      if (inj_kind == 2 && nchk == 4) check(longint'(chk.etwx) != sext32(etwx_exp), "injected error reaches etwx");
      else check(longint'(chk.etwx) == sext32(etwx_exp), $sformatf("etwx[%0d] got %0d exp %0d", nchk, chk.etwx, sext32(etwx_exp)));
      check((chk.ety != chk.etwx) == ((inj_kind == 1 && nchk == 3) || (inj_kind == 2 && nchk == 4)),
            "mismatch exactly where injected");
      check(chk_last == (nchk == N - 1), "chk_last");
      nchk++;
      @(posedge clk); #1;
    end
    check(nchk == N && cyc - t_chk0 == N, "N checksum pairs");
    check(!busy, "back to idle");
  endtask

  initial begin
    start = 0; in_valid = 0; in_last = 0; inj_en = 0; inj_row = '0; inj_col = '0; inj_mask = '0;
    for (int i = 0; i < N; i++) begin w_col[i] = '0; x_row[i] = '0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;
    check(!busy && !in_ready, "idle after reset");
    run_tile(7, 0);
    run_tile(1, 0);
    run_tile(KMAX, 1);
    run_tile(12, 2);
    run_tile(KMAX, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
