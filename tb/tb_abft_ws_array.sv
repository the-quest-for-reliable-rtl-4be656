// tb_abft_ws_array: self-checking test of the weight-stationary ABFT array.
// Loads a random 8-bit weight matrix, streams random activation vectors (with
// gaps and two window ends) and compares every y vector, e^T*y and e^T*W*x with
// a reference computed in the testbench from the same matrix. It also checks the
// 2*N-cycle latency and out_last, and injects one error into an ordinary PE and
// one into a checksum PE: the first must change y and e^T*y but not e^T*W*x, the
// second only e^T*W*x.
module tb_abft_ws_array;
  localparam int N  = 16;
  localparam int IW = $clog2(N + 1);
  localparam int M  = 48;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic                w_we;
  logic [IW-1:0]       w_row;
  logic signed [7:0]   w_data [N];
  logic                x_valid, x_last;
  logic signed [7:0]   x_data [N];
  logic                inj_en;
  logic [IW-1:0]       inj_row, inj_col;
  logic [31:0]         inj_mask;
  logic                out_valid, out_last;
  logic signed [23:0]  y_data [N];
  realm_pkg::chk_pair_t chk;

  abft_ws_array #(.N(N)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
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

  int W [N][N];         // W[c][r]
  int X [M][N];
  int t_in [M];
  bit lastv [M];
  int n_out = 0;
  int inj_vec_pe = 9, inj_vec_chk = 30;
  localparam int INJ_R = 1, INJ_C = 5;

  function automatic longint sext24(longint v);
    v = v & 64'hFFFFFF;
    return (v >= 64'h800000) ? v - 64'h1000000 : v;
  endfunction
  function automatic longint sext32(longint v);
    v = v & 64'hFFFF_FFFF;
    return (v >= 64'h8000_0000) ? v - 64'h1_0000_0000 : v;
  endfunction

  // output monitor
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      int v;
      longint y, ysum, ety_exp, etwx_exp, wsum;
      v = n_out;
      n_out++;
      check(cyc - t_in[v] == 2 * N, $sformatf("latency %0d", cyc - t_in[v]));
      check(out_last == lastv[v], "out_last");
      ysum = 0; etwx_exp = 0;
      for (int r = 0; r < N; r++) begin
        wsum = 0;
        for (int c = 0; c < N; c++) wsum += W[c][r];
        etwx_exp += wsum * X[v][r];
      end
      for (int c = 0; c < N; c++) begin
        y = 0;
        for (int r = 0; r < N; r++) y += W[c][r] * X[v][r];
        y = sext24(y);
        if (v == inj_vec_pe && c == INJ_C) begin
          check(longint'(y_data[c]) != y, "injected PE error reaches y");
          ysum += longint'(y_data[c]);
        end else begin
          check(longint'(y_data[c]) == y, $sformatf("vec %0d y[%0d] got %0d exp %0d", v, c, y_data[c], y));
          ysum += y;
        end
      end
      ety_exp = sext32(ysum);
      etwx_exp = sext32(etwx_exp);
      check(longint'(chk.ety) == ety_exp, $sformatf("vec %0d ety got %0d exp %0d", v, chk.ety, ety_exp));
      if (v == inj_vec_chk)
        check(longint'(chk.etwx) != etwx_exp, "injected checksum-PE error reaches etwx");
      else
        check(longint'(chk.etwx) == etwx_exp, $sformatf("vec %0d etwx got %0d exp %0d", v, chk.etwx, etwx_exp));
      if (v == inj_vec_pe)  check(chk.ety != chk.etwx, "PE error detected by checksum");
      if (v != inj_vec_pe && v != inj_vec_chk) check(chk.ety == chk.etwx, "error-free checksums agree");
    end
  end

  // injection scheduler: PE(r,c) sees vector v at t_in[v] + r + c
  int inj_pe_at = -1, inj_chk_at = -1;
  always @(posedge clk) begin
    #1;
    inj_en = 0; inj_row = '0; inj_col = '0; inj_mask = '0;
    if (cyc == inj_pe_at) begin
      inj_en = 1; inj_row = IW'(INJ_R); inj_col = IW'(INJ_C); inj_mask = 32'h0008_0000;
    end else if (cyc == inj_chk_at) begin
      inj_en = 1; inj_row = IW'(3); inj_col = IW'(N); inj_mask = 32'h0100_0000;
    end
  end

  initial begin
    w_we = 0; w_row = '0; x_valid = 0; x_last = 0;
    inj_en = 0; inj_row = '0; inj_col = '0; inj_mask = '0;
    for (int i = 0; i < N; i++) begin w_data[i] = '0; x_data[i] = '0; end
    for (int c = 0; c < N; c++) for (int r = 0; r < N; r++)
      W[c][r] = (r == 0 && c == 0) ? -128 : int'($urandom_range(255)) - 128;
    for (int v = 0; v < M; v++) for (int r = 0; r < N; r++)
      X[v][r] = (v == 0) ? ((r % 2) ? 127 : -128) : int'($urandom_range(255)) - 128;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    // weight load, one array row per cycle
    for (int r = 0; r < N; r++) begin
      @(posedge clk); #1;
      w_we = 1; w_row = IW'(r);
      for (int c = 0; c < N; c++) w_data[c] = 8'(W[c][r]);
    end
    @(posedge clk); #1; w_we = 0;
    // activation stream
    for (int v = 0; v < M; v++) begin
      if (v % 11 == 5) begin
        x_valid = 0;
        repeat (2) begin @(posedge clk); #1; end
      end
      x_valid = 1;
      lastv[v] = (v == 23 || v == M - 1);
      x_last = lastv[v];
      for (int r = 0; r < N; r++) x_data[r] = 8'(X[v][r]);
      t_in[v] = cyc;
      if (v == inj_vec_pe)  inj_pe_at  = cyc + INJ_R + INJ_C;
      if (v == inj_vec_chk) inj_chk_at = cyc + 3 + N;
      @(posedge clk); #1;
    end
    x_valid = 0; x_last = 0;
    repeat (3 * N) @(posedge clk);
    check(n_out == M, $sformatf("all %0d vectors came out (%0d)", M, n_out));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
