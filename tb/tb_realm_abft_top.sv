// tb_realm_abft_top: end-to-end test of the statistical-ABFT accelerator at its
// default size (16 x 16 array, 32-entry statistics buffer).
//
// WS mode: loads a weight matrix, then runs three windows of activation vectors:
// a clean one (no recomputation), one with a single large injected PE error under
// the sensitive-layer setting (recomputation), and a 40-vector window, longer than
// the buffer, with small errors under the resilient-layer setting (tolerated).
// The mode then switches to OS and runs a clean tile and a tile with a large
// injected error. Every output is compared with a reference product, every
// verdict (MSD, theta_mag, freq_eff, overflow, recompute) with a reference model
// of the statistic unit fed from the observed outputs, and the WS latency (2*N)
// is checked. Each mechanism is counted and must occur at least once: WS input
// stall after a window, injected error detected, recomputation requested, errors
// tolerated, buffer overflow, mode switch, OS drain.
module tb_realm_abft_top;
  localparam int N     = 16;
  localparam int DEPTH = 32;
  localparam int IW    = $clog2(N + 1);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic                    mode;
  logic [7:0]              cfg_a;
  logic signed [11:0]      cfg_b;
  logic [7:0]              cfg_theta_freq;
  logic                    ws_w_we;
  logic [IW-1:0]           ws_w_row;
  logic signed [7:0]       ws_w_data [N];
  logic                    ws_x_valid, ws_x_last, ws_x_ready, ws_y_valid;
  logic signed [7:0]       ws_x_data [N];
  logic signed [23:0]      ws_y_data [N];
  logic                    os_start, os_in_valid, os_in_last, os_in_ready, os_busy, os_y_valid;
  logic signed [7:0]       os_w_col [N];
  logic signed [7:0]       os_x_row [N];
  logic [IW-1:0]           os_y_row;
  logic signed [23:0]      os_y_data [N];
  logic                    inj_en;
  logic [IW-1:0]           inj_row, inj_col;
  logic [31:0]             inj_mask;
  logic                    stat_done, recompute;
  realm_pkg::stat_result_t stat_result;

  realm_abft_top dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endfunction

  function automatic longint sext24(longint v);
    v = v & 64'hFFFFFF;
    return (v >= 64'h800000) ? v - 64'h1000000 : v;
  endfunction
  function automatic longint sext32(longint v);
    v = v & 64'hFFFF_FFFF;
    return (v >= 64'h8000_0000) ? v - 64'h1_0000_0000 : v;
  endfunction
  function automatic longint ref_log2(longint m);
    longint k = 0, p = 1;
    if (m == 0) return 0;
    while (p * 2 <= m) begin p = p * 2; k++; end
    return k * 16 + ((m - p) * 16) / p;
  endfunction
  function automatic longint ref_theta(longint m, longint av, longint bv);
    longint t, ti, tf;
    t = av * ref_log2(m) - bv * 64;
    if (t < 0) return 0;
    ti = t / 1024;
    tf = (t % 1024) / 64;
    if (ti >= 33) return (longint'(1) << 33) - 1;
    return ((16 + tf) << ti) / 16;
  endfunction

  // deviations seen so far, from observed outputs, oldest first
  longint devs [$];
  int verdicts = 0;

  // mechanism counters
  int n_stall = 0, n_detect = 0, n_recompute = 0, n_tolerated = 0, n_overflow = 0;
  int n_switch = 0, n_drain = 0;

  // deviations seen in the current window, from observed outputs

  int     win_len [$];
  bit     win_exp [$];
  string  win_name [$];

  always @(negedge clk) begin
    if (rst_n && stat_done) begin
      longint w [$];
      check(win_len.size() > 0, "verdict for a known window");
      if (win_len.size() > 0) begin
        int len;
        len = win_len.pop_front();
        w.delete();
        check(devs.size() >= len, "all pairs of the window observed");
        for (int i = 0; i < len && devs.size() > 0; i++) w.push_back(devs.pop_front());
        verdict_check(win_name.pop_front(), win_exp.pop_front(), w);
      end
    end
  end

  function automatic void expect_window(input int len, input bit exp_rec, input string name);
    win_len.push_back(len); win_exp.push_back(exp_rec); win_name.push_back(name);
  endfunction

  function automatic void verdict_check(input string name, input bit exp_rec, ref longint wd [$]);
    longint msd_e = 0, th_e, cnt_e = 0, d;
    foreach (wd[i]) msd_e += (wd[i] < 0) ? -wd[i] : wd[i];
    th_e = ref_theta(msd_e, longint'(cfg_a), longint'(cfg_b));
    for (int i = 0; i < wd.size() && i < DEPTH; i++) begin
      d = (wd[i] < 0) ? -wd[i] : wd[i];
      if (d > th_e) cnt_e++;
    end
    check(longint'(stat_result.msd) == msd_e, $sformatf("%s msd got %0d exp %0d", name, stat_result.msd, msd_e));
    check(longint'(stat_result.theta_mag) == th_e, $sformatf("%s theta got %0d exp %0d", name, stat_result.theta_mag, th_e));
    check(longint'(stat_result.freq_eff) == cnt_e, $sformatf("%s freq got %0d exp %0d", name, stat_result.freq_eff, cnt_e));
    check(stat_result.overflow == (wd.size() > DEPTH), $sformatf("%s overflow", name));
    check(recompute == (cnt_e > longint'(cfg_theta_freq)), $sformatf("%s recompute model", name));
    check(recompute == exp_rec, $sformatf("%s recompute expected %0d", name, exp_rec));
    if (recompute) n_recompute++;
    if (!recompute && msd_e != 0) n_tolerated++;
    if (stat_result.overflow) n_overflow++;
    verdicts++;
  endfunction

  // ------------------------------------------------------------ WS reference and monitor
  int W [N][N];           // W[c][r]
  int X [256][N];
  int t_in [256];
  int inj_vec [256];       // -1 none, else column hit
  int n_in = 0, n_out = 0;

  always @(negedge clk) begin
    if (rst_n && ws_y_valid) begin
      int v;
      longint y, ysum, etwx, ws;
      bit any;
      v = n_out; n_out++;
      check(cyc - t_in[v] == 2 * N, $sformatf("WS latency %0d", cyc - t_in[v]));
      ysum = 0; etwx = 0; any = 0;
      for (int r = 0; r < N; r++) begin
        ws = 0;
        for (int c = 0; c < N; c++) ws += W[c][r];
        etwx += ws * X[v][r];
      end
      for (int c = 0; c < N; c++) begin
        y = 0;
        for (int r = 0; r < N; r++) y += W[c][r] * X[v][r];
        y = sext24(y);
        if (inj_vec[v] == c) check(longint'(ws_y_data[c]) != y, "injected error visible in y");
        else check(longint'(ws_y_data[c]) == y, $sformatf("WS vec %0d y[%0d]", v, c));
        ysum += longint'(ws_y_data[c]);
      end
      devs.push_back(sext32(ysum) - sext32(etwx));
      if (sext32(ysum) != sext32(etwx)) n_detect++;
    end
  end

  // injection scheduler for WS: PE(0,c) sees vector v in the cycle it is presented + c
  // (entries are always scheduled at least one cycle ahead)
  int inj_at [$];
  int inj_r [$];
  int inj_c [$];
  int inj_m [$];
  always @(posedge clk) begin
    #1;
    inj_en = 0; inj_row = '0; inj_col = '0; inj_mask = '0;
    for (int i = 0; i < inj_at.size(); i++)
      if (inj_at[i] == cyc) begin
        inj_en = 1; inj_row = IW'(inj_r[i]); inj_col = IW'(inj_c[i]); inj_mask = 32'(inj_m[i]);
      end
  end

  task automatic ws_window(input int len, input int inj_every, input int mask, input int first);
    for (int i = 0; i < len; i++) begin
      int v;
      v = n_in;
      for (int r = 0; r < N; r++) X[v][r] = int'($urandom_range(255)) - 128;
      inj_vec[v] = -1;
      ws_x_valid = 1; ws_x_last = (i == len - 1);
      for (int r = 0; r < N; r++) ws_x_data[r] = 8'(X[v][r]);
      #0;
      while (!ws_x_ready) begin
        n_stall++;
        @(posedge clk); #1;
      end
      t_in[v] = cyc;
      if (inj_every > 0 && i >= first && (i - first) % inj_every == 0) begin
        inj_vec[v] = 1 + (v % (N - 1));
        inj_at.push_back(cyc + 1 + (v % (N - 1)));
        inj_r.push_back(0);
        inj_c.push_back(1 + (v % (N - 1)));
        inj_m.push_back(mask);
      end
      n_in++;
      @(posedge clk); #1;
    end
    ws_x_valid = 0; ws_x_last = 0;
  endtask

  // ------------------------------------------------------------ OS tile
  task automatic os_tile(input int K, input bit inject);
    int Wt [N][64];
    int Xt [64][N];
    longint Yobs [N][N];
    longint yref, etwx, ws;
    int nrow;
    for (int i = 0; i < N; i++) for (int k = 0; k < K; k++) Wt[i][k] = int'($urandom_range(255)) - 128;
    for (int k = 0; k < K; k++) for (int j = 0; j < N; j++) Xt[k][j] = int'($urandom_range(255)) - 128;
    os_start = 1; @(posedge clk); #1; os_start = 0;
    for (int k = 0; k < K; k++) begin
      check(os_in_ready, "OS ready in FEED");
      os_in_valid = 1; os_in_last = (k == K - 1);
      for (int i = 0; i < N; i++) os_w_col[i] = 8'(Wt[i][k]);
      for (int j = 0; j < N; j++) os_x_row[j] = 8'(Xt[k][j]);
      if (inject && k == K - 1) begin
        // flip a high bit of PE(1,1)'s accumulator while the array flushes
        inj_at.push_back(cyc + 2 * N); inj_r.push_back(1); inj_c.push_back(1);
        inj_m.push_back(32'h0010_0000);
      end
      @(posedge clk); #1;
    end
    os_in_valid = 0; os_in_last = 0;
    while (!os_y_valid) begin @(posedge clk); #1; end
    n_drain++;
    nrow = 0;
    while (os_y_valid) begin
      for (int j = 0; j < N; j++) Yobs[int'(os_y_row)][j] = longint'(os_y_data[j]);
      nrow++;
      @(posedge clk); #1;
    end
    check(nrow == N, "OS drained N rows");
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      yref = 0;
      for (int k = 0; k < K; k++) yref += Wt[i][k] * Xt[k][j];
      yref = sext24(yref);
      if (inject && i == 1 && j == 1) check(Yobs[i][j] != yref, "OS injected error visible");
      else check(Yobs[i][j] == yref, $sformatf("OS Y[%0d][%0d]", i, j));
    end
    for (int j = 0; j < N; j++) begin
      longint ys = 0;
      etwx = 0;
      for (int i = 0; i < N; i++) ys += Yobs[i][j];
      for (int k = 0; k < K; k++) begin
        ws = 0;
        for (int i = 0; i < N; i++) ws += Wt[i][k];
        etwx += ws * Xt[k][j];
      end
      devs.push_back(sext32(ys) - sext32(etwx));
      if (sext32(ys) != sext32(etwx)) n_detect++;
    end
  endtask

  initial begin
    mode = realm_pkg::DF_WS;
    cfg_a = 8'd64; cfg_b = 12'sd64; cfg_theta_freq = 8'd0;
    ws_w_we = 0; ws_w_row = '0; ws_x_valid = 0; ws_x_last = 0;
    os_start = 0; os_in_valid = 0; os_in_last = 0;
    inj_en = 0; inj_row = '0; inj_col = '0; inj_mask = '0;
    for (int i = 0; i < N; i++) begin
      ws_w_data[i] = '0; ws_x_data[i] = '0; os_w_col[i] = '0; os_x_row[i] = '0;
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // ---------------- WS
    for (int c = 0; c < N; c++) for (int r = 0; r < N; r++) W[c][r] = int'($urandom_range(255)) - 128;
    for (int r = 0; r < N; r++) begin
      ws_w_we = 1; ws_w_row = IW'(r);
      for (int c = 0; c < N; c++) ws_w_data[c] = 8'(W[c][r]);
      @(posedge clk); #1;
    end
    ws_w_we = 0;

    // window 1: clean, back-to-back with window 2 to exercise the input stall
    expect_window(20, 1'b0, "WS clean");
    ws_window(20, 0, 0, 0);
    expect_window(20, 1'b1, "WS sensitive");
    ws_window(20, 100, 32'h0040_0000, 5);   // one large error (sensitive)
    while (win_len.size() > 0) begin @(posedge clk); #1; end

    // window 3: resilient setting, small frequent errors, longer than the buffer
    cfg_a = 8'd64; cfg_b = 12'sd32; cfg_theta_freq = 8'd6;
    expect_window(40, 1'b0, "WS resilient");
    ws_window(40, 4, 32'h0000_0004, 1);
    while (win_len.size() > 0) begin @(posedge clk); #1; end
    inj_at.delete(); inj_r.delete(); inj_c.delete(); inj_m.delete();

    // ---------------- mode switch to OS
    repeat (4) @(posedge clk); #1;
    mode = realm_pkg::DF_OS;
    n_switch++;
    cfg_a = 8'd64; cfg_b = 12'sd64; cfg_theta_freq = 8'd0;
    #1;
    check(!ws_x_ready, "WS input closed in OS mode");
    expect_window(N, 1'b0, "OS clean");
    os_tile(20, 1'b0);
    while (win_len.size() > 0) begin @(posedge clk); #1; end
    expect_window(N, 1'b1, "OS sensitive");
    os_tile(20, 1'b1);
    while (win_len.size() > 0) begin @(posedge clk); #1; end

    check(verdicts == 5, "five verdicts");
    check(n_stall > 0,     $sformatf("WS input stall happened (%0d)", n_stall));
    check(n_detect > 0,    $sformatf("checksum mismatch detected (%0d)", n_detect));
    check(n_recompute > 0, $sformatf("recomputation requested (%0d)", n_recompute));
    check(n_tolerated > 0, $sformatf("errors tolerated (%0d)", n_tolerated));
    check(n_overflow > 0,  $sformatf("buffer overflow (%0d)", n_overflow));
    check(n_switch > 0,    $sformatf("mode switch (%0d)", n_switch));
    check(n_drain > 0,     $sformatf("OS drain (%0d)", n_drain));
    $display("mechanisms: stall=%0d detect=%0d recompute=%0d tolerated=%0d overflow=%0d switch=%0d drain=%0d",
             n_stall, n_detect, n_recompute, n_tolerated, n_overflow, n_switch, n_drain);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
