// tb_read_reorder: effect of operand order on partial-sum sign flips.
//
// A partial sum that changes sign ripples a carry through the whole accumulator,
// the longest paths of the MAC, so fewer sign flips mean fewer timing errors.
// Reordering the reduction (an offline step that changes only the order in which
// weights are loaded) reduces them without changing any result.
//
// Part 1 runs a 1 x 4 convolution on one os_pe in three orders: the partial sums
// 0,-3,1,-9,12 flip sign 4 times; with negative weights last, 0,21,25,22,12 flip
// 0 times; with a larger input, 0,21,25,22,-8 flip once.
// Part 2 loads a 4 x 4 weight matrix into the WS array as given and with its
// input channels sorted by their fraction of positive weights (the sort is done
// here and checked against the expected order [9 2 3 1], [4 5 5 -1],
// [-10 3 -2 2], [-2 -3 -6 -3]). It streams 200 random non-negative (post-ReLU)
// vectors through both, reads the partial sums inside the columns, counts sign
// flips, and checks the counts against a reference, the outputs against the
// product, and that the reordered matrix flips less.
// Part 3 runs a 4 x 8 matrix as two 4-column tiles: split as given without and
// with reordering, and split by output-channel clusters of similar sign pattern
// ({0,2,5,6} and {1,3,4,7}) before reordering; clustering must flip least.
module tb_read_reorder;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

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

  // ---------------------------------------------------------------- part 1: one PE
  logic               clr, valid_in;
  logic signed [7:0]  w_in, x_in;
  logic signed [23:0] acc_out;
  os_pe u_pe (
    .clk, .rst_n, .clr, .drain(1'b0), .valid_in, .w_in, .x_in, .acc_in('0),
    .err_mask('0), .valid_out(), .w_out(), .x_out(), .acc_out);

  task automatic conv(input int xs [4], input int ws [4], input int exp_flips, input int exp_res);
    int flips = 0;
    bit neg = 0;
    clr = 1; @(posedge clk); #1; clr = 0;
    for (int k = 0; k < 4; k++) begin
      valid_in = 1; x_in = 8'(xs[k]); w_in = 8'(ws[k]);
      @(posedge clk); #1;
      if (acc_out[23] != neg) flips++;
      neg = acc_out[23];
    end
    valid_in = 0;
    check(flips == exp_flips, $sformatf("sign flips %0d, expected %0d", flips, exp_flips));
    check(acc_out == 24'(exp_res), $sformatf("result %0d, expected %0d", acc_out, exp_res));
  endtask

  // ---------------------------------------------------------------- part 2: WS array
  localparam int N = 4;
  localparam int IW = $clog2(N + 1);
  localparam int V = 200;
  logic                w_we;
  logic [IW-1:0]       w_row;
  logic signed [7:0]   w_data [N];
  logic                x_valid, x_last;
  logic signed [7:0]   x_data [N];
  logic                out_valid, out_last;
  logic signed [23:0]  y_data [N];
  realm_pkg::chk_pair_t chk;
  abft_ws_array #(.N(N)) u_ws (
    .clk, .rst_n, .w_we, .w_row, .w_data, .x_valid, .x_last, .x_data,
    .inj_en(1'b0), .inj_row('0), .inj_col('0), .inj_mask('0),
    .out_valid, .out_last, .y_data, .chk);

  // partial sums leaving every PE, recorded each cycle
  logic signed [23:0] ps_now [N][N];
  for (genvar r = 0; r < N; r++) begin : g_r
    for (genvar c = 0; c < N; c++) begin : g_c
      assign ps_now[r][c] = u_ws.g_row[r].g_col[c].u_pe.psum_out;
    end
  end
  logic signed [23:0] hist [1024][N][N];
  always @(negedge clk) for (int r = 0; r < N; r++) for (int c = 0; c < N; c++)
    hist[cyc % 1024][r][c] = ps_now[r][c];

  // Fig. (a): 4 x 4 matrix, rows are input channels, columns output channels
  const int WO [N][N] = '{'{4, 5, 5, -1}, '{-10, 3, -2, 2}, '{9, 2, 3, 1}, '{-2, -3, -6, -3}};
  const int WR [N][N] = '{'{9, 2, 3, 1}, '{4, 5, 5, -1}, '{-10, 3, -2, 2}, '{-2, -3, -6, -3}};
  // Fig. (b): 4 x 8 matrix; output channels {0,2,5,6} and {1,3,4,7} form the clusters
  const int W8 [N][8] = '{'{4, 5, 5, -1, -4, 2, 2, -5}, '{-10, 3, -2, 2, 7, -1, -8, 3},
                          '{9, 2, 3, 1, 9, 3, 9, 6}, '{-2, -3, -6, -3, -6, -5, -1, -6}};
  const int CL_A [N] = '{0, 2, 5, 6};
  const int CL_B [N] = '{1, 3, 4, 7};

  int X [V][N];
  int tile_w [N][N];      // tile as loaded: tile_w[r][c], r = array row
  int tile_p [N];         // array row r carries input channel tile_p[r]
  int n_out;
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      for (int c = 0; c < N; c++) begin
        longint yr;
        yr = 0;
        for (int r = 0; r < N; r++) yr += tile_w[r][c] * X[n_out][tile_p[r]];
        check(longint'(y_data[c]) == yr, "output equals the product whatever the order");
      end
      n_out++;
    end
  end

  // input-channel order by descending fraction of positive weights (stable)
  function automatic void sort_rows(input int m [N][N], output int perm [N]);
    int pos [N];
    for (int r = 0; r < N; r++) begin
      perm[r] = r;
      pos[r] = 0;
      for (int c = 0; c < N; c++) if (m[r][c] > 0) pos[r]++;
    end
    for (int i = 1; i < N; i++)
      for (int j = i; j > 0 && pos[perm[j]] > pos[perm[j-1]]; j--) begin
        int t = perm[j]; perm[j] = perm[j-1]; perm[j-1] = t;
      end
  endfunction

  // stream all vectors through the tile m with input channel order perm
  task automatic stream(input int m [N][N], input int perm [N], output int flips_dut, output int flips_ref);
    int t0;
    longint p;
    bit neg;
    for (int r = 0; r < N; r++) begin
      tile_p[r] = perm[r];
      for (int c = 0; c < N; c++) tile_w[r][c] = m[perm[r]][c];
    end
    for (int r = 0; r < N; r++) begin
      w_we = 1; w_row = IW'(r);
      for (int c = 0; c < N; c++) w_data[c] = 8'(tile_w[r][c]);
      @(posedge clk); #1;
    end
    w_we = 0;
    n_out = 0;
    t0 = cyc;
    for (int v = 0; v < V; v++) begin
      x_valid = 1; x_last = (v == V - 1);
      for (int r = 0; r < N; r++) x_data[r] = 8'(X[v][tile_p[r]]);
      @(posedge clk); #1;
    end
    x_valid = 0; x_last = 0;
    repeat (3 * N) @(posedge clk);
    #1;
    check(n_out == V, "all vectors out");
    flips_dut = 0; flips_ref = 0;
    for (int v = 0; v < V; v++) begin
      for (int c = 0; c < N; c++) begin
        // observed: PE(r,c) produced vector v's partial sum at cycle t0+v+r+c+1
        neg = 0;
        for (int r = 0; r < N; r++) begin
          bit s;
          s = hist[(t0 + v + r + c + 1) % 1024][r][c][23];
          if (s != neg) flips_dut++;
          neg = s;
        end
        neg = 0; p = 0;
        for (int r = 0; r < N; r++) begin
          p += tile_w[r][c] * X[v][tile_p[r]];
          if ((p < 0) != neg) flips_ref++;
          neg = (p < 0);
        end
      end
    end
  endtask

  // flips of the 4 x 8 matrix run as two 4-column tiles with the given column split
  task automatic two_tiles(input int ca [N], input int cb [N], input bit reorder, output int flips);
    int m [N][N];
    int perm [N];
    int fd, fr;
    flips = 0;
    for (int h = 0; h < 2; h++) begin
      for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) m[r][c] = W8[r][h == 0 ? ca[c] : cb[c]];
      if (reorder) sort_rows(m, perm);
      else for (int r = 0; r < N; r++) perm[r] = r;
      stream(m, perm, fd, fr);
      check(fd == fr, $sformatf("tile flips %0d observed, %0d expected", fd, fr));
      flips += fd;
    end
  endtask

  int fo_dut, fo_ref, fr_dut, fr_ref;
  initial begin
    clr = 0; valid_in = 0; w_in = 0; x_in = 0;
    w_we = 0; w_row = '0; x_valid = 0; x_last = 0;
    for (int i = 0; i < N; i++) begin w_data[i] = '0; x_data[i] = '0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    // part 1, operands in the order they enter the accumulator
    conv('{3, 1, 2, 3}, '{-1, 4, -5, 7}, 4, 12);
    conv('{3, 1, 3, 2}, '{7, 4, -1, -5}, 0, 12);
    conv('{3, 1, 3, 6}, '{7, 4, -1, -5}, 1, -8);
    // part 2: Fig. (a)
    for (int v = 0; v < V; v++) for (int r = 0; r < N; r++) X[v][r] = int'($urandom_range(127));
    begin
      int ident [N] = '{0, 1, 2, 3};
      int perm [N];
      int f_none, f_cl, f_dir;
      sort_rows(WO, perm);
      for (int r = 0; r < N; r++) for (int c = 0; c < N; c++)
        check(WO[perm[r]][c] == WR[r][c], "sorted rows match the reordered matrix");
      stream(WO, ident, fo_dut, fo_ref);
      stream(WO, perm, fr_dut, fr_ref);
      check(fo_dut == fo_ref, $sformatf("original order: %0d flips observed, %0d expected", fo_dut, fo_ref));
      check(fr_dut == fr_ref, $sformatf("reordered: %0d flips observed, %0d expected", fr_dut, fr_ref));
      check(fr_dut < fo_dut, $sformatf("reordering reduces sign flips (%0d -> %0d)", fo_dut, fr_dut));
      $display("4x4 matrix, %0d vectors: sign flips original %0d, reordered %0d", V, fo_dut, fr_dut);
      // part 3: Fig. (b), plain split vs direct reorder vs cluster-then-reorder
      two_tiles('{0, 1, 2, 3}, '{4, 5, 6, 7}, 1'b0, f_none);
      two_tiles('{0, 1, 2, 3}, '{4, 5, 6, 7}, 1'b1, f_dir);
      two_tiles(CL_A, CL_B, 1'b1, f_cl);
      $display("4x8 matrix, %0d vectors: sign flips no reorder %0d, direct reorder %0d, cluster-then-reorder %0d",
               V, f_none, f_dir, f_cl);
      check(f_dir < f_none, "direct reordering reduces sign flips");
      check(f_cl < f_dir, "clustering before reordering reduces them further");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
