// tb_stat_unit: self-checking test of the statistic unit.
// Sends windows of checksum pairs and compares MSD, theta_mag, freq_eff, overflow
// and the recompute decision with a reference model in the testbench. Windows
// cover: no errors; one large error with theta_freq = 0 (sensitive layer, must
// recompute); a few large errors under theta_freq = 4 (resilient layer, no
// recompute) and more of them (recompute); many small errors; a window longer than
// the buffer; random windows. Checks the two-cycle gap: done follows the last pair
// after 3 cycles and ready is low in between.
module tb_stat_unit;
  localparam int DEPTH = 32;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic                    in_valid, in_last, ready, done;
  realm_pkg::chk_pair_t    in_pair;
  logic [7:0]              cfg_a;
  logic signed [11:0]      cfg_b;
  logic [7:0]              cfg_theta_freq;
  realm_pkg::stat_result_t result;

  stat_unit #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
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

  longint dev [$];

  // send one window of deviations (ety = base + d, etwx = base)
  task automatic window(input int av, input int bv, input int tf, input string name);
    longint msd_e, th_e, cnt_e, base, d;
    int t_last, n;
    bit ovf_e;
    cfg_a = 8'(av); cfg_b = 12'(bv); cfg_theta_freq = 8'(tf);
    n = dev.size();
    msd_e = 0; cnt_e = 0;
    foreach (dev[i]) msd_e += (dev[i] < 0) ? -dev[i] : dev[i];
    th_e = ref_theta(msd_e, av, bv);
    for (int i = 0; i < n && i < DEPTH; i++) begin
      d = (dev[i] < 0) ? -dev[i] : dev[i];
      if (d > th_e) cnt_e++;
    end
    ovf_e = (n > DEPTH);
    for (int i = 0; i < n; i++) begin
      check(ready, "ready while accumulating");
      base = longint'(int'($urandom));
      if (base + dev[i] > 64'sh7FFF_FFFF || base + dev[i] < -64'sh8000_0000)
        base = (dev[i] < 0) ? 64'sh7FFF_FFFF : -64'sh8000_0000;
      in_valid = 1; in_last = (i == n - 1);
      in_pair.etwx = 32'(base);
      in_pair.ety  = 32'(base + dev[i]);
      t_last = cyc;
      @(posedge clk); #1;
    end
    in_valid = 0; in_last = 0;
    check(!ready, "not ready after window end");
    while (!done) begin
      if (cyc - t_last > 10) break;
      @(posedge clk); #1;
    end
    check(cyc - t_last == 3, $sformatf("%s: verdict latency %0d", name, cyc - t_last));
    check(ready, "ready again with verdict");
    check(longint'(result.msd) == msd_e, $sformatf("%s: msd got %0d exp %0d", name, result.msd, msd_e));
    check(longint'(result.theta_mag) == th_e, $sformatf("%s: theta got %0d exp %0d", name, result.theta_mag, th_e));
    check(longint'(result.freq_eff) == cnt_e, $sformatf("%s: freq_eff got %0d exp %0d", name, result.freq_eff, cnt_e));
    check(result.overflow == ovf_e, $sformatf("%s: overflow", name));
    check(result.recompute == (cnt_e > tf), $sformatf("%s: recompute got %0d exp %0d", name, result.recompute, cnt_e > tf));
    @(posedge clk); #1;
    check(!done, "done is a pulse");
    dev.delete();
  endtask

  int nrec = 0;
  initial begin
    in_valid = 0; in_last = 0; in_pair = '0;
    cfg_a = 0; cfg_b = 0; cfg_theta_freq = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    // no errors
    repeat (20) dev.push_back(0);
    window(64, 64, 0, "clean");
    check(result.recompute == 0 && result.msd == 0, "clean window passes");
    // sensitive layer: one large error among clean pairs; theta = MSD/16
    repeat (10) dev.push_back(0);
    dev.push_back(-(longint'(1) << 22));
    repeat (10) dev.push_back(0);
    window(64, 64, 0, "sensitive");
    check(result.recompute == 1, "single large error triggers recomputation");
    // resilient layer, 3 large errors, tolerated
    repeat (3) dev.push_back(longint'(1) << 20);
    repeat (12) dev.push_back(3);
    window(64, 64, 4, "resilient-few");
    check(result.recompute == 0, "sporadic large errors tolerated");
    // resilient layer, 8 large errors
    repeat (8) dev.push_back(longint'(1) << 20);
    repeat (8) dev.push_back(-1);
    window(64, 64, 4, "resilient-many");
    check(result.recompute == 1, "frequent large errors recomputed");
    // many small errors, equal size: none exceeds theta
    repeat (30) dev.push_back(7);
    window(64, 0, 0, "small");
    // overflow
    repeat (DEPTH + 5) dev.push_back(longint'($urandom_range(1000)) - 500);
    window(56, 16, 2, "overflow");
    // extreme deviation: ety and etwx at opposite ends
    dev.push_back(-(longint'(1) << 32) + 1);
    window(64, 0, 0, "extreme");
    // random
    for (int w = 0; w < 60; w++) begin
      int n = int'($urandom_range(DEPTH + 2, 1));
      for (int i = 0; i < n; i++)
        dev.push_back(($urandom_range(3) == 0) ?
          (longint'($urandom_range(1 << 24)) - (1 << 23)) >>> $urandom_range(20) : 0);
      window(int'($urandom_range(127)), int'($urandom_range(400)) - 100, int'($urandom_range(6)), "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
