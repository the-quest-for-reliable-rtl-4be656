// tb_log2_linear: self-checking test of the log-domain threshold function.
// Compares log2_msd and theta_mag with a reference written in plain integer
// arithmetic (repeated doubling for the integer part of log2, division for the
// fraction and for 2^t), over exact powers of two, hand-picked points and random
// MSD, a and b. Checks negative exponents (theta = 0) and saturation.
module tb_log2_linear;
  int checks = 0, failures = 0;

  logic [39:0]        msd;
  logic [7:0]         a;
  logic signed [11:0] b;
  logic [9:0]         log2_msd;
  logic [32:0]        theta_mag;

  log2_linear dut (.msd, .a, .b, .log2_msd, .theta_mag);

  logic clk = 1'b0;
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
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
    longint t, ti, tf, th;
    t = av * ref_log2(m) - bv * 64;
    if (t < 0) return 0;
    ti = t / 1024;
    tf = (t % 1024) / 64;
    if (ti >= 33) return (longint'(1) << 33) - 1;
    th = ((16 + tf) << ti) / 16;
    return th;
  endfunction

  task automatic probe(input longint m, input int av, input int bv);
    longint el, et;
    msd = 40'(m); a = 8'(av); b = 12'(bv);
    #1;
    el = ref_log2(m);
    et = ref_theta(m, av, bv);
    check(longint'(log2_msd) == el, $sformatf("log2(%0d) got %0d exp %0d", m, log2_msd, el));
    check(longint'(theta_mag) == et, $sformatf("theta(%0d,a=%0d,b=%0d) got %0d exp %0d", m, av, bv, theta_mag, et));
  endtask

  initial begin
    // exact powers of two with a = 1.0, b = 0: theta = MSD
    for (int k = 0; k < 33; k++) begin
      probe(longint'(1) << k, 64, 0);
      check(theta_mag == 33'(longint'(1) << k), $sformatf("2^%0d reproduces itself", k));
    end
    // a = 1.0, b = 4.0: theta = MSD / 16
    probe(longint'(1) << 24, 64, 64);
    check(theta_mag == 33'(1 << 20), "2^24 / 16");
    // a = 0.5: theta = sqrt(MSD) for even powers
    probe(longint'(1) << 30, 32, 0);
    check(theta_mag == 33'(1 << 15), "sqrt(2^30)");
    // a = 0.75, b = 2.5 at MSD = 3 * 2^20
    probe(3 * (longint'(1) << 20), 48, 40);
    // negative exponent gives zero, huge exponent saturates
    probe(5, 8, 200);
    check(theta_mag == 0, "negative exponent");
    probe(longint'(1) << 39, 255, -2048);
    check(theta_mag == '1, "saturation");
    probe(0, 64, 0);
    // random
    for (int i = 0; i < 3000; i++) begin
      longint m;
      m = {$urandom, $urandom} & ((longint'(1) << ($urandom_range(40))) - 1);
      probe(m, int'($urandom_range(255)), int'($urandom_range(4095)) - 2048);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
