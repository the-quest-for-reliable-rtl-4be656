// tb_ws_pe: self-checking test of the weight-stationary MAC PE.
// Loads random signed weights, drives random activations and partial sums (with
// the sign-flip example 3*(-2)+2 = -4 among them) and compares the registered
// partial sum and forwarded activation one cycle later with a reference computed
// in 64-bit integers and wrapped to 24 bits. Also checks the checksum-PE width
// configuration (16-bit weight, 32-bit accumulator) and the fault-injection mask.
module tb_ws_pe;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // 8x8 -> 24 PE
  logic               w_we;
  logic signed [7:0]  w_in, x_in, x_out;
  logic signed [23:0] psum_in, psum_out;
  logic        [23:0] err_mask;
  ws_pe #(.X_W(8), .W_W(8), .ACC_W(24)) dut (
    .clk, .rst_n, .w_we, .w_in, .x_in, .psum_in, .err_mask, .x_out, .psum_out);

  // checksum-PE configuration 8x16 -> 32
  logic               cw_we;
  logic signed [15:0] cw_in;
  logic signed [7:0]  cx_out;
  logic signed [31:0] cpsum_in, cpsum_out;
  ws_pe #(.X_W(8), .W_W(16), .ACC_W(32)) dut_chk (
    .clk, .rst_n, .w_we(cw_we), .w_in(cw_in), .x_in, .psum_in(cpsum_in),
    .err_mask(32'd0), .x_out(cx_out), .psum_out(cpsum_out));

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

  task automatic step(input int w, input int x, input int p, input int m, input bit load,
                      input int cw, input int cp);
    longint exp, cexp;
    w_we = load; w_in = 8'(w); x_in = 8'(x); psum_in = 24'(p); err_mask = 24'(m);
    cw_we = load; cw_in = 16'(cw); cpsum_in = 32'(cp);
    @(posedge clk); #1;
    if (!load) begin
      exp  = (longint'(p) + longint'(w) * longint'(x)) & 64'hFFFFFF;
      exp  = exp ^ longint'(m);
      cexp = (longint'(cp) + longint'(cw) * longint'(x)) & 64'hFFFF_FFFF;
      check(24'(psum_out) == 24'(exp), $sformatf("psum %0d*%0d+%0d mask %h got %h exp %h", w, x, p, m, psum_out, 24'(exp)));
      check(x_out == 8'(x), "x forwarded");
      check(32'(cpsum_out) == 32'(cexp), $sformatf("checksum psum got %h exp %h", cpsum_out, 32'(cexp)));
    end
  endtask

  int w, cw;
  initial begin
    w_we = 0; w_in = 0; x_in = 0; psum_in = 0; err_mask = 0;
    cw_we = 0; cw_in = 0; cpsum_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // example from the critical-pattern study: 3 * (-2) + 2 = -4
    step(-2, 0, 0, 0, 1, -2, 0);
    step(-2, 3, 2, 0, 0, -2, 2);
    check(psum_out == -24'sd4, "3*(-2)+2 = -4");
    check(psum_out == 24'b111111111111111111111100, "encoding of -4");
    for (int t = 0; t < 400; t++) begin
      if (t % 20 == 0) begin
        w  = int'($urandom_range(255)) - 128;
        cw = int'($urandom_range(65535)) - 32768;
        step(w, 0, 0, 0, 1, cw, 0);
      end
      step(w, int'($urandom_range(255)) - 128, int'($urandom) , (t % 7 == 0) ? int'($urandom_range(24'hFFFFFF)) : 0,
           0, cw, int'($urandom));
    end
    // extremes
    step(0, 0, 0, 0, 1, 0, 0);
    step(-128, 0, 0, 0, 1, -32768, 0);
    step(-128, -128, 24'h7FFFFF, 0, 0, -32768, 32'h7FFF_FFFF);
    step(127, 0, 0, 0, 1, 32767, 0);
    step(127, -128, -24'sd8388608, 0, 0, 32767, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
