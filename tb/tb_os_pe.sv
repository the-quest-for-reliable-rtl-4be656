// tb_os_pe: self-checking test of the output-stationary MAC PE.
// Accumulates random signed products over random-length tiles with random valid
// gaps and checks the accumulator against a 64-bit reference wrapped to 24 bits,
// then checks clear, drain (load from the PE above), the one-cycle forwarding of
// weight, activation and valid, and the fault-injection mask.
module tb_os_pe;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic               clr, drain, valid_in, valid_out;
  logic signed [7:0]  w_in, x_in, w_out, x_out;
  logic signed [23:0] acc_in, acc_out;
  logic        [23:0] err_mask;
  os_pe #(.X_W(8), .W_W(8), .ACC_W(24)) dut (
    .clk, .rst_n, .clr, .drain, .valid_in, .w_in, .x_in, .acc_in, .err_mask,
    .valid_out, .w_out, .x_out, .acc_out);

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

  longint ref_acc;
  int w, x, a;
  bit v;
  initial begin
    clr = 0; drain = 0; valid_in = 0; w_in = 0; x_in = 0; acc_in = 0; err_mask = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int tile = 0; tile < 30; tile++) begin
      clr = 1; @(posedge clk); #1; clr = 0;
      ref_acc = 0;
      check(acc_out == 0, "clear");
      for (int k = 0; k < 40; k++) begin
        w = int'($urandom_range(255)) - 128;
        x = int'($urandom_range(255)) - 128;
        v = ($urandom_range(3) != 0);
        valid_in = v; w_in = 8'(w); x_in = 8'(x);
        err_mask = (tile % 5 == 4 && k == 17) ? 24'h040000 : 24'h0;
        @(posedge clk); #1;
        if (v) ref_acc = ref_acc + longint'(w) * longint'(x);
        ref_acc = ref_acc & 64'hFFFFFF;
        if (tile % 5 == 4 && k == 17) ref_acc = ref_acc ^ 64'h040000;
        check(24'(acc_out) == 24'(ref_acc), $sformatf("acc tile %0d k %0d got %h exp %h", tile, k, acc_out, 24'(ref_acc)));
        check(w_out == 8'(w) && x_out == 8'(x) && valid_out == v, "forwarding");
      end
      valid_in = 0; err_mask = 0;
      // drain: load from above, ignore valid
      a = int'($urandom);
      drain = 1; acc_in = 24'(a); valid_in = 1;
      @(posedge clk); #1;
      drain = 0; valid_in = 0;
      check(acc_out == 24'(a), "drain loads value from above");
      @(posedge clk); #1;
      check(acc_out == 24'(a), "hold when idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
