// tb_rev_half_addsub: exhaustive self-check of the reversible half
// adder/subtractor.
// 1. With the constant lines at 0, every (A, B, ctrl) is applied and the result
//    compared with integer arithmetic: ctrl = 1 expects {cb,sd} = A + B,
//    ctrl = 0 expects sd = A ^ B and cb = 1 exactly when A < B.
// 2. All 32 values of the five input lines (constants included) are applied and
//    the 5-bit outputs must all differ: the circuit is reversible.
module tb_rev_half_addsub;
  logic       a, b, ctrl;
  logic [1:0] zero;
  logic       sd, cb;
  logic [2:0] g;
  int checks = 0, failures = 0;
  int n_carry = 0, n_borrow = 0;
  bit seen [32];

  rev_half_addsub dut (.*);

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int want_sd, want_cb;
    foreach (seen[i]) seen[i] = 1'b0;
    zero = '0;
    for (int v = 0; v < 8; v++) begin
      {ctrl, a, b} = 3'(v);
      #1;
      if (ctrl) begin
        want_sd = (int'(a) + int'(b)) % 2;
        want_cb = (int'(a) + int'(b)) / 2;
      end else begin
        want_sd = (int'(a) - int'(b) + 2) % 2;
        want_cb = int'(a) < int'(b);
      end
      checks++;
      if (int'(sd) != want_sd || int'(cb) != want_cb) begin
        failures++;
        $display("FAIL ctrl=%b a=%b b=%b -> sd=%b cb=%b (want %0d %0d)", ctrl, a, b, sd, cb, want_sd, want_cb);
      end
      if (cb && ctrl)  n_carry++;
      if (cb && !ctrl) n_borrow++;
    end
    checks++;
    if (n_carry != 1 || n_borrow != 1) begin
      failures++; $display("FAIL carry seen %0d, borrow seen %0d times", n_carry, n_borrow);
    end
    for (int v = 0; v < 32; v++) begin
      {a, b, ctrl, zero} = 5'(v);
      #1;
      checks++;
      if (seen[{sd, cb, g}]) begin failures++; $display("FAIL not reversible at line value %0d", v); end
      seen[{sd, cb, g}] = 1'b1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
