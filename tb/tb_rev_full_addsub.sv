// tb_rev_full_addsub: exhaustive self-check of the reversible full
// adder/subtractor.
// 1. With the constant lines at 0, all 16 (A, B, cin, ctrl) are applied:
//    ctrl = 1 expects {cb,sd} = A + B + cin; ctrl = 0 expects sd to be the low
//    bit of A - B - cin and cb = 1 exactly when A < B + cin.
// 2. All 128 values of the seven input lines must give 128 different outputs.
module tb_rev_full_addsub;
  logic       a, b, cin, ctrl;
  logic [2:0] zero;
  logic       sd, cb;
  logic [4:0] g;
  int checks = 0, failures = 0;
  int n_carry = 0, n_borrow = 0;
  bit seen [128];

  rev_full_addsub dut (.*);

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sum, want_sd, want_cb;
    foreach (seen[i]) seen[i] = 1'b0;
    zero = '0;
    for (int v = 0; v < 16; v++) begin
      {ctrl, a, b, cin} = 4'(v);
      #1;
      if (ctrl) begin
        sum = int'(a) + int'(b) + int'(cin);
        want_sd = sum % 2;
        want_cb = sum / 2;
      end else begin
        sum = int'(a) - int'(b) - int'(cin);
        want_sd = (sum + 4) % 2;
        want_cb = sum < 0;
      end
      checks++;
      if (int'(sd) != want_sd || int'(cb) != want_cb) begin
        failures++;
        $display("FAIL ctrl=%b a=%b b=%b cin=%b -> sd=%b cb=%b (want %0d %0d)",
                 ctrl, a, b, cin, sd, cb, want_sd, want_cb);
      end
      if (cb && ctrl)  n_carry++;
      if (cb && !ctrl) n_borrow++;
    end
    checks++;
    if (n_carry != 4 || n_borrow != 4) begin
      failures++; $display("FAIL carry seen %0d, borrow seen %0d times", n_carry, n_borrow);
    end
    for (int v = 0; v < 128; v++) begin
      {a, b, cin, ctrl, zero} = 7'(v);
      #1;
      checks++;
      if (seen[{sd, cb, g}]) begin failures++; $display("FAIL not reversible at line value %0d", v); end
      seen[{sd, cb, g}] = 1'b1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
