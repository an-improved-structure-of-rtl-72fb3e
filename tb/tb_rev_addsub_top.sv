// tb_rev_addsub_top: end-to-end self-check of the top with its default
// configuration (it has no parameters).
// Every combination of the twelve data inputs of the four circuits (4096 in
// all) is applied; each result is compared with integer arithmetic computed
// here, and the parity-preserving circuits' output parity with their input
// parity (constant lines are 0 inside the top). It counts how often each
// mechanism happened (carry out, borrow out, add/subtract mode switches on each
// adder/subtractor, nonzero borrow in the full subtractor) and counts a failure
// for any that never happened. It also checks the quantum-cost totals stated
// for the circuits against the per-gate costs.
module tb_rev_addsub_top;
  import rev_pkg::*;
  logic       ha_a, ha_b, ha_ctrl, ha_sd, ha_cb;
  logic [2:0] ha_garbage;
  logic       fa_a, fa_b, fa_cin, fa_ctrl, fa_sd, fa_cb;
  logic [4:0] fa_garbage;
  logic       hs_a, hs_b, hs_diff, hs_borrow;
  logic [1:0] hs_garbage;
  logic       fs_a, fs_b, fs_c, fs_diff, fs_borrow;
  logic [4:0] fs_garbage;

  int checks = 0, failures = 0;
  int n_ha_carry = 0, n_ha_borrow = 0, n_fa_carry = 0, n_fa_borrow = 0;
  int n_hs_borrow = 0, n_fs_borrow = 0, n_fs_borrow_in = 0;
  int n_ha_switch = 0, n_fa_switch = 0;

  rev_addsub_top dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic require_seen(input int count, input string what);
    checks++;
    $display("  %-36s %0d", what, count);
    if (count == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s;
    logic prev_ha_ctrl, prev_fa_ctrl;
    prev_ha_ctrl = 1'b0;
    prev_fa_ctrl = 1'b0;

    // Figures of merit: 2m+2F, 1m+1D, 1m+3D with m=4, F=1, D=2.
    check(QC_HALF_ADDSUB == 10, "half adder/subtractor quantum cost != 10");
    check(QC_PP_HALF_SUB == 6,  "pp half subtractor quantum cost != 6");
    check(QC_PP_FULL_SUB == 10, "pp full subtractor quantum cost != 10");
    check($bits(ha_garbage) == G_HALF_ADDSUB && $bits(fa_garbage) == G_FULL_ADDSUB &&
          $bits(hs_garbage) == G_PP_HALF_SUB && $bits(fs_garbage) == G_PP_FULL_SUB,
          "garbage output counts differ from the package");

    for (int v = 0; v < 4096; v++) begin
      {ha_a, ha_b, ha_ctrl, fa_a, fa_b, fa_cin, fa_ctrl, hs_a, hs_b, fs_a, fs_b, fs_c} = 12'(v);
      #1;
      // half adder/subtractor
      if (ha_ctrl) begin
        s = int'(ha_a) + int'(ha_b);
        check(int'(ha_sd) == s % 2 && int'(ha_cb) == s / 2, $sformatf("half add %b+%b", ha_a, ha_b));
        if (ha_cb) n_ha_carry++;
      end else begin
        s = int'(ha_a) - int'(ha_b);
        check(int'(ha_sd) == (s + 2) % 2 && int'(ha_cb) == int'(s < 0), $sformatf("half sub %b-%b", ha_a, ha_b));
        if (ha_cb) n_ha_borrow++;
      end
      // full adder/subtractor
      if (fa_ctrl) begin
        s = int'(fa_a) + int'(fa_b) + int'(fa_cin);
        check(int'(fa_sd) == s % 2 && int'(fa_cb) == s / 2, $sformatf("full add %b+%b+%b", fa_a, fa_b, fa_cin));
        if (fa_cb) n_fa_carry++;
      end else begin
        s = int'(fa_a) - int'(fa_b) - int'(fa_cin);
        check(int'(fa_sd) == (s + 4) % 2 && int'(fa_cb) == int'(s < 0), $sformatf("full sub %b-%b-%b", fa_a, fa_b, fa_cin));
        if (fa_cb) n_fa_borrow++;
      end
      // parity-preserving half subtractor
      s = int'(hs_a) - int'(hs_b);
      check(int'(hs_diff) == (s + 2) % 2 && int'(hs_borrow) == int'(s < 0), $sformatf("pp half sub %b-%b", hs_a, hs_b));
      check((hs_diff ^ hs_borrow ^ (^hs_garbage)) == (hs_a ^ hs_b), "pp half sub parity");
      if (hs_borrow) n_hs_borrow++;
      // parity-preserving full subtractor
      s = int'(fs_a) - int'(fs_b) - int'(fs_c);
      check(int'(fs_diff) == (s + 4) % 2 && int'(fs_borrow) == int'(s < 0), $sformatf("pp full sub %b-%b-%b", fs_a, fs_b, fs_c));
      check((fs_diff ^ fs_borrow ^ (^fs_garbage)) == (fs_a ^ fs_b ^ fs_c), "pp full sub parity");
      if (fs_borrow) n_fs_borrow++;
      if (fs_c && fs_borrow) n_fs_borrow_in++;
      // mode switches between consecutive vectors
      if (ha_ctrl != prev_ha_ctrl) n_ha_switch++;
      if (fa_ctrl != prev_fa_ctrl) n_fa_switch++;
      prev_ha_ctrl = ha_ctrl;
      prev_fa_ctrl = fa_ctrl;
    end

    $display("mechanisms exercised:");
    require_seen(n_ha_carry,     "half adder carry out");
    require_seen(n_ha_borrow,    "half subtractor borrow out");
    require_seen(n_ha_switch,    "half add/subtract mode switches");
    require_seen(n_fa_carry,     "full adder carry out");
    require_seen(n_fa_borrow,    "full subtractor borrow out");
    require_seen(n_fa_switch,    "full add/subtract mode switches");
    require_seen(n_hs_borrow,    "pp half subtractor borrow out");
    require_seen(n_fs_borrow,    "pp full subtractor borrow out");
    require_seen(n_fs_borrow_in, "pp full subtractor borrow with C=1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
