// tb_fp_div: self-checking testbench for fp_div.
//
// Drives 3000 operand pairs (random values over several decades plus a few
// fixed corner cases), computes the expected result independently with the
// simulator's real arithmetic and compares. Results must agree to 2 units in the last place.
// A watchdog ends the run with a failure if it does not finish in time.
module tb_fp_div;
  import gaurast_pkg::*;
  import tb_fp_pkg::*;

  fp32_t a, b, y;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  int cycles = 0;

  fp_div dut (.a(a), .b(b), .y(y));

  always #5 clk = ~clk;
  always @(posedge clk) cycles <= cycles + 1;

  initial begin
    wait (cycles == 100000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fp32_t rnd_fp(input int lo_exp, input int hi_exp);
    int unsigned e;
    e = 32'(lo_exp) + ($urandom % 32'(hi_exp - lo_exp + 1));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  task automatic check(input fp32_t ia, input fp32_t ib);
    real ra, rb, expv, got;
    a = ia; b = ib;
    #1;
    ra = f2r(ia);
    rb = f2r(ib);
    expv = ra / rb;
    got = f2r(y);
    checks++;
    if (!(fabs(got - expv) <= 2.5e-7 * fabs(expv))) begin
      failures++;
      if (failures < 10) $display("MISMATCH a=%h b=%h got=%h (%g) expected %g", ia, ib, y, got, expv);
    end
  endtask

  initial begin
    check(32'h3F80_0000, 32'h4040_0000);   // 1 / 3
    check(32'h4120_0000, 32'hC0A0_0000);   // 10 / -5
    check(32'h3F80_0000, 32'h3F80_0000);   // 1 / 1
    check(32'h3F80_0000, 32'h3FFF_FFFF);   // quotient just above 0.5
    for (int i = 0; i < 3000; i++) check(rnd_fp(90, 160), rnd_fp(90, 160));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
