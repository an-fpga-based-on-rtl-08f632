// tb_fx_mul: checks the Q20 multiplier (one cycle of latency, truncation,
// saturation) against 64-bit integer arithmetic, with known values such as
// 1.5 * -2.25 and random operands of several magnitudes.
module tb_fx_mul;
  import oselm_pkg::*;
  logic clk = 0;
  fx_t a, b, p;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  fx_mul dut (.clk, .a, .b, .p);

  function automatic fx_t expect_mul(input fx_t x, input fx_t y);
    longint r;
    r = (longint'(x) * longint'(y)) >>> FRAC;
    if (r > longint'(FX_MAX)) return FX_MAX;
    if (r < longint'(FX_MIN)) return FX_MIN;
    return fx_t'(r);
  endfunction

  task automatic check(input fx_t ta, input fx_t tb_, input fx_t exp_p);
    @(negedge clk);
    a = ta; b = tb_;
    @(negedge clk);
    checks++;
    if (p !== exp_p) begin
      failures++;
      $display("FAIL mul a=%0d b=%0d p=%0d exp=%0d", ta, tb_, p, exp_p);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = 0; b = 0;
    // hand-worked values
    check(fx_t'(32'sd1572864), fx_t'(-32'sd2359296), fx_t'(-32'sd3538944)); // 1.5*-2.25=-3.375
    check(FX_HALF, FX_HALF, fx_t'(32'sd262144));                            // 0.25
    check(fx_t'(-32'sd1), fx_t'(32'sd1), fx_t'(-32'sd1));                   // floor(-2^-40)
    check(FX_MAX, FX_MAX, FX_MAX);                                          // saturates
    check(FX_MAX, FX_MIN, FX_MIN);
    for (int k = 0; k < 1000; k++) begin
      fx_t x, y;
      x = fx_t'($urandom) >>> ($urandom % 16);
      y = fx_t'($urandom) >>> ($urandom % 16);
      check(x, y, expect_mul(x, y));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
