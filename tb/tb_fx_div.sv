// tb_fx_div: checks the sequential Q20 divider against 64-bit integer
// division on known values (1/1.5, -3/0.25, x/0), random operands and the
// reciprocals 1/s for s >= 1 that the training step needs; also checks the
// busy/done handshake and the 54-cycle latency from start to done.
module tb_fx_div;
  import oselm_pkg::*;
  logic clk = 0, rst_n = 1, start = 0;
  fx_t num, den, q;
  logic busy, done;
  int checks = 0, failures = 0;
  localparam int LAT = 54;
  always #5 clk = ~clk;

  fx_div dut (.clk, .rst_n, .start, .num, .den, .busy, .done, .q);

  function automatic fx_t expect_div(input fx_t n, input fx_t d);
    longint un, ud, uq;
    bit neg;
    if (d == 0) return (n < 0) ? FX_MIN : FX_MAX;
    neg = (n < 0) ^ (d < 0);
    un = (n < 0) ? -longint'(n) : longint'(n);
    ud = (d < 0) ? -longint'(d) : longint'(d);
    uq = (un <<< FRAC) / ud;
    if (neg) uq = -uq;
    if (uq > longint'(FX_MAX)) return FX_MAX;
    if (uq < longint'(FX_MIN)) return FX_MIN;
    return fx_t'(uq);
  endfunction

  task automatic check(input fx_t n, input fx_t d);
    int cyc;
    @(negedge clk);
    num = n; den = d; start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (q !== expect_div(n, d)) begin
      failures++;
      $display("FAIL div %0d/%0d q=%0d exp=%0d", n, d, q, expect_div(n, d));
    end
    if (d != 0) begin
      checks++;
      if (cyc != LAT) begin failures++; $display("FAIL latency %0d, expected %0d", cyc, LAT); end
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    num = 0; den = 0;
    #1 rst_n = 0;                 // asynchronous reset edge
    repeat (3) @(negedge clk);
    rst_n = 1;
    check(FX_ONE, fx_t'(32'sd1572864));               // 1/1.5
    checks++;
    if (q !== fx_t'(32'sd699050)) begin failures++; $display("FAIL 1/1.5 = %0d", q); end
    check(fx_t'(-32'sd3145728), fx_t'(32'sd262144));  // -3/0.25 = -12
    checks++;
    if (q !== fx_t'(-32'sd12582912)) begin failures++; $display("FAIL -3/0.25 = %0d", q); end
    check(FX_ONE, 0);
    check(-FX_ONE, 0);
    check(FX_MAX, fx_t'(32'sd1));                     // saturates
    check(FX_MIN, fx_t'(-32'sd1));
    for (int k = 0; k < 300; k++) check(fx_t'($urandom), fx_t'($urandom) >>> ($urandom % 24));
    for (int k = 0; k < 300; k++) check(FX_ONE, FX_ONE + fx_t'($urandom % (64 << FRAC)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
