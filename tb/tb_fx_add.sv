// tb_fx_add: checks the saturating Q20 adder/subtractor against integer
// arithmetic on random and corner-case operands, including both overflow
// directions.
module tb_fx_add;
  import oselm_pkg::*;
  fx_t a, b, y;
  logic sub;
  int checks = 0, failures = 0;
  int n_sat = 0;

  fx_add dut (.a, .b, .sub, .y);

  task automatic check(input fx_t ta, input fx_t tb_, input logic ts);
    longint e;
    fx_t exp_y;
    a = ta; b = tb_; sub = ts;
    #1;
    e = ts ? longint'(ta) - longint'(tb_) : longint'(ta) + longint'(tb_);
    if (e > longint'(FX_MAX)) begin exp_y = FX_MAX; n_sat++; end
    else if (e < longint'(FX_MIN)) begin exp_y = FX_MIN; n_sat++; end
    else exp_y = fx_t'(e);
    checks++;
    if (y !== exp_y) begin
      failures++;
      $display("FAIL add a=%0d b=%0d sub=%0d y=%0d exp=%0d", ta, tb_, ts, y, exp_y);
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
    check(FX_ONE, FX_ONE, 0);
    check(FX_ONE, FX_HALF, 1);
    check(FX_MAX, FX_ONE, 0);
    check(FX_MIN, FX_ONE, 1);
    check(FX_MIN, FX_MAX, 0);
    check(-FX_ONE, FX_MAX, 1);
    for (int k = 0; k < 2000; k++) check(fx_t'($urandom), fx_t'($urandom), 1'($urandom));
    for (int k = 0; k < 500; k++) check(fx_t'($urandom) >>> 8, fx_t'($urandom) >>> 8, 1'($urandom));
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
