// tb_oselm_predict: runs the predict sequencer with the real arithmetic
// units on random weights and states. The testbench serves the alpha, b
// and beta RAM ports from its own arrays (one cycle of read latency) and
// compares every Q-value with the bit-exact model and, within a
// tolerance, with floating point. It also checks the start-to-done
// latency N_ACT*N_HID*(3*N_IN+5)+1 and that the RAMs are never written.
module tb_oselm_predict;
  import oselm_pkg::*;
  import tb_oselm_ref_pkg::*;
  localparam int N_STATE = 4, N_ACT = 2, N_HID = 16, N_IN = N_STATE + 1;
  localparam int LAT = N_ACT * N_HID * (3 * N_IN + 5) + 1;

  logic clk = 0, rst_n = 1, start = 0;
  logic busy, done;
  fx_t  state [N_STATE];
  fx_t  q [N_ACT];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  fx_t alpha_m [N_IN*N_HID];
  fx_t bias_m  [N_HID];
  fx_t beta_m  [N_HID];

  oselm_ram_if #(.AW($clog2(N_IN*N_HID))) alpha ();
  oselm_ram_if #(.AW($clog2(N_HID)))      bias ();
  oselm_ram_if #(.AW($clog2(N_HID)))      beta ();
  oselm_arith_if ar ();

  always_ff @(posedge clk) begin
    alpha.rdata <= alpha_m[alpha.addr];
    bias.rdata  <= bias_m[bias.addr];
    beta.rdata  <= beta_m[beta.addr];
  end

  fx_add u_add (.a(ar.add_a), .b(ar.add_b), .sub(ar.add_sub), .y(ar.add_y));
  fx_mul u_mul (.clk, .a(ar.mul_a), .b(ar.mul_b), .p(ar.mul_p));
  fx_div u_div (.clk, .rst_n, .start(ar.div_start), .num(ar.div_num), .den(ar.div_den),
                .busy(ar.div_busy), .done(ar.div_done), .q(ar.div_q));

  oselm_predict #(.N_STATE(N_STATE), .N_ACT(N_ACT), .N_HID(N_HID)) dut (
    .clk, .rst_n, .start, .state, .busy, .done, .q,
    .alpha(alpha), .bias(bias), .beta(beta), .ar(ar));

  int n_writes = 0;
  always @(posedge clk) if (alpha.we || bias.we || beta.we) n_writes++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fx_t s_d[], a_d[], b_d[], be_d[];
    for (int k = 0; k < N_STATE; k++) state[k] = '0;
    #1 rst_n = 0;                 // asynchronous reset edge
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 12; trial++) begin
      int cyc;
      // random weights in [0,1) for alpha/b, [-1,1) for beta, states in [-2,2)
      for (int k = 0; k < N_IN*N_HID; k++) alpha_m[k] = fx_t'($urandom % (1 << FRAC)) >>> 1;
      for (int k = 0; k < N_HID; k++) bias_m[k] = fx_t'($urandom % (1 << FRAC));
      for (int k = 0; k < N_HID; k++) beta_m[k] = fx_t'($urandom % (2 << FRAC)) - FX_ONE;
      if (trial == 0) for (int k = 0; k < N_HID; k++) bias_m[k] = -fx_t'(4 << FRAC); // all ReLUs off
      s_d = new[N_STATE]; a_d = new[N_IN*N_HID]; b_d = new[N_HID]; be_d = new[N_HID];
      for (int k = 0; k < N_STATE; k++) begin
        state[k] = fx_t'($urandom % (4 << FRAC)) - fx_t'(2 << FRAC);
        s_d[k] = state[k];
      end
      for (int k = 0; k < N_IN*N_HID; k++) a_d[k] = alpha_m[k];
      for (int k = 0; k < N_HID; k++) begin b_d[k] = bias_m[k]; be_d[k] = beta_m[k]; end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != LAT) begin failures++; $display("FAIL latency %0d expected %0d", cyc, LAT); end
      for (int a = 0; a < N_ACT; a++) begin
        fx_t e;
        real qr;
        e = predict1(s_d, a, N_ACT, a_d, b_d, be_d, N_HID);
        checks++;
        if (q[a] !== e) begin failures++; $display("FAIL trial %0d q[%0d]=%0d exp %0d", trial, a, q[a], e); end
        // floating-point reference
        qr = 0.0;
        for (int j = 0; j < N_HID; j++) begin
          real acc;
          acc = to_real(b_d[j]);
          for (int i = 0; i < N_STATE; i++) acc += to_real(s_d[i]) * to_real(a_d[i*N_HID + j]);
          acc += (a == 0 ? -0.5 : 0.5) * to_real(a_d[N_STATE*N_HID + j]);
          if (acc < 0) acc = 0;
          qr += acc * to_real(be_d[j]);
        end
        checks++;
        if ((to_real(q[a]) - qr) > 1e-3 || (qr - to_real(q[a])) > 1e-3) begin
          failures++; $display("FAIL trial %0d float q=%f ref=%f", trial, to_real(q[a]), qr);
        end
        if (trial == 0) begin
          checks++;
          if (q[a] !== 0) begin failures++; $display("FAIL ReLU cut-off: q=%0d", q[a]); end
        end
      end
    end
    checks++;
    if (n_writes != 0) begin failures++; $display("FAIL predict wrote a RAM"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
