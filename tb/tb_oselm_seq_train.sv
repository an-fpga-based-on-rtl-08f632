// tb_oselm_seq_train: runs the training sequencer with the real arithmetic
// units for a series of experiences. The testbench serves the six RAM
// ports from its own arrays. After every step it compares the clipped
// teacher value, every beta word and every P word with the bit-exact
// model, and compares beta and P within a tolerance with a floating-point
// evaluation of the textbook recursive update
//   P' = P - P h^T (1 + h P h^T)^-1 h P,  beta' = beta + P' h^T (t - h beta)
// computed directly, without the shortcuts the hardware takes. It checks
// the start-to-done latency and that episode ends (d = 1) and clipping at
// both +1 and -1 occur.
module tb_oselm_seq_train;
  import oselm_pkg::*;
  import tb_oselm_ref_pkg::*;
  localparam int N_STATE = 4, N_ACT = 2, N_HID = 12, N_IN = N_STATE + 1;
  localparam int LAT = 3 + N_HID*(3*N_IN + 5) + 1 + N_HID*(3*N_HID + 3) + 55 + N_HID*(3*N_HID + 5) + 1;
  localparam int STEPS = 16;

  logic clk = 0, rst_n = 1, start = 0;
  logic busy, done, ep_done;
  fx_t  state [N_STATE];
  logic [0:0] action;
  fx_t  reward, maxq, gamma, target;
  int checks = 0, failures = 0;
  int n_clip_hi = 0, n_clip_lo = 0, n_term = 0;
  always #5 clk = ~clk;

  fx_t alpha_m [N_IN*N_HID];
  fx_t bias_m  [N_HID];
  fx_t beta_m  [N_HID];
  fx_t p_m     [N_HID*N_HID];
  fx_t h_m     [N_HID];
  fx_t u_m     [N_HID];

  oselm_ram_if #(.AW($clog2(N_IN*N_HID)))  alpha ();
  oselm_ram_if #(.AW($clog2(N_HID)))       bias ();
  oselm_ram_if #(.AW($clog2(N_HID)))       beta ();
  oselm_ram_if #(.AW($clog2(N_HID*N_HID))) pmat ();
  oselm_ram_if #(.AW($clog2(N_HID)))       hbuf ();
  oselm_ram_if #(.AW($clog2(N_HID)))       ubuf ();
  oselm_arith_if ar ();

  always_ff @(posedge clk) begin
    alpha.rdata <= alpha_m[alpha.addr];
    bias.rdata  <= bias_m[bias.addr];
    beta.rdata  <= beta_m[beta.addr];
    pmat.rdata  <= p_m[pmat.addr];
    hbuf.rdata  <= h_m[hbuf.addr];
    ubuf.rdata  <= u_m[ubuf.addr];
    if (beta.we) beta_m[beta.addr] <= beta.wdata;
    if (pmat.we) p_m[pmat.addr]    <= pmat.wdata;
    if (hbuf.we) h_m[hbuf.addr]    <= hbuf.wdata;
    if (ubuf.we) u_m[ubuf.addr]    <= ubuf.wdata;
  end

  fx_add u_add (.a(ar.add_a), .b(ar.add_b), .sub(ar.add_sub), .y(ar.add_y));
  fx_mul u_mul (.clk, .a(ar.mul_a), .b(ar.mul_b), .p(ar.mul_p));
  fx_div u_div (.clk, .rst_n, .start(ar.div_start), .num(ar.div_num), .den(ar.div_den),
                .busy(ar.div_busy), .done(ar.div_done), .q(ar.div_q));

  oselm_seq_train #(.N_STATE(N_STATE), .N_ACT(N_ACT), .N_HID(N_HID)) dut (
    .clk, .rst_n, .start, .state, .action, .reward, .ep_done, .maxq, .gamma,
    .busy, .done, .target, .alpha(alpha), .bias(bias), .beta(beta), .pmat(pmat),
    .hbuf(hbuf), .ubuf(ubuf), .ar(ar));

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real absr(input real v);
    return (v < 0) ? -v : v;
  endfunction

  initial begin
    fx_t s_d[], a_d[], b_d[], be_d[], p_d[], h_d[];
    real pr[], br[], ph[], pn[], pnh[];
    real hpht, yr, tr_, e_max_b, e_max_p;
    fx_t et;
    for (int k = 0; k < N_STATE; k++) state[k] = '0;
    action = 0; reward = 0; maxq = 0; ep_done = 0;
    gamma = to_fx(0.99);
    a_d = new[N_IN*N_HID]; b_d = new[N_HID]; be_d = new[N_HID]; p_d = new[N_HID*N_HID];
    s_d = new[N_STATE];
    for (int k = 0; k < N_IN*N_HID; k++) begin alpha_m[k] = fx_t'($urandom % (1 << FRAC)) >>> 2; a_d[k] = alpha_m[k]; end
    for (int k = 0; k < N_HID; k++) begin bias_m[k] = fx_t'($urandom % (1 << FRAC)) >>> 1; b_d[k] = bias_m[k]; end
    for (int k = 0; k < N_HID; k++) begin beta_m[k] = fx_t'($urandom % (1 << FRAC)) - FX_HALF; be_d[k] = beta_m[k]; end
    // symmetric, diagonally dominant P
    for (int i = 0; i < N_HID; i++)
      for (int j = i; j < N_HID; j++) begin
        fx_t v;
        v = (i == j) ? FX_HALF + fx_t'($urandom % (1 << (FRAC-1))) : fx_t'($urandom % (1 << (FRAC-6))) - fx_t'(1 << (FRAC-7));
        p_m[i*N_HID + j] = v; p_m[j*N_HID + i] = v;
      end
    for (int k = 0; k < N_HID*N_HID; k++) p_d[k] = p_m[k];
    for (int k = 0; k < N_HID; k++) begin h_m[k] = 0; u_m[k] = 0; end
    #1 rst_n = 0;                 // asynchronous reset edge
    repeat (3) @(negedge clk);
    rst_n = 1;

    for (int step = 0; step < STEPS; step++) begin
      int cyc;
      for (int k = 0; k < N_STATE; k++) begin
        state[k] = fx_t'($urandom % (2 << FRAC)) - FX_ONE;
        s_d[k] = state[k];
      end
      action  = 1'($urandom);
      ep_done = (step % 5 == 4);
      reward  = (step % 3 == 0) ? FX_ONE : ((step % 3 == 1) ? -FX_ONE : to_fx(0.1));
      maxq    = (step % 2 == 0) ? to_fx(0.8) : to_fx(-0.5);
      if (step == 6) begin reward = -FX_ONE; maxq = to_fx(-3.0); ep_done = 0; end

      // floating-point reference of the update, from the current words
      pr = new[N_HID*N_HID]; br = new[N_HID];
      for (int k = 0; k < N_HID*N_HID; k++) pr[k] = to_real(p_d[k]);
      for (int k = 0; k < N_HID; k++) br[k] = to_real(be_d[k]);

      // expected result, bit exact (updates be_d and p_d)
      et = train(s_d, int'(action), N_ACT, reward, ep_done, maxq, gamma, a_d, b_d, be_d, p_d, N_HID);
      if (et == FX_ONE) n_clip_hi++;
      if (et == -FX_ONE) n_clip_lo++;
      if (ep_done) n_term++;

      // textbook real-valued update with the same h and teacher value
      hidden(s_d, int'(action), N_ACT, a_d, b_d, N_HID, h_d);
      ph = new[N_HID]; pn = new[N_HID*N_HID]; pnh = new[N_HID];
      hpht = 0.0;
      for (int i = 0; i < N_HID; i++) begin
        ph[i] = 0.0;
        for (int j = 0; j < N_HID; j++) ph[i] += pr[i*N_HID + j] * to_real(h_d[j]);
        hpht += to_real(h_d[i]) * ph[i];
      end
      for (int i = 0; i < N_HID; i++)
        for (int j = 0; j < N_HID; j++) begin
          real hp_j;
          hp_j = 0.0;
          for (int k = 0; k < N_HID; k++) hp_j += to_real(h_d[k]) * pr[k*N_HID + j];
          pn[i*N_HID + j] = pr[i*N_HID + j] - ph[i] * hp_j / (1.0 + hpht);
        end
      yr = 0.0;
      for (int j = 0; j < N_HID; j++) yr += to_real(h_d[j]) * br[j];
      tr_ = to_real(et);
      for (int i = 0; i < N_HID; i++) begin
        pnh[i] = 0.0;
        for (int j = 0; j < N_HID; j++) pnh[i] += pn[i*N_HID + j] * to_real(h_d[j]);
        br[i] += pnh[i] * (tr_ - yr);
      end

      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end

      checks++;
      if (cyc != LAT) begin failures++; $display("FAIL latency %0d expected %0d", cyc, LAT); end
      checks++;
      if (target !== et) begin failures++; $display("FAIL step %0d target %0d exp %0d", step, target, et); end
      e_max_b = 0.0; e_max_p = 0.0;
      for (int k = 0; k < N_HID; k++) begin
        checks++;
        if (beta_m[k] !== be_d[k]) begin failures++; $display("FAIL step %0d beta[%0d]=%0d exp %0d", step, k, beta_m[k], be_d[k]); end
        if (absr(to_real(beta_m[k]) - br[k]) > e_max_b) e_max_b = absr(to_real(beta_m[k]) - br[k]);
      end
      for (int k = 0; k < N_HID*N_HID; k++) begin
        checks++;
        if (p_m[k] !== p_d[k]) begin failures++; $display("FAIL step %0d P[%0d]=%0d exp %0d", step, k, p_m[k], p_d[k]); end
        if (absr(to_real(p_m[k]) - pn[k]) > e_max_p) e_max_p = absr(to_real(p_m[k]) - pn[k]);
      end
      checks++;
      if (e_max_b > 1e-3 || e_max_p > 1e-3) begin
        failures++; $display("FAIL step %0d float deviation beta %g P %g", step, e_max_b, e_max_p);
      end
      // keep the float reference aligned with the hardware words
    end
    checks++;
    if (n_clip_hi == 0 || n_clip_lo == 0 || n_term == 0) begin
      failures++; $display("FAIL coverage clip_hi=%0d clip_lo=%0d term=%0d", n_clip_hi, n_clip_lo, n_term);
    end
    $display("clip_hi=%0d clip_lo=%0d terminal=%0d", n_clip_hi, n_clip_lo, n_term);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
