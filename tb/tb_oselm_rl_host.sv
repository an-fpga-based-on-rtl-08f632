// tb_oselm_rl_host: behavioural model of the host processor and of the
// environment for end-to-end tests of the OS-ELM Q-Network core; it
// drives one core instance through its ports and reports its checks.
//
// The host part follows the learning loop of the design: it draws alpha,
// b and beta in [0, 1), divides alpha by its largest singular value
// (power iteration), and plays a cart-pole environment (the classic
// cart-pole equations, 12-degree / 2.4-unit failure limits, 200-step cap)
// with epsilon-greedy actions (greedy with probability 0.7) predicted in
// software until N_HID experiences are stored. It then runs the initial
// training in floating point with L2 regularisation (delta = 0.5),
// P0 = (H0^T H0 + delta I)^-1, beta0 = P0 H0^T t0, and loads alpha, b,
// beta(theta1), beta(theta2) and P0 into the core. From there every step
// uses the core: a theta1 prediction to choose the action, a theta2
// prediction of the next state for max Q, and, with probability 0.5
// (random update), a training command. Every second episode theta2 is
// synchronised with theta1. A terminal transition is trained with reward
// -1 and d = 1 (the environment gives +1 per step otherwise).
//
// Every response is compared bit for bit with the reference model, which
// tracks beta and P alongside; latencies are checked against the
// documented formulas; at the end beta1, beta2 and the whole P matrix are
// read back through the load port and compared. Each mechanism (both
// prediction banks, training, terminal training, clipping at +1 and -1,
// skipped updates, random and greedy actions, sync, load, read-back) is
// counted and must occur at least once.
module tb_oselm_rl_host
  import oselm_pkg::*;
  import tb_oselm_ref_pkg::*;
#(
  parameter int N_HID      = 64,
  parameter int CORE_STEPS = 600,     // steps run on the core after initial training
  localparam int N_STATE   = 4,
  localparam int N_ACT     = 2,
  localparam int N_IN      = N_STATE + 1,
  localparam int AW_A      = $clog2(N_IN * N_HID),
  localparam int AW_P      = $clog2(N_HID * N_HID),
  localparam int AW_LD     = (AW_A > AW_P) ? AW_A : AW_P
) (
  input  logic             clk,
  output logic             rst_n,
  output fx_t              cfg_gamma,
  output logic             ld_en,
  output logic             ld_we,
  output mem_sel_e         ld_sel,
  output logic [AW_LD-1:0] ld_addr,
  output fx_t              ld_wdata,
  input  fx_t              ld_rdata,
  output logic             cmd_valid,
  input  logic             cmd_ready,
  output op_e              cmd_op,
  output logic             cmd_bank,
  output fx_t              cmd_state [N_STATE],
  output logic [0:0]       cmd_action,
  output fx_t              cmd_reward,
  output logic             cmd_ep_done,
  output fx_t              cmd_maxq,
  input  logic             rsp_valid,
  input  fx_t              rsp_q [N_ACT],
  input  fx_t              rsp_target,
  input  logic             busy,
  output logic             finished,
  output int               checks,
  output int               failures
);
  localparam int LAT_PRED  = N_ACT * N_HID * (3 * N_IN + 5) + 3;
  localparam int LAT_TRAIN = 3 + N_HID*(3*N_IN + 5) + 1 + N_HID*(3*N_HID + 3) + 55 + N_HID*(3*N_HID + 5) + 3;
  localparam int LAT_SYNC  = 2 * N_HID + 1;
  localparam real GAMMA = 0.99, DELTA = 0.5, EPS1 = 0.7, EPS2 = 0.5;
  localparam int UPDATE_STEP = 2;

  int n_pred1 = 0, n_pred2 = 0, n_train = 0, n_train_term = 0, n_clip_hi = 0, n_clip_lo = 0;
  int n_skip = 0, n_rand_act = 0, n_greedy = 0, n_sync = 0, n_load = 0, n_readback = 0;

  // host copies of the weights (Q20 words, the reference state)
  fx_t alpha_q[], bias_q[], beta1_q[], beta2_q[], p_q[];


  function automatic real urand();
    return real'($urandom) / 4294967296.0;
  endfunction

  function automatic void check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endfunction

  // ---- cart-pole environment --------------------------------------------
  real cp_x, cp_xd, cp_th, cp_thd;
  int  cp_steps;
  task automatic cp_reset();
    cp_x = urand() * 0.1 - 0.05; cp_xd = urand() * 0.1 - 0.05;
    cp_th = urand() * 0.1 - 0.05; cp_thd = urand() * 0.1 - 0.05;
    cp_steps = 0;
  endtask
  task automatic cp_step(input int a, output bit d);
    real f, ct, st, tmp, thacc, xacc;
    f = (a == 1) ? 10.0 : -10.0;
    ct = $cos(cp_th); st = $sin(cp_th);
    tmp = (f + 0.05 * cp_thd * cp_thd * st) / 1.1;
    thacc = (9.8 * st - ct * tmp) / (0.5 * (4.0 / 3.0 - 0.1 * ct * ct / 1.1));
    xacc = tmp - 0.05 * thacc * ct / 1.1;
    cp_x += 0.02 * cp_xd; cp_xd += 0.02 * xacc;
    cp_th += 0.02 * cp_thd; cp_thd += 0.02 * thacc;
    cp_steps++;
    d = (cp_x < -2.4) || (cp_x > 2.4) || (cp_th < -0.20944) || (cp_th > 0.20944) || (cp_steps >= 200);
  endtask
  function automatic void cp_obs(ref fx_t s[]);
    s = new[N_STATE];
    s[0] = to_fx(cp_x); s[1] = to_fx(cp_xd); s[2] = to_fx(cp_th); s[3] = to_fx(cp_thd);
  endfunction

  // ---- core access --------------------------------------------------------
  task automatic ld_write(input mem_sel_e sel, input int addr, input fx_t v);
    @(negedge clk);
    ld_en = 1; ld_we = 1; ld_sel = sel; ld_addr = AW_LD'(addr); ld_wdata = v;
    @(negedge clk);
    finished = 0; checks = 0; failures = 0; rst_n = 1;
    ld_en = 0; ld_we = 0;
    n_load++;
  endtask
  task automatic ld_read(input mem_sel_e sel, input int addr, output fx_t v);
    @(negedge clk);
    ld_en = 1; ld_we = 0; ld_sel = sel; ld_addr = AW_LD'(addr);
    @(negedge clk);
    ld_en = 0;
    v = ld_rdata;
    n_readback++;
  endtask
  task automatic run_cmd(input op_e op, input bit bank, input fx_t s[], input int a,
                         input fx_t r, input bit d, input fx_t mq, input int lat);
    int cyc;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd_op = op; cmd_bank = bank;
    for (int k = 0; k < N_STATE; k++) cmd_state[k] = (s.size() > 0) ? s[k] : '0;
    cmd_action = 1'(a); cmd_reward = r; cmd_ep_done = d; cmd_maxq = mq;
    @(negedge clk);
    cmd_valid = 0;
    cyc = 1;
    while (!rsp_valid) begin @(negedge clk); cyc++; end
    check(cyc == lat, $sformatf("op %s latency %0d expected %0d", op.name(), cyc, lat));
  endtask

  // Q-values of both actions, on the core, checked against the model
  task automatic core_predict(input fx_t s[], input bit bank, output fx_t q[]);
    q = new[N_ACT];
    run_cmd(OP_PREDICT, bank, s, 0, 0, 0, 0, LAT_PRED);
    for (int a = 0; a < N_ACT; a++) begin
      fx_t e;
      e = predict1(s, a, N_ACT, alpha_q, bias_q, bank ? beta2_q : beta1_q, N_HID);
      q[a] = rsp_q[a];
      check(rsp_q[a] === e, $sformatf("predict bank %0d q[%0d]=%0d expected %0d", bank, a, rsp_q[a], e));
    end
    if (bank) n_pred2++; else n_pred1++;
  endtask

  // ---- host-side linear algebra (floating point) -------------------------
  function automatic void invert(input int n, ref real m[]);
    real aug[];
    aug = new[n * 2 * n];
    for (int i = 0; i < n; i++)
      for (int j = 0; j < 2 * n; j++)
        aug[i*2*n + j] = (j < n) ? m[i*n + j] : ((j - n == i) ? 1.0 : 0.0);
    for (int c = 0; c < n; c++) begin
      int piv;
      real best, f;
      piv = c; best = 0.0;
      for (int r = c; r < n; r++) begin
        real v;
        v = aug[r*2*n + c]; if (v < 0) v = -v;
        if (v > best) begin best = v; piv = r; end
      end
      for (int j = 0; j < 2 * n; j++) begin
        real t;
        t = aug[c*2*n + j]; aug[c*2*n + j] = aug[piv*2*n + j]; aug[piv*2*n + j] = t;
      end
      f = aug[c*2*n + c];
      for (int j = 0; j < 2 * n; j++) aug[c*2*n + j] /= f;
      for (int r = 0; r < n; r++)
        if (r != c) begin
          f = aug[r*2*n + c];
          if (f != 0.0) for (int j = 0; j < 2 * n; j++) aug[r*2*n + j] -= f * aug[c*2*n + j];
        end
    end
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) m[i*n + j] = aug[i*2*n + n + j];
  endfunction

  function automatic fx_t fmax(input fx_t q[]);
    fx_t m;
    m = q[0];
    for (int a = 1; a < q.size(); a++) if (q[a] > m) m = q[a];
    return m;
  endfunction

  function automatic int argmax(input fx_t q[]);
    int b;
    b = 0;
    for (int a = 1; a < q.size(); a++) if (q[a] > q[b]) b = a;
    return b;
  endfunction

  // ---- main ---------------------------------------------------------------
  initial begin
    real alpha_r[], v[], w[], sig;
    fx_t s_t[], s_n[], q[];
    fx_t ds_s[$][], ds_sn[$][];
    int  ds_a[$];
    real ds_r[$];
    bit  ds_d[$];
    int  episode, core_steps, t;
    bit  d;
    fx_t word;

    ld_en = 0; ld_we = 0; ld_sel = MEM_ALPHA; ld_addr = 0; ld_wdata = 0;
    cmd_valid = 0; cmd_op = OP_PREDICT; cmd_bank = 0; cmd_action = 0;
    cmd_reward = 0; cmd_ep_done = 0; cmd_maxq = 0;
    for (int k = 0; k < N_STATE; k++) cmd_state[k] = 0;
    cfg_gamma = to_fx(GAMMA);

    // 1. initialise alpha, b, beta; spectral normalisation of alpha
    alpha_r = new[N_IN * N_HID];
    for (int k = 0; k < N_IN * N_HID; k++) alpha_r[k] = urand();
    v = new[N_HID]; w = new[N_IN];
    for (int j = 0; j < N_HID; j++) v[j] = 1.0;
    for (int it = 0; it < 100; it++) begin
      real nv;
      for (int i = 0; i < N_IN; i++) begin
        w[i] = 0.0;
        for (int j = 0; j < N_HID; j++) w[i] += alpha_r[i*N_HID + j] * v[j];
      end
      nv = 0.0;
      for (int j = 0; j < N_HID; j++) begin
        v[j] = 0.0;
        for (int i = 0; i < N_IN; i++) v[j] += alpha_r[i*N_HID + j] * w[i];
        nv += v[j] * v[j];
      end
      nv = $sqrt(nv);
      for (int j = 0; j < N_HID; j++) v[j] /= nv;
    end
    for (int i = 0; i < N_IN; i++) begin
      w[i] = 0.0;
      for (int j = 0; j < N_HID; j++) w[i] += alpha_r[i*N_HID + j] * v[j];
    end
    sig = 0.0;
    for (int i = 0; i < N_IN; i++) sig += w[i] * w[i];
    sig = $sqrt(sig);
    check(sig > 1.0, "largest singular value of alpha above 1 before normalisation");
    alpha_q = new[N_IN * N_HID]; bias_q = new[N_HID]; beta1_q = new[N_HID]; beta2_q = new[N_HID];
    for (int k = 0; k < N_IN * N_HID; k++) alpha_q[k] = to_fx(alpha_r[k] / sig);
    for (int j = 0; j < N_HID; j++) bias_q[j] = to_fx(urand());
    for (int j = 0; j < N_HID; j++) begin beta1_q[j] = to_fx(urand()); beta2_q[j] = beta1_q[j]; end

    #1 rst_n = 0;                 // asynchronous reset edge
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 2. software phase: collect N_HID experiences
    t = 0; episode = 0;
    while (ds_a.size() < N_HID) begin
      episode++;
      cp_reset();
      d = 0;
      while (!d && ds_a.size() < N_HID) begin
        int a;
        cp_obs(s_t);
        t++;
        if (urand() < EPS1) begin
          fx_t q0, q1;
          q0 = predict1(s_t, 0, N_ACT, alpha_q, bias_q, beta1_q, N_HID);
          q1 = predict1(s_t, 1, N_ACT, alpha_q, bias_q, beta1_q, N_HID);
          a = (q1 > q0) ? 1 : 0;
        end else a = int'($urandom % N_ACT);
        cp_step(a, d);
        cp_obs(s_n);
        ds_s.push_back(s_t); ds_sn.push_back(s_n); ds_a.push_back(a);
        ds_r.push_back(d ? -1.0 : 1.0); ds_d.push_back(d);
      end
      if (episode % UPDATE_STEP == 0) beta2_q = beta1_q;
    end

    // 2c. initial training with L2 regularisation (floating point)
    begin
      real hm[], pm[], tv[], b0[];
      fx_t h[];
      hm = new[N_HID * N_HID]; pm = new[N_HID * N_HID]; tv = new[N_HID]; b0 = new[N_HID];
      for (int r = 0; r < N_HID; r++) begin
        fx_t qa, qb;
        hidden(ds_s[r], ds_a[r], N_ACT, alpha_q, bias_q, N_HID, h);
        for (int j = 0; j < N_HID; j++) hm[r*N_HID + j] = to_real(h[j]);
        qa = predict1(ds_sn[r], 0, N_ACT, alpha_q, bias_q, beta2_q, N_HID);
        qb = predict1(ds_sn[r], 1, N_ACT, alpha_q, bias_q, beta2_q, N_HID);
        tv[r] = ds_r[r] + (ds_d[r] ? 0.0 : GAMMA * to_real((qa > qb) ? qa : qb));
        if (tv[r] > 1.0) tv[r] = 1.0;
        if (tv[r] < -1.0) tv[r] = -1.0;
      end
      for (int i = 0; i < N_HID; i++)
        for (int j = 0; j < N_HID; j++) begin
          real acc;
          acc = (i == j) ? DELTA : 0.0;
          for (int r = 0; r < N_HID; r++) acc += hm[r*N_HID + i] * hm[r*N_HID + j];
          pm[i*N_HID + j] = acc;
        end
      invert(N_HID, pm);
      p_q = new[N_HID * N_HID];
      for (int i = 0; i < N_HID; i++) begin
        b0[i] = 0.0;
        for (int r = 0; r < N_HID; r++) begin
          real ht;
          ht = 0.0;
          for (int j = 0; j < N_HID; j++) ht += pm[i*N_HID + j] * hm[r*N_HID + j];
          b0[i] += ht * tv[r];
        end
      end
      // symmetric words for P0
      for (int i = 0; i < N_HID; i++)
        for (int j = 0; j < N_HID; j++)
          p_q[i*N_HID + j] = to_fx(0.5 * (pm[i*N_HID + j] + pm[j*N_HID + i]));
      for (int j = 0; j < N_HID; j++) beta1_q[j] = to_fx(b0[j]);
    end

    // 3. load the core
    for (int k = 0; k < N_IN * N_HID; k++) ld_write(MEM_ALPHA, k, alpha_q[k]);
    for (int j = 0; j < N_HID; j++) ld_write(MEM_BIAS, j, bias_q[j]);
    for (int j = 0; j < N_HID; j++) ld_write(MEM_BETA1, j, beta1_q[j]);
    for (int j = 0; j < N_HID; j++) ld_write(MEM_BETA2, j, beta2_q[j]);
    for (int k = 0; k < N_HID * N_HID; k++) ld_write(MEM_P, k, p_q[k]);
    for (int k = 0; k < 8; k++) begin
      int ad;
      ad = int'($urandom % (N_IN * N_HID));
      ld_read(MEM_ALPHA, ad, word);
      check(word === alpha_q[ad], "alpha read-back after load");
    end
    $display("initial training done after %0d steps, %0d episodes", t, episode);

    // 4. main loop on the core
    core_steps = 0;
    while (core_steps < CORE_STEPS) begin
      episode++;
      cp_reset();
      d = 0;
      while (!d && core_steps < CORE_STEPS) begin
        int a;
        fx_t r, mq, et;
        cp_obs(s_t);
        t++; core_steps++;
        // 4a determine
        core_predict(s_t, 0, q);
        if (urand() < EPS1) begin a = argmax(q); n_greedy++; end
        else begin a = int'($urandom % N_ACT); n_rand_act++; end
        // 4b observe
        cp_step(a, d);
        cp_obs(s_n);
        r = d ? -FX_ONE : FX_ONE;
        // 4c update
        core_predict(s_n, 1, q);
        mq = fmax(q);
        if (urand() < EPS2) begin
          et = train(s_t, a, N_ACT, r, d, mq, cfg_gamma, alpha_q, bias_q, beta1_q, p_q, N_HID);
          run_cmd(OP_TRAIN, 0, s_t, a, r, d, mq, LAT_TRAIN);
          check(rsp_target === et, $sformatf("teacher value %0d expected %0d", rsp_target, et));
          n_train++;
          if (d) n_train_term++;
          if (et == FX_ONE) n_clip_hi++;
          if (et == -FX_ONE) n_clip_lo++;
        end else n_skip++;
      end
      if (episode % UPDATE_STEP == 0) begin
        fx_t none[];
        none = new[0];
        run_cmd(OP_SYNC, 0, none, 0, 0, 0, 0, LAT_SYNC);
        beta2_q = beta1_q;
        n_sync++;
      end
    end

    // 5. read back all trained state
    for (int j = 0; j < N_HID; j++) begin
      ld_read(MEM_BETA1, j, word);
      check(word === beta1_q[j], $sformatf("beta1[%0d] read-back %0d expected %0d", j, word, beta1_q[j]));
      ld_read(MEM_BETA2, j, word);
      check(word === beta2_q[j], $sformatf("beta2[%0d] read-back", j));
    end
    for (int k = 0; k < N_HID * N_HID; k++) begin
      ld_read(MEM_P, k, word);
      check(word === p_q[k], $sformatf("P[%0d] read-back %0d expected %0d", k, word, p_q[k]));
    end

    $display("predict theta1=%0d theta2=%0d train=%0d (terminal %0d, clip +1 %0d, clip -1 %0d) skipped=%0d",
             n_pred1, n_pred2, n_train, n_train_term, n_clip_hi, n_clip_lo, n_skip);
    $display("greedy=%0d random=%0d sync=%0d loads=%0d read-backs=%0d episodes=%0d",
             n_greedy, n_rand_act, n_sync, n_load, n_readback, episode);
    check(n_pred1 > 0, "theta1 prediction never happened");
    check(n_pred2 > 0, "theta2 prediction never happened");
    check(n_train > 0, "training never happened");
    check(n_train_term > 0, "terminal training never happened");
    check(n_clip_hi > 0, "clipping at +1 never happened");
    check(n_clip_lo > 0, "clipping at -1 never happened");
    check(n_skip > 0, "skipped update never happened");
    check(n_greedy > 0 && n_rand_act > 0, "greedy or random action never happened");
    check(n_sync > 0, "target sync never happened");
    check(n_load > 0 && n_readback > 0, "load or read-back never happened");
    $display("N_HID=%0d: checks=%0d failures=%0d", N_HID, checks, failures);
    finished = 1;
  end
endmodule
