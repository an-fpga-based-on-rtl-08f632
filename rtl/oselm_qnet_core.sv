// oselm_qnet_core: the OS-ELM Q-Network core, the programmable-logic half
// of an on-device reinforcement learner whose other half is software on a
// host processor.
//
// The Q-function is a single-hidden-layer network in the "simplified
// output model": its input is the environment state plus one action value
// and its single output is Q(s, a). The host initialises and spectrally
// normalises alpha, runs the initial (L2-regularised) training, and loads
// alpha, b, beta and the resulting P matrix through the load port. From
// then on the core does the two operations of the main loop:
//   OP_PREDICT  Q(s, a) for every action with theta1 (action choice) or
//               theta2 (the fixed target network, for max_a Q(s_t+1, a)),
//   OP_TRAIN    one OS-ELM sequential update of theta1's beta and P with
//               the clipped teacher value r + (1-d) gamma maxq,
// plus OP_SYNC, which copies theta1's beta into theta2's (alpha and b are
// shared by both networks, so only beta is kept twice). Choosing actions
// (epsilon-greedy), deciding whether to train on a step (random update)
// and when to sync stay with the host.
//
// Structure: one predict sequencer and one training sequencer share a
// single adder, multiplier and divider and the block RAMs; the controller
// here runs one command at a time and routes the RAM ports and the
// arithmetic units to whichever sequencer runs.
//
// Interface and timing:
//   load port   ld_en/ld_we/ld_sel/ld_addr/ld_wdata; ld_rdata is the word
//               at (ld_sel, ld_addr) one cycle after ld_en. Only while
//               busy is low.
//   commands    cmd_valid/cmd_ready handshake (ready while idle); the
//               operands are sampled with the handshake. rsp_valid pulses
//               one cycle when the command has finished, with rsp_q[] (for
//               OP_PREDICT) and rsp_target (the clipped teacher value, for
//               OP_TRAIN) valid and held until the next response.
//   latency     OP_PREDICT N_ACT*N_HID*(3*N_IN+5)+3 cycles, OP_TRAIN about
//               6*N_HID^2 cycles, OP_SYNC 2*N_HID+1 cycles, from the
//               handshake to rsp_valid.
// The command set, the load port and the sequencing are this design's own
// choices; the paper gives the operations, the shared single arithmetic
// set, the Q20 format and the memories.
module oselm_qnet_core
  import oselm_pkg::*;
#(
  parameter int unsigned N_STATE = 4,
  parameter int unsigned N_ACT   = 2,
  parameter int unsigned N_HID   = 64,
  localparam int unsigned N_IN   = N_STATE + 1,
  localparam int unsigned AW_A   = $clog2(N_IN * N_HID),
  localparam int unsigned AW_P   = $clog2(N_HID * N_HID),
  localparam int unsigned AW_V   = $clog2(N_HID),
  localparam int unsigned AW_LD  = (AW_A > AW_P) ? AW_A : AW_P,
  localparam int unsigned ACTW   = (N_ACT > 1) ? $clog2(N_ACT) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  fx_t               cfg_gamma,
  // host load / read-back port
  input  logic              ld_en,
  input  logic              ld_we,
  input  mem_sel_e          ld_sel,
  input  logic [AW_LD-1:0]  ld_addr,
  input  fx_t               ld_wdata,
  output fx_t               ld_rdata,
  // command
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  op_e               cmd_op,
  input  logic              cmd_bank,     // OP_PREDICT: 0 theta1, 1 theta2
  input  fx_t               cmd_state [N_STATE],
  input  logic [ACTW-1:0]   cmd_action,
  input  fx_t               cmd_reward,
  input  logic              cmd_ep_done,
  input  fx_t               cmd_maxq,
  // response
  output logic              rsp_valid,
  output fx_t               rsp_q [N_ACT],
  output fx_t               rsp_target,
  output logic              busy
);
  typedef enum logic [1:0] { C_IDLE, C_PRED, C_TRAIN, C_SYNC } ctl_e;

  ctl_e  ctl;
  logic  bank_l;
  logic  pr_start, tr_start;
  logic  pr_busy, pr_done, tr_busy, tr_done;
  fx_t   st_l [N_STATE];
  logic [ACTW-1:0] act_l;
  fx_t   rew_l, maxq_l;
  logic  epd_l;
  fx_t   pr_q [N_ACT];
  fx_t   tr_target;
  logic [AW_V:0] sy_j;
  logic  sy_wr;

  // ---- memories ------------------------------------------------------
  oselm_ram_if #(.AW(AW_A)) m_alpha ();
  oselm_ram_if #(.AW(AW_V)) m_bias  ();
  oselm_ram_if #(.AW(AW_V)) m_beta1 ();
  oselm_ram_if #(.AW(AW_V)) m_beta2 ();
  oselm_ram_if #(.AW(AW_P)) m_p     ();
  oselm_ram_if #(.AW(AW_V)) m_h     ();
  oselm_ram_if #(.AW(AW_V)) m_u     ();

  oselm_bram #(.DEPTH(N_IN * N_HID))  u_alpha (.clk, .port(m_alpha));
  oselm_bram #(.DEPTH(N_HID))         u_bias  (.clk, .port(m_bias));
  oselm_bram #(.DEPTH(N_HID))         u_beta1 (.clk, .port(m_beta1));
  oselm_bram #(.DEPTH(N_HID))         u_beta2 (.clk, .port(m_beta2));
  oselm_bram #(.DEPTH(N_HID * N_HID)) u_p     (.clk, .port(m_p));
  oselm_bram #(.DEPTH(N_HID))         u_h     (.clk, .port(m_h));
  oselm_bram #(.DEPTH(N_HID))         u_u     (.clk, .port(m_u));

  // ---- the single arithmetic set -------------------------------------
  oselm_arith_if ar ();
  oselm_arith_if pr_ar ();
  oselm_arith_if tr_ar ();

  fx_add u_add (.a(ar.add_a), .b(ar.add_b), .sub(ar.add_sub), .y(ar.add_y));
  fx_mul u_mul (.clk, .a(ar.mul_a), .b(ar.mul_b), .p(ar.mul_p));
  fx_div u_div (.clk, .rst_n, .start(ar.div_start), .num(ar.div_num), .den(ar.div_den),
                .busy(ar.div_busy), .done(ar.div_done), .q(ar.div_q));

  always_comb begin
    if (ctl == C_TRAIN) begin
      ar.mul_a = tr_ar.mul_a;  ar.mul_b = tr_ar.mul_b;
      ar.add_a = tr_ar.add_a;  ar.add_b = tr_ar.add_b;  ar.add_sub = tr_ar.add_sub;
      ar.div_start = tr_ar.div_start;  ar.div_num = tr_ar.div_num;  ar.div_den = tr_ar.div_den;
    end else begin
      ar.mul_a = pr_ar.mul_a;  ar.mul_b = pr_ar.mul_b;
      ar.add_a = pr_ar.add_a;  ar.add_b = pr_ar.add_b;  ar.add_sub = pr_ar.add_sub;
      ar.div_start = pr_ar.div_start;  ar.div_num = pr_ar.div_num;  ar.div_den = pr_ar.div_den;
    end
  end
  assign pr_ar.mul_p = ar.mul_p;     assign tr_ar.mul_p = ar.mul_p;
  assign pr_ar.add_y = ar.add_y;     assign tr_ar.add_y = ar.add_y;
  assign pr_ar.div_q = ar.div_q;     assign tr_ar.div_q = ar.div_q;
  assign pr_ar.div_busy = ar.div_busy; assign tr_ar.div_busy = ar.div_busy;
  assign pr_ar.div_done = ar.div_done; assign tr_ar.div_done = ar.div_done;

  // ---- sequencers ----------------------------------------------------
  oselm_ram_if #(.AW(AW_A)) pr_alpha ();
  oselm_ram_if #(.AW(AW_V)) pr_bias  ();
  oselm_ram_if #(.AW(AW_V)) pr_beta  ();
  oselm_ram_if #(.AW(AW_A)) tr_alpha ();
  oselm_ram_if #(.AW(AW_V)) tr_bias  ();
  oselm_ram_if #(.AW(AW_V)) tr_beta  ();
  oselm_ram_if #(.AW(AW_P)) tr_p     ();
  oselm_ram_if #(.AW(AW_V)) tr_h     ();
  oselm_ram_if #(.AW(AW_V)) tr_u     ();

  oselm_predict #(.N_STATE(N_STATE), .N_ACT(N_ACT), .N_HID(N_HID)) u_predict (
    .clk, .rst_n, .start(pr_start), .state(st_l), .busy(pr_busy), .done(pr_done), .q(pr_q),
    .alpha(pr_alpha), .bias(pr_bias), .beta(pr_beta), .ar(pr_ar));

  oselm_seq_train #(.N_STATE(N_STATE), .N_ACT(N_ACT), .N_HID(N_HID)) u_train (
    .clk, .rst_n, .start(tr_start), .state(st_l), .action(act_l), .reward(rew_l),
    .ep_done(epd_l), .maxq(maxq_l), .gamma(cfg_gamma), .busy(tr_busy), .done(tr_done),
    .target(tr_target), .alpha(tr_alpha), .bias(tr_bias), .beta(tr_beta), .pmat(tr_p),
    .hbuf(tr_h), .ubuf(tr_u), .ar(tr_ar));

  // ---- RAM port routing ----------------------------------------------
  logic host_acc;
  assign host_acc = (ctl == C_IDLE) && ld_en;

  always_comb begin
    // alpha and b: predict, train or host
    unique case (ctl)
      C_TRAIN: begin
        m_alpha.addr = tr_alpha.addr; m_alpha.we = 1'b0; m_alpha.wdata = '0;
        m_bias.addr  = tr_bias.addr;  m_bias.we  = 1'b0; m_bias.wdata  = '0;
      end
      C_PRED: begin
        m_alpha.addr = pr_alpha.addr; m_alpha.we = 1'b0; m_alpha.wdata = '0;
        m_bias.addr  = pr_bias.addr;  m_bias.we  = 1'b0; m_bias.wdata  = '0;
      end
      default: begin
        m_alpha.addr = AW_A'(ld_addr); m_alpha.wdata = ld_wdata;
        m_alpha.we   = host_acc && ld_we && (ld_sel == MEM_ALPHA);
        m_bias.addr  = AW_V'(ld_addr); m_bias.wdata  = ld_wdata;
        m_bias.we    = host_acc && ld_we && (ld_sel == MEM_BIAS);
      end
    endcase

    // beta of theta1: train (read/write), predict bank 0, sync source, host
    // beta of theta2: predict bank 1, sync destination, host
    m_beta1.addr = AW_V'(ld_addr); m_beta1.wdata = ld_wdata;
    m_beta1.we   = host_acc && ld_we && (ld_sel == MEM_BETA1);
    m_beta2.addr = AW_V'(ld_addr); m_beta2.wdata = ld_wdata;
    m_beta2.we   = host_acc && ld_we && (ld_sel == MEM_BETA2);
    unique case (ctl)
      C_TRAIN: begin
        m_beta1.addr = tr_beta.addr; m_beta1.we = tr_beta.we; m_beta1.wdata = tr_beta.wdata;
      end
      C_PRED: begin
        if (bank_l) begin m_beta2.addr = pr_beta.addr; m_beta2.we = 1'b0; end
        else        begin m_beta1.addr = pr_beta.addr; m_beta1.we = 1'b0; end
      end
      C_SYNC: begin
        m_beta1.addr  = AW_V'(sy_j);  m_beta1.we = 1'b0;
        m_beta2.addr  = AW_V'(sy_j);  m_beta2.we = sy_wr;
        m_beta2.wdata = m_beta1.rdata;
      end
      default: ;
    endcase

    // P: train or host
    if (ctl == C_TRAIN) begin
      m_p.addr = tr_p.addr; m_p.we = tr_p.we; m_p.wdata = tr_p.wdata;
    end else begin
      m_p.addr = AW_P'(ld_addr); m_p.wdata = ld_wdata;
      m_p.we   = host_acc && ld_we && (ld_sel == MEM_P);
    end
  end

  // H and U buffers belong to the training sequencer alone.
  assign m_h.addr = tr_h.addr;  assign m_h.we = tr_h.we;  assign m_h.wdata = tr_h.wdata;
  assign m_u.addr = tr_u.addr;  assign m_u.we = tr_u.we;  assign m_u.wdata = tr_u.wdata;
  assign tr_h.rdata = m_h.rdata;
  assign tr_u.rdata = m_u.rdata;

  assign pr_alpha.rdata = m_alpha.rdata;  assign tr_alpha.rdata = m_alpha.rdata;
  assign pr_bias.rdata  = m_bias.rdata;   assign tr_bias.rdata  = m_bias.rdata;
  assign pr_beta.rdata  = bank_l ? m_beta2.rdata : m_beta1.rdata;
  assign tr_beta.rdata  = m_beta1.rdata;
  assign tr_p.rdata     = m_p.rdata;

  // Host read-back: one cycle after the access.
  mem_sel_e ld_sel_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ld_sel_q <= MEM_ALPHA;
    else if (ld_en) ld_sel_q <= ld_sel;
  end
  always_comb begin
    unique case (ld_sel_q)
      MEM_ALPHA: ld_rdata = m_alpha.rdata;
      MEM_BIAS:  ld_rdata = m_bias.rdata;
      MEM_BETA1: ld_rdata = m_beta1.rdata;
      MEM_BETA2: ld_rdata = m_beta2.rdata;
      MEM_P:     ld_rdata = m_p.rdata;
      default:   ld_rdata = '0;
    endcase
  end

  // ---- controller ----------------------------------------------------
  assign cmd_ready = (ctl == C_IDLE) && !ld_en;
  assign busy      = (ctl != C_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctl        <= C_IDLE;
      bank_l     <= 1'b0;
      pr_start   <= 1'b0;
      tr_start   <= 1'b0;
      act_l      <= '0;
      rew_l      <= '0;
      maxq_l     <= '0;
      epd_l      <= 1'b0;
      sy_j       <= '0;
      sy_wr      <= 1'b0;
      rsp_valid  <= 1'b0;
      rsp_target <= '0;
      for (int k = 0; k < N_STATE; k++) st_l[k]  <= '0;
      for (int k = 0; k < N_ACT; k++)   rsp_q[k] <= '0;
    end else begin
      pr_start  <= 1'b0;
      tr_start  <= 1'b0;
      rsp_valid <= 1'b0;
      unique case (ctl)
        C_IDLE: if (cmd_valid && cmd_ready) begin
          for (int k = 0; k < N_STATE; k++) st_l[k] <= cmd_state[k];
          act_l  <= cmd_action;
          rew_l  <= cmd_reward;
          maxq_l <= cmd_maxq;
          epd_l  <= cmd_ep_done;
          bank_l <= cmd_bank;
          unique case (cmd_op)
            OP_PREDICT: begin ctl <= C_PRED;  pr_start <= 1'b1; end
            OP_TRAIN:   begin ctl <= C_TRAIN; tr_start <= 1'b1; end
            default:    begin ctl <= C_SYNC;  sy_j <= '0; sy_wr <= 1'b0; end
          endcase
        end
        C_PRED: if (pr_done) begin
          for (int k = 0; k < N_ACT; k++) rsp_q[k] <= pr_q[k];
          rsp_valid <= 1'b1;
          ctl       <= C_IDLE;
        end
        C_TRAIN: if (tr_done) begin
          rsp_target <= tr_target;
          rsp_valid  <= 1'b1;
          ctl        <= C_IDLE;
        end
        C_SYNC: begin
          // Even cycles read beta1[j]; odd cycles write it into beta2[j].
          if (sy_wr) begin
            sy_wr <= 1'b0;
            if (sy_j == (AW_V+1)'(N_HID - 1)) begin
              rsp_valid <= 1'b1;
              ctl       <= C_IDLE;
            end else begin
              sy_j <= sy_j + 1'b1;
            end
          end else begin
            sy_wr <= 1'b1;
          end
        end
        default: ctl <= C_IDLE;
      endcase
    end
  end

  // ---- protocol rules --------------------------------------------------
  // The load port may only be used while no command runs.
  a_load_idle: assert property (@(posedge clk) disable iff (!rst_n) ld_en |-> !busy)
    else $error("load port used while a command runs");
  // A response is a single-cycle pulse.
  a_rsp_pulse: assert property (@(posedge clk) disable iff (!rst_n) rsp_valid |=> !rsp_valid)
    else $error("rsp_valid held for more than one cycle");
  // A sequencer only runs while the controller has routed resources to it.
  a_owner: assert property (@(posedge clk) disable iff (!rst_n)
                            (!pr_busy || ctl == C_PRED) && (!tr_busy || ctl == C_TRAIN))
    else $error("sequencer running without owning the shared resources");
endmodule
