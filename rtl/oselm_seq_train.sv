// oselm_seq_train: one sequential OS-ELM training step (batch size 1) of
// the Q-network's trained weights theta1.
//
// For one experience (state s_t, action index a_t, reward r_t, episode-end
// flag d_t) and the target network's best next Q-value maxq = max_a
// Q_theta2(s_t+1, a), the sequencer
//   1. forms the teacher value t = clip(r_t + (1 - d_t) * gamma * maxq, -1, 1)
//      (Q-value clipping),
//   2. computes the hidden row h = ReLU([s_t, act_value(a_t)] alpha + b)
//      into the H buffer and the current output y = h beta,
//   3. computes u = P h^T into the U buffer and s = 1 + h u,
//   4. takes the reciprocal 1/s with the divider (the k x k inverse of the
//      general update reduces to this for k = 1),
//   5. for each row i: w_i = u_i / s, beta_i += w_i * (t - y), and
//      P_ij -= w_i * u_j for every column j.
// This is the recursive update P <- P - P h^T (1 + h P h^T)^-1 h P,
// beta <- beta + P h^T (t - h beta). Two algebraic shortcuts are this
// design's choice: h P is taken as (P h^T)^T because P is symmetric (the
// update keeps it exactly symmetric, since w_i*u_j uses the same rounded
// factors as w_j*u_i up to the commutative product), and the new P h^T is
// taken as u / s, which equals it exactly in real arithmetic and saves a
// second N_HID x N_HID pass.
//
// Interface: a start pulse while idle latches the operands; busy is high
// until done pulses for one cycle; target holds the clipped teacher value
// of the last step. The P, beta, H and U ports are single-port RAMs with
// one cycle of read latency; every product and sum uses the shared
// arithmetic units. Timing (N = N_HID, N_IN = N_STATE + 1):
// the start cycle is followed by 3 cycles for the teacher value,
// N*(3*N_IN + 5) + 1 for h and the error, N*(3*N + 3) for u and s, 55 for
// the division and N*(3*N + 5) for the beta and P updates; done comes in
// the next cycle, 26,428 cycles after start for N = 64 (about 6*N^2).
module oselm_seq_train
  import oselm_pkg::*;
#(
  parameter int unsigned N_STATE = 4,
  parameter int unsigned N_ACT   = 2,
  parameter int unsigned N_HID   = 64
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fx_t  state [N_STATE],
  input  logic [$clog2(N_ACT)-1:0] action,
  input  fx_t  reward,
  input  logic ep_done,
  input  fx_t  maxq,
  input  fx_t  gamma,
  output logic busy,
  output logic done,
  output fx_t  target,
  oselm_ram_if.client alpha,
  oselm_ram_if.client bias,
  oselm_ram_if.client beta,
  oselm_ram_if.client pmat,
  oselm_ram_if.client hbuf,
  oselm_ram_if.client ubuf,
  oselm_arith_if.client ar
);
  localparam int unsigned N_IN = N_STATE + 1;
  localparam int unsigned AW_A = $clog2(N_IN * N_HID);
  localparam int unsigned AW_V = $clog2(N_HID);
  localparam int unsigned AW_P = $clog2(N_HID * N_HID);
  localparam int unsigned IW   = $clog2(N_HID + 1);  // i and j both span 0..N_HID-1
  localparam int unsigned NW   = $clog2(N_IN + 1);

  typedef enum logic [4:0] {
    T_IDLE, T_TG0, T_TG1, T_TG2,
    H_B0, H_B1, H_A0, H_A1, H_A2, H_W0, H_W1, H_W2, H_ERR,
    U_R0, U_R1, U_R2, U_W0, U_W1, U_W2,
    D_GO, D_WAIT,
    P_O0, P_O1, P_O2, P_O3, P_O4, P_J0, P_J1, P_J2
  } state_e;

  state_e        st;
  logic [NW-1:0] n;      // input index
  logic [IW-1:0] i, j;   // hidden indices (row, column)
  fx_t           x [N_IN];
  fx_t           r_l, maxq_l, gamma_l;
  logic          d_l;
  fx_t           acc;    // running sum of the current dot product
  fx_t           yacc;   // h beta
  fx_t           err;    // t - h beta
  fx_t           sacc;   // 1 + h P h^T
  fx_t           rinv;   // 1 / sacc
  fx_t           w;      // u_i / sacc

  // Addresses follow the counters; only the write enables depend on state.
  always_comb begin
    alpha.addr  = AW_A'(n * N_HID + j);
    alpha.we    = 1'b0;
    alpha.wdata = '0;
    bias.addr   = AW_V'(j);
    bias.we     = 1'b0;
    bias.wdata  = '0;
    pmat.addr   = AW_P'(i * N_HID + j);
    pmat.we     = (st == P_J2);
    pmat.wdata  = ar.add_y;
    beta.addr   = AW_V'((st inside {P_O0, P_O1, P_O2, P_O3, P_O4}) ? i : j);
    beta.we     = (st == P_O4);
    beta.wdata  = ar.add_y;
    hbuf.addr   = AW_V'((st inside {U_W0, U_W1, U_W2}) ? i : j);
    hbuf.we     = (st == H_W1);
    hbuf.wdata  = fx_relu(acc);
    ubuf.addr   = AW_V'((st inside {P_O0, P_O1, P_O2, P_O3, P_O4, U_W0, U_W1, U_W2}) ? i : j);
    ubuf.we     = (st == U_W1);
    ubuf.wdata  = acc;
  end

  always_comb begin
    ar.mul_a     = '0;
    ar.mul_b     = '0;
    ar.add_a     = acc;
    ar.add_b     = ar.mul_p;
    ar.add_sub   = 1'b0;
    ar.div_start = (st == D_GO);
    ar.div_num   = FX_ONE;
    ar.div_den   = sacc;
    case (st)
      T_TG0: begin ar.mul_a = gamma_l; ar.mul_b = maxq_l; end
      T_TG1: begin ar.add_a = r_l; end
      H_A1:  begin ar.mul_a = x[n];         ar.mul_b = alpha.rdata; end
      H_W1:  begin ar.mul_a = fx_relu(acc); ar.mul_b = beta.rdata;  end
      H_W2:  begin ar.add_a = yacc; end
      H_ERR: begin ar.add_a = target; ar.add_b = yacc; ar.add_sub = 1'b1; end
      U_R1:  begin ar.mul_a = pmat.rdata;   ar.mul_b = hbuf.rdata;  end
      U_W1:  begin ar.mul_a = hbuf.rdata;   ar.mul_b = acc;         end
      U_W2:  begin ar.add_a = sacc; end
      P_O1:  begin ar.mul_a = ubuf.rdata;   ar.mul_b = rinv;        end
      P_O3:  begin ar.mul_a = w;            ar.mul_b = err;         end
      P_O4:  begin ar.add_a = beta.rdata; end
      P_J1:  begin ar.mul_a = w;            ar.mul_b = ubuf.rdata;  end
      P_J2:  begin ar.add_a = pmat.rdata;   ar.add_sub = 1'b1;      end
      default: ;
    endcase
  end

  assign busy = (st != T_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= T_IDLE;
      n       <= '0;
      i       <= '0;
      j       <= '0;
      r_l     <= '0;
      maxq_l  <= '0;
      gamma_l <= '0;
      d_l     <= 1'b0;
      acc     <= '0;
      yacc    <= '0;
      err     <= '0;
      sacc    <= '0;
      rinv    <= '0;
      w       <= '0;
      target  <= '0;
      done    <= 1'b0;
      for (int k = 0; k < N_IN; k++) x[k] <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        T_IDLE: if (start) begin
          for (int k = 0; k < N_STATE; k++) x[k] <= state[k];
          x[N_IN-1] <= act_value(int'(action), N_ACT);
          r_l     <= reward;
          maxq_l  <= maxq;
          gamma_l <= gamma;
          d_l     <= ep_done;
          n       <= '0;
          i       <= '0;
          j       <= '0;
          yacc    <= '0;
          st      <= T_TG0;
        end
        // --- teacher value --------------------------------------------
        T_TG0: st <= T_TG1;
        T_TG1: begin target <= d_l ? r_l : ar.add_y; st <= T_TG2; end
        T_TG2: begin target <= fx_clip1(target); st <= H_B0; end
        // --- h = ReLU(x alpha + b), y = h beta -------------------------
        H_B0: st <= H_B1;
        H_B1: begin acc <= bias.rdata; n <= '0; st <= H_A0; end
        H_A0: st <= H_A1;
        H_A1: st <= H_A2;
        H_A2: begin
          acc <= ar.add_y;
          if (n == NW'(N_IN - 1)) st <= H_W0;
          else begin n <= n + 1'b1; st <= H_A0; end
        end
        H_W0: st <= H_W1;
        H_W1: st <= H_W2;
        H_W2: begin
          yacc <= ar.add_y;
          if (j == IW'(N_HID - 1)) begin j <= '0; st <= H_ERR; end
          else begin j <= j + 1'b1; st <= H_B0; end
        end
        H_ERR: begin
          err  <= ar.add_y;
          sacc <= FX_ONE;
          acc  <= '0;
          i    <= '0;
          j    <= '0;
          st   <= U_R0;
        end
        // --- u = P h^T, s = 1 + h u -------------------------------------
        U_R0: st <= U_R1;
        U_R1: st <= U_R2;
        U_R2: begin
          acc <= ar.add_y;
          if (j == IW'(N_HID - 1)) st <= U_W0;
          else begin j <= j + 1'b1; st <= U_R0; end
        end
        U_W0: st <= U_W1;                 // H[i] read
        U_W1: st <= U_W2;                 // U[i] <= acc, h_i * u_i
        U_W2: begin
          sacc <= ar.add_y;
          acc  <= '0;
          j    <= '0;
          if (i == IW'(N_HID - 1)) begin i <= '0; st <= D_GO; end
          else begin i <= i + 1'b1; st <= U_R0; end
        end
        // --- 1 / s ------------------------------------------------------
        D_GO: st <= D_WAIT;
        D_WAIT: if (ar.div_done) begin rinv <= ar.div_q; st <= P_O0; end
        // --- beta += w e, P -= w u^T ------------------------------------
        P_O0: st <= P_O1;                 // U[i] read
        P_O1: st <= P_O2;                 // u_i * rinv
        P_O2: begin w <= ar.mul_p; st <= P_O3; end
        P_O3: st <= P_O4;                 // w * err
        P_O4: begin j <= '0; st <= P_J0; end  // beta[i] written
        P_J0: st <= P_J1;                 // P[i][j], U[j] read
        P_J1: st <= P_J2;                 // w * u_j
        P_J2: begin                       // P[i][j] written
          if (j == IW'(N_HID - 1)) begin
            j <= '0;
            if (i == IW'(N_HID - 1)) begin
              i    <= '0;
              done <= 1'b1;
              st   <= T_IDLE;
            end else begin
              i  <= i + 1'b1;
              st <= P_O0;
            end
          end else begin
            j  <= j + 1'b1;
            st <= P_J0;
          end
        end
        default: st <= T_IDLE;
      endcase
    end
  end
endmodule
