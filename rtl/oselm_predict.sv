// oselm_predict: forward pass of the OS-ELM Q-network for every action.
//
// For one observed state s (N_STATE values) the sequencer evaluates, for
// each action k in turn, the simplified output model: the input vector is
// x = [s, act_value(k)], the hidden layer is h_j = ReLU(b_j + sum_i x_i *
// alpha_ij) and the single output is Q(s, a_k) = sum_j h_j * beta_j. The
// beta port is connected by the core to either the trained weights
// (theta1) or the fixed-target weights (theta2); alpha and b are shared by
// both. All products and sums go through the shared arithmetic units, one
// multiply-add at a time, as the design has a single add/mult/div set.
//
// Interface: a start pulse while idle latches s; busy is high until done
// pulses for one cycle with q[] valid; q[] holds until the next start.
// Timing, with N_IN = N_STATE + 1: every hidden node costs 2 cycles for the
// bias, 3 per input weight and 3 for the output weight, so a run takes
// N_ACT * N_HID * (3*N_IN + 5) + 1 cycles from start to done (2561 cycles
// for the 4-state, 2-action, 64-node default). The sequencing and its
// timing are this design's own; the paper gives the function.
module oselm_predict
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
  output logic busy,
  output logic done,
  output fx_t  q [N_ACT],
  oselm_ram_if.client alpha,
  oselm_ram_if.client bias,
  oselm_ram_if.client beta,
  oselm_arith_if.client ar
);
  localparam int unsigned N_IN = N_STATE + 1;
  localparam int unsigned AW_A = $clog2(N_IN * N_HID);
  localparam int unsigned AW_V = $clog2(N_HID);
  localparam int unsigned IW   = $clog2(N_IN + 1);
  localparam int unsigned JW   = $clog2(N_HID + 1);
  localparam int unsigned KW   = (N_ACT > 1) ? $clog2(N_ACT) : 1;

  typedef enum logic [3:0] {
    S_IDLE, S_B0, S_B1, S_A0, S_A1, S_A2, S_W0, S_W1, S_W2
  } state_e;

  state_e        st;
  logic [IW-1:0] i;
  logic [JW-1:0] j;
  logic [KW-1:0] k;
  fx_t           x [N_IN];
  fx_t           acc;   // hidden-node pre-activation
  fx_t           qacc;  // output accumulator

  // Addresses follow the counters in every state, so a read issued in one
  // state is valid in the next.
  assign alpha.addr  = AW_A'(i * N_HID + j);
  assign alpha.we    = 1'b0;
  assign alpha.wdata = '0;
  assign bias.addr   = AW_V'(j);
  assign bias.we     = 1'b0;
  assign bias.wdata  = '0;
  assign beta.addr   = AW_V'(j);
  assign beta.we     = 1'b0;
  assign beta.wdata  = '0;

  always_comb begin
    ar.mul_a     = '0;
    ar.mul_b     = '0;
    ar.add_a     = acc;
    ar.add_b     = ar.mul_p;
    ar.add_sub   = 1'b0;
    ar.div_start = 1'b0;
    ar.div_num   = '0;
    ar.div_den   = '0;
    case (st)
      S_A1: begin ar.mul_a = x[i];          ar.mul_b = alpha.rdata; end
      S_W1: begin ar.mul_a = fx_relu(acc);  ar.mul_b = beta.rdata;  end
      S_W2: begin ar.add_a = qacc; end
      default: ;
    endcase
  end

  assign busy = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= S_IDLE;
      i    <= '0;
      j    <= '0;
      k    <= '0;
      acc  <= '0;
      qacc <= '0;
      done <= 1'b0;
      for (int n = 0; n < N_IN; n++)  x[n] <= '0;
      for (int n = 0; n < N_ACT; n++) q[n] <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          for (int n = 0; n < N_STATE; n++) x[n] <= state[n];
          x[N_IN-1] <= act_value(0, N_ACT);
          i    <= '0;
          j    <= '0;
          k    <= '0;
          qacc <= '0;
          st   <= S_B0;
        end
        S_B0: st <= S_B1;
        S_B1: begin acc <= bias.rdata; i <= '0; st <= S_A0; end
        S_A0: st <= S_A1;
        S_A1: st <= S_A2;
        S_A2: begin
          acc <= ar.add_y;
          if (i == IW'(N_IN - 1)) st <= S_W0;
          else begin i <= i + 1'b1; st <= S_A0; end
        end
        S_W0: begin i <= '0; st <= S_W1; end
        S_W1: st <= S_W2;
        S_W2: begin
          if (j == JW'(N_HID - 1)) begin
            q[k] <= ar.add_y;
            qacc <= '0;
            j    <= '0;
            if (k == KW'(N_ACT - 1)) begin
              done <= 1'b1;
              st   <= S_IDLE;
            end else begin
              k            <= k + 1'b1;
              x[N_IN-1]    <= act_value(int'(k) + 1, N_ACT);
              st           <= S_B0;
            end
          end else begin
            qacc <= ar.add_y;
            j    <= j + 1'b1;
            st   <= S_B0;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
