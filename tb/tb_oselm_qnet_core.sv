// tb_oselm_qnet_core: end-to-end test of the OS-ELM Q-Network core at its
// default size (4 state variables, 2 actions, 64 hidden nodes).
//
// The core is instantiated without parameter overrides; tb_oselm_rl_host
// plays the host processor and a cart-pole environment: it spectrally
// normalises a random alpha, runs the L2-regularised initial training in
// floating point, loads the core, and then runs 600 learning steps on it
// (theta1 prediction, theta2 prediction, random update, periodic target
// sync), checking every response bit for bit against the reference model,
// every latency, the final beta and P read back through the load port,
// and that every mechanism occurred. A watchdog ends the run if the host
// does not finish.
module tb_oselm_qnet_core;
  import oselm_pkg::*;
  localparam int N_STATE = 4, N_ACT = 2, N_HID = 64;
  localparam int AW_LD = $clog2(N_HID * N_HID);

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, ld_en, ld_we, cmd_valid, cmd_ready, cmd_bank, cmd_ep_done, rsp_valid, busy;
  logic finished;
  mem_sel_e ld_sel;
  logic [AW_LD-1:0] ld_addr;
  fx_t ld_wdata, ld_rdata, cfg_gamma, cmd_reward, cmd_maxq, rsp_target;
  op_e cmd_op;
  fx_t cmd_state [N_STATE];
  fx_t rsp_q [N_ACT];
  logic [0:0] cmd_action;
  int checks, failures;

  oselm_qnet_core dut (
    .clk, .rst_n, .cfg_gamma, .ld_en, .ld_we, .ld_sel, .ld_addr, .ld_wdata, .ld_rdata,
    .cmd_valid, .cmd_ready, .cmd_op, .cmd_bank, .cmd_state, .cmd_action, .cmd_reward,
    .cmd_ep_done, .cmd_maxq, .rsp_valid, .rsp_q, .rsp_target, .busy);

  tb_oselm_rl_host #(.N_HID(N_HID), .CORE_STEPS(600)) host (
    .clk, .rst_n, .cfg_gamma, .ld_en, .ld_we, .ld_sel, .ld_addr, .ld_wdata, .ld_rdata,
    .cmd_valid, .cmd_ready, .cmd_op, .cmd_bank, .cmd_state, .cmd_action, .cmd_reward,
    .cmd_ep_done, .cmd_maxq, .rsp_valid, .rsp_q, .rsp_target, .busy,
    .finished, .checks, .failures);

  initial begin
    #20;                     // let the hosts clear their flags first
    fork
      begin
        repeat (30_000_000) @(posedge clk);
        $display("watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
      end
      begin
        wait (finished === 1'b1);
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      end
    join_any
    $finish;
  end
endmodule
