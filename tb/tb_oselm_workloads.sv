// tb_oselm_workloads: the cart-pole learning loop on the core at the other
// hidden-layer sizes evaluated for the design, 32, 128 and 192 nodes (the
// default 64 is covered by tb_oselm_qnet_core). Each size gets its own
// core instance and host model; all run concurrently on one clock. The
// larger sizes run fewer learning steps to keep the simulation short: a
// training step costs about 6*N_HID^2 cycles (221,000 at 192 nodes).
// Every response is checked bit for bit, as in the default-size test.
module tb_oselm_workloads;
  import oselm_pkg::*;
  localparam int N_STATE = 4, N_ACT = 2;
  localparam int NS = 3;
  localparam int SIZES [NS] = '{32, 128, 192};
  localparam int STEPS [NS] = '{300, 60, 30};

  logic clk = 0;
  always #5 clk = ~clk;

  logic finished [NS];
  int   checks [NS], failures [NS];

  for (genvar g = 0; g < NS; g++) begin : g_size
    localparam int N_HID = SIZES[g];
    localparam int AW_A  = $clog2((N_STATE + 1) * N_HID);
    localparam int AW_P  = $clog2(N_HID * N_HID);
    localparam int AW_LD = (AW_A > AW_P) ? AW_A : AW_P;
    logic rst_n, ld_en, ld_we, cmd_valid, cmd_ready, cmd_bank, cmd_ep_done, rsp_valid, busy;
    mem_sel_e ld_sel;
    logic [AW_LD-1:0] ld_addr;
    fx_t ld_wdata, ld_rdata, cfg_gamma, cmd_reward, cmd_maxq, rsp_target;
    op_e cmd_op;
    fx_t cmd_state [N_STATE];
    fx_t rsp_q [N_ACT];
    logic [0:0] cmd_action;

    oselm_qnet_core #(.N_HID(N_HID)) dut (
      .clk, .rst_n, .cfg_gamma, .ld_en, .ld_we, .ld_sel, .ld_addr, .ld_wdata, .ld_rdata,
      .cmd_valid, .cmd_ready, .cmd_op, .cmd_bank, .cmd_state, .cmd_action, .cmd_reward,
      .cmd_ep_done, .cmd_maxq, .rsp_valid, .rsp_q, .rsp_target, .busy);

    tb_oselm_rl_host #(.N_HID(N_HID), .CORE_STEPS(STEPS[g])) host (
      .clk, .rst_n, .cfg_gamma, .ld_en, .ld_we, .ld_sel, .ld_addr, .ld_wdata, .ld_rdata,
      .cmd_valid, .cmd_ready, .cmd_op, .cmd_bank, .cmd_state, .cmd_action, .cmd_reward,
      .cmd_ep_done, .cmd_maxq, .rsp_valid, .rsp_q, .rsp_target, .busy,
      .finished(finished[g]), .checks(checks[g]), .failures(failures[g]));
  end

  function automatic bit all_done();
    for (int k = 0; k < NS; k++) if (finished[k] !== 1'b1) return 0;
    return 1;
  endfunction

  initial begin
    int c, f;
    #20;                     // let the hosts clear their flags first
    fork
      begin
        repeat (40_000_000) @(posedge clk);
        $display("watchdog expired");
      end
      while (!all_done()) @(posedge clk);
    join_any
    c = 0; f = all_done() ? 0 : 1;
    for (int k = 0; k < NS; k++) begin c += checks[k]; f += failures[k]; end
    $display("TB_RESULT checks=%0d failures=%0d", c, f);
    $finish;
  end
endmodule
