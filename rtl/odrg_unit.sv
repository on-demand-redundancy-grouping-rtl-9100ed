// odrg_unit: On-Demand Redundancy Grouping of three cores.
//
// Sits between three cores (A, B, C) and their three cluster interfaces
// (I/O ports A, B, C). In performance mode every core is wired straight to
// its own port. In the soft-error tolerant (TMR) states:
//   * cores B and C take their inputs from port A, so all three cores see
//     identical inputs (hart id and boot address included),
//   * port A carries the bit-wise majority of the three cores' outputs,
//   * ports B and C drive all-zero outputs (their responses are ignored),
//   * a mismatch between any core and the vote is counted per core and, in
//     the run state, starts a re-synchronisation: the unit interrupts all
//     three cores, which save their state through the voter, store the stack
//     pointer in SP_STORE, reload it and write RELOAD_DONE.
// The mux structure, the '0 on ports B/C and the voter follow the described
// ODRG block diagram; the interrupt is ORed into each core's irq input (own
// choice). The datapath is combinational; only the FSM and the registers
// hold state, so voting adds no cycle of latency.
module odrg_unit
  import odrg_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  // peripheral (configuration) port
  input  mem_req_t    cfg_req_i,
  output mem_rsp_t    cfg_rsp_o,
  // cluster side: I/O ports A, B, C
  input  core_in_t    sys_in_i   [GroupSize],
  output core_out_t   sys_out_o  [GroupSize],
  // core side
  output core_in_t    core_in_o  [GroupSize],
  input  core_out_t   core_out_i [GroupSize],
  // status
  output logic        tmr_o,
  output odrg_state_e state_o
);
  odrg_state_e state;
  logic        tmr, tmr_en, delay_resync, sp_we, done_we, pending, resync_irq;
  logic [2:0]  mismatch_raw, mismatch;
  core_out_t   voted;

  odrg_voter #(.WIDTH(CoreOutW)) i_voter (
    .in_a_i     (core_out_i[0]),
    .in_b_i     (core_out_i[1]),
    .in_c_i     (core_out_i[2]),
    .voted_o    (voted),
    .mismatch_o (mismatch_raw)
  );

  assign tmr      = (state != StPerf);
  assign mismatch = tmr ? mismatch_raw : 3'b000;

  odrg_fsm i_fsm (
    .clk_i, .rst_ni,
    .tmr_en_i       (tmr_en),
    .delay_resync_i (delay_resync),
    .mismatch_i     (|mismatch),
    .sp_we_i        (sp_we),
    .done_we_i      (done_we),
    .state_o        (state),
    .pending_o      (pending),
    .resync_irq_o   (resync_irq)
  );

  odrg_regs i_regs (
    .clk_i, .rst_ni,
    .req_i          (cfg_req_i),
    .rsp_o          (cfg_rsp_o),
    .tmr_en_o       (tmr_en),
    .delay_resync_o (delay_resync),
    .sp_we_o        (sp_we),
    .done_we_o      (done_we),
    .mismatch_i     (mismatch),
    .state_i        (state),
    .pending_i      (pending)
  );

  always_comb begin
    for (int i = 0; i < GroupSize; i++) begin
      // input fan-out: core A always from port A, B/C from port A in TMR
      core_in_o[i]     = (tmr && i != 0) ? sys_in_i[0] : sys_in_i[i];
      core_in_o[i].irq = core_in_o[i].irq | (tmr & resync_irq);
      // output muxes
      if (!tmr)        sys_out_o[i] = core_out_i[i];
      else if (i == 0) sys_out_o[i] = voted;
      else             sys_out_o[i] = '0;
    end
  end

  assign tmr_o   = tmr;
  assign state_o = state;
endmodule
