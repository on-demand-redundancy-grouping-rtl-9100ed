// odrg_fsm: mode and re-synchronisation state machine of one ODRG unit.
//
// States: StPerf (three independent cores) and the soft-error tolerant mode
// split into StTmrRun, StTmrUnload and StTmrReload, as described for ODRG.
//   StPerf      -> StTmrRun     when grouping is enabled (tmr_en_i)
//   StTmrRun    -> StTmrUnload  on a voter mismatch, unless delayed
//   StTmrUnload -> StTmrReload  when the stack pointer register is written
//   StTmrReload -> StTmrRun     when the reload-done register is written
//   any TMR     -> StPerf       when grouping is disabled
// resync_irq_o is high for the whole unload state; it is the interrupt that
// starts the software re-synchronisation routine in all three cores. A
// mismatch seen while delay_resync_i is set is kept pending and starts the
// resync once the delay is cleared. The pending flag, the level interrupt and
// the reload-done strobe are this design's own choices. Registered state,
// active-low asynchronous reset to StPerf.
module odrg_fsm
  import odrg_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        tmr_en_i,
  input  logic        delay_resync_i,
  input  logic        mismatch_i,
  input  logic        sp_we_i,
  input  logic        done_we_i,
  output odrg_state_e state_o,
  output logic        pending_o,
  output logic        resync_irq_o
);
  odrg_state_e state_q, state_d;
  logic        pend_q, pend_d;

  always_comb begin
    state_d = state_q;
    pend_d  = pend_q;
    unique case (state_q)
      StPerf: begin
        pend_d = 1'b0;
        if (tmr_en_i) state_d = StTmrRun;
      end
      StTmrRun: begin
        if (mismatch_i || pend_q) begin
          if (delay_resync_i) pend_d = 1'b1;
          else begin
            pend_d  = 1'b0;
            state_d = StTmrUnload;
          end
        end
      end
      StTmrUnload: if (sp_we_i)   state_d = StTmrReload;
      StTmrReload: if (done_we_i) state_d = StTmrRun;
      default: state_d = StPerf;
    endcase
    if (!tmr_en_i) begin
      state_d = StPerf;
      pend_d  = 1'b0;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= StPerf;
      pend_q  <= 1'b0;
    end else begin
      state_q <= state_d;
      pend_q  <= pend_d;
    end
  end

  assign state_o      = state_q;
  assign pending_o    = pend_q;
  assign resync_irq_o = (state_q == StTmrUnload);
endmodule
