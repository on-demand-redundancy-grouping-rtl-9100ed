// tb_odrg_fsm: walks the ODRG mode FSM through every transition:
// performance -> run -> (mismatch) unload with interrupt -> (SP write)
// reload -> (done) run, the delayed resync, mismatches ignored outside run,
// and ungrouping from each TMR state. Expected states are written out per
// step.
module tb_odrg_fsm;
  import odrg_pkg::*;
  logic clk = 0, rst_n = 0;
  logic tmr_en, delay, mm, sp_we, done_we, pend, irq;
  odrg_state_e st;
  int checks = 0, failures = 0;

  odrg_fsm dut (.clk_i(clk), .rst_ni(rst_n), .tmr_en_i(tmr_en), .delay_resync_i(delay),
                .mismatch_i(mm), .sp_we_i(sp_we), .done_we_i(done_we), .state_o(st),
                .pending_o(pend), .resync_irq_o(irq));

  always #5 clk = ~clk;
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input logic en, input logic d, input logic m, input logic s,
                      input logic dn, input odrg_state_e exp, input logic exp_irq);
    tmr_en = en; delay = d; mm = m; sp_we = s; done_we = dn;
    @(posedge clk); #1;
    checks++;
    if (st !== exp || irq !== exp_irq) begin
      failures++;
      $display("t=%0t state %s exp %s irq %b exp %b", $time, st.name(), exp.name(), irq, exp_irq);
    end
  endtask

  initial begin
    {tmr_en, delay, mm, sp_we, done_we} = '0;
    #12 rst_n = 1;
    //     en d  m  s  dn  expected      irq
    step(0, 0, 1, 0, 0, StPerf,      0);   // mismatch ignored in perf
    step(1, 0, 0, 0, 0, StTmrRun,    0);
    step(1, 0, 0, 1, 1, StTmrRun,    0);   // strobes ignored in run
    step(1, 0, 1, 0, 0, StTmrUnload, 1);   // mismatch -> unload
    step(1, 0, 1, 0, 1, StTmrUnload, 1);   // done and mismatch ignored
    step(1, 0, 0, 0, 0, StTmrUnload, 1);
    step(1, 0, 0, 1, 0, StTmrReload, 0);   // SP stored -> reload
    step(1, 0, 1, 1, 0, StTmrReload, 0);
    step(1, 0, 0, 0, 1, StTmrRun,    0);   // done -> run
    step(1, 1, 1, 0, 0, StTmrRun,    0);   // delayed
    checks++; if (!pend) begin failures++; $display("pending not set"); end
    step(1, 1, 0, 0, 0, StTmrRun,    0);
    step(1, 0, 0, 0, 0, StTmrUnload, 1);   // delay released -> unload
    checks++; if (pend) begin failures++; $display("pending not cleared"); end
    step(0, 0, 0, 0, 0, StPerf,      0);   // ungroup from unload
    step(1, 0, 0, 0, 0, StTmrRun,    0);
    step(1, 0, 1, 0, 0, StTmrUnload, 1);
    step(1, 0, 0, 1, 0, StTmrReload, 0);
    step(0, 0, 0, 0, 0, StPerf,      0);   // ungroup from reload
    step(1, 0, 0, 0, 0, StTmrRun,    0);
    step(0, 0, 0, 0, 0, StPerf,      0);   // ungroup from run
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
