// tb_odrg_unit: one ODRG unit between three core bundles and three I/O
// ports. Performance mode: every core is wired to its own port both ways.
// Grouped: cores B/C see port A's inputs, port A carries the vote, ports
// B/C carry zeros, a single corrupted core output is out-voted, counted and
// raises the resync interrupt in all three cores; SP_STORE and RELOAD_DONE
// walk the state back to run; DELAY holds a resync off.
module tb_odrg_unit;
  import odrg_pkg::*;
  logic clk = 0, rst_n = 0;
  mem_req_t  cfg_req;
  mem_rsp_t  cfg_rsp;
  core_in_t  sys_in [3], core_in [3];
  core_out_t sys_out[3], core_out[3];
  logic tmr;
  odrg_state_e st;
  int checks = 0, failures = 0;

  odrg_unit dut (.clk_i(clk), .rst_ni(rst_n), .cfg_req_i(cfg_req), .cfg_rsp_o(cfg_rsp),
    .sys_in_i(sys_in), .sys_out_o(sys_out), .core_in_o(core_in), .core_out_i(core_out),
    .tmr_o(tmr), .state_o(st));

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic cfg(input logic we, input logic [7:0] off, input logic [31:0] wd,
                     output logic [31:0] rd);
    cfg_req = '{req: 1'b1, we: we, be: 4'hf, addr: 32'(off), wdata: wd};
    @(posedge clk); #1;
    cfg_req = '0;
    rd = cfg_rsp.rdata;
  endtask

  function automatic core_out_t rnd_out();
    core_out_t o;
    o.instr = '{req: 1'($urandom), addr: $urandom};
    o.data  = '{req: 1'($urandom), we: 1'($urandom), be: 4'($urandom), addr: $urandom, wdata: $urandom};
    return o;
  endfunction
  function automatic core_in_t rnd_in(int i);
    core_in_t x;
    x.instr = '{gnt: 1'($urandom), rvalid: 1'($urandom), rdata: $urandom};
    x.data  = '{gnt: 1'($urandom), rvalid: 1'($urandom), rdata: $urandom};
    x.irq = 1'b0; x.hart_id = 32'(i); x.boot_addr = $urandom;
    return x;
  endfunction

  logic [31:0] r;
  core_out_t o, bad;
  int bitn;
  initial begin
    cfg_req = '0;
    for (int i = 0; i < 3; i++) begin sys_in[i] = rnd_in(i); core_out[i] = rnd_out(); end
    #12 rst_n = 1;
    @(posedge clk); #1;
    // performance mode
    for (int t = 0; t < 50; t++) begin
      for (int i = 0; i < 3; i++) begin sys_in[i] = rnd_in(i); core_out[i] = rnd_out(); end
      #1;
      for (int i = 0; i < 3; i++) begin
        check("perf in",  core_in[i] == sys_in[i]);
        check("perf out", sys_out[i] == core_out[i]);
      end
    end
    @(posedge clk); #1;
    cfg(0, 8'h14, 0, r);
    check("no counting in perf mode", r == 0);
    // group
    cfg(1, 8'h00, 1, r);
    check("mode takes effect one cycle after the write", !tmr);
    @(posedge clk); #1;
    check("grouped", tmr && st == StTmrRun);
    for (int t = 0; t < 50; t++) begin
      o = rnd_out();
      for (int i = 0; i < 3; i++) begin sys_in[i] = rnd_in(i); core_out[i] = o; end
      #1;
      for (int i = 0; i < 3; i++) check("tmr fan-out", core_in[i] == sys_in[0]);
      check("tmr vote", sys_out[0] == o);
      check("tmr B zero", sys_out[1] == '0);
      check("tmr C zero", sys_out[2] == '0);
    end
    @(posedge clk); #1;
    check("still run", st == StTmrRun);
    // single fault on core B
    o = rnd_out(); bad = o; bitn = $urandom_range(0, CoreOutW - 1);
    bad[bitn] = ~bad[bitn];
    core_out[0] = o; core_out[1] = bad; core_out[2] = o;
    #1 check("faulty B out-voted", sys_out[0] == o);
    @(posedge clk); #1;
    core_out[1] = o;
    check("unload after mismatch", st == StTmrUnload);
    for (int i = 0; i < 3; i++) check("resync irq to all", core_in[i].irq);
    cfg(0, 8'h18, 0, r); check("CNT_B == 1", r == 1);
    cfg(0, 8'h14, 0, r); check("CNT_A == 0", r == 0);
    cfg(1, 8'h08, 32'h1000_1234, r);
    check("reload after SP", st == StTmrReload);
    check("irq dropped", !core_in[0].irq);
    // fault on core C during reload: counted, no new resync
    bad = o; bad[0] = ~bad[0]; core_out[2] = bad;
    @(posedge clk); #1 core_out[2] = o;
    check("still reload", st == StTmrReload);
    cfg(1, 8'h0c, 1, r);
    check("run after done", st == StTmrRun);
    cfg(0, 8'h1c, 0, r); check("CNT_C == 1", r == 1);
    // delayed resync
    cfg(1, 8'h04, 1, r);
    core_out[0] = bad;
    @(posedge clk); #1 core_out[0] = o;
    repeat (3) @(posedge clk); #1;
    check("held by delay", st == StTmrRun);
    cfg(1, 8'h04, 0, r);
    #0 @(posedge clk); #1;
    check("delayed resync starts", st == StTmrUnload);
    cfg(1, 8'h00, 0, r);
    @(posedge clk); #1;
    check("ungrouped", st == StPerf && !tmr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
