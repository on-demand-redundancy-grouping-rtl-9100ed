// tb_odrg_cluster: the whole cluster, at its default parameters, with six
// core models, a host and an instruction memory.
//
//  1. Reset; the host preloads IN[0..95] into the TCDM over the AXI port and
//     a marker word over the DMA port, and groups both ODRG units (MODE = 1).
//  2. Soft-error tolerant run: the two groups each compute half of the
//     kernel. Faults injected: an output bit of core 2 (group 0, core B)
//     flipped for one cycle; bit 5 of register r0 of core 3 (group 1, core
//     B) flipped while group 1 has DELAY set, so its resync is held off
//     until the host clears DELAY. Both must be detected, counted in the
//     right mismatch counter and repaired by a resync.
//  3. The host reads back OUT[] over the AXI port and checks it against
//     values computed here.
//  4. Reboot (core models reset), MODE = 0, performance run on six cores,
//     OUT[] checked again, and the run must be faster than the TMR run.
// Every mechanism the cluster has is counted and must occur: mode switches,
// resyncs, a delayed resync, voter-corrected outputs, bank-conflict stalls,
// icache misses, barriers.
module tb_odrg_cluster;
  import odrg_pkg::*;
  localparam int TOTAL = 96;
  localparam logic [31:0] InBase  = TcdmBase + 32'h2000;
  localparam logic [31:0] OutBase = TcdmBase + 32'h4000;
  localparam logic [31:0] Boot    = 32'h1C00_8000;

  logic clk = 0, rst_n = 0, core_rst_n = 0;
  core_in_t  core_in  [NumCores];
  core_out_t core_out [NumCores];
  core_out_t flip     [NumCores];
  logic      corrupt  [NumCores];
  logic      done     [NumCores];
  int        errs     [NumCores], rsy [NumCores];
  mem_req_t  host_req, dma_req, axi_req, ext_req;
  mem_rsp_t  host_rsp, dma_rsp, axi_rsp, ext_rsp;
  logic rf_req, rf_gnt, rf_rv;
  logic [31:0] rf_addr, rf_rd;
  logic [1:0] tmr;
  odrg_state_e st [NumGroups];
  logic barrier, ic_miss;
  int checks = 0, failures = 0;

  odrg_cluster dut (
    .clk_i(clk), .rst_ni(rst_n), .boot_addr_i(Boot), .irq_i('0),
    .core_in_o(core_in), .core_out_i(core_out),
    .host_req_i(host_req), .host_rsp_o(host_rsp),
    .dma_req_i(dma_req), .dma_rsp_o(dma_rsp), .axi_req_i(axi_req), .axi_rsp_o(axi_rsp),
    .ext_req_o(ext_req), .ext_rsp_i(ext_rsp),
    .refill_req_o(rf_req), .refill_addr_o(rf_addr), .refill_gnt_i(rf_gnt),
    .refill_rvalid_i(rf_rv), .refill_rdata_i(rf_rd),
    .tmr_o(tmr), .odrg_state_o(st), .barrier_o(barrier), .icache_miss_o(ic_miss));

  for (genvar i = 0; i < NumCores; i++) begin : g_core
    core_model #(.TOTAL(TOTAL)) i_core (.clk_i(clk), .rst_ni(core_rst_n), .in_i(core_in[i]),
      .out_o(core_out[i]), .flip_i(flip[i]), .corrupt_i(corrupt[i]), .mat_n_i(0), .conv_i(1'b0), .done_o(done[i]),
      .errors_o(errs[i]), .resyncs_o(rsy[i]));
  end

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // instruction memory behind the refill port: one cycle grant, one cycle data
  function automatic logic [31:0] ifetch_word(logic [31:0] a);
    return (a * 32'h9e37_79b9) ^ 32'h1234_5678;
  endfunction
  assign rf_gnt = rf_req;
  always_ff @(posedge clk) begin
    rf_rv <= rf_req;
    rf_rd <= ifetch_word(rf_addr);
  end
  // external peripheral port: answers zero
  assign ext_rsp = '{gnt: ext_req.req, rvalid: ext_q, rdata: 0};
  logic ext_q;
  always_ff @(posedge clk) ext_q <= ext_req.req;

  // ---------------------------------------------------------- event counters
  int n_mode_switch = 0, n_resync = 0, n_delayed = 0, n_voted = 0, n_stall = 0;
  int n_miss = 0, n_barrier = 0;
  int resync_start [NumGroups], resync_cycles [$];
  logic [1:0] tmr_q = '0;
  odrg_state_e st_q [NumGroups];
  logic        pend [NumGroups];
  logic        mm   [NumGroups];
  assign pend[0] = dut.g_odrg[0].i_odrg.pending;
  assign pend[1] = dut.g_odrg[1].i_odrg.pending;
  assign mm[0]   = |dut.g_odrg[0].i_odrg.mismatch;
  assign mm[1]   = |dut.g_odrg[1].i_odrg.mismatch;
  always @(posedge clk) if (rst_n) begin
    if (tmr != tmr_q) n_mode_switch++;
    tmr_q <= tmr;
    for (int g = 0; g < NumGroups; g++) begin
      st_q[g] <= st[g];
      if (st_q[g] == StTmrRun && st[g] == StTmrUnload) resync_start[g] = cyc;
      if (st_q[g] == StTmrReload && st[g] == StTmrRun) begin
        n_resync++;
        resync_cycles.push_back(cyc - resync_start[g]);
      end
      if (st[g] == StTmrRun && pend[g]) n_delayed++;
      if (tmr[g] && mm[g]) n_voted++;
    end
    for (int i = 0; i < NumCores; i++)
      if (dut.sys_out[i].data.req && !dut.sys_in[i].data.gnt) n_stall++;
    if (dma_req.req && !dma_rsp.gnt) n_stall++;
    if (ic_miss) n_miss++;
    if (barrier) n_barrier++;
  end

  // ---------------------------------------------------------------- host side
  task automatic xfer(ref mem_req_t rq, ref mem_rsp_t rs, input logic we,
                      input logic [31:0] a, input logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk);
    rq = '{req: 1, we: we, be: 4'hf, addr: a, wdata: wd};
    #1 while (!rs.gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    rq = '0;
    #1 while (!rs.rvalid) begin @(negedge clk); #1; end
    rd = rs.rdata;
  endtask

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] in_val(int j);
    return 32'(j) * 32'h0101 + 32'h77;
  endfunction
  function automatic logic [31:0] expected(int j);
    logic [31:0] pc;
    pc = Boot + ((32'(16 * j) + 12) & 32'hFF);
    return in_val(j) * 32'd3 + ifetch_word(pc) + 32'h1357;
  endfunction

  task automatic check_out(input string mode);
    logic [31:0] d;
    int bad = 0;
    for (int j = 0; j < TOTAL; j++) begin
      xfer(axi_req, axi_rsp, 0, OutBase + 32'(4 * j), 0, d);
      if (d !== expected(j)) begin
        bad++;
        if (bad < 4) $display("%s OUT[%0d] = %h exp %h", mode, j, d, expected(j));
      end
      // clear for the next run
      xfer(axi_req, axi_rsp, 1, OutBase + 32'(4 * j), 0, d);
    end
    check({mode, ": all results correct"}, bad == 0);
  endtask

  task automatic run(output int cycles);
    int t0;
    core_rst_n = 1;
    t0 = cyc;
    wait (done[0] && done[1] && done[2] && done[3] && done[4] && done[5]);
    cycles = cyc - t0;
  endtask

  initial begin
    logic [31:0] d;
    int c_tmr, c_perf;
    host_req = '0; dma_req = '0; axi_req = '0;
    for (int i = 0; i < NumCores; i++) begin flip[i] = '0; corrupt[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < TOTAL; j++) xfer(axi_req, axi_rsp, 1, InBase + 32'(4 * j), in_val(j), d);
    xfer(dma_req, dma_rsp, 1, TcdmBase + 32'hF000, 32'hCAFE_0001, d);
    xfer(axi_req, axi_rsp, 0, TcdmBase + 32'hF000, 0, d);
    check("DMA write visible over AXI", d == 32'hCAFE_0001);

    // ---- soft-error tolerant mode
    xfer(host_req, host_rsp, 1, OdrgCfgBase + 32'h000, 1, d);
    xfer(host_req, host_rsp, 1, OdrgCfgBase + 32'h100, 1, d);
    xfer(host_req, host_rsp, 1, OdrgCfgBase + 32'h104, 1, d);   // group 1: DELAY
    @(negedge clk);
    check("both groups in TMR", tmr == 2'b11);
    fork
      run(c_tmr);
      begin
        repeat (300) @(negedge clk);
        flip[2].data.addr[7] = 1'b1;                 // SEU at core 2's interface
        @(negedge clk) flip[2] = '0;
        repeat (200) @(negedge clk);
        corrupt[3] = 1;                              // SEU in core 3's r0
        @(negedge clk) corrupt[3] = 0;
        wait (pend[1]);
        repeat (50) @(negedge clk);
        check("group 1 resync held by DELAY", st[1] == StTmrRun);
        xfer(host_req, host_rsp, 1, OdrgCfgBase + 32'h104, 0, d);
      end
    join
    $display("TMR run: %0d cycles", c_tmr);
    for (int i = 0; i < NumCores; i++) check("no fetch errors", errs[i] == 0);
    check("group 0 core A/B/C resynced", rsy[0] >= 1 && rsy[2] >= 1 && rsy[4] >= 1);
    check("group 1 core A/B/C resynced", rsy[1] >= 1 && rsy[3] >= 1 && rsy[5] >= 1);
    xfer(host_req, host_rsp, 0, OdrgCfgBase + 32'h018, 0, d); check("ODRG0 CNT_B counts core 2", d >= 1);
    xfer(host_req, host_rsp, 0, OdrgCfgBase + 32'h014, 0, d); check("ODRG0 CNT_A clean", d == 0);
    xfer(host_req, host_rsp, 0, OdrgCfgBase + 32'h01C, 0, d); check("ODRG0 CNT_C clean", d == 0);
    xfer(host_req, host_rsp, 0, OdrgCfgBase + 32'h118, 0, d); check("ODRG1 CNT_B counts core 3", d >= 1);
    xfer(host_req, host_rsp, 0, OdrgCfgBase + 32'h114, 0, d); check("ODRG1 CNT_A clean", d == 0);
    xfer(host_req, host_rsp, 0, OdrgCfgBase + 32'h110, 0, d); check("ODRG1 back in run", d[1:0] == 2'(StTmrRun));
    check_out("TMR");

    // ---- reboot into performance mode
    @(negedge clk) core_rst_n = 0;
    repeat (4) @(negedge clk);
    xfer(host_req, host_rsp, 1, OdrgCfgBase + 32'h000, 0, d);
    xfer(host_req, host_rsp, 1, OdrgCfgBase + 32'h100, 0, d);
    @(negedge clk);
    check("both groups in performance mode", tmr == 2'b00);
    fork
      run(c_perf);
      begin
        // DMA traffic into a scratch buffer while the cores compute
        for (int k = 0; k < 400; k++)
          xfer(dma_req, dma_rsp, 1, TcdmBase + 32'h8000 + 32'(4 * (k % 64)), 32'(k), d);
      end
    join
    $display("performance run: %0d cycles, speedup %0d.%02d", c_perf, c_tmr / c_perf,
             (100 * c_tmr / c_perf) % 100);
    check("performance mode faster", c_perf * 2 < c_tmr);
    for (int i = 0; i < NumCores; i++) check("no fetch errors", errs[i] == 0);
    check_out("performance");

    $display("mode switches %0d, resyncs %0d, delayed-resync cycles %0d, voted mismatches %0d",
             n_mode_switch, n_resync, n_delayed, n_voted);
    $display("data stalls %0d, icache misses %0d, barriers %0d", n_stall, n_miss, n_barrier);
    foreach (resync_cycles[k]) $display("resync %0d took %0d cycles", k, resync_cycles[k]);
    check("mode switch happened", n_mode_switch >= 2);
    check("resync happened in both groups", n_resync >= 2);
    check("delayed resync happened", n_delayed > 0);
    check("voter corrected a mismatch", n_voted >= 2);
    check("bank-conflict stall happened", n_stall > 0);
    check("icache miss happened", n_miss > 0);
    check("barrier happened", n_barrier > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
