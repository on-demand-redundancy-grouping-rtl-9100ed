// tb_odrg_regs: register file of one ODRG unit. Checks reset values,
// read-back of MODE/DELAY/SP_STORE, the SP and RELOAD_DONE write strobes,
// STATUS, per-core mismatch counting, clearing and saturation (counters
// narrowed to 4 bits to reach saturation), and the one-cycle read latency.
module tb_odrg_regs;
  import odrg_pkg::*;
  logic clk = 0, rst_n = 0;
  mem_req_t req;
  mem_rsp_t rsp;
  logic tmr_en, delay, sp_we, done_we, pend;
  logic [2:0] mm;
  odrg_state_e st;
  int checks = 0, failures = 0;
  int n_sp = 0, n_done = 0;

  odrg_regs #(.CNT_W(4)) dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp),
    .tmr_en_o(tmr_en), .delay_resync_o(delay), .sp_we_o(sp_we), .done_we_o(done_we),
    .mismatch_i(mm), .state_i(st), .pending_i(pend));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (sp_we) n_sp++;
    if (done_we) n_done++;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %h exp %h", what, got, exp);
    end
  endtask

  task automatic access(input logic we, input logic [7:0] off, input logic [31:0] wd,
                        output logic [31:0] rd);
    req = '{req: 1'b1, we: we, be: 4'hf, addr: OdrgCfgBase | 32'(off), wdata: wd};
    #1;
    check("gnt", 32'(rsp.gnt), 1);
    @(posedge clk); #1;
    req = '0;
    check("rvalid one cycle later", 32'(rsp.rvalid), 1);
    rd = rsp.rdata;
  endtask

  logic [31:0] r;
  initial begin
    req = '0; mm = '0; st = StPerf; pend = 0;
    #12 rst_n = 1;
    @(posedge clk); #1;
    access(0, 8'h00, 0, r); check("MODE reset", r, 0);
    access(0, 8'h08, 0, r); check("SP reset", r, 0);
    access(1, 8'h00, 32'h1, r); check("tmr_en", 32'(tmr_en), 1);
    access(0, 8'h00, 0, r); check("MODE readback", r, 1);
    access(1, 8'h04, 32'hffff_ffff, r); check("delay", 32'(delay), 1);
    access(0, 8'h04, 0, r); check("DELAY readback", r, 1);
    access(1, 8'h08, 32'h1000_8f00, r); check("SP strobe", 32'(n_sp), 1);
    access(0, 8'h08, 0, r); check("SP readback", r, 32'h1000_8f00);
    access(1, 8'h0c, 1, r); check("DONE strobe", 32'(n_done), 1);
    check("SP strobe count unchanged", 32'(n_sp), 1);
    st = StTmrReload; pend = 1;
    access(0, 8'h10, 0, r); check("STATUS", r, 32'h7);
    // count mismatches: A 3 times, B 1 time, C 20 times (saturates at 15)
    for (int i = 0; i < 20; i++) begin
      mm = {1'b1, i == 5, i < 3};
      @(posedge clk); #1;
    end
    mm = '0;
    access(0, 8'h14, 0, r); check("CNT_A", r, 3);
    access(0, 8'h18, 0, r); check("CNT_B", r, 1);
    access(0, 8'h1c, 0, r); check("CNT_C saturated", r, 15);
    access(1, 8'h1c, 0, r);
    access(0, 8'h1c, 0, r); check("CNT_C cleared", r, 0);
    access(0, 8'h14, 0, r); check("CNT_A kept", r, 3);
    access(1, 8'h00, 0, r); check("ungroup", 32'(tmr_en), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
