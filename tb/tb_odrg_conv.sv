// tb_odrg_conv: the cluster (default parameters) running a 16-bit 2D
// convolution (3 x 3 filter over a 32 x 32 image of unsigned halfwords, 30 x 30
// 32-bit outputs) on the six core models, once with both ODRG units grouped
// (two fault-tolerant cores) and once in performance mode (six cores); the
// cores are rebooted between runs. Image and filter are written by the host
// over the AXI port, the output is read back and compared with a convolution
// computed here. In the grouped run a register of core 4 (group 0, core C) is
// corrupted; the error must be repaired by a resync and leave the output
// correct. Cycle counts and the speedup are printed; it must exceed 2.
module tb_odrg_conv;
  import odrg_pkg::*;
  localparam logic [31:0] Boot = 32'h1C00_8000;

  logic clk = 0, rst_n = 0, core_rst_n = 0;
  core_in_t  core_in  [NumCores];
  core_out_t core_out [NumCores];
  logic      corrupt  [NumCores];
  logic      done     [NumCores];
  int        errs     [NumCores], rsy [NumCores];
  int        mat_n = 0;
  mem_req_t  host_req, dma_req, axi_req, ext_req;
  mem_rsp_t  host_rsp, dma_rsp, axi_rsp, ext_rsp;
  logic rf_req, rf_rv;
  logic [31:0] rf_addr, rf_rd;
  logic [1:0] tmr;
  odrg_state_e st [NumGroups];
  logic barrier, ic_miss, ext_q;
  int checks = 0, failures = 0, cyc = 0;

  odrg_cluster dut (
    .clk_i(clk), .rst_ni(rst_n), .boot_addr_i(Boot), .irq_i('0),
    .core_in_o(core_in), .core_out_i(core_out),
    .host_req_i(host_req), .host_rsp_o(host_rsp),
    .dma_req_i(dma_req), .dma_rsp_o(dma_rsp), .axi_req_i(axi_req), .axi_rsp_o(axi_rsp),
    .ext_req_o(ext_req), .ext_rsp_i(ext_rsp),
    .refill_req_o(rf_req), .refill_addr_o(rf_addr), .refill_gnt_i(rf_req),
    .refill_rvalid_i(rf_rv), .refill_rdata_i(rf_rd),
    .tmr_o(tmr), .odrg_state_o(st), .barrier_o(barrier), .icache_miss_o(ic_miss));

  for (genvar i = 0; i < NumCores; i++) begin : g_core
    core_model i_core (.clk_i(clk), .rst_ni(core_rst_n), .in_i(core_in[i]),
      .out_o(core_out[i]), .flip_i('0), .corrupt_i(corrupt[i]), .mat_n_i(mat_n), .conv_i(1'b1),
      .done_o(done[i]), .errors_o(errs[i]), .resyncs_o(rsy[i]));
  end

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] ifetch_word(logic [31:0] a);
    return (a * 32'h9e37_79b9) ^ 32'h1234_5678;
  endfunction
  always_ff @(posedge clk) begin
    rf_rv <= rf_req;
    rf_rd <= ifetch_word(rf_addr);
    ext_q <= ext_req.req;
  end
  assign ext_rsp = '{gnt: ext_req.req, rvalid: ext_q, rdata: 0};

  int n_resync = 0, r_start = 0;
  int r_len [$];
  odrg_state_e st0_q = StPerf;
  always @(posedge clk) begin
    st0_q <= st[0];
    if (st0_q == StTmrRun && st[0] == StTmrUnload) r_start = cyc;
    if (st0_q == StTmrReload && st[0] == StTmrRun) begin n_resync++; r_len.push_back(cyc - r_start); end
  end

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

  localparam logic [31:0] ConvFilt = TcdmBase + 32'h0000_3000;
  localparam logic [31:0] ConvOut  = TcdmBase + 32'h0000_4000;
  function automatic logic [15:0] px(int p); return 16'((p * 40503) ^ (p >> 3)); endfunction
  function automatic logic [15:0] fv(int t); return 16'(t * 37 + 11); endfunction

  task automatic run_conv(input int n, input bit grouped, input bit inject, output int cycles);
    logic [31:0] d, exp;
    int t0, bad, m;
    string mode;
    m = n - 2;
    @(negedge clk) core_rst_n = 0;
    mat_n = n;
    xfer(host_req, host_rsp, 1, OdrgCfgBase, 32'(grouped), d);
    xfer(host_req, host_rsp, 1, OdrgCfgBase + OdrgCfgStep, 32'(grouped), d);
    for (int q = 0; q < n * n / 2; q++)
      xfer(axi_req, axi_rsp, 1, TcdmBase + 32'(4 * q), {px(2 * q + 1), px(2 * q)}, d);
    for (int q = 0; q < 5; q++)
      xfer(axi_req, axi_rsp, 1, ConvFilt + 32'(4 * q), {fv(2 * q + 1), fv(2 * q)}, d);
    @(negedge clk);
    checks++;
    if (tmr != {grouped, grouped}) begin failures++; $display("mode not set"); end
    core_rst_n = 1;
    t0 = cyc;
    fork
      wait (done[0] && done[1] && done[2] && done[3] && done[4] && done[5]);
      if (inject) begin
        repeat (3000) @(negedge clk);
        corrupt[4] = 1;
        @(negedge clk) corrupt[4] = 0;
      end
    join
    cycles = cyc - t0;
    bad = 0;
    for (int y = 0; y < m; y++) for (int x = 0; x < m; x++) begin
      exp = 0;
      for (int t = 0; t < 9; t++) exp += {16'b0, px((y + t / 3) * n + x + t % 3)} * {16'b0, fv(t)};
      xfer(axi_req, axi_rsp, 0, ConvOut + 32'(4 * (y * m + x)), 0, d);
      if (d !== exp) begin
        bad++;
        if (bad < 4) $display("O[%0d][%0d] = %h exp %h", y, x, d, exp);
      end
    end
    checks++;
    if (bad != 0) begin failures++; $display("grouped=%0d: %0d wrong pixels", grouped, bad); end
    for (int c = 0; c < NumCores; c++) begin
      checks++;
      if (errs[c] != 0) begin failures++; $display("core %0d fetch errors", c); end
    end
    mode = grouped ? "soft-error tolerant" : "performance";
    $display("%0dx%0d conv, %s mode: %0d cycles", n, n, mode, cycles);
  endtask

  initial begin
    int c_t, c_p;
    host_req = '0; dma_req = '0; axi_req = '0;
    for (int i = 0; i < NumCores; i++) corrupt[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_conv(32, 1'b1, 1'b1, c_t);
    run_conv(32, 1'b0, 1'b0, c_p);
    $display("conv speedup %0d.%02d", c_t / c_p, (100 * c_t / c_p) % 100);
    checks++;
    if (c_p * 2 >= c_t) begin failures++; $display("speedup below 2"); end
    checks++;
    if (n_resync < 1) begin failures++; $display("injected fault was not resynchronised"); end
    foreach (r_len[k]) $display("resync took %0d cycles", r_len[k]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
