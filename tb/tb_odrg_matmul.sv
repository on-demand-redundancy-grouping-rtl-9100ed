// tb_odrg_matmul: the cluster (default parameters) running 32-bit matrix
// multiplications of 24 x 24 and 32 x 32 on the six core models, once with
// both ODRG units grouped (two fault-tolerant cores) and once in performance
// mode (six cores); the cores are rebooted between runs. A, B are filled by
// the host over the AXI port, C is read back and compared with a product
// computed here. In the grouped 24 x 24 run a register of core 4 (group 0,
// core C) is corrupted; the error must be detected when it reaches the
// interface, repaired by a resync and leave C correct. Cycle counts and the
// performance/grouped speedup are printed; the speedup must exceed 2.
module tb_odrg_matmul;
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
      .out_o(core_out[i]), .flip_i('0), .corrupt_i(corrupt[i]), .mat_n_i(mat_n), .conv_i(1'b0),
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

  function automatic logic [31:0] a_val(int i, int l); return 32'(i * 7 + l * 3 + 1); endfunction
  function automatic logic [31:0] b_val(int l, int k); return 32'(l * 5 - k + 100); endfunction

  task automatic run_mm(input int n, input bit grouped, input bit inject, output int cycles);
    logic [31:0] d, exp;
    int t0, bad;
    string mode;
    @(negedge clk) core_rst_n = 0;
    mat_n = n;
    xfer(host_req, host_rsp, 1, OdrgCfgBase, 32'(grouped), d);
    xfer(host_req, host_rsp, 1, OdrgCfgBase + OdrgCfgStep, 32'(grouped), d);
    for (int i = 0; i < n; i++) for (int l = 0; l < n; l++) begin
      xfer(axi_req, axi_rsp, 1, TcdmBase + 32'(4 * (i * n + l)), a_val(i, l), d);
      xfer(axi_req, axi_rsp, 1, TcdmBase + 32'(4 * (n * n + i * n + l)), b_val(i, l), d);
    end
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
    for (int i = 0; i < n; i++) for (int k = 0; k < n; k++) begin
      exp = 0;
      for (int l = 0; l < n; l++) exp += a_val(i, l) * b_val(l, k);
      xfer(axi_req, axi_rsp, 0, TcdmBase + 32'(4 * (2 * n * n + i * n + k)), 0, d);
      if (d !== exp) begin
        bad++;
        if (bad < 4) $display("C[%0d][%0d] = %h exp %h", i, k, d, exp);
      end
    end
    checks++;
    if (bad != 0) begin failures++; $display("%0dx%0d grouped=%0d: %0d wrong elements", n, n, grouped, bad); end
    for (int c = 0; c < NumCores; c++) begin
      checks++;
      if (errs[c] != 0) begin failures++; $display("core %0d fetch errors", c); end
    end
    mode = grouped ? "soft-error tolerant" : "performance";
    $display("%0dx%0d matmul, %s mode: %0d cycles", n, n, mode, cycles);
  endtask

  initial begin
    int c_t, c_p;
    host_req = '0; dma_req = '0; axi_req = '0;
    for (int i = 0; i < NumCores; i++) corrupt[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 2; s++) begin
      int n;
      n = (s == 0) ? 24 : 32;
      run_mm(n, 1'b1, s == 0, c_t);
      run_mm(n, 1'b0, 1'b0, c_p);
      $display("%0dx%0d speedup %0d.%02d", n, n, c_t / c_p, (100 * c_t / c_p) % 100);
      checks++;
      if (c_p * 2 >= c_t) begin failures++; $display("speedup below 2"); end
    end
    checks++;
    if (n_resync < 1) begin failures++; $display("injected fault was not resynchronised"); end
    foreach (r_len[k]) $display("resync took %0d cycles", r_len[k]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
