// tb_log_interconnect: 8 masters on 16 TCDM banks (tcdm_bank models).
// Phase 1: random word reads/writes over the whole 64 KiB; each master owns
// rows 4m..4m+3 of every bank, so reads are checked against a per-master
// reference, and bank conflicts (a request not granted in its cycle) must
// occur. Phase 2: master m streams reads to bank m (no conflicts): every
// request must be granted in its cycle and answered one cycle later.
module tb_log_interconnect;
  import odrg_pkg::*;
  localparam int NM = 8, NB = 16, BWD = 1024;
  logic clk = 0, rst_n = 0;
  mem_req_t mreq [NM];
  mem_rsp_t mrsp [NM];
  logic          breq [NB], bwe [NB];
  logic [3:0]    bbe [NB];
  logic [9:0]    baddr [NB];
  logic [31:0]   bwd [NB], brd [NB];
  int checks = 0, failures = 0, conflicts = 0, done_cnt = 0;
  logic phase2 = 0;

  log_interconnect #(.NUM_MASTERS(NM), .NUM_BANKS(NB), .BANK_WORDS(BWD)) dut (
    .clk_i(clk), .rst_ni(rst_n), .mst_req_i(mreq), .mst_rsp_o(mrsp),
    .bank_req_o(breq), .bank_we_o(bwe), .bank_be_o(bbe), .bank_addr_o(baddr),
    .bank_wdata_o(bwd), .bank_rdata_i(brd));

  for (genvar b = 0; b < NB; b++) begin : g_b
    tcdm_bank #(.WORDS(BWD)) i_bank (.clk_i(clk), .req_i(breq[b]), .we_i(bwe[b]), .be_i(bbe[b]),
      .addr_i(baddr[b]), .wdata_i(bwd[b]), .rdata_o(brd[b]));
  end

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar m = 0; m < NM; m++) begin : g_m
    logic [31:0] ref_m [NB][4];
    initial begin
      logic [31:0] exp, a;
      int b, r;
      bit rd;
      mreq[m] = '0;
      for (int i = 0; i < NB; i++) for (int j = 0; j < 4; j++) ref_m[i][j] = 0;
      @(posedge rst_n);
      // clear own rows
      for (int i = 0; i < NB; i++) for (int j = 0; j < 4; j++) begin
        @(negedge clk);
        mreq[m] = '{req: 1, we: 1, be: 4'hf, addr: TcdmBase + 32'(((4 * m + j) * NB + i) * 4), wdata: 0};
        do @(posedge clk); while (!mrsp[m].gnt);
        @(negedge clk) mreq[m] = '0;
      end
      for (int t = 0; t < 1000; t++) begin
        @(negedge clk);
        b = $urandom_range(0, NB - 1); r = $urandom_range(0, 3);
        a = TcdmBase + 32'(((4 * m + r) * NB + b) * 4);
        rd = 1'($urandom);
        mreq[m] = '{req: 1, we: !rd, be: 4'hf, addr: a, wdata: $urandom};
        exp = ref_m[b][r];
        if (!rd) ref_m[b][r] = mreq[m].wdata;
        #1 if (!mrsp[m].gnt) conflicts++;
        do @(posedge clk); while (!mrsp[m].gnt);
        @(negedge clk) mreq[m] = '0;
        checks++;
        if (!mrsp[m].rvalid || (rd && mrsp[m].rdata !== exp)) begin
          failures++;
          if (failures < 5) $display("m%0d bank %0d row %0d: %h exp %h", m, b, r, mrsp[m].rdata, exp);
        end
      end
      done_cnt++;
      wait (phase2);
      // conflict-free streaming: back-to-back requests to bank m
      for (int t = 0; t < 64; t++) begin
        @(negedge clk);
        r = t % 4;
        mreq[m] = '{req: 1, we: 0, be: 4'hf, addr: TcdmBase + 32'(((4 * m + r) * NB + m) * 4), wdata: 0};
        exp = ref_m[m][r];
        #1 checks++;
        if (!mrsp[m].gnt) begin failures++; $display("m%0d stalled without conflict", m); end
        @(negedge clk);
        checks++;
        if (!mrsp[m].rvalid || mrsp[m].rdata !== exp) begin failures++; $display("m%0d stream data", m); end
      end
      mreq[m] = '0;
      done_cnt++;
    end
  end

  initial begin
    #12 rst_n = 1;
    wait (done_cnt == NM);
    phase2 = 1;
    wait (done_cnt == 2 * NM);
    checks++;
    if (conflicts == 0) begin failures++; $display("no bank conflict happened"); end
    $display("bank conflicts seen: %0d", conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
