// tb_periph_interconnect: seven masters (six cores and the host) on the two
// ODRG configuration ports and the external port. Each target is a small
// register memory answering one cycle after grant, tagged with its id in
// rdata. Checks address decoding (ODRG g at OdrgCfgBase + 0x100*g, all else
// external), read data per target and that every target serves at most one
// master per cycle.
module tb_periph_interconnect;
  import odrg_pkg::*;
  localparam int NM = NumCores + 1;
  logic clk = 0, rst_n = 0;
  mem_req_t mreq [NM];
  mem_rsp_t mrsp [NM];
  mem_req_t oreq [NumGroups], ereq;
  mem_rsp_t orsp [NumGroups], ersp;
  int checks = 0, failures = 0, done_cnt = 0, contention = 0;

  periph_interconnect dut (.clk_i(clk), .rst_ni(rst_n), .mst_req_i(mreq), .mst_rsp_o(mrsp),
    .odrg_req_o(oreq), .odrg_rsp_i(orsp), .ext_req_o(ereq), .ext_rsp_i(ersp));

  always #5 clk = ~clk;
  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // three target memories, 64 words each (word index = addr[7:2])
  logic [31:0] tm [3][64];
  logic rv [3];
  logic [31:0] rd [3];
  mem_req_t treq [3];
  always_comb begin
    treq[0] = oreq[0]; treq[1] = oreq[1]; treq[2] = ereq;
  end
  always_comb begin
    for (int g = 0; g < 2; g++) orsp[g] = '{gnt: oreq[g].req, rvalid: rv[g], rdata: rd[g]};
    ersp = '{gnt: ereq.req, rvalid: rv[2], rdata: rd[2]};
  end
  always_ff @(posedge clk) for (int k = 0; k < 3; k++) begin
    rv[k] <= treq[k].req;
    rd[k] <= 0;
    if (treq[k].req) begin
      if (treq[k].we) tm[k][treq[k].addr[7:2]] <= treq[k].wdata;
      else rd[k] <= tm[k][treq[k].addr[7:2]];
    end
  end

  for (genvar m = 0; m < NM; m++) begin : g_m
    initial begin
      int k, w;
      logic [31:0] a, exp;
      logic [31:0] refm [3][64];
      bit is_rd;
      mreq[m] = '0;
      @(posedge rst_n);
      for (int i = 0; i < 3; i++) for (int j = 0; j < 64; j++) refm[i][j] = 0;
      for (int t = 0; t < 400; t++) begin
        @(negedge clk);
        k = $urandom_range(0, 2);
        w = m * 8 + $urandom_range(0, 7);        // master-owned words
        a = (k < 2) ? OdrgCfgBase + OdrgCfgStep * k : 32'h1A10_0000 + 32'($urandom_range(0, 255)) * 256;
        a = a + 32'(w * 4);
        is_rd = 1'($urandom);
        mreq[m] = '{req: 1, we: !is_rd, be: 4'hf, addr: a, wdata: $urandom};
        exp = refm[k][w];
        if (!is_rd) refm[k][w] = mreq[m].wdata;
        #1 if (!mrsp[m].gnt) contention++;
        do @(posedge clk); while (!mrsp[m].gnt);
        @(negedge clk) mreq[m] = '0;
        checks++;
        if (!mrsp[m].rvalid || (is_rd && mrsp[m].rdata !== exp)) begin
          failures++;
          if (failures < 5) $display("m%0d tgt %0d w %0d: %h exp %h", m, k, w, mrsp[m].rdata, exp);
        end
      end
      done_cnt++;
    end
  end

  initial begin
    for (int i = 0; i < 3; i++) for (int j = 0; j < 64; j++) tm[i][j] = 0;
    #12 rst_n = 1;
    wait (done_cnt == NM);
    checks++;
    if (contention == 0) begin failures++; $display("no contention seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
