// tb_rr_xbar: 4 masters, 3 targets. Each target is a small memory that
// grants at random and answers one cycle after its grant. Masters issue
// random reads/writes; every read result is checked against a reference
// memory per target. A second phase has all masters request target 0 every
// cycle and checks that grants rotate strictly (round-robin).
module tb_rr_xbar;
  import odrg_pkg::*;
  localparam int NI = 4, NO = 3;
  logic clk = 0, rst_n = 0;
  mem_req_t in_req [NI];
  logic [1:0] in_tgt [NI];
  mem_rsp_t in_rsp [NI];
  mem_req_t out_req [NO];
  mem_rsp_t out_rsp [NO];
  logic [31:0] tmem [NO][16];
  logic [31:0] rmem [NO][16];
  logic        tgnt [NO];
  logic        trv_q [NO];
  logic [31:0] trd_q [NO];
  int checks = 0, failures = 0;
  logic fair_phase = 0;

  rr_xbar #(.NUM_IN(NI), .NUM_OUT(NO)) dut (.clk_i(clk), .rst_ni(rst_n), .in_req_i(in_req),
    .in_tgt_i(in_tgt), .in_rsp_o(in_rsp), .out_req_o(out_req), .out_rsp_i(out_rsp));

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // targets
  always_comb for (int o = 0; o < NO; o++) begin
    out_rsp[o].gnt = out_req[o].req && tgnt[o];
    out_rsp[o].rvalid = trv_q[o];
    out_rsp[o].rdata = trd_q[o];
  end
  always_ff @(posedge clk) for (int o = 0; o < NO; o++) begin
    tgnt[o] <= fair_phase ? 1'b1 : 1'($urandom_range(0, 3) != 0);
    trv_q[o] <= out_rsp[o].gnt;
    trd_q[o] <= '0;
    if (out_rsp[o].gnt) begin
      if (out_req[o].we) tmem[o][out_req[o].addr[5:2]] <= out_req[o].wdata;
      else trd_q[o] <= tmem[o][out_req[o].addr[5:2]];
    end
  end

  // masters: one outstanding transaction each
  for (genvar m = 0; m < NI; m++) begin : g_m
    initial begin
      logic [31:0] exp;
      logic        is_rd;
      in_req[m] = '0; in_tgt[m] = 0;
      @(posedge rst_n);
      for (int t = 0; t < 600; t++) begin
        @(negedge clk);
        in_tgt[m] = 2'($urandom_range(0, NO - 1));
        // each master owns words 4m..4m+3 of every target
        in_req[m] = '{req: 1, we: 1'($urandom), be: 4'hf,
                      addr: 32'((4 * m + $urandom_range(0, 3)) * 4), wdata: $urandom};
        is_rd = !in_req[m].we;
        exp = rmem[in_tgt[m]][in_req[m].addr[5:2]];
        if (!is_rd) rmem[in_tgt[m]][in_req[m].addr[5:2]] = in_req[m].wdata;
        do @(posedge clk); while (!in_rsp[m].gnt);
        @(negedge clk);
        in_req[m] = '0;
        checks++;
        if (!in_rsp[m].rvalid || (is_rd && in_rsp[m].rdata !== exp)) begin
          failures++;
          if (failures < 5) $display("master %0d: rvalid %b data %h exp %h", m, in_rsp[m].rvalid, in_rsp[m].rdata, exp);
        end
      end
      done_cnt++;
    end
  end

  int done_cnt = 0;
  initial begin
    for (int o = 0; o < NO; o++) for (int w = 0; w < 16; w++) begin tmem[o][w] = 0; rmem[o][w] = 0; end
    #12 rst_n = 1;
  end

  // fairness phase after the random phase
  initial begin
    int last, cur;
    wait (done_cnt == NI);
    fair_phase = 1;
    force in_req[0] = '{req: 1, we: 0, be: 4'hf, addr: 0, wdata: 0};
    force in_req[1] = '{req: 1, we: 0, be: 4'hf, addr: 0, wdata: 0};
    force in_req[2] = '{req: 1, we: 0, be: 4'hf, addr: 0, wdata: 0};
    force in_req[3] = '{req: 1, we: 0, be: 4'hf, addr: 0, wdata: 0};
    force in_tgt[0] = 0; force in_tgt[1] = 0; force in_tgt[2] = 0; force in_tgt[3] = 0;
    @(negedge clk);
    last = -1;
    for (int t = 0; t < 40; t++) begin
      cur = -1;
      for (int m = 0; m < NI; m++) if (in_rsp[m].gnt) cur = m;
      checks++;
      if (cur < 0 || (last >= 0 && cur != (last + 1) % NI)) begin
        failures++;
        $display("round-robin: grant %0d after %0d", cur, last);
      end
      last = cur;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
