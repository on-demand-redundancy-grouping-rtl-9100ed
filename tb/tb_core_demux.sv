// tb_core_demux: one core port, three targets. Each target answers with
// rdata = its id in the top byte and the address below, the TCDM target
// grants at random, the event unit target delays its response by 0..4 extra
// cycles, the peripheral target grants at random. Checks: the request goes
// only to the target its address selects, the response comes from that
// target, and back-to-back TCDM accesses run at one per cycle.
module tb_core_demux;
  import odrg_pkg::*;
  logic clk = 0, rst_n = 0;
  mem_req_t creq, treq [3];
  mem_rsp_t crsp, trsp [3];
  int checks = 0, failures = 0, wrong_tgt = 0;

  core_demux dut (.clk_i(clk), .rst_ni(rst_n), .core_req_i(creq), .core_rsp_o(crsp),
    .tcdm_req_o(treq[0]), .tcdm_rsp_i(trsp[0]), .eu_req_o(treq[1]), .eu_rsp_i(trsp[1]),
    .per_req_o(treq[2]), .per_rsp_i(trsp[2]));

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // target models
  logic        g_rand [3];
  int          delay_cnt [3];
  logic        busy [3];
  logic [31:0] data_q [3];
  always_comb for (int k = 0; k < 3; k++) begin
    trsp[k].gnt    = treq[k].req && g_rand[k] && (!busy[k] || delay_cnt[k] == 0);
    trsp[k].rvalid = busy[k] && delay_cnt[k] == 0;
    trsp[k].rdata  = trsp[k].rvalid ? data_q[k] : 32'hdead_beef;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int k = 0; k < 3; k++) begin busy[k] <= 0; delay_cnt[k] <= 0; g_rand[k] <= 1; data_q[k] <= 0; end
    else for (int k = 0; k < 3; k++) begin
      g_rand[k] <= (k == 1) ? 1'b1 : 1'($urandom_range(0, 2) != 0);
      if (trsp[k].rvalid) busy[k] <= 0;
      else if (busy[k]) delay_cnt[k] <= delay_cnt[k] - 1;
      if (trsp[k].gnt) begin
        busy[k] <= 1;
        delay_cnt[k] <= (k == 1) ? $urandom_range(0, 4) : 0;
        data_q[k] <= {8'(k), treq[k].addr[23:0]};
      end
    end
  end
  always @(posedge clk) begin
    if ((treq[0].req + treq[1].req + treq[2].req) > 1) wrong_tgt++;
  end

  function automatic logic [31:0] rnd_addr(output int k);
    k = $urandom_range(0, 2);
    case (k)
      0: return TcdmBase + 32'($urandom_range(0, 16383) * 4);
      1: return EuBase + 32'($urandom_range(0, 255) * 4);
      default: return 32'h1020_0000 + 32'($urandom_range(0, 1023) * 4);
    endcase
  endfunction

  initial begin
    int k;
    logic [31:0] a;
    creq = '0;
    #12 rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      a = rnd_addr(k);
      creq = '{req: 1, we: 1'($urandom), be: 4'hf, addr: a, wdata: $urandom};
      #1 checks++;
      for (int j = 0; j < 3; j++)
        if (treq[j].req != (j == k)) begin failures++; $display("routing of %h", a); end
      while (!crsp.gnt) begin @(negedge clk); #1; end
      @(posedge clk);
      @(negedge clk) creq = '0;
      while (!crsp.rvalid) @(negedge clk);
      checks++;
      if (crsp.rdata !== {8'(k), a[23:0]}) begin
        failures++;
        if (failures < 5) $display("response %h exp %h", crsp.rdata, {8'(k), a[23:0]});
      end
    end
    // back-to-back TCDM with an always-granting target: one access per cycle
    force g_rand[0] = 1'b1;
    @(negedge clk);
    for (int t = 0; t < 20; t++) begin
      creq = '{req: 1, we: 0, be: 4'hf, addr: TcdmBase + 32'(t * 4), wdata: 0};
      #1 checks++;
      if (!crsp.gnt) begin failures++; $display("back-to-back access %0d not granted", t); end
      if (t > 0) begin
        checks++;
        if (!crsp.rvalid || crsp.rdata !== {8'd0, 24'(TcdmBase + 32'((t - 1) * 4))}) begin
          failures++; $display("back-to-back response %0d", t);
        end
      end
      @(negedge clk);
    end
    creq = '0;
    checks++;
    if (wrong_tgt != 0) begin failures++; $display("request on several targets"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
