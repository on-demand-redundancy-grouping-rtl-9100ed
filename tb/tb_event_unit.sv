// tb_event_unit: six ports. Rounds of barriers where the ports arrive in a
// random order and at random times: no port may be released before the last
// active port has arrived, and all must be released in the same cycle, one
// cycle after the last arrival. Then ports 2..5 are made inactive (two
// grouped ODRG units) and barriers involve only ports 0 and 1. The mask read
// at offset 0x4 is checked too.
module tb_event_unit;
  import odrg_pkg::*;
  localparam int N = NumCores;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] active;
  mem_req_t req [N];
  mem_rsp_t rsp [N];
  logic rel;
  int checks = 0, failures = 0, releases = 0;
  int arrive_t [N], release_t [N];

  event_unit #(.NUM_PORTS(N)) dut (.clk_i(clk), .rst_ni(rst_n), .active_i(active),
    .req_i(req), .rsp_o(rsp), .release_o(rel));

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (rel) releases++;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic barrier(input int p);
    repeat ($urandom_range(0, 12)) @(negedge clk);
    req[p] = '{req: 1, we: 1, be: 4'hf, addr: EuBase, wdata: 0};
    #1;
    while (!rsp[p].gnt) begin @(negedge clk); #1; end
    arrive_t[p] = cyc;
    @(negedge clk) req[p] = '0;
    while (!rsp[p].rvalid) @(negedge clk);
    release_t[p] = cyc;
  endtask

  task automatic round();
    int last, rt;
    for (int p = 0; p < N; p++) begin arrive_t[p] = -1; release_t[p] = -1; end
    fork
      begin if (active[0]) barrier(0); end
      begin if (active[1]) barrier(1); end
      begin if (active[2]) barrier(2); end
      begin if (active[3]) barrier(3); end
      begin if (active[4]) barrier(4); end
      begin if (active[5]) barrier(5); end
    join
    last = -1; rt = -1;
    for (int p = 0; p < N; p++) if (active[p] && arrive_t[p] > last) last = arrive_t[p];
    for (int p = 0; p < N; p++) if (active[p]) begin
      if (rt < 0) rt = release_t[p];
      checks++;
      if (release_t[p] != rt || rt != last + 1) begin
        failures++;
        $display("port %0d released at %0d, last arrival %0d", p, release_t[p], last);
      end
    end
  endtask

  initial begin
    logic [31:0] m;
    for (int p = 0; p < N; p++) req[p] = '0;
    active = '1;
    #12 rst_n = 1;
    repeat (30) round();
    active = 6'b000011;
    @(negedge clk);
    repeat (30) round();
    @(posedge clk); #1;
    req[0] = '{req: 1, we: 0, be: 4'hf, addr: EuBase + 4, wdata: 0};
    @(posedge clk); #1;
    req[0] = '0;
    m = rsp[0].rdata;
    checks++;
    if (!rsp[0].rvalid || m != 32'h3) begin failures++; $display("mask read %h", m); end
    checks++;
    if (releases != 60) begin failures++; $display("releases %0d", releases); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
