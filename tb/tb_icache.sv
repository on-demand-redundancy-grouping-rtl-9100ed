// tb_icache: six fetch ports on the shared cache, a refill memory with
// rdata = f(addr) and random grant/response latency. Each port fetches
// sequential runs and random jumps inside an 8 KiB code region (larger than
// the 1 KiB cache, so lines are evicted and refilled). Every fetched word is
// checked against f(addr); a hit must be granted in its cycle and answered
// the next cycle; misses and shared hits (two ports on one line) must occur.
module tb_icache;
  import odrg_pkg::*;
  localparam int N = NumCores;
  logic clk = 0, rst_n = 0;
  instr_req_t req [N];
  instr_rsp_t rsp [N];
  logic rf_req, rf_gnt, rf_rv, miss;
  logic [31:0] rf_addr, rf_rd;
  int checks = 0, failures = 0, misses = 0, hits = 0, done_cnt = 0;

  icache #(.NUM_PORTS(N), .LINES(64), .LINE_WORDS(4)) dut (.clk_i(clk), .rst_ni(rst_n),
    .req_i(req), .rsp_o(rsp), .refill_req_o(rf_req), .refill_addr_o(rf_addr),
    .refill_gnt_i(rf_gnt), .refill_rvalid_i(rf_rv), .refill_rdata_i(rf_rd), .miss_o(miss));

  function automatic logic [31:0] f(logic [31:0] a);
    return (a * 32'h9e37_79b9) ^ 32'h1234_5678;
  endfunction

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // refill memory: random grant, 1..3 cycle response
  logic [31:0] pend_addr;
  int          wait_cnt;
  logic        busy;
  assign rf_gnt = rf_req && !busy && 1'($urandom_range(0, 1));
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin busy <= 0; rf_rv <= 0; rf_rd <= 0; wait_cnt <= 0; pend_addr <= 0; end
    else begin
      rf_rv <= 0;
      if (rf_gnt) begin busy <= 1; pend_addr <= rf_addr; wait_cnt <= $urandom_range(0, 2); end
      else if (busy) begin
        if (wait_cnt == 0) begin rf_rv <= 1; rf_rd <= f(pend_addr); busy <= 0; end
        else wait_cnt <= wait_cnt - 1;
      end
    end
  end
  always @(posedge clk) if (miss) misses++;

  for (genvar p = 0; p < N; p++) begin : g_p
    initial begin
      logic [31:0] pc;
      int stall;
      req[p] = '0;
      @(posedge rst_n);
      pc = 32'h1C00_8000 + 32'($urandom_range(0, 2047) * 4);
      for (int t = 0; t < 1500; t++) begin
        @(negedge clk);
        req[p] = '{req: 1, addr: pc};
        stall = 0;
        #1 while (!rsp[p].gnt) begin @(negedge clk); stall++; #1; end
        if (stall == 0) hits++;
        @(negedge clk) req[p] = '0;
        checks++;
        if (!rsp[p].rvalid || rsp[p].rdata !== f(pc)) begin
          failures++;
          if (failures < 5) $display("port %0d pc %h: %h exp %h", p, pc, rsp[p].rdata, f(pc));
        end
        if ($urandom_range(0, 15) == 0) pc = 32'h1C00_8000 + 32'($urandom_range(0, 2047) * 4);
        else pc = pc + 4;
        if (pc >= 32'h1C00_A000) pc = 32'h1C00_8000;
      end
      done_cnt++;
    end
  end

  // a miss must not be granted; the same line is then a hit for a second port
  initial begin
    #12 rst_n = 1;
    wait (done_cnt == N);
    checks++;
    if (misses == 0 || hits == 0) begin failures++; $display("misses %0d hits %0d", misses, hits); end
    $display("misses %0d, hits without stall %0d", misses, hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
