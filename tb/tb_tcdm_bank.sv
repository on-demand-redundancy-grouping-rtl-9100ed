// tb_tcdm_bank: random byte-enabled writes and reads against a reference
// array; every read is checked one cycle after its request (single-cycle
// latency) at the default depth of 1024 words.
module tb_tcdm_bank;
  logic clk = 0;
  logic req, we;
  logic [3:0] be;
  logic [9:0] addr;
  logic [31:0] wdata, rdata;
  logic [31:0] ref_mem [1024];
  int checks = 0, failures = 0;

  tcdm_bank #(.WORDS(1024)) dut (.clk_i(clk), .req_i(req), .we_i(we), .be_i(be),
    .addr_i(addr), .wdata_i(wdata), .rdata_o(rdata));

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] exp;
    logic        pend;
    pend = 0; exp = 0;
    req = 0; we = 0; be = 0; addr = 0; wdata = 0;
    // initialise all words
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk);
      req = 1; we = 1; be = 4'hf; addr = 10'(i); wdata = $urandom; ref_mem[i] = wdata;
    end
    for (int t = 0; t < 8000; t++) begin
      @(negedge clk);
      if (pend) begin
        checks++;
        if (rdata !== exp) begin
          failures++;
          if (failures < 5) $display("read mismatch %h exp %h", rdata, exp);
        end
      end
      req = 1'($urandom_range(0, 3) != 0); we = 1'($urandom); be = 4'($urandom);
      addr = 10'($urandom_range(0, 63));   // small window: many read-after-write
      wdata = $urandom;
      pend = req && !we;
      if (pend) exp = ref_mem[addr];
      if (req && we)
        for (int b = 0; b < 4; b++) if (be[b]) ref_mem[addr][8*b +: 8] = wdata[8*b +: 8];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
