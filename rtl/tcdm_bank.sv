// tcdm_bank: one word-interleaved SRAM bank of the tightly coupled data memory.
//
// 32-bit words with byte enables. A read returns its data on rdata_o in the
// cycle after req_i (single-cycle access latency, as the TCDM is described);
// a write updates the enabled bytes at the clock edge. The bank never stalls.
// The default depth, 1024 words, gives 64 KiB over 16 banks. Written as a
// register array standing for the SRAM macro; the memory is not reset and
// carries no ECC.
module tcdm_bank #(
  parameter int unsigned WORDS = 1024,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic          clk_i,
  input  logic          req_i,
  input  logic          we_i,
  input  logic [3:0]    be_i,
  input  logic [AW-1:0] addr_i,
  input  logic [31:0]   wdata_i,
  output logic [31:0]   rdata_o
);
  logic [31:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < 4; b++)
          if (be_i[b]) mem[addr_i][8*b +: 8] <= wdata_i[8*b +: 8];
        rdata_o <= '0;
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end
endmodule
