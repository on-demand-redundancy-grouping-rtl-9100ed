// log_interconnect: master ports to the word-interleaved TCDM banks.
//
// Consecutive 32-bit words lie in consecutive banks: bank = addr[5:2], row
// = addr[15:6] for 16 banks of 1024 words. Each bank has a round-robin
// arbiter (rr_xbar); a bank always accepts the request it selects, so a
// master is granted in its request cycle unless another master wins the same
// bank, and its read data returns one cycle later. The masters are the six
// core data ports, the DMA and the AXI slave port. The bank interleaving and
// the round-robin crossbar follow the described TCDM; the bit positions
// follow from the sizes.
module log_interconnect
  import odrg_pkg::*;
#(
  parameter int unsigned NUM_MASTERS = 8,
  parameter int unsigned NUM_BANKS   = 16,
  parameter int unsigned BANK_WORDS  = 1024,
  localparam int unsigned BW         = $clog2(NUM_BANKS),
  localparam int unsigned RW         = $clog2(BANK_WORDS)
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  mem_req_t      mst_req_i  [NUM_MASTERS],
  output mem_rsp_t      mst_rsp_o  [NUM_MASTERS],
  // bank side
  output logic          bank_req_o   [NUM_BANKS],
  output logic          bank_we_o    [NUM_BANKS],
  output logic [3:0]    bank_be_o    [NUM_BANKS],
  output logic [RW-1:0] bank_addr_o  [NUM_BANKS],
  output logic [31:0]   bank_wdata_o [NUM_BANKS],
  input  logic [31:0]   bank_rdata_i [NUM_BANKS]
);
  logic [BW-1:0] tgt      [NUM_MASTERS];
  mem_req_t      breq     [NUM_BANKS];
  mem_rsp_t      brsp     [NUM_BANKS];
  logic          bvalid_q [NUM_BANKS];

  always_comb
    for (int m = 0; m < NUM_MASTERS; m++) tgt[m] = mst_req_i[m].addr[2 +: BW];

  rr_xbar #(.NUM_IN(NUM_MASTERS), .NUM_OUT(NUM_BANKS)) i_xbar (
    .clk_i, .rst_ni,
    .in_req_i  (mst_req_i),
    .in_tgt_i  (tgt),
    .in_rsp_o  (mst_rsp_o),
    .out_req_o (breq),
    .out_rsp_i (brsp)
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) for (int b = 0; b < NUM_BANKS; b++) bvalid_q[b] <= 1'b0;
    else         for (int b = 0; b < NUM_BANKS; b++) bvalid_q[b] <= breq[b].req;
  end

  always_comb begin
    for (int b = 0; b < NUM_BANKS; b++) begin
      bank_req_o[b]   = breq[b].req;
      bank_we_o[b]    = breq[b].we;
      bank_be_o[b]    = breq[b].be;
      bank_addr_o[b]  = breq[b].addr[2+BW +: RW];
      bank_wdata_o[b] = breq[b].wdata;
      brsp[b].gnt     = breq[b].req;
      brsp[b].rvalid  = bvalid_q[b];
      brsp[b].rdata   = bank_rdata_i[b];
    end
  end
endmodule
