// odrg_cluster: six-core cluster with On-Demand Redundancy Grouping.
//
// The six core interfaces are grouped into two ODRG units: unit 0 holds
// cores 0, 2, 4 and unit 1 holds cores 1, 3, 5 (core index = unit + 2 *
// position, position 0 being core A). Each unit either passes its three
// cores through (performance mode, six independent cores) or runs them in
// lock-step behind a majority voter on the interface of its core A
// (soft-error tolerant mode, two fault-tolerant cores). Behind the units, the
// six cluster-side interfaces (port i belongs to core i) connect:
//   * instruction fetch to the shared instruction cache (refill port out),
//   * data to a per-port demux: TCDM through the logarithmic interconnect
//     (16 word-interleaved 4 KiB banks, with the DMA and AXI ports as two
//     more masters), the event unit (barrier), or the peripheral
//     interconnect (the two ODRG configuration ports, an external port, and
//     the host as one more master).
// The cores, the DMA, the AXI bus and the timer are not part of this RTL;
// their connections are ports. The structure follows the described cluster
// block diagram; hart ids (= port index), the address map and all protocols
// are own choices. Every port answers with the single-cycle request/grant,
// rvalid-one-cycle-later protocol of odrg_pkg.
module odrg_cluster
  import odrg_pkg::*;
#(
  parameter int unsigned BANK_WORDS   = BankWords,
  parameter int unsigned ICACHE_LINES = 64
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic [31:0] boot_addr_i,
  input  logic [NumCores-1:0] irq_i,
  // to / from the six cores
  output core_in_t    core_in_o  [NumCores],
  input  core_out_t   core_out_i [NumCores],
  // host (AXI slave path) into the peripheral interconnect
  input  mem_req_t    host_req_i,
  output mem_rsp_t    host_rsp_o,
  // DMA and AXI slave path into the TCDM
  input  mem_req_t    dma_req_i,
  output mem_rsp_t    dma_rsp_o,
  input  mem_req_t    axi_req_i,
  output mem_rsp_t    axi_rsp_o,
  // external peripheral port (timer, DMA configuration, to host)
  output mem_req_t    ext_req_o,
  input  mem_rsp_t    ext_rsp_i,
  // instruction cache refill
  output logic        refill_req_o,
  output logic [31:0] refill_addr_o,
  input  logic        refill_gnt_i,
  input  logic        refill_rvalid_i,
  input  logic [31:0] refill_rdata_i,
  // status
  output logic [NumGroups-1:0] tmr_o,
  output odrg_state_e          odrg_state_o [NumGroups],
  output logic                 barrier_o,
  output logic                 icache_miss_o
);
  localparam int unsigned RW = $clog2(BANK_WORDS);

  core_in_t   sys_in  [NumCores];
  core_out_t  sys_out [NumCores];
  mem_req_t   odrg_cfg_req [NumGroups];
  mem_rsp_t   odrg_cfg_rsp [NumGroups];

  // ---------------------------------------------------------------- ODRG units
  for (genvar g = 0; g < NumGroups; g++) begin : g_odrg
    core_in_t  u_sys_in   [GroupSize];
    core_out_t u_sys_out  [GroupSize];
    core_in_t  u_core_in  [GroupSize];
    core_out_t u_core_out [GroupSize];
    for (genvar k = 0; k < GroupSize; k++) begin : g_map
      assign u_sys_in[k]            = sys_in[g + NumGroups * k];
      assign sys_out[g + NumGroups * k] = u_sys_out[k];
      assign core_in_o[g + NumGroups * k] = u_core_in[k];
      assign u_core_out[k]          = core_out_i[g + NumGroups * k];
    end
    odrg_unit i_odrg (
      .clk_i, .rst_ni,
      .cfg_req_i  (odrg_cfg_req[g]),
      .cfg_rsp_o  (odrg_cfg_rsp[g]),
      .sys_in_i   (u_sys_in),
      .sys_out_o  (u_sys_out),
      .core_in_o  (u_core_in),
      .core_out_i (u_core_out),
      .tmr_o      (tmr_o[g]),
      .state_o    (odrg_state_o[g])
    );
  end

  // ---------------------------------------------------------- instruction side
  instr_req_t ic_req [NumCores];
  instr_rsp_t ic_rsp [NumCores];
  always_comb for (int i = 0; i < NumCores; i++) ic_req[i] = sys_out[i].instr;

  icache #(.NUM_PORTS(NumCores), .LINES(ICACHE_LINES)) i_icache (
    .clk_i, .rst_ni,
    .req_i (ic_req),
    .rsp_o (ic_rsp),
    .refill_req_o, .refill_addr_o, .refill_gnt_i, .refill_rvalid_i, .refill_rdata_i,
    .miss_o (icache_miss_o)
  );

  // ----------------------------------------------------------------- data side
  mem_req_t tcdm_req [NumCores + 2];
  mem_rsp_t tcdm_rsp [NumCores + 2];
  mem_req_t eu_req   [NumCores];
  mem_rsp_t eu_rsp   [NumCores];
  mem_req_t per_req  [NumCores + 1];
  mem_rsp_t per_rsp  [NumCores + 1];
  mem_rsp_t dmx_rsp  [NumCores];

  for (genvar i = 0; i < NumCores; i++) begin : g_demux
    core_demux i_demux (
      .clk_i, .rst_ni,
      .core_req_i (sys_out[i].data),
      .core_rsp_o (dmx_rsp[i]),
      .tcdm_req_o (tcdm_req[i]),
      .tcdm_rsp_i (tcdm_rsp[i]),
      .eu_req_o   (eu_req[i]),
      .eu_rsp_i   (eu_rsp[i]),
      .per_req_o  (per_req[i]),
      .per_rsp_i  (per_rsp[i])
    );
    always_comb begin
      sys_in[i].instr     = ic_rsp[i];
      sys_in[i].data      = dmx_rsp[i];
      sys_in[i].irq       = irq_i[i];
      sys_in[i].hart_id   = 32'(i);
      sys_in[i].boot_addr = boot_addr_i;
    end
  end

  assign tcdm_req[NumCores]     = dma_req_i;
  assign dma_rsp_o              = tcdm_rsp[NumCores];
  assign tcdm_req[NumCores + 1] = axi_req_i;
  assign axi_rsp_o              = tcdm_rsp[NumCores + 1];
  assign per_req[NumCores]      = host_req_i;
  assign host_rsp_o             = per_rsp[NumCores];

  // TCDM
  logic          bank_req   [NumBanks];
  logic          bank_we    [NumBanks];
  logic [3:0]    bank_be    [NumBanks];
  logic [RW-1:0] bank_addr  [NumBanks];
  logic [31:0]   bank_wdata [NumBanks];
  logic [31:0]   bank_rdata [NumBanks];

  log_interconnect #(
    .NUM_MASTERS (NumCores + 2),
    .NUM_BANKS   (NumBanks),
    .BANK_WORDS  (BANK_WORDS)
  ) i_log_ic (
    .clk_i, .rst_ni,
    .mst_req_i    (tcdm_req),
    .mst_rsp_o    (tcdm_rsp),
    .bank_req_o   (bank_req),
    .bank_we_o    (bank_we),
    .bank_be_o    (bank_be),
    .bank_addr_o  (bank_addr),
    .bank_wdata_o (bank_wdata),
    .bank_rdata_i (bank_rdata)
  );

  for (genvar b = 0; b < NumBanks; b++) begin : g_bank
    tcdm_bank #(.WORDS(BANK_WORDS)) i_bank (
      .clk_i,
      .req_i   (bank_req[b]),
      .we_i    (bank_we[b]),
      .be_i    (bank_be[b]),
      .addr_i  (bank_addr[b]),
      .wdata_i (bank_wdata[b]),
      .rdata_o (bank_rdata[b])
    );
  end

  // event unit: ports B and C of a grouped unit do not take part
  logic [NumCores-1:0] eu_active;
  always_comb
    for (int i = 0; i < NumCores; i++)
      eu_active[i] = (i < NumGroups) ? 1'b1 : ~tmr_o[i % NumGroups];

  event_unit #(.NUM_PORTS(NumCores)) i_eu (
    .clk_i, .rst_ni,
    .active_i  (eu_active),
    .req_i     (eu_req),
    .rsp_o     (eu_rsp),
    .release_o (barrier_o)
  );

  periph_interconnect #(.NUM_MASTERS(NumCores + 1)) i_per_ic (
    .clk_i, .rst_ni,
    .mst_req_i  (per_req),
    .mst_rsp_o  (per_rsp),
    .odrg_req_o (odrg_cfg_req),
    .odrg_rsp_i (odrg_cfg_rsp),
    .ext_req_o,
    .ext_rsp_i
  );
endmodule
