// periph_interconnect: cores and host to the cluster peripherals.
//
// Masters: the six core ports (after their demux) and the host's AXI slave
// port. Targets: the configuration port of ODRG unit 0 (OdrgCfgBase), of
// ODRG unit 1 (OdrgCfgBase + 0x100) and one external port for every other
// address (timer, DMA configuration, path to the host). Built on rr_xbar, so
// each target is arbitrated round-robin and must answer one cycle after its
// grant. Only the existence of this interconnect and the ODRG ports on it
// follow the described cluster; decoding and arbitration are own choices.
module periph_interconnect
  import odrg_pkg::*;
#(
  parameter int unsigned NUM_MASTERS = NumCores + 1
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  mem_req_t mst_req_i [NUM_MASTERS],
  output mem_rsp_t mst_rsp_o [NUM_MASTERS],
  output mem_req_t odrg_req_o [NumGroups],
  input  mem_rsp_t odrg_rsp_i [NumGroups],
  output mem_req_t ext_req_o,
  input  mem_rsp_t ext_rsp_i
);
  localparam int unsigned NumTgt = NumGroups + 1;
  localparam int unsigned TW     = $clog2(NumTgt);

  logic [TW-1:0] tgt  [NUM_MASTERS];
  mem_req_t      treq [NumTgt];
  mem_rsp_t      trsp [NumTgt];

  always_comb begin
    for (int m = 0; m < NUM_MASTERS; m++) begin
      tgt[m] = TW'(NumGroups);   // external
      for (int g = 0; g < NumGroups; g++)
        if (mst_req_i[m].addr[31:8] == OdrgCfgBase[31:8] + 24'(g)) tgt[m] = TW'(g);
    end
  end

  rr_xbar #(.NUM_IN(NUM_MASTERS), .NUM_OUT(NumTgt)) i_xbar (
    .clk_i, .rst_ni,
    .in_req_i  (mst_req_i),
    .in_tgt_i  (tgt),
    .in_rsp_o  (mst_rsp_o),
    .out_req_o (treq),
    .out_rsp_i (trsp)
  );

  always_comb begin
    for (int g = 0; g < NumGroups; g++) begin
      odrg_req_o[g] = treq[g];
      trsp[g]       = odrg_rsp_i[g];
    end
    ext_req_o       = treq[NumGroups];
    trsp[NumGroups] = ext_rsp_i;
  end
endmodule
