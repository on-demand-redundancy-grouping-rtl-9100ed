// core_demux: splits one core data port by address.
//
// Target 0 is the TCDM (TcdmBase, 64 KiB), target 1 the event unit (EuBase,
// 1 KiB) and target 2 the peripheral interconnect (every other address).
// The request goes to exactly one target; its gnt comes back. The demux keeps
// one request outstanding and remembers where it went, so the response
// (rvalid/rdata) is taken from that target only; a new request can be granted
// in the cycle the previous response returns. Demultiplexing the core data
// port follows the described cluster; the address map is an own choice.
// The lint tool reports UNOPTFLAT through this module in the full cluster: it
// tracks the response arrays of the interconnect as whole variables, so the
// path from a response's rvalid (registered in the interconnect) to the next
// request looks circular. No bit-level combinational loop exists.
module core_demux
  import odrg_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  mem_req_t core_req_i,
  output mem_rsp_t core_rsp_o,
  output mem_req_t tcdm_req_o,
  input  mem_rsp_t tcdm_rsp_i,
  output mem_req_t eu_req_o,
  input  mem_rsp_t eu_rsp_i,
  output mem_req_t per_req_o,
  input  mem_rsp_t per_rsp_i
);
  typedef enum logic [1:0] {TgtTcdm, TgtEu, TgtPer} tgt_e;

  tgt_e     sel, out_q;
  logic     busy_q, resp, free, gnt, gnt_sel;
  mem_rsp_t rsp_sel;

  always_comb begin
    if (core_req_i.addr[31:16] == TcdmBase[31:16])    sel = TgtTcdm;
    else if (core_req_i.addr[31:10] == EuBase[31:10]) sel = TgtEu;
    else                                              sel = TgtPer;
  end

  always_comb begin
    unique case (out_q)
      TgtTcdm: rsp_sel = tcdm_rsp_i;
      TgtEu:   rsp_sel = eu_rsp_i;
      default: rsp_sel = per_rsp_i;
    endcase
    resp = busy_q & rsp_sel.rvalid;
    free = ~busy_q | resp;
  end

  always_comb begin
    tcdm_req_o     = core_req_i;
    eu_req_o       = core_req_i;
    per_req_o      = core_req_i;
    tcdm_req_o.req = core_req_i.req & free & (sel == TgtTcdm);
    eu_req_o.req   = core_req_i.req & free & (sel == TgtEu);
    per_req_o.req  = core_req_i.req & free & (sel == TgtPer);
    unique case (sel)
      TgtTcdm: gnt_sel = tcdm_rsp_i.gnt;
      TgtEu:   gnt_sel = eu_rsp_i.gnt;
      default: gnt_sel = per_rsp_i.gnt;
    endcase
    gnt = gnt_sel & core_req_i.req & free;
    core_rsp_o.gnt    = gnt;
    core_rsp_o.rvalid = resp;
    core_rsp_o.rdata  = resp ? rsp_sel.rdata : '0;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q <= 1'b0;
      out_q  <= TgtTcdm;
    end else begin
      if (gnt) begin
        busy_q <= 1'b1;
        out_q  <= sel;
      end else if (resp) begin
        busy_q <= 1'b0;
      end
    end
  end
endmodule
