// event_unit: synchronisation of the cluster cores (barrier).
//
// One port per core. A read or write at offset 0x0 is a barrier arrival: it
// is granted at once, but its response (rvalid) is held back until every
// active port has arrived; then all waiting ports get their response in the
// same cycle and the barrier re-arms. Offset 0x4 reads the mask of active
// ports; other offsets read 0. Both answer the cycle after the grant.
// active_i comes from the ODRG units: in performance mode every core has its
// own port, in soft-error tolerant mode only port A of the group takes part.
// The described event unit manages synchronisation; this barrier is the
// simplest form of that and an own choice, as are the offsets.
module event_unit
  import odrg_pkg::*;
#(
  parameter int unsigned NUM_PORTS = NumCores
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic [NUM_PORTS-1:0] active_i,
  input  mem_req_t             req_i [NUM_PORTS],
  output mem_rsp_t             rsp_o [NUM_PORTS],
  output logic                 release_o
);
  logic [NUM_PORTS-1:0] arr_q, other_q, hit;
  logic [31:0]          rdata_q [NUM_PORTS];
  logic                 rel;

  always_comb
    for (int i = 0; i < NUM_PORTS; i++) hit[i] = req_i[i].req && req_i[i].addr[9:2] == 8'd0;

  assign rel = (arr_q != '0) && ((arr_q & active_i) == active_i);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      arr_q   <= '0;
      other_q <= '0;
      for (int i = 0; i < NUM_PORTS; i++) rdata_q[i] <= '0;
    end else begin
      for (int i = 0; i < NUM_PORTS; i++) begin
        if (rel)              arr_q[i] <= 1'b0;
        else if (hit[i])      arr_q[i] <= 1'b1;
        else if (!active_i[i]) arr_q[i] <= 1'b0;
        other_q[i] <= req_i[i].req && !hit[i] && !arr_q[i];
        rdata_q[i] <= (req_i[i].addr[9:2] == 8'd1 && !req_i[i].we) ? 32'(active_i) : '0;
      end
    end
  end

  always_comb begin
    for (int i = 0; i < NUM_PORTS; i++) begin
      // a port waiting at the barrier takes no new request
      rsp_o[i].gnt    = req_i[i].req && !arr_q[i];
      rsp_o[i].rvalid = other_q[i] || (rel && arr_q[i]);
      rsp_o[i].rdata  = other_q[i] ? rdata_q[i] : '0;
    end
  end

  assign release_o = rel;
endmodule
