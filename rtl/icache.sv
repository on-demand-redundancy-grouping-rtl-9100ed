// icache: instruction cache shared by the cluster cores.
//
// One cache serves all NUM_PORTS fetch ports. Tags and data are held in
// register arrays that every port reads in parallel, so any number of ports
// can hit in the same cycle: a hit is granted in the request cycle and its
// instruction word returns the next cycle. A miss is not granted; one
// missing port at a time (round-robin) gets its line refilled over the refill
// port, which fetches the LINE_WORDS words one after another (req/addr until
// gnt, then wait for rvalid, any latency). When the line is written the
// waiting port hits. Direct-mapped, no invalidation. Only the existence of a
// shared instruction cache refilled from the cluster bus follows the
// described cluster (which calls it hierarchical); organisation and sizes are
// own choices.
module icache
  import odrg_pkg::*;
#(
  parameter int unsigned NUM_PORTS  = NumCores,
  parameter int unsigned LINES      = 64,
  parameter int unsigned LINE_WORDS = 4,
  localparam int unsigned OW        = $clog2(LINE_WORDS),
  localparam int unsigned XW        = $clog2(LINES),
  localparam int unsigned TW        = 32 - 2 - OW - XW,
  localparam int unsigned PW        = (NUM_PORTS > 1) ? $clog2(NUM_PORTS) : 1
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  instr_req_t  req_i [NUM_PORTS],
  output instr_rsp_t  rsp_o [NUM_PORTS],
  // refill port (to the cluster AXI bus / L2)
  output logic        refill_req_o,
  output logic [31:0] refill_addr_o,
  input  logic        refill_gnt_i,
  input  logic        refill_rvalid_i,
  input  logic [31:0] refill_rdata_i,
  // statistics
  output logic        miss_o
);
  typedef enum logic [1:0] {RfIdle, RfReq, RfWait} rf_e;

  logic [TW-1:0]  tag_q   [LINES];
  logic           valid_q [LINES];
  logic [31:0]    data_q  [LINES][LINE_WORDS];

  logic [NUM_PORTS-1:0] hit, miss;
  logic [31:0]    rdata_q [NUM_PORTS];
  logic           rv_q    [NUM_PORTS];

  rf_e            rf_q;
  logic [29-OW:0] line_q;        // line address being refilled
  logic [OW-1:0]  cnt_q;
  logic [PW-1:0]  prio_q;
  logic [31:0]    buf_q [LINE_WORDS];

  function automatic logic [XW-1:0] idx_of(logic [31:0] a);
    return a[2+OW +: XW];
  endfunction
  function automatic logic [TW-1:0] tag_of(logic [31:0] a);
    return a[31 -: TW];
  endfunction

  always_comb begin
    for (int p = 0; p < NUM_PORTS; p++) begin
      hit[p]  = req_i[p].req && valid_q[idx_of(req_i[p].addr)]
                && tag_q[idx_of(req_i[p].addr)] == tag_of(req_i[p].addr);
      miss[p] = req_i[p].req && !hit[p];
      rsp_o[p].gnt    = hit[p];
      rsp_o[p].rvalid = rv_q[p];
      rsp_o[p].rdata  = rdata_q[p];
    end
  end

  // round-robin choice of the next port to refill
  logic [PW-1:0] pick;
  logic          pick_any;
  always_comb begin
    pick     = '0;
    pick_any = 1'b0;
    for (int k = 0; k < NUM_PORTS; k++) begin
      int unsigned p;
      p = (int'(prio_q) + k) % NUM_PORTS;
      if (!pick_any && miss[p]) begin
        pick_any = 1'b1;
        pick     = PW'(p);
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int l = 0; l < LINES; l++) valid_q[l] <= 1'b0;
      for (int p = 0; p < NUM_PORTS; p++) begin
        rv_q[p]    <= 1'b0;
        rdata_q[p] <= '0;
      end
      rf_q   <= RfIdle;
      line_q <= '0;
      cnt_q  <= '0;
      prio_q <= '0;
    end else begin
      for (int p = 0; p < NUM_PORTS; p++) begin
        rv_q[p]    <= hit[p];
        rdata_q[p] <= hit[p] ? data_q[idx_of(req_i[p].addr)][req_i[p].addr[2 +: OW]] : '0;
      end
      unique case (rf_q)
        RfIdle: if (pick_any) begin
          rf_q   <= RfReq;
          line_q <= req_i[pick].addr[31:2+OW];
          cnt_q  <= '0;
          prio_q <= PW'((int'(pick) + 1) % NUM_PORTS);
        end
        RfReq: if (refill_gnt_i) rf_q <= RfWait;
        RfWait: if (refill_rvalid_i) begin
          buf_q[cnt_q] <= refill_rdata_i;
          if (cnt_q == OW'(LINE_WORDS - 1)) begin
            rf_q <= RfIdle;
            valid_q[line_q[XW-1:0]] <= 1'b1;
            tag_q[line_q[XW-1:0]]   <= line_q[XW +: TW];
            for (int w = 0; w < LINE_WORDS - 1; w++) data_q[line_q[XW-1:0]][w] <= buf_q[w];
            data_q[line_q[XW-1:0]][LINE_WORDS-1] <= refill_rdata_i;
          end else begin
            cnt_q <= cnt_q + 1'b1;
            rf_q  <= RfReq;
          end
        end
        default: rf_q <= RfIdle;
      endcase
    end
  end

  assign refill_req_o  = (rf_q == RfReq);
  assign refill_addr_o = {line_q, cnt_q, 2'b00};
  assign miss_o        = (rf_q == RfIdle) && pick_any;
endmodule
