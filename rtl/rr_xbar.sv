// rr_xbar: request/response crossbar with round-robin priority per target.
//
// NUM_IN masters each present a request and the index of the target it is
// for (decoded outside). For every target an arbiter grants one of the
// masters requesting it; priority rotates so that the master after the last
// winner is served first. The target's gnt is passed back to the winner and
// the winner's index is remembered for one cycle so that the response
// (rvalid, rdata), which every target must return exactly one cycle after its
// grant, reaches the right master. Several targets can serve different
// masters in the same cycle. The round-robin crossbar follows the described
// logarithmic interconnect; the pointer rule is an own choice.
module rr_xbar
  import odrg_pkg::*;
#(
  parameter int unsigned NUM_IN  = 8,
  parameter int unsigned NUM_OUT = 16,
  localparam int unsigned OW     = (NUM_OUT > 1) ? $clog2(NUM_OUT) : 1,
  localparam int unsigned IW     = (NUM_IN  > 1) ? $clog2(NUM_IN)  : 1
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  mem_req_t      in_req_i  [NUM_IN],
  input  logic [OW-1:0] in_tgt_i  [NUM_IN],
  output mem_rsp_t      in_rsp_o  [NUM_IN],
  output mem_req_t      out_req_o [NUM_OUT],
  input  mem_rsp_t      out_rsp_i [NUM_OUT]
);
  logic [IW-1:0] prio_q   [NUM_OUT];
  logic [IW-1:0] win      [NUM_OUT];
  logic          any      [NUM_OUT];
  logic [IW-1:0] src_q    [NUM_OUT];
  logic          pend_q   [NUM_OUT];

  // arbitration
  always_comb begin
    for (int o = 0; o < NUM_OUT; o++) begin
      any[o] = 1'b0;
      win[o] = '0;
      for (int k = 0; k < NUM_IN; k++) begin
        int unsigned i;
        i = (int'(prio_q[o]) + k) % NUM_IN;
        if (!any[o] && in_req_i[i].req && int'(in_tgt_i[i]) == o) begin
          any[o] = 1'b1;
          win[o] = IW'(i);
        end
      end
      out_req_o[o]     = in_req_i[win[o]];
      out_req_o[o].req = any[o];
    end
  end

  // grant and response routing (written without indexed writes, so that a
  // master's response does not structurally depend on the arbitration)
  always_comb begin
    for (int i = 0; i < NUM_IN; i++) begin
      in_rsp_o[i] = '0;
      for (int o = 0; o < NUM_OUT; o++) begin
        if (any[o] && int'(win[o]) == i && out_rsp_i[o].gnt) in_rsp_o[i].gnt = 1'b1;
        if (pend_q[o] && int'(src_q[o]) == i && out_rsp_i[o].rvalid) begin
          in_rsp_o[i].rvalid = 1'b1;
          in_rsp_o[i].rdata  = out_rsp_i[o].rdata;
        end
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int o = 0; o < NUM_OUT; o++) begin
        prio_q[o] <= '0;
        src_q[o]  <= '0;
        pend_q[o] <= 1'b0;
      end
    end else begin
      for (int o = 0; o < NUM_OUT; o++) begin
        pend_q[o] <= any[o] && out_rsp_i[o].gnt;
        if (any[o] && out_rsp_i[o].gnt) begin
          src_q[o]  <= win[o];
          prio_q[o] <= IW'((int'(win[o]) + 1) % NUM_IN);
        end
      end
    end
  end

  // every target answers exactly one cycle after its grant
  for (genvar o = 0; o < NUM_OUT; o++) begin : g_chk
    a_rsp_after_gnt : assert property (@(posedge clk_i) disable iff (!rst_ni)
      out_rsp_i[o].rvalid |-> pend_q[o]);
  end
endmodule
