// odrg_regs: configuration and status registers of one ODRG unit.
//
// Reached over the unit's peripheral port (from the host or the cores). The
// register set follows the described unit: grouping on/off, delay of the
// re-synchronisation, the stack pointer saved during re-synchronisation and
// one mismatch counter per core. The offsets, the reload-done strobe and the
// counter behaviour (saturating, cleared by any write) are own choices:
//   0x00 MODE        RW bit0 = group the three cores (soft-error tolerant)
//   0x04 DELAY       RW bit0 = delay re-synchronisation
//   0x08 SP_STORE    RW stack pointer; a write ends the unload phase
//   0x0C RELOAD_DONE W  any write ends the reload phase (reads 0)
//   0x10 STATUS      RO {29'b0, pending, state[1:0]}
//   0x14..0x1C CNT_A/B/C  mismatch counters, a write clears
// Timing: gnt in the request cycle, rvalid/rdata one cycle later. Byte
// enables are ignored (word registers).
module odrg_regs
  import odrg_pkg::*;
#(
  parameter int unsigned CNT_W = 32
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  mem_req_t    req_i,
  output mem_rsp_t    rsp_o,
  output logic        tmr_en_o,
  output logic        delay_resync_o,
  output logic        sp_we_o,
  output logic        done_we_o,
  input  logic [2:0]  mismatch_i,
  input  odrg_state_e state_i,
  input  logic        pending_i
);
  logic             mode_q, delay_q;
  logic [31:0]      sp_q;
  logic [CNT_W-1:0] cnt_q [3];
  logic             rvalid_q;
  logic [31:0]      rdata_q, rdata_d;
  logic [5:0]       word;
  logic             wr, rd;

  assign word = req_i.addr[7:2];
  assign wr   = req_i.req &  req_i.we;
  assign rd   = req_i.req & ~req_i.we;

  always_comb begin
    rdata_d = '0;
    unique case (word)
      RegMode:    rdata_d = {31'b0, mode_q};
      RegDelay:   rdata_d = {31'b0, delay_q};
      RegSpStore: rdata_d = sp_q;
      RegStatus:  rdata_d = {29'b0, pending_i, state_i};
      RegCntA:    rdata_d = 32'(cnt_q[0]);
      RegCntB:    rdata_d = 32'(cnt_q[1]);
      RegCntC:    rdata_d = 32'(cnt_q[2]);
      default:    rdata_d = '0;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mode_q   <= 1'b0;
      delay_q  <= 1'b0;
      sp_q     <= '0;
      cnt_q    <= '{default: '0};
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      rvalid_q <= req_i.req;
      rdata_q  <= rd ? rdata_d : '0;
      if (wr && word == RegMode)    mode_q  <= req_i.wdata[0];
      if (wr && word == RegDelay)   delay_q <= req_i.wdata[0];
      if (wr && word == RegSpStore) sp_q    <= req_i.wdata;
      for (int i = 0; i < 3; i++) begin
        if (wr && word == RegCntA + 6'(i)) cnt_q[i] <= '0;
        else if (mismatch_i[i] && cnt_q[i] != '1) cnt_q[i] <= cnt_q[i] + 1'b1;
      end
    end
  end

  assign rsp_o.gnt      = req_i.req;
  assign rsp_o.rvalid   = rvalid_q;
  assign rsp_o.rdata    = rdata_q;
  assign tmr_en_o       = mode_q;
  assign delay_resync_o = delay_q;
  assign sp_we_o        = wr && word == RegSpStore;
  assign done_we_o      = wr && word == RegDone;
endmodule
