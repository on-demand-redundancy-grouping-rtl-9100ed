// odrg_pkg: types and constants shared by the ODRG cluster.
//
// The cluster has six 32-bit cores grouped into two On-Demand Redundancy
// Grouping (ODRG) units of three, a 64 KiB TCDM in 16 word-interleaved banks
// and a peripheral interconnect. These numbers follow the described cluster.
// Bus encodings, the address map and the register offsets are this design's
// own choice.
//
// All request/response buses use one protocol: the master holds req (with
// we/be/addr/wdata) until gnt; the read data arrives with rvalid exactly one
// cycle after the grant (writes also get an rvalid, with rdata 0).
package odrg_pkg;

  localparam int unsigned NumCores     = 6;
  localparam int unsigned GroupSize    = 3;
  localparam int unsigned NumGroups    = NumCores / GroupSize;
  localparam int unsigned NumBanks     = 16;
  localparam int unsigned TcdmBytes    = 64 * 1024;
  localparam int unsigned BankWords    = TcdmBytes / (NumBanks * 4);

  // address map (own choice, PULP-like)
  localparam logic [31:0] TcdmBase     = 32'h1000_0000;
  localparam logic [31:0] EuBase       = 32'h1020_4000;   // event unit, 1 KiB
  localparam logic [31:0] OdrgCfgBase  = 32'h1020_1000;   // ODRG g at +0x100*g
  localparam logic [31:0] OdrgCfgStep  = 32'h0000_0100;

  // ODRG register word offsets (byte address bits [7:2])
  localparam logic [5:0] RegMode       = 6'd0;  // 0x00 bit0: group (TMR)
  localparam logic [5:0] RegDelay      = 6'd1;  // 0x04 bit0: delay resync
  localparam logic [5:0] RegSpStore    = 6'd2;  // 0x08 stored stack pointer
  localparam logic [5:0] RegDone       = 6'd3;  // 0x0C write: reload done
  localparam logic [5:0] RegStatus     = 6'd4;  // 0x10 {pending, state}
  localparam logic [5:0] RegCntA       = 6'd5;  // 0x14 mismatch count core A
  localparam logic [5:0] RegCntB       = 6'd6;  // 0x18 core B
  localparam logic [5:0] RegCntC       = 6'd7;  // 0x1C core C

  typedef struct packed {
    logic        req;
    logic        we;
    logic [3:0]  be;
    logic [31:0] addr;
    logic [31:0] wdata;
  } mem_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } mem_rsp_t;

  typedef struct packed {
    logic        req;
    logic [31:0] addr;
  } instr_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } instr_rsp_t;

  // everything a core drives towards the cluster (what the voter sees)
  typedef struct packed {
    instr_req_t  instr;
    mem_req_t    data;
  } core_out_t;

  // everything the cluster drives into a core
  typedef struct packed {
    instr_rsp_t  instr;
    mem_rsp_t    data;
    logic        irq;
    logic [31:0] hart_id;
    logic [31:0] boot_addr;
  } core_in_t;

  localparam int unsigned CoreOutW = $bits(core_out_t);

  typedef enum logic [1:0] {
    StPerf      = 2'd0,   // performance: three independent cores
    StTmrRun    = 2'd1,   // soft-error tolerant, normal operation
    StTmrUnload = 2'd2,   // resync: cores store their state through the voter
    StTmrReload = 2'd3    // resync: cores load the voted state back
  } odrg_state_e;

endpackage
