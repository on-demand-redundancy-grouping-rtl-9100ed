// core_model: transaction-level stand-in for one cluster core (not RTL).
//
// It runs a fixed data-parallel kernel over the core interface of the
// cluster, so the ODRG units can be exercised without a real processor:
//   * after reset it reads the event unit's active mask to learn how many
//     cores share the work (6 in performance mode, 2 when both groups are in
//     soft-error tolerant mode) and its rank among them;
//   * item j (j = rank, rank + n, ...): fetch 4 instruction words at
//     PC = boot + (16 * j) mod 256 (a loop body that fits the cache) (each checked against ifetch_word), load
//     IN[j], store OUT[j] = IN[j] * r1 + last word + r0, and every 8 items
//     meet the other cores at the barrier;
//   * when irq is seen between items it runs the re-synchronisation routine:
//     store r0..r7 and the item index (standing for MEPC) below its stack
//     pointer, write the stack pointer to SP_STORE of its ODRG unit, read it
//     back, reload the registers from there and write RELOAD_DONE.
// With mat_n_i = N > 0 it runs a 32-bit N x N matrix multiplication
// instead: C[i][k] = sum_l A[i][l] * B[l][k], output elements e = rank,
// rank + n, ... (A at 0x1000_0000, B at +4*N*N, C at +8*N*N), one
// instruction word fetched per multiply-accumulate from an 8-word loop body,
// a barrier at the end.
// With conv_i set as well it runs a 16-bit 2D convolution instead: an N x N
// image of unsigned halfwords (two per word, at 0x1000_0000), a 3 x 3 filter
// of halfwords read once into the core at ConvFilt, and (N-2) x (N-2) 32-bit
// outputs at ConvOut; output pixel e = rank, rank + n, ... costs nine
// instruction fetches and nine image loads.
// Its behaviour depends only on its inputs, so three grouped copies stay in
// lock-step. flip_i is XORed onto its outputs (an SEU at the interface);
// corrupt_i flips a bit of r0 (an SEU in the register file). Requests are
// driven at the falling clock edge and grants/responses sampled just after
// it. Timing of this model has nothing to do with a real core.
module core_model
  import odrg_pkg::*;
#(
  parameter int unsigned TOTAL = 96
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  core_in_t   in_i,
  output core_out_t  out_o,
  input  core_out_t  flip_i,
  input  logic       corrupt_i,
  input  int         mat_n_i,
  input  logic       conv_i,
  output logic       done_o,
  output int         errors_o,
  output int         resyncs_o
);
  localparam logic [31:0] InBase  = TcdmBase + 32'h0000_2000;
  localparam logic [31:0] OutBase = TcdmBase + 32'h0000_4000;
  localparam logic [31:0] K0 = 32'h0000_1357, K1 = 32'h0000_0003;
  localparam logic [31:0] ConvFilt = TcdmBase + 32'h0000_3000;
  localparam logic [31:0] ConvOut  = TcdmBase + 32'h0000_4000;

  core_out_t   o;
  logic [31:0] r [8];
  logic [31:0] sp;

  assign out_o = o ^ flip_i;

  function automatic logic [31:0] ifetch_word(logic [31:0] a);
    return (a * 32'h9e37_79b9) ^ 32'h1234_5678;
  endfunction

  always @(posedge clk_i) if (corrupt_i) r[0] <= r[0] ^ 32'h0000_0020;
  always @(posedge clk_i) if (corrupt_i && mat_n_i > 0) r[2] <= r[2] ^ 32'h0000_0100;

  task automatic bus(input logic we, input logic [31:0] addr, input logic [31:0] wdata,
                     output logic [31:0] rdata);
    @(negedge clk_i);
    o.data = '{req: 1'b1, we: we, be: 4'hf, addr: addr, wdata: wdata};
    #1;
    while (!in_i.data.gnt) begin @(negedge clk_i); #1; end
    @(negedge clk_i);
    o.data = '0;
    #1;
    while (!in_i.data.rvalid) begin @(negedge clk_i); #1; end
    rdata = in_i.data.rdata;
  endtask

  task automatic fetch(input logic [31:0] pc, output logic [31:0] w);
    @(negedge clk_i);
    o.instr = '{req: 1'b1, addr: pc};
    #1;
    while (!in_i.instr.gnt) begin @(negedge clk_i); #1; end
    @(negedge clk_i);
    o.instr = '0;
    #1;
    while (!in_i.instr.rvalid) begin @(negedge clk_i); #1; end
    w = in_i.instr.rdata;
    if (w !== ifetch_word(pc)) errors_o++;
  endtask

  task automatic resync(inout int j);
    logic [31:0] d, base, cfg;
    cfg = OdrgCfgBase + OdrgCfgStep * (in_i.hart_id % NumGroups);
    for (int i = 0; i < 8; i++) bus(1'b1, sp - 32'(4 * (9 - i)), r[i], d);
    bus(1'b1, sp - 4, 32'(j), d);
    bus(1'b1, cfg + 32'h8, sp - 36, d);        // SP_STORE: unload complete
    bus(1'b0, cfg + 32'h8, 0, base);           // reload from the stored SP
    for (int i = 0; i < 8; i++) begin
      bus(1'b0, base + 32'(4 * i), 0, d);
      r[i] = d;
    end
    bus(1'b0, base + 32, 0, d);
    j = int'(d);
    bus(1'b1, cfg + 32'hC, 1, d);              // RELOAD_DONE
    resyncs_o++;
  endtask

  initial begin
    logic [31:0] d, w, mask, boot, x;
    int n, rank, j, cnt;
    o = '0; done_o = 0; errors_o = 0; resyncs_o = 0;
    forever begin
      o = '0;
      done_o = 0;
      wait (rst_ni === 1'b1);
      boot = in_i.boot_addr;
      sp = TcdmBase + 32'h0000_E000 + 32'h100 * in_i.hart_id;
      r[0] = K0; r[1] = K1;
      for (int i = 2; i < 8; i++) r[i] = '0;
      bus(1'b0, EuBase + 4, 0, mask);
      n = $countones(mask);
      rank = $countones(mask & ((32'd1 << in_i.hart_id) - 1));
      j = rank; cnt = 0;
      if (conv_i && mat_n_i > 2) begin
        logic [31:0] acc, pv;
        logic [15:0] f [9];
        int nn, m, p;
        nn = mat_n_i;
        m = nn - 2;
        for (int t = 0; t < 9; t++) begin
          bus(1'b0, ConvFilt + 32'(4 * (t / 2)), 0, pv);
          f[t] = pv[16 * (t % 2) +: 16];
        end
        while (j < m * m) begin
          if (in_i.irq) resync(j);
          acc = r[2];
          for (int t = 0; t < 9; t++) begin
            fetch(boot + 32'(4 * t), w);
            p = (j / m + t / 3) * nn + (j % m) + t % 3;
            bus(1'b0, TcdmBase + 32'(4 * (p / 2)), 0, pv);
            acc = acc + {16'b0, pv[16 * (p % 2) +: 16]} * {16'b0, f[t]};
          end
          bus(1'b1, ConvOut + 32'(4 * j), acc, x);
          j += n;
        end
      end else if (mat_n_i > 0) begin
        logic [31:0] acc, av, bv;
        int nn;
        nn = mat_n_i;
        while (j < nn * nn) begin
          if (in_i.irq) resync(j);
          acc = r[2];                               // r2 = 0 (accumulator base)
          for (int l = 0; l < nn; l++) begin
            fetch(boot + 32'(4 * (l % 8)), w);
            bus(1'b0, TcdmBase + 32'(4 * ((j / nn) * nn + l)), 0, av);
            bus(1'b0, TcdmBase + 32'(4 * (nn * nn + l * nn + (j % nn))), 0, bv);
            acc = acc + av * bv;
          end
          bus(1'b1, TcdmBase + 32'(4 * (2 * nn * nn + j)), acc, x);
          j += n;
        end
      end else
      while (j < TOTAL) begin
        if (in_i.irq) resync(j);
        for (int q = 0; q < 4; q++) fetch(boot + ((32'(16 * j) + 32'(4 * q)) & 32'hFF), w);
        bus(1'b0, InBase + 32'(4 * j), 0, x);
        d = x * r[1] + w + r[0];
        bus(1'b1, OutBase + 32'(4 * j), d, x);
        r[2 + (j % 6)] = r[2 + (j % 6)] + d;
        j += n; cnt++;
        if (cnt % 8 == 0) bus(1'b1, EuBase, 0, x);
      end
      bus(1'b1, EuBase, 0, x);                   // final barrier
      done_o = 1;
      wait (rst_ni === 1'b0);
    end
  end
endmodule
