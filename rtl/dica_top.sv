// dica_top -- DiCA differential checkpoint assistant, complete hardware.
//
// Sits beside an MSP430-class CPU. The Memory Modification Tracker (dica_mmt)
// watches the CPU's data-memory writes and stack pointer and keeps the DTable,
// one dirty bit per VM block, with de-allocated stack frames cleared. The
// Voltage Threshold Tracker (dica_vtt) counts dirty blocks (n_d), turns the
// count into V_ths = V_MIN + n_d * lambda, and raises nmi when the supply
// reading falls below V_ths, leaving just enough charge for the checkpoint
// routine to copy the dirty blocks to non-volatile memory. The software
// interface (dica_regs) lets the routine read the DTable, clear the tracker
// after a restore, and set lambda and SP_Lim.
//
// Interface:
//   cpu_wen/cpu_daddr  data-memory write strobe and byte address, sampled at
//                      the rising edge of clk (for openMSP430:
//                      wen = ~dmem_cen & ~&dmem_wen, daddr = byte address)
//   cpu_sp             current stack pointer (register R1)
//   v_supply           digital supply reading, V_W-bit code (100 uV/code)
//   per_*              openMSP430-style 16-bit peripheral bus, see dica_regs
//   nmi                checkpoint interrupt, a level (IT_sig)
//   dtable, n_d, vths  tracker state, for observation
// Latency: a write shows in dtable and n_d one cycle later; V_ths then moves
// by lambda per cycle until n_d' = n_d; nmi follows v_supply < V_ths one cycle
// later.
//
// What follows the paper: the DTable set/clear rules, the stack-frame mask, the
// n_d counter, the addition-only V_ths and the comparator. This design's own:
// the bus and register map, the voltage code scale, the reset values and the
// VM base address (see dica_pkg).
module dica_top #(
  parameter int unsigned ADDR_W     = dica_pkg::ADDR_W_DEF,
  parameter int unsigned VM_MIN     = dica_pkg::VM_MIN_DEF,
  parameter int unsigned VM_SIZE    = dica_pkg::VM_SIZE_DEF,
  parameter int unsigned BLOCK_SIZE = dica_pkg::BLOCK_SIZE_DEF,
  parameter int unsigned V_W        = dica_pkg::V_W_DEF,
  parameter int unsigned V_MIN      = dica_pkg::V_MIN_DEF,
  parameter int unsigned V_FULL     = dica_pkg::V_FULL_DEF,
  parameter int unsigned BASE_ADDR  = 32'h0190,
  localparam int unsigned DT_SIZE   = VM_SIZE / BLOCK_SIZE,
  localparam int unsigned IDX_W     = dica_pkg::idx_width(DT_SIZE),
  localparam int unsigned VTH_W     = V_W + IDX_W
) (
  input  logic               clk,
  input  logic               rst_n,
  // CPU monitoring
  input  logic               cpu_wen,
  input  logic [ADDR_W-1:0]  cpu_daddr,
  input  logic [ADDR_W-1:0]  cpu_sp,
  // supply reading
  input  logic [V_W-1:0]     v_supply,
  // peripheral bus
  input  logic [13:0]        per_addr,
  input  logic [15:0]        per_din,
  input  logic               per_en,
  input  logic [1:0]         per_we,
  output logic [15:0]        per_dout,
  // interrupt and observation
  output logic               nmi,
  output logic [DT_SIZE-1:0] dtable,
  output logic [IDX_W-1:0]   n_d,
  output logic [VTH_W-1:0]   vths
);
  logic              clr;
  logic [V_W-1:0]    lambda;
  logic [ADDR_W-1:0] sp_lim;
  logic              set_new;
  logic [IDX_W-1:0]  id_sp, id_splim;
  logic              settled;

  dica_mmt #(
    .ADDR_W(ADDR_W), .VM_MIN(VM_MIN), .VM_SIZE(VM_SIZE), .BLOCK_SIZE(BLOCK_SIZE)
  ) u_mmt (
    .clk(clk), .rst_n(rst_n), .clr(clr),
    .wen(cpu_wen), .daddr(cpu_daddr), .sp(cpu_sp), .sp_lim(sp_lim),
    .dtable(dtable), .set_new(set_new), .id_sp(id_sp), .id_splim(id_splim)
  );

  dica_vtt #(.DT_SIZE(DT_SIZE), .V_W(V_W), .V_MIN(V_MIN)) u_vtt (
    .clk(clk), .rst_n(rst_n), .clr(clr), .inc(set_new),
    .id_sp(id_sp), .id_splim(id_splim), .lambda(lambda), .v_supply(v_supply),
    .n_d(n_d), .id_d(), .n_d_shadow(), .vths(vths),
    .settled(settled), .it_sig(nmi)
  );

  dica_regs #(
    .ADDR_W(ADDR_W), .BASE_ADDR(BASE_ADDR), .DT_SIZE(DT_SIZE), .V_W(V_W),
    .LAMBDA_RST((V_FULL - V_MIN) / DT_SIZE), .SPLIM_RST(VM_MIN + VM_SIZE)
  ) u_regs (
    .clk(clk), .rst_n(rst_n),
    .per_addr(per_addr), .per_din(per_din), .per_en(per_en), .per_we(per_we),
    .per_dout(per_dout),
    .clr(clr), .lambda(lambda), .sp_lim(sp_lim),
    .dtable(dtable), .n_d(n_d), .vths(vths), .settled(settled), .it_sig(nmi)
  );
endmodule
