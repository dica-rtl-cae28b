// dica_sf_mask -- stack-frame cleaner mask of the Memory Modification Tracker.
//
// The stack grows downwards. Everything between the stack-pointer limit SP_Lim
// (the lowest address the stack may use) and the current stack pointer SP is
// unallocated, so DTable bits there describe dead stack frames and need not be
// checkpointed. This block maps both addresses to DTable indices,
//   ID_SP    = (SP     - VM_MIN) >> BSS
//   ID_SPLim = (SP_Lim - VM_MIN) >> BSS
// and produces keep_mask, which is 1 for every index i with i <= ID_SPLim or
// i >= ID_SP and 0 for the indices strictly between them. The blocks that hold
// SP and SP_Lim themselves are kept, since they may be partly live.
//
// Purely combinational; the MMT ANDs keep_mask into the DTable every cycle.
//
// Interface: sp, sp_lim are byte addresses; id_sp and id_splim are clamped to
// 0 .. DT_SIZE, so an address below VM maps to 0 and one at or above the VM end
// maps to DT_SIZE (past the last block).
//
// The index formulas and the "0 between the two indices, 1 elsewhere" rule are
// the paper's (text and its stack-cleaning figure). The paper's written formula
// for the mask, (i <= ID_SP) or (i >= ID_SPLim) with the DTable cleared where it
// is 1, holds for every index once SP is above SP_Lim and would empty the whole
// table; this block therefore follows the text and figure.
// The clamping of out-of-range addresses is this design's choice.
module dica_sf_mask #(
  parameter int unsigned ADDR_W     = dica_pkg::ADDR_W_DEF,
  parameter int unsigned VM_MIN     = dica_pkg::VM_MIN_DEF,
  parameter int unsigned VM_SIZE    = dica_pkg::VM_SIZE_DEF,
  parameter int unsigned BLOCK_SIZE = dica_pkg::BLOCK_SIZE_DEF,
  localparam int unsigned DT_SIZE   = VM_SIZE / BLOCK_SIZE,
  localparam int unsigned IDX_W     = dica_pkg::idx_width(DT_SIZE)
) (
  input  logic [ADDR_W-1:0]  sp,
  input  logic [ADDR_W-1:0]  sp_lim,
  output logic [IDX_W-1:0]   id_sp,
  output logic [IDX_W-1:0]   id_splim,
  output logic [DT_SIZE-1:0] keep_mask
);
  localparam int unsigned BSS = $clog2(BLOCK_SIZE);

  // Clamped DTable index of a byte address.
  function automatic logic [IDX_W-1:0] block_index(input logic [ADDR_W-1:0] a);
    logic [31:0] rel;
    if (32'(a) < VM_MIN) return '0;
    if (32'(a) >= VM_MIN + VM_SIZE) return IDX_W'(DT_SIZE);
    rel = (32'(a) - VM_MIN) >> BSS;
    return IDX_W'(rel);
  endfunction

  assign id_sp    = block_index(sp);
  assign id_splim = block_index(sp_lim);

  always_comb begin
    for (int unsigned i = 0; i < DT_SIZE; i++) begin
      keep_mask[i] = (IDX_W'(i) <= id_splim) || (IDX_W'(i) >= id_sp);
    end
  end

  initial begin
    assert (BLOCK_SIZE == (1 << BSS)) else $error("BLOCK_SIZE must be a power of two");
    assert (VM_SIZE % BLOCK_SIZE == 0) else $error("VM_SIZE must be a multiple of BLOCK_SIZE");
  end
endmodule
