// dica_mmt -- Memory Modification Tracker (MMT) with stack-frame cleaner.
//
// Volatile memory [VM_MIN, VM_MIN+VM_SIZE) is cut into DT_SIZE blocks of
// BLOCK_SIZE bytes. The DTable holds one dirty bit per block. Every cycle in
// which the CPU writes (wen = 1) to an address daddr inside VM, the bit
//   Addr = (daddr - VM_MIN) >> BSS,   BSS = log2(BLOCK_SIZE)
// is set. At the same time the bits of de-allocated stack frames, those
// strictly between the SP_Lim block and the SP block (see dica_sf_mask), are
// cleared. clr (software clear command or boot) empties the whole table.
// Priority per bit: clr, then stack-frame clear, then set, else hold.
//
// Timing: wen/daddr/sp are sampled at the rising clock edge; the DTable shows
// the write one cycle later. set_new is a combinational strobe, high in the
// cycle of a write that turns a clean, live (not stack-cleared) block dirty;
// the n_d counter counts these. id_sp/id_splim are passed on to the counter.
//
// The address-to-index rule and the set/clear/reset behaviour follow the
// paper's MMT definitions. The reset being asynchronous and active-low, the
// extra software clear input and the set_new strobe qualified by the cleaner
// mask are this design's choices.
module dica_mmt #(
  parameter int unsigned ADDR_W     = dica_pkg::ADDR_W_DEF,
  parameter int unsigned VM_MIN     = dica_pkg::VM_MIN_DEF,
  parameter int unsigned VM_SIZE    = dica_pkg::VM_SIZE_DEF,
  parameter int unsigned BLOCK_SIZE = dica_pkg::BLOCK_SIZE_DEF,
  localparam int unsigned DT_SIZE   = VM_SIZE / BLOCK_SIZE,
  localparam int unsigned IDX_W     = dica_pkg::idx_width(DT_SIZE)
) (
  input  logic               clk,
  input  logic               rst_n,     // asynchronous reset, clears the DTable
  input  logic               clr,       // synchronous clear of the DTable
  input  logic               wen,       // CPU data-memory write enable (W_en)
  input  logic [ADDR_W-1:0]  daddr,     // CPU data address, bytes (D_addr)
  input  logic [ADDR_W-1:0]  sp,        // CPU stack pointer
  input  logic [ADDR_W-1:0]  sp_lim,    // lowest address usable by the stack
  output logic [DT_SIZE-1:0] dtable,
  output logic               set_new,   // this write dirties a clean block
  output logic [IDX_W-1:0]   id_sp,
  output logic [IDX_W-1:0]   id_splim
);
  localparam int unsigned BSS   = $clog2(BLOCK_SIZE);
  localparam int unsigned BLK_W = (DT_SIZE < 2) ? 1 : $clog2(DT_SIZE);

  logic [DT_SIZE-1:0] keep_mask;
  logic               in_vm;
  logic [BLK_W-1:0]   addr_idx;
  logic [31:0]        rel;
  logic [DT_SIZE-1:0] set_vec;

  dica_sf_mask #(
    .ADDR_W(ADDR_W), .VM_MIN(VM_MIN), .VM_SIZE(VM_SIZE), .BLOCK_SIZE(BLOCK_SIZE)
  ) u_sf_mask (
    .sp(sp), .sp_lim(sp_lim), .id_sp(id_sp), .id_splim(id_splim), .keep_mask(keep_mask)
  );

  always_comb begin
    in_vm    = (32'(daddr) >= VM_MIN) && (32'(daddr) < VM_MIN + VM_SIZE);
    rel      = (32'(daddr) - VM_MIN) >> BSS;
    addr_idx = BLK_W'(rel);
    set_vec  = '0;
    if (wen && in_vm) set_vec[addr_idx] = 1'b1;
    set_new  = wen && in_vm && !clr && !dtable[addr_idx] && keep_mask[addr_idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   dtable <= '0;
    else if (clr) dtable <= '0;
    else          dtable <= (dtable | set_vec) & keep_mask;
  end
endmodule
