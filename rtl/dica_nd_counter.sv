// dica_nd_counter -- the n_d counter of the Voltage Threshold Tracker.
//
// n_d estimates how many DTable bits are set, without counting the table:
//   * +1 in a cycle where the MMT reports that a write turned a clean block
//     dirty (inc = set_new of dica_mmt);
//   * -ID_d when the stack shrinks, with ID_d = ID_SP(t) - ID_SP(t-1) > 0:
//     the blocks between the old and the new stack-pointer block have just
//     been cleared by the stack-frame cleaner;
//   * 0 on reset or clr.
// The previous stack-pointer index ID_SP(t-1) is a register of this block.
//
// Timing: one register update per clock; n_d changes in the cycle after the
// event, together with the DTable.
//
// The three rules come from the paper's VTT definition. This design's choices:
//   * the paper lists +1 and -ID_d as exclusive cases ("elif"); here both
//     apply when a write and a stack release meet in one cycle, so neither is
//     lost;
//   * ID_d only counts blocks above the SP_Lim block (blocks at or below it
//     are never cleared), and n_d saturates at 0 and DT_SIZE;
//   * as in the paper, every released block is assumed to have been dirty; a
//     frame block that was never written makes n_d smaller than the true count.
module dica_nd_counter #(
  parameter int unsigned DT_SIZE = dica_pkg::VM_SIZE_DEF / dica_pkg::BLOCK_SIZE_DEF,
  localparam int unsigned IDX_W  = dica_pkg::idx_width(DT_SIZE)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             inc,       // a clean block became dirty this cycle
  input  logic [IDX_W-1:0] id_sp,     // current stack-pointer block index
  input  logic [IDX_W-1:0] id_splim,  // stack-limit block index
  output logic [IDX_W-1:0] n_d,
  output logic [IDX_W-1:0] id_d       // blocks released this cycle (ID_d, >= 0)
);
  logic [IDX_W-1:0] id_sp_prev;
  logic [IDX_W:0]   lo;
  logic [IDX_W+1:0] nd_sum;

  always_comb begin
    // first block index that was still live last cycle and may be cleared now
    lo = ({1'b0, id_sp_prev} > ({1'b0, id_splim} + 1'b1)) ? {1'b0, id_sp_prev}
                                                        : ({1'b0, id_splim} + 1'b1);
    id_d   = ({1'b0, id_sp} > lo) ? IDX_W'({1'b0, id_sp} - lo) : '0;
    nd_sum = {2'b00, n_d} + (IDX_W+2)'(inc);
    if (nd_sum <= (IDX_W+2)'(id_d)) nd_sum = '0;
    else                           nd_sum = nd_sum - (IDX_W+2)'(id_d);
    if (nd_sum > (IDX_W+2)'(DT_SIZE)) nd_sum = (IDX_W+2)'(DT_SIZE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_d        <= '0;
      id_sp_prev <= IDX_W'(DT_SIZE);
    end else begin
      id_sp_prev <= id_sp;
      n_d        <= clr ? '0 : IDX_W'(nd_sum);
    end
  end
endmodule
