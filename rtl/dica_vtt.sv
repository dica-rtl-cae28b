// dica_vtt -- Voltage Threshold Tracker (VTT).
//
// Turns the MMT's events into the checkpoint interrupt:
//   dica_nd_counter  keeps n_d, the number of dirty blocks;
//   dica_vths        keeps V_ths = V_MIN + n_d * lambda by repeated addition;
//   comparator       IT_sig = (V_supply < V_ths).
// it_sig is registered, so it rises one clock after the sampled v_supply
// drops below the V_ths register, and it stays high while the condition
// holds (a level; an edge-triggered NMI input takes its rising edge).
//
// Interface: inc/id_sp/id_splim come from dica_mmt; lambda from the software
// register; v_supply is the digital supply reading in the same code as V_MIN
// and lambda, sampled on clk.
//
// The structure (counter -> threshold -> compare -> NMI) is the paper's; the
// output register and the level behaviour are this design's choices.
module dica_vtt #(
  parameter int unsigned DT_SIZE = dica_pkg::VM_SIZE_DEF / dica_pkg::BLOCK_SIZE_DEF,
  parameter int unsigned V_W     = dica_pkg::V_W_DEF,
  parameter int unsigned V_MIN   = dica_pkg::V_MIN_DEF,
  localparam int unsigned IDX_W  = dica_pkg::idx_width(DT_SIZE),
  localparam int unsigned VTH_W  = V_W + IDX_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             inc,
  input  logic [IDX_W-1:0] id_sp,
  input  logic [IDX_W-1:0] id_splim,
  input  logic [V_W-1:0]   lambda,
  input  logic [V_W-1:0]   v_supply,
  output logic [IDX_W-1:0] n_d,
  output logic [IDX_W-1:0] id_d,
  output logic [IDX_W-1:0] n_d_shadow,
  output logic [VTH_W-1:0] vths,
  output logic             settled,
  output logic             it_sig
);
  dica_nd_counter #(.DT_SIZE(DT_SIZE)) u_nd (
    .clk(clk), .rst_n(rst_n), .clr(clr), .inc(inc),
    .id_sp(id_sp), .id_splim(id_splim), .n_d(n_d), .id_d(id_d)
  );

  dica_vths #(.DT_SIZE(DT_SIZE), .V_W(V_W), .V_MIN(V_MIN)) u_vths (
    .clk(clk), .rst_n(rst_n), .clr(clr), .n_d(n_d), .lambda(lambda),
    .n_d_shadow(n_d_shadow), .vths(vths), .settled(settled)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) it_sig <= 1'b0;
    else        it_sig <= (VTH_W'(v_supply) < vths);
  end
endmodule
