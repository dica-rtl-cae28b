// dica_vths -- multiplier-free evaluation of the threshold V_ths(n_d).
//
// Under a linear supply-decay model the checkpoint of n_d dirty blocks needs
// the supply to be at least V_ths(n_d) = V_MIN + n_d * lambda when it starts.
// Instead of a multiplier, a shadow counter n_d' walks towards n_d by one per
// clock, and each step adds or subtracts lambda to the V_ths register:
//   n_d > n_d':  n_d' += 1, V_ths += lambda
//   n_d < n_d':  n_d' -= 1, V_ths -= lambda
//   equal:       hold
// so after |n_d - n_d'| cycles V_ths = V_MIN + n_d * lambda (as long as lambda
// did not change in between). Reset and clr put n_d' = 0, V_ths = V_MIN.
//
// Interface: lambda and the V_ths output are voltage codes of the supply
// reading (V_W bits, one code = 100 uV in the default scale); V_ths is
// V_W + IDX_W bits wide so that V_MIN + DT_SIZE * lambda never wraps.
// settled is high when n_d' == n_d.
//
// The stepping rules and V_ths(0) = V_MIN are the paper's. The register widths,
// the clear input and the settled flag are this design's choices.
module dica_vths #(
  parameter int unsigned DT_SIZE = dica_pkg::VM_SIZE_DEF / dica_pkg::BLOCK_SIZE_DEF,
  parameter int unsigned V_W     = dica_pkg::V_W_DEF,
  parameter int unsigned V_MIN   = dica_pkg::V_MIN_DEF,
  localparam int unsigned IDX_W  = dica_pkg::idx_width(DT_SIZE),
  localparam int unsigned VTH_W  = V_W + IDX_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic [IDX_W-1:0] n_d,
  input  logic [V_W-1:0]   lambda,
  output logic [IDX_W-1:0] n_d_shadow,   // n_d'
  output logic [VTH_W-1:0] vths,
  output logic             settled
);
  assign settled = (n_d_shadow == n_d);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_d_shadow <= '0;
      vths       <= VTH_W'(V_MIN);
    end else if (clr) begin
      n_d_shadow <= '0;
      vths       <= VTH_W'(V_MIN);
    end else if (n_d > n_d_shadow) begin
      n_d_shadow <= n_d_shadow + 1'b1;
      vths       <= vths + VTH_W'(lambda);
    end else if (n_d < n_d_shadow) begin
      n_d_shadow <= n_d_shadow - 1'b1;
      vths       <= vths - VTH_W'(lambda);
    end
  end
endmodule
