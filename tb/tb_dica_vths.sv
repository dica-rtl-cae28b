// tb_dica_vths -- self-checking test of the addition-only V_ths tracker.
//
// Checks, against values computed here by multiplication:
//   * after reset and after clr: n_d' = 0, V_ths = V_MIN;
//   * every cycle, with lambda held: V_ths = V_MIN + n_d' * lambda and n_d'
//     moves one step towards n_d;
//   * latency: after n_d jumps by k from a settled state, settled returns
//     exactly k cycles later and V_ths = V_MIN + n_d * lambda.
// lambda is changed only right after a clear.
module tb_dica_vths;
  localparam int unsigned DT = 64, VMIN = 20000;
  localparam int unsigned IW = dica_pkg::idx_width(DT);
  localparam int unsigned VTW = 16 + IW;

  logic clk = 0, rst_n = 0, clr = 0;
  logic [IW-1:0] n_d = 0, nds;
  logic [15:0] lambda = 250;
  logic [VTW-1:0] vths;
  logic settled;
  int checks = 0, failures = 0, ref_s = 0, n_up = 0, n_down = 0;

  dica_vths dut (.clk(clk), .rst_n(rst_n), .clr(clr), .n_d(n_d), .lambda(lambda),
                 .n_d_shadow(nds), .vths(vths), .settled(settled));

  always #5 clk = ~clk;

  task automatic step();
    #1;
    @(posedge clk); #1;
    if (clr) ref_s = 0;
    else if (int'(n_d) > ref_s) begin ref_s++; n_up++; end
    else if (int'(n_d) < ref_s) begin ref_s--; n_down++; end
    checks++;
    if (int'(nds) != ref_s || vths !== VTW'(VMIN + ref_s * int'(lambda)) ||
        settled !== (int'(n_d) == ref_s)) begin
      failures++;
      $display("FAIL n_d=%0d nds=%0d/%0d vths=%0d exp=%0d", n_d, nds, ref_s, vths,
               VMIN + ref_s * int'(lambda));
    end
    @(negedge clk);
  endtask

  // jump n_d to v and count the cycles until settled
  task automatic jump(input int v);
    int k, cyc;
    k = (v > ref_s) ? v - ref_s : ref_s - v;
    n_d = IW'(v);
    cyc = 0;
    do begin step(); cyc++; end while (!settled && cyc < 200);
    checks++;
    if (cyc != ((k == 0) ? 1 : k)) begin
      failures++; $display("FAIL latency %0d cycles for a step of %0d", cyc, k);
    end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    checks++;
    if (vths !== VTW'(VMIN) || nds !== '0) begin failures++; $display("FAIL reset value"); end
    rst_n = 1;
    jump(1); jump(10); jump(3); jump(64); jump(0);
    for (int n = 0; n < 3000; n++) begin
      if ($urandom % 50 == 0) begin
        clr = 1; step(); clr = 0;
        lambda = 16'($urandom % 2000);
        n_d = 0;
      end
      if ($urandom % 4 == 0) jump($urandom % (DT + 1));
      else begin
        if ($urandom % 3 == 0) n_d = IW'($urandom % (DT + 1));
        step();
      end
    end
    if (n_up < 100 || n_down < 100) begin failures++; $display("FAIL too few steps"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
