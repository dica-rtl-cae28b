// tb_dica_vtt -- self-checking test of the Voltage Threshold Tracker.
//
// Keeps its own model of the three parts: the n_d counter (increments and
// stack releases), the shadow counter n_d' with V_ths = V_MIN + n_d' * lambda,
// and the registered comparator it_sig(t+1) = v_supply(t) < V_ths(t).
// A directed part lets the supply fall slowly past a threshold for 5 dirty
// blocks and checks that the interrupt rises in the cycle the model says and
// not before; a random part mixes writes, stack walks, clears and a noisy
// falling supply.
module tb_dica_vtt;
  localparam int unsigned DT = 64, VMIN = 20000;
  localparam int unsigned IW = dica_pkg::idx_width(DT);
  localparam int unsigned VTW = 16 + IW;

  logic clk = 0, rst_n = 0, clr = 0, inc = 0;
  logic [IW-1:0] id_sp = IW'(DT), id_splim = 0, n_d, id_d, nds;
  logic [15:0] lambda = 300, v_supply = 36000;
  logic [VTW-1:0] vths;
  logic settled, it_sig;
  int checks = 0, failures = 0;
  int r_nd = 0, r_prev = DT, r_s = 0, r_vth = VMIN, n_irq = 0, n_rel = 0;
  bit r_it = 0;

  dica_vtt dut (.clk(clk), .rst_n(rst_n), .clr(clr), .inc(inc), .id_sp(id_sp),
                .id_splim(id_splim), .lambda(lambda), .v_supply(v_supply), .n_d(n_d),
                .id_d(id_d), .n_d_shadow(nds), .vths(vths), .settled(settled), .it_sig(it_sig));

  always #5 clk = ~clk;

  task automatic step();
    int lo, rel, nx;
    #1;
    lo  = (r_prev > int'(id_splim) + 1) ? r_prev : int'(id_splim) + 1;
    rel = (int'(id_sp) > lo) ? int'(id_sp) - lo : 0;
    nx  = r_nd + int'(inc) - rel;
    if (nx < 0) nx = 0;
    if (nx > DT) nx = DT;
    if (rel > 0) n_rel++;
    @(posedge clk); #1;
    r_it = int'(v_supply) < r_vth;
    if (clr) begin r_s = 0; r_vth = VMIN; end
    else if (r_nd > r_s) begin r_s++; r_vth += int'(lambda); end
    else if (r_nd < r_s) begin r_s--; r_vth -= int'(lambda); end
    r_nd = clr ? 0 : nx;
    r_prev = int'(id_sp);
    if (it_sig && r_it) n_irq++;
    checks++;
    if (int'(n_d) != r_nd || int'(nds) != r_s || int'(vths) != r_vth || it_sig !== r_it) begin
      failures++;
      $display("FAIL n_d=%0d/%0d nds=%0d/%0d vths=%0d/%0d it=%b/%b", n_d, r_nd, nds, r_s,
               vths, r_vth, it_sig, r_it);
    end
    @(negedge clk);
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
    rst_n = 1;
    id_splim = 4; id_sp = 50; step();
    inc = 1; repeat (5) step(); inc = 0;
    repeat (8) step();
    // threshold is now 20000 + 5*300 = 21500
    checks++;
    if (vths != 21500) begin failures++; $display("FAIL vths %0d", vths); end
    v_supply = 21510;
    while (v_supply > 21490) begin
      step();
      checks++;
      if (it_sig !== (int'(v_supply) < 21500)) begin
        failures++; $display("FAIL directed it_sig=%b at v=%0d", it_sig, v_supply);
      end
      v_supply = v_supply - 1;
    end
    // releasing the two top frames lowers the threshold and drops the interrupt
    id_sp = 53; repeat (6) step();
    checks++;
    if (n_d != 2 || vths != 20600 || it_sig) begin
      failures++; $display("FAIL after release n_d=%0d vths=%0d it=%b", n_d, vths, it_sig);
    end
    clr = 1; step(); clr = 0;
    v_supply = 36000;
    for (int n = 0; n < 20000; n++) begin
      inc = ($urandom % 4) == 0;
      case ($urandom % 6)
        0: if (id_sp < IW'(DT)) id_sp = id_sp + IW'($urandom % 4);
        1: if (id_sp > 8) id_sp = id_sp - 1'b1;
        default: ;
      endcase
      if (v_supply > 19000) v_supply = v_supply - 16'($urandom % 4);
      if ($urandom % 1500 == 0) begin
        clr = 1; step(); clr = 0; v_supply = 16'(22000 + $urandom % 14000);
        lambda = 16'(50 + $urandom % 400);
      end else step();
    end
    if (n_irq < 10 || n_rel < 100) begin failures++; $display("FAIL too few events %0d %0d", n_irq, n_rel); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
