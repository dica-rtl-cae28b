// tb_dica_nd_counter -- self-checking test of the n_d counter.
//
// Reference model, kept here: prev = ID_SP of the previous cycle (DT_SIZE
// after reset); released = max(0, ID_SP - max(prev, ID_SPLim + 1));
// n_d' = clr ? 0 : clamp(n_d + inc - released, 0, DT_SIZE).
// Directed cases first (three increments, a release of two blocks, an
// increment and a release in the same cycle, a release below the stack
// limit), then random increments, stack-pointer walks and clears. n_d is
// checked one cycle after its inputs, id_d in the same cycle.
module tb_dica_nd_counter;
  localparam int unsigned DT = 64;
  localparam int unsigned IW = dica_pkg::idx_width(DT);

  logic clk = 0, rst_n = 0, clr = 0, inc = 0;
  logic [IW-1:0] id_sp = IW'(DT), id_splim = '0, n_d, id_d;
  int checks = 0, failures = 0, ref_nd = 0, prev = DT, n_dec = 0, n_inc = 0;

  dica_nd_counter dut (.clk(clk), .rst_n(rst_n), .clr(clr), .inc(inc), .id_sp(id_sp),
                       .id_splim(id_splim), .n_d(n_d), .id_d(id_d));

  always #5 clk = ~clk;

  task automatic step();
    int lo, rel, nx;
    #1;
    lo  = (prev > int'(id_splim) + 1) ? prev : int'(id_splim) + 1;
    rel = (int'(id_sp) > lo) ? int'(id_sp) - lo : 0;
    nx  = ref_nd + int'(inc) - rel;
    if (nx < 0) nx = 0;
    if (nx > DT) nx = DT;
    if (clr) nx = 0;
    checks++;
    if (int'(id_d) != rel) begin failures++; $display("FAIL id_d=%0d exp=%0d", id_d, rel); end
    if (rel > 0 && !clr) n_dec++;
    if (inc && !clr) n_inc++;
    @(posedge clk); #1;
    ref_nd = nx; prev = int'(id_sp);
    checks++;
    if (int'(n_d) != ref_nd) begin failures++; $display("FAIL n_d=%0d exp=%0d", n_d, ref_nd); end
    @(negedge clk);
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    id_splim = 10; id_sp = 40; step();            // stack grows: no release
    inc = 1; step(); step(); step(); inc = 0;     // n_d = 3
    id_sp = 42; step();                           // two blocks released
    checks++;
    if (n_d != 1) begin failures++; $display("FAIL directed release n_d=%0d", n_d); end
    inc = 1; id_sp = 43; step(); inc = 0;         // +1 and -1 together
    checks++;
    if (n_d != 1) begin failures++; $display("FAIL simultaneous n_d=%0d", n_d); end
    id_sp = 5; step(); inc = 1; step(); step(); inc = 0;
    id_sp = 9; step();                            // SP below the limit: nothing released
    checks++;
    if (n_d != 3) begin failures++; $display("FAIL below limit n_d=%0d", n_d); end
    for (int n = 0; n < 20000; n++) begin
      inc = ($urandom % 3) == 0;
      case ($urandom % 6)
        0: id_sp = IW'($urandom % (DT + 1));
        1: if (id_sp < IW'(DT)) id_sp = id_sp + 1'b1;
        2: if (id_sp > 0) id_sp = id_sp - 1'b1;
        default: ;
      endcase
      if ($urandom % 500 == 0) id_splim = IW'($urandom % 20);
      clr = ($urandom % 400) == 0;
      step();
    end
    if (n_dec < 100 || n_inc < 100) begin failures++; $display("FAIL too few events"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
