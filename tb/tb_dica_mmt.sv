// tb_dica_mmt -- self-checking test of the Memory Modification Tracker.
//
// A reference DTable is kept here with integer arithmetic. Inputs change on
// the falling clock edge; on the rising edge the reference applies
//   clr            -> all zero
//   otherwise      -> (old | bit of a VM write) & keep, keep[i] = i<=ID_SPLim || i>=ID_SP
// and after the edge the DUT's DTable must equal it (one-cycle latency).
// set_new is checked in the cycle of the write. The run starts with the
// two-write example (blocks 3 then 1 of a four-block view), then random
// writes in and out of VM, stack-pointer walks and occasional clears.
module tb_dica_mmt;
  localparam int unsigned VM_MIN = 32'h2000, VM_SIZE = 8192, BLOCK = 128;
  localparam int unsigned DT = VM_SIZE / BLOCK;
  localparam int unsigned IW = dica_pkg::idx_width(DT);

  logic clk = 0, rst_n = 0, clr = 0, wen = 0;
  logic [15:0] daddr = 0, sp = 16'(VM_MIN + VM_SIZE), sp_lim = 16'(VM_MIN + VM_SIZE);
  logic [DT-1:0] dtable, ref_dt;
  logic set_new;
  logic [IW-1:0] id_sp, id_splim;
  int checks = 0, failures = 0, n_set = 0, n_clean = 0;

  dica_mmt dut (.clk(clk), .rst_n(rst_n), .clr(clr), .wen(wen), .daddr(daddr), .sp(sp),
                .sp_lim(sp_lim), .dtable(dtable), .set_new(set_new), .id_sp(id_sp),
                .id_splim(id_splim));

  always #5 clk = ~clk;

  function automatic int ref_idx(input int unsigned a);
    if (a < VM_MIN) return 0;
    if (a >= VM_MIN + VM_SIZE) return DT;
    return (a - VM_MIN) / BLOCK;
  endfunction

  // evaluate the reference for the inputs now applied, check set_new, step
  task automatic step();
    logic [DT-1:0] nxt, keep;
    int isp, ilim, a;
    logic inv, exp_new;
    #1;
    isp = ref_idx(sp); ilim = ref_idx(sp_lim);
    for (int i = 0; i < DT; i++) keep[i] = (i <= ilim) || (i >= isp);
    inv = (int'(daddr) >= VM_MIN) && (int'(daddr) < VM_MIN + VM_SIZE);
    a = (int'(daddr) - VM_MIN) / BLOCK;
    nxt = ref_dt;
    if (wen && inv) nxt[a] = 1'b1;
    nxt = nxt & keep;
    exp_new = wen && inv && !clr && !ref_dt[a] && keep[a];
    if (clr) nxt = '0;
    checks++;
    if (set_new !== exp_new) begin
      failures++; $display("FAIL set_new=%b exp=%b daddr=%h", set_new, exp_new, daddr);
    end
    if (exp_new) n_set++;
    if ((ref_dt & ~keep) != '0) n_clean++;
    @(posedge clk); #1;
    ref_dt = nxt;
    checks++;
    if (dtable !== ref_dt) begin
      failures++; $display("FAIL dtable=%h exp=%h", dtable, ref_dt);
    end
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
    ref_dt = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    checks++;
    if (dtable !== '0) begin failures++; $display("FAIL not cleared by reset"); end
    // example: write into block 3, then block 1
    wen = 1; daddr = 16'(VM_MIN + 3*BLOCK + 40); step();
    if (dtable[3:0] !== 4'b1000) begin failures++; $display("FAIL example 1 %b", dtable[3:0]); end
    daddr = 16'(VM_MIN + 1*BLOCK + 7); step();
    if (dtable[3:0] !== 4'b1010) begin failures++; $display("FAIL example 2 %b", dtable[3:0]); end
    checks += 2;
    // second write to a dirty block is not new
    daddr = 16'(VM_MIN + 1*BLOCK + 90); step();
    wen = 0; step();
    // software clear
    clr = 1; step(); clr = 0;
    // stack example: stack in the top half, limit at 4 KiB
    sp_lim = 16'(VM_MIN + 4096);
    for (int n = 0; n < 20000; n++) begin
      wen   = ($urandom % 10) < 6;
      case ($urandom % 10)
        0, 1:    daddr = 16'($urandom % 16'h6000);                     // anywhere
        2, 3, 4: daddr = 16'(sp - 2 - ($urandom % 64));                // push below SP
        default: daddr = 16'(VM_MIN + ($urandom % VM_SIZE));           // inside VM
      endcase
      // stack pointer walk: calls move it down, returns move it up
      case ($urandom % 8)
        0: if (int'(sp) > VM_MIN + 4096 + 600) sp = sp - 16'($urandom % 512);
        1: if (int'(sp) < VM_MIN + VM_SIZE - 600) sp = sp + 16'($urandom % 512);
        default: ;
      endcase
      if ($urandom % 2000 == 0) sp_lim = 16'(VM_MIN + 1024 * ($urandom % 5));
      clr = ($urandom % 300) == 0;
      step();
    end
    if (n_set < 100 || n_clean < 50) begin
      failures++; $display("FAIL too few events: set %0d clean %0d", n_set, n_clean);
    end
    $display("new dirty blocks %0d, stack-frame clears %0d", n_set, n_clean);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
