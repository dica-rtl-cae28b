// tb_dica_sf_mask -- self-checking test of the stack-frame cleaner mask.
//
// Drives stack pointer / stack limit pairs (the stack-cleaning example with
// the limit in block 1 and SP in block 6, addresses at block edges, addresses
// outside VM, and random pairs) and compares id_sp, id_splim and keep_mask
// with a reference computed here with integer arithmetic:
//   idx(a) = a < VM_MIN ? 0 : a >= VM_END ? DT_SIZE : (a - VM_MIN) / BLOCK_SIZE
//   keep[i] = i <= idx(sp_lim) || i >= idx(sp)
module tb_dica_sf_mask;
  localparam int unsigned VM_MIN = 32'h2000, VM_SIZE = 8192, BLOCK = 128;
  localparam int unsigned DT = VM_SIZE / BLOCK;
  localparam int unsigned IW = dica_pkg::idx_width(DT);

  logic [15:0]   sp, sp_lim;
  logic [IW-1:0] id_sp, id_splim;
  logic [DT-1:0] keep;
  int checks = 0, failures = 0;

  dica_sf_mask dut (.sp(sp), .sp_lim(sp_lim), .id_sp(id_sp), .id_splim(id_splim), .keep_mask(keep));

  function automatic int ref_idx(input int unsigned a);
    if (a < VM_MIN) return 0;
    if (a >= VM_MIN + VM_SIZE) return DT;
    return (a - VM_MIN) / BLOCK;
  endfunction

  task automatic check(input int unsigned a_sp, input int unsigned a_lim);
    int isp, ilim;
    logic [DT-1:0] exp_keep;
    sp = 16'(a_sp); sp_lim = 16'(a_lim);
    #1;
    isp = ref_idx(a_sp); ilim = ref_idx(a_lim);
    for (int i = 0; i < DT; i++) exp_keep[i] = (i <= ilim) || (i >= isp);
    checks++;
    if (int'(id_sp) != isp || int'(id_splim) != ilim || keep !== exp_keep) begin
      failures++;
      $display("FAIL sp=%h lim=%h id_sp=%0d/%0d id_lim=%0d/%0d keep=%h exp=%h",
               sp, sp_lim, id_sp, isp, id_splim, ilim, keep, exp_keep);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // example: limit in block 1, SP in block 6 -> blocks 2..5 cleared
    check(VM_MIN + 6*BLOCK + 10, VM_MIN + 1*BLOCK + 4);
    if (keep[7:0] !== 8'b1100_0011) begin failures++; $display("FAIL example mask %b", keep[7:0]); end
    checks++;
    // SP and limit in the same or adjacent blocks: nothing cleared
    check(VM_MIN + 5*BLOCK, VM_MIN + 5*BLOCK + 2);
    check(VM_MIN + 6*BLOCK, VM_MIN + 5*BLOCK + 127);
    if (keep !== '1) begin failures++; $display("FAIL adjacent blocks cleared"); end
    checks++;
    // full stack released: SP at the VM end
    check(VM_MIN + VM_SIZE, VM_MIN + 10*BLOCK);
    // outside VM
    check(16'h0100, 16'h0050);
    check(16'hFFFE, VM_MIN - 2);
    check(VM_MIN + VM_SIZE - 1, VM_MIN);
    // block edges
    for (int b = 0; b < DT; b++) begin
      check(VM_MIN + b*BLOCK, VM_MIN + 3*BLOCK - 1);
      check(VM_MIN + b*BLOCK + BLOCK - 1, VM_MIN + b*BLOCK);
    end
    // random pairs around the VM window
    for (int n = 0; n < 3000; n++) begin
      check(($urandom % (VM_SIZE + 1024)) + VM_MIN - 512, ($urandom % (VM_SIZE + 1024)) + VM_MIN - 512);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
