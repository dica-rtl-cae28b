// tb_dica_block_sizes -- the top level at three tracking granularities,
// 16, 128 and 512 bytes per DTable bit (DTables of 512, 64 and 16 bits over
// the same 8 KiB VM), the ends and the middle of the block-size range the
// design is meant for.
//
// All three instances see the same CPU activity: word writes to globals below
// SP_Lim, writes outside VM, writes into the live stack, pushes that move SP
// down by up to 400 bytes, pops that move it up by any amount (often several
// blocks at once, sometimes in the same clock as a global write), software
// clears with a new lambda while the stack is empty, and a supply reading that
// jumps around the thresholds.
//
// Each push writes at least one word in every 16-byte piece of the new frame,
// so every released stack block of every size has been written since the last
// clear. SP_Lim is not block aligned, so its block also holds globals.
// Under that rule the event-based n_d must equal the number of set
// DTable bits at every clock, which is checked, along with:
//   * DTable against a model written from the plain rule "set on a VM write,
//     zero strictly between the SP_Lim block and the SP block, empty on clear"
//     (block index by division, not by a shift);
//   * V_ths always equal to V_MIN + k * lambda, with k moving by at most one
//     per clock and only towards the previous n_d;
//   * nmi equal to (supply < V_ths) of the previous clock.
// It also counts, per size, multi-block n_d drops, clocks where a new dirty
// block and a release meet, and clocks with nmi high and low; each must occur.
module tb_dica_block_sizes;
  import dica_pkg::*;
  localparam int unsigned VM_MIN = VM_MIN_DEF, VM_SIZE = VM_SIZE_DEF;
  localparam int unsigned SPLIM = VM_MIN + VM_SIZE / 2 + 32'h106;   // not block aligned
  localparam int unsigned STACK_TOP = VM_MIN + VM_SIZE;
  localparam int unsigned BASE = 32'h0190;
  localparam int NSZ = 3;
  localparam int unsigned SIZES [NSZ] = '{16, 128, 512};
  localparam int V_MIN = V_MIN_DEF;
  localparam int N_OPS = 30000;

  logic clk = 0, rst_n = 0, cpu_wen = 0, per_en = 0;
  logic [15:0] cpu_daddr = 0, cpu_sp = 16'(STACK_TOP), v_supply = 16'(V_MIN);
  logic [13:0] per_addr = 0;
  logic [15:0] per_din = 0;
  logic [1:0] per_we = 0;
  int lambda_cur = 0;
  bit v_skip = 1;               // lambda just rewritten, V_ths not yet cleared
  int checks = 0, failures = 0;
  int c_multi [NSZ], c_meet [NSZ], c_nmi_hi [NSZ], c_nmi_lo [NSZ];

  always #5 clk = ~clk;

  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("FAIL %s", msg);
  endtask

  wire clr_ev = per_en && per_we[0] && per_din[0] && (per_addr == 14'((BASE + 2 * REG_CTRL) >> 1));

  for (genvar g = 0; g < NSZ; g++) begin : g_sz
    localparam int unsigned BS  = SIZES[g];
    localparam int unsigned DT  = VM_SIZE / BS;
    localparam int unsigned IW  = idx_width(DT);
    localparam int unsigned VTW = V_W_DEF + IW;

    logic [DT-1:0] dtable;
    logic [IW-1:0] n_d;
    logic [VTW-1:0] vths;
    logic nmi;
    logic [15:0] per_dout;

    dica_top #(.BLOCK_SIZE(BS)) dut (
      .clk(clk), .rst_n(rst_n), .cpu_wen(cpu_wen), .cpu_daddr(cpu_daddr), .cpu_sp(cpu_sp),
      .v_supply(v_supply), .per_addr(per_addr), .per_din(per_din), .per_en(per_en),
      .per_we(per_we), .per_dout(per_dout), .nmi(nmi), .dtable(dtable), .n_d(n_d), .vths(vths));

    bit ref_dt [DT];
    always @(posedge clk) begin
      if (!rst_n || clr_ev) begin
        foreach (ref_dt[i]) ref_dt[i] = 0;
      end else begin
        if (cpu_wen && cpu_daddr >= 16'(VM_MIN) && 32'(cpu_daddr) < STACK_TOP)
          ref_dt[(int'(cpu_daddr) - VM_MIN) / BS] = 1;
        for (int i = 0; i < DT; i++)
          if (i > (SPLIM - VM_MIN) / BS && i < (int'(cpu_sp) - VM_MIN) / BS) ref_dt[i] = 0;
      end
    end

    int k_prev = 0, nd_prev = 0;
    longint vths_prev = V_MIN, v_prev = V_MIN;
    bit after_clr = 1;
    always @(negedge clk) if (rst_n) begin
      int k, ones;
      ones = 0;
      for (int i = 0; i < DT; i++) begin
        if (dtable[i] !== ref_dt[i]) begin fail($sformatf("BS=%0d dtable[%0d]", BS, i)); break; end
        ones += int'(dtable[i]);
      end
      checks++;
      if (int'(n_d) != ones) fail($sformatf("BS=%0d n_d %0d, DTable has %0d", BS, n_d, ones));
      checks++;
      if (nmi !== (v_prev < vths_prev)) fail($sformatf("BS=%0d nmi", BS));
      checks++;
      if (!v_skip) begin
        if ((longint'(vths) - V_MIN) % lambda_cur != 0) fail($sformatf("BS=%0d V_ths off the lambda grid", BS));
        k = int'((longint'(vths) - V_MIN) / lambda_cur);
        if (k < 0 || k > DT) fail($sformatf("BS=%0d V_ths step count %0d", BS, k));
        if (!after_clr) begin
          if (k_prev < nd_prev && k != k_prev + 1) fail($sformatf("BS=%0d V_ths did not step up", BS));
          if (k_prev > nd_prev && k != k_prev - 1) fail($sformatf("BS=%0d V_ths did not step down", BS));
          if (k_prev == nd_prev && k != k_prev)     fail($sformatf("BS=%0d V_ths moved while settled", BS));
        end
        checks++;
        k_prev = k;
        after_clr = 0;
      end else after_clr = 1;
      if (int'(n_d) < nd_prev - 1) c_multi[g]++;
      if (nmi) c_nmi_hi[g]++; else c_nmi_lo[g]++;
      nd_prev = int'(n_d);
      vths_prev = longint'(vths);
      v_prev = longint'(v_supply);
    end

    // a write that turns a clean block dirty in the same clock as a release
    always @(posedge clk) if (rst_n && dut.set_new && dut.u_vtt.id_d != 0) c_meet[g]++;
  end

  task automatic bus_write(input int unsigned off, input logic [15:0] d);
    per_addr = 14'((BASE + off) >> 1); per_din = d; per_we = 2'b11; per_en = 1;
    @(posedge clk); #1; per_en = 0; per_we = 0;
    @(negedge clk);
  endtask

  task automatic tick(input bit w, input int a, input int sp);
    cpu_wen = w; cpu_daddr = 16'(a); cpu_sp = 16'(sp);
    v_supply = 16'(V_MIN - 64 + int'($urandom_range(0, 64 + 3 * 64 * lambda_cur)));
    @(negedge clk);
    cpu_wen = 0;
  endtask

  function automatic int glob_addr();
    return int'(VM_MIN + 2 * $urandom_range(0, (SPLIM - VM_MIN) / 2 - 1));
  endfunction

  task automatic new_lambda_and_clear();
    lambda_cur = int'($urandom_range(5, 40));
    v_skip = 1;
    bus_write(2 * REG_LAMBDA, 16'(lambda_cur));
    bus_write(2 * REG_CTRL, 16'h0001);
    v_skip = 0;
  endtask

  initial begin
    #50ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sp, r, sz, old;
    sp = STACK_TOP;
    repeat (3) @(negedge clk);
    rst_n = 1;
    bus_write(2 * REG_SPLIM, 16'(SPLIM));
    new_lambda_and_clear();
    for (int op = 0; op < N_OPS; op++) begin
      r = int'($urandom_range(0, 99));
      if (r < 30) tick(1, glob_addr(), sp);
      else if (r < 38) tick(1, int'($urandom_range(16'h0200, 16'h1FFE)) & ~1, sp);
      else if (r < 46) tick(1, int'($urandom_range(16'h4000, 16'hFFFE)) & ~1, sp);
      else if (r < 60) begin
        if (sp < STACK_TOP) tick(1, sp + 2 * int'($urandom_range(0, (STACK_TOP - sp) / 2 - 1)), sp);
      end else if (r < 78) begin                  // push and fill the new frame
        sz = 2 * int'($urandom_range(1, 200));
        if (sp - sz >= SPLIM) begin
          old = sp;
          sp -= sz;
          tick(1, sp, sp);
          for (int a = (sp & ~15) + 16; a < old; a += 16) tick(1, a + 2 * int'($urandom_range(0, 7)), sp);
        end
      end else if (r < 97) begin                  // pop, sometimes with a global write
        if (sp < STACK_TOP) begin
          sp += 2 * int'($urandom_range(1, (STACK_TOP - sp) / 2));
          tick($urandom_range(0, 1) == 1, glob_addr(), sp);
        end
      end else if (sp == STACK_TOP) new_lambda_and_clear();
    end
    repeat (4) tick(0, 0, sp);
    for (int g = 0; g < NSZ; g++) begin
      $display("BS=%0d: multi-block drops %0d, write+release clocks %0d, nmi high %0d low %0d",
               SIZES[g], c_multi[g], c_meet[g], c_nmi_hi[g], c_nmi_lo[g]);
      checks++; if (c_multi[g] == 0) fail("no multi-block n_d drop");
      checks++; if (c_meet[g] == 0) fail("no clock with a new dirty block and a release");
      checks++; if (c_nmi_hi[g] == 0 || c_nmi_lo[g] == 0) fail("nmi never changed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
