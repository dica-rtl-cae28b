// tb_dica_top -- end-to-end test of DiCA at its default size (8 KiB VM,
// 128-byte blocks, 64-bit DTable), driving the top with no parameter changes.
//
// The testbench plays the rest of an intermittently powered MCU:
//   * a program: a deterministic sequence of steps (word writes to globals,
//     to the current stack frame, to addresses outside VM, calls that push a
//     new frame word by word, returns that pop it); each step is one clock and
//     its content depends only on the program context (step number, SP, frame
//     sizes), like the CPU's PC and registers;
//   * a supply: starts at 3.6 V (36000 codes) after each recharge, loses one
//     code per program step and LAMBDA_TRUE codes per 128-byte block copied;
//     the MCU browns out below V_DEAD;
//   * the checkpoint routine: on nmi it reads the DTable over the peripheral
//     bus and copies each dirty block to an NVM image (Algorithm "for each set
//     bit, memcpy the block"), saves the program context, and powers off, with
//     an in-progress flag kept in NVM;
//   * boot: VM is lost (randomised), the checkpoint is copied back to VM by
//     CPU writes, LAMBDA and SPLIM are written and CTRL clears the tracker;
//     an incomplete checkpoint restarts the program from scratch with a 50%
//     larger lambda.
// The same program is first run without power failures to get the golden
// final memory; the intermittent run must end with the same live memory
// (globals and the live stack) and context. At every checkpoint the live
// memory in NVM must equal VM. Each mechanism of the design is counted and
// must occur at least once: new dirty block, write to an already dirty block,
// ignored write outside VM, stack-frame clear, multi-block n_d decrement,
// V_ths up and down steps, nmi, software clear, completed checkpoint.
module tb_dica_top;
  import dica_pkg::*;
  localparam int unsigned VM_MIN = VM_MIN_DEF, VM_SIZE = VM_SIZE_DEF, BLOCK = BLOCK_SIZE_DEF;
  localparam int unsigned DT = VM_SIZE / BLOCK;
  localparam int unsigned IW = idx_width(DT);
  localparam int unsigned VTW = V_W_DEF + IW;
  localparam int unsigned BASE = 32'h0190;
  localparam int unsigned SPLIM = VM_MIN + VM_SIZE / 2;     // stack in the upper half
  localparam int unsigned STACK_TOP = VM_MIN + VM_SIZE;
  localparam int unsigned GLOB_BYTES = 3072;                // globals used by the program
  localparam int V_MIN = V_MIN_DEF, V_FULL = V_FULL_DEF;
  localparam int LAMBDA_TRUE = 40;                          // supply codes per block copy
  localparam int V_DEAD = V_MIN - LAMBDA_TRUE - 8;          // brown-out level
  localparam int TOTAL_STEPS = 60000;
  localparam int MAXD = 32;

  typedef struct {
    int step;
    int sp;
    int depth;
    int fsz [MAXD];
    int init_left;
  } ctx_t;

  // DUT
  logic clk = 0, rst_n = 0, cpu_wen = 0, per_en = 0;
  logic [15:0] cpu_daddr = 0, cpu_sp = 16'(STACK_TOP), v_supply = 16'(V_FULL);
  logic [13:0] per_addr = 0;
  logic [15:0] per_din = 0, per_dout;
  logic [1:0] per_we = 0;
  logic nmi;
  logic [DT-1:0] dtable;
  logic [IW-1:0] n_d;
  logic [VTW-1:0] vths;

  dica_top dut (.clk(clk), .rst_n(rst_n), .cpu_wen(cpu_wen), .cpu_daddr(cpu_daddr),
                .cpu_sp(cpu_sp), .v_supply(v_supply), .per_addr(per_addr), .per_din(per_din),
                .per_en(per_en), .per_we(per_we), .per_dout(per_dout), .nmi(nmi),
                .dtable(dtable), .n_d(n_d), .vths(vths));

  always #5 clk = ~clk;

  logic [7:0] vm [VM_SIZE];
  logic [7:0] nvm [VM_SIZE];
  logic [7:0] golden [VM_SIZE];
  ctx_t ctx, nv_ctx, gctx;
  bit nv_flag = 0, nv_valid = 0;
  int v = V_FULL;
  int lambda_sw = LAMBDA_TRUE;
  int checks = 0, failures = 0;
  // mechanism counters
  int c_new = 0, c_redundant = 0, c_outside = 0, c_sfclear = 0, c_multidec = 0;
  int c_up = 0, c_down = 0, c_nmi = 0, c_clear = 0, c_ckpt = 0, c_incomplete = 0;
  int c_boot = 0, c_fresh = 0, c_under = 0, blocks_copied = 0;

  function automatic int unsigned hsh(input int unsigned x, input int unsigned k);
    int unsigned h;
    h = x * 32'h9E3779B1 ^ (k * 32'h85EBCA77);
    h = h ^ (h >> 15); h = h * 32'h2C1B3C6D; h = h ^ (h >> 12);
    h = h * 32'h297A2D39; h = h ^ (h >> 15);
    return h;
  endfunction

  function automatic ctx_t ctx_init();
    ctx_t c;
    c.step = 0; c.sp = STACK_TOP; c.depth = 0; c.init_left = 0;
    foreach (c.fsz[i]) c.fsz[i] = 0;
    return c;
  endfunction

  // One program step: returns whether it writes, the byte address and data.
  task automatic app_op(inout ctx_t c, output bit w, output int addr, output logic [15:0] data);
    int unsigned h1, h2;
    int r, sz;
    h1 = hsh(c.step, 1); h2 = hsh(c.step, 2);
    data = 16'(hsh(c.step, 3));
    w = 0; addr = 0;
    r = int'(h1 % 100);
    if (c.init_left > 0) begin                       // finish pushing the new frame
      w = 1; addr = c.sp + c.fsz[c.depth-1] - 2 * c.init_left; c.init_left--;
    end else if (r < 30 || (r < 60 && c.depth == 0)) begin   // global variable
      w = 1; addr = VM_MIN + 2 * int'(h2 % (GLOB_BYTES / 2));
    end else if (r < 38) begin                       // peripheral / NVM write
      w = 1; addr = 32'h8000 + 2 * int'(h2 % 1024);
    end else if (r < 60) begin                       // local variable
      w = 1; addr = c.sp + 2 * int'(h2 % (c.fsz[c.depth-1] / 2));
    end else if (r < 80) begin                       // call: push first word
      sz = 16 + 2 * int'(h2 % 150);
      if (c.depth < MAXD && c.sp - sz >= int'(SPLIM) + 2) begin
        c.sp -= sz; c.fsz[c.depth] = sz; c.depth++;
        c.init_left = sz / 2 - 1;
        w = 1; addr = c.sp;
      end
    end else if (c.depth > 0) begin                  // return
      c.depth--; c.sp += c.fsz[c.depth];
    end
    c.step++;
  endtask

  function automatic bit live(input int a);  // byte offset in VM
    return (a < int'(GLOB_BYTES)) || (VM_MIN + a >= ctx.sp);
  endfunction

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic bus_write(input int unsigned off, input logic [15:0] d);
    per_addr = 14'((BASE + off) >> 1); per_din = d; per_we = 2'b11; per_en = 1;
    @(posedge clk); #1; per_en = 0; per_we = 0;
    @(negedge clk);
  endtask

  task automatic bus_read(input int unsigned off, output logic [15:0] d);
    per_addr = 14'((BASE + off) >> 1); per_we = 0; per_en = 1;
    #1 d = per_dout;
    @(posedge clk); #1; per_en = 0;
    @(negedge clk);
  endtask

  // observe the DUT every cycle and count mechanisms
  logic [DT-1:0] dt_q;
  logic [IW-1:0] nd_q;
  logic [VTW-1:0] vths_q;
  logic wen_q, clr_q, in_vm_q, was_dirty_q;
  int blk_q;
  always @(posedge clk) begin
    dt_q <= dtable; nd_q <= n_d; vths_q <= vths; wen_q <= cpu_wen;
    clr_q <= per_en && per_we != 0 && per_addr == 14'(BASE >> 1) && per_din[0];
    in_vm_q <= int'(cpu_daddr) >= VM_MIN && int'(cpu_daddr) < VM_MIN + VM_SIZE;
    blk_q <= (int'(cpu_daddr) - VM_MIN) / BLOCK;
    was_dirty_q <= (int'(cpu_daddr) >= VM_MIN && int'(cpu_daddr) < VM_MIN + VM_SIZE)
                   ? dtable[(int'(cpu_daddr) - VM_MIN) / BLOCK] : 1'b0;
  end
  always @(negedge clk) if (rst_n) begin
    if ((dtable & ~dt_q) != '0) c_new++;
    if (wen_q && in_vm_q && was_dirty_q) c_redundant++;
    if (wen_q && !in_vm_q) begin
      c_outside++;
      chk((dtable & ~dt_q) == '0, "write outside VM changed the DTable");
    end
    if (wen_q && in_vm_q && !clr_q && int'(cpu_sp) <= VM_MIN + blk_q * BLOCK + BLOCK - 1)
      chk(dtable[blk_q] == 1'b1, "written block not marked dirty");
    if (!clr_q && (dt_q & ~dtable) != '0) c_sfclear++;
    if (!clr_q && int'(nd_q) >= int'(n_d) + 2) c_multidec++;
    if (vths > vths_q) c_up++;
    if (vths < vths_q && !clr_q) c_down++;
  end

  // checkpoint routine, entered on nmi
  task automatic isr();
    logic [15:0] d;
    logic [DT-1:0] dt;
    int nd_at, pop;
    bit ok;
    c_nmi++;
    bus_read(2 * REG_ND, d); nd_at = int'(d);
    nv_flag = 1;
    for (int k = 0; k < DT / 16; k++) begin
      bus_read(2 * (REG_DTABLE + k), d); dt[16*k +: 16] = d;
    end
    chk(dt == dtable, "DTable read over the bus differs from the DTable");
    pop = $countones(dt);
    if (nd_at < pop) c_under++;
    ok = 1;
    for (int i = 0; i < DT; i++) begin
      if (dt[i]) begin
        if (v - LAMBDA_TRUE < V_DEAD) begin ok = 0; break; end
        for (int b = 0; b < BLOCK; b++) nvm[i*BLOCK + b] = vm[i*BLOCK + b];
        v -= LAMBDA_TRUE; blocks_copied++;
        v_supply = 16'(v);
        @(negedge clk);
      end
    end
    if (ok) begin
      nv_ctx = ctx; nv_flag = 0; nv_valid = 1; c_ckpt++;
      for (int a = 0; a < VM_SIZE; a++)
        if (live(a) && nvm[a] !== vm[a]) begin
          chk(0, $sformatf("checkpoint differs from VM at %h", VM_MIN + a)); break;
        end
      checks++;
      // with n_d >= true dirty count the routine must finish above brown-out
    end else begin
      c_incomplete++;
      chk(nd_at < pop, $sformatf("checkpoint of %0d blocks ran out of energy with n_d=%0d", pop, nd_at));
    end
  endtask

  task automatic boot();
    logic [15:0] d;
    c_boot++;
    v = V_FULL; v_supply = 16'(v);
    cpu_wen = 0;
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    for (int a = 0; a < VM_SIZE; a++) vm[a] = 8'($urandom);     // VM content is lost
    if (!nv_valid || nv_flag) begin                              // start anew
      c_fresh++;
      if (nv_flag) lambda_sw = lambda_sw + lambda_sw / 2;
      nv_ctx = ctx_init();
      for (int a = 0; a < VM_SIZE; a++) nvm[a] = 8'h00;
      nv_valid = 1; nv_flag = 0;
    end
    ctx = nv_ctx;
    cpu_sp = 16'(ctx.sp);
    for (int a = 0; a < VM_SIZE; a += 2) begin                   // restore by CPU writes
      cpu_wen = 1; cpu_daddr = 16'(VM_MIN + a);
      vm[a] = nvm[a]; vm[a+1] = nvm[a+1];
      @(negedge clk);
    end
    cpu_wen = 0;
    @(negedge clk);
    chk(dtable == '1, "restore did not mark every block");
    bus_write(2 * REG_LAMBDA, 16'(lambda_sw));
    bus_write(2 * REG_SPLIM, 16'(SPLIM));
    bus_write(2 * REG_CTRL, 16'h0001);
    c_clear++;
    chk(dtable == '0 && n_d == 0 && int'(vths) == V_MIN, "software clear");
    bus_read(2 * REG_LAMBDA, d);
    chk(int'(d) == lambda_sw, "lambda read-back");
  endtask

  initial begin
    #100ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit w;
    int addr;
    logic [15:0] data;
    // golden run without power failures
    for (int a = 0; a < VM_SIZE; a++) golden[a] = 8'h00;
    gctx = ctx_init();
    while (gctx.step < TOTAL_STEPS) begin
      app_op(gctx, w, addr, data);
      if (w && addr >= int'(VM_MIN) && addr < int'(VM_MIN + VM_SIZE)) begin
        golden[addr - VM_MIN] = data[7:0]; golden[addr - VM_MIN + 1] = data[15:8];
      end
    end
    // intermittent run
    @(negedge clk);
    forever begin
      boot();
      while (ctx.step < TOTAL_STEPS) begin
        if (nmi) break;
        app_op(ctx, w, addr, data);
        cpu_wen = w; cpu_daddr = 16'(addr); cpu_sp = 16'(ctx.sp);
        if (w && addr >= int'(VM_MIN) && addr < int'(VM_MIN + VM_SIZE)) begin
          vm[addr - VM_MIN] = data[7:0]; vm[addr - VM_MIN + 1] = data[15:8];
        end
        v -= 1; v_supply = 16'(v);
        @(negedge clk);
        cpu_wen = 0;
        chk(v >= V_DEAD, "supply died before the checkpoint interrupt");
        if (v < V_DEAD) break;
      end
      if (ctx.step >= TOTAL_STEPS) break;
      if (nmi) isr();
      if (c_boot > 40) begin chk(0, "too many power cycles"); break; end
    end
    cpu_wen = 0;
    // final state must equal the uninterrupted run
    chk(ctx.sp == gctx.sp && ctx.depth == gctx.depth, "final context");
    for (int a = 0; a < VM_SIZE; a++)
      if (live(a) && vm[a] !== golden[a]) begin
        chk(0, $sformatf("final memory differs at %h", VM_MIN + a)); break;
      end
    checks++;
    $display("power cycles %0d (fresh starts %0d), checkpoints %0d (incomplete %0d), blocks copied %0d",
             c_boot, c_fresh, c_ckpt, c_incomplete, blocks_copied);
    $display("new-dirty %0d redundant %0d outside-VM %0d stack-clears %0d multi-block-dec %0d",
             c_new, c_redundant, c_outside, c_sfclear, c_multidec);
    $display("vths up %0d down %0d, nmi %0d, sw clears %0d, n_d below dirty count at nmi %0d",
             c_up, c_down, c_nmi, c_clear, c_under);
    chk(c_new > 0, "no new dirty block");
    chk(c_redundant > 0, "no write to a dirty block");
    chk(c_outside > 0, "no write outside VM");
    chk(c_sfclear > 0, "no stack-frame clear");
    chk(c_multidec > 0, "no multi-block n_d decrement");
    chk(c_up > 0 && c_down > 0, "V_ths did not move both ways");
    chk(c_nmi > 0, "no checkpoint interrupt");
    chk(c_clear > 0, "no software clear");
    chk(c_ckpt > 0, "no completed checkpoint");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
