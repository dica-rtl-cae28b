// tb_dica_workloads -- the five benchmark programs (AES-128, MatMul, SHA-256,
// BitCount, recursive DFS) run intermittently on DiCA at its default size,
// for storage capacitors of 10, 20, 30 and 40 uF.
//
// Each program is written as a sequence of small atomic steps over a register
// context (phase, loop counters, SP) and the 8 KiB VM; every store of a step
// is one CPU write cycle seen by DiCA, and a step may add a few idle cycles
// for its computation. The checkpoint interrupt is taken between steps.
//
// Supply model (linear, as assumed by the threshold): after a recharge the
// supply is 3.6 V; every clock costs 480/C codes (C in uF, 1 code = 100 uV),
// so a 10 uF capacitor gives 4000 cycles from 3.6 V to 2.0 V; copying one
// 128-byte block costs 64 cycles' worth. Before each capacitor's runs a
// calibration pass counts how many blocks N one full charge can copy and sets
// lambda = 1.6 V / N. Brown-out is one block plus 1.6 mV below V_MIN.
//
// On nmi the checkpoint routine reads the DTable over the peripheral bus,
// copies the dirty blocks to the NVM image, saves the context and powers off.
// Boot restores the NVM image into VM through CPU writes, writes LAMBDA and
// SPLIM, and clears DiCA. An incomplete checkpoint restarts the program with
// a 50% larger lambda.
//
// Checks: every completed checkpoint holds the live VM (everything but the
// dead stack); every program ends with the right result (FIPS-197 AES
// vector, the NIST two-block SHA-256 vector, products and bit counts computed
// here directly, a DFS order from a plain recursive reference); no brown-out
// happens before the interrupt. The number of power cycles each run needs,
// and the mean number of blocks each checkpoint copied, are printed as a table.
module tb_dica_workloads;
  import dica_pkg::*;
  localparam int unsigned VM_MIN = VM_MIN_DEF, VM_SIZE = VM_SIZE_DEF, BLOCK = BLOCK_SIZE_DEF;
  localparam int unsigned DT = VM_SIZE / BLOCK;
  localparam int unsigned IW = idx_width(DT);
  localparam int unsigned VTW = V_W_DEF + IW;
  localparam int unsigned BASE = 32'h0190;
  localparam int SPLIM = VM_MIN + VM_SIZE / 2;
  localparam int SP_MAIN = VM_MIN + VM_SIZE - 16;
  localparam int V_MIN = V_MIN_DEF, V_FULL = V_FULL_DEF;
  localparam int MAX_BOOTS = 300;

  typedef struct {
    int pc;
    int r [4];
    int sp;
  } ctx_t;

  logic clk = 0, rst_n = 0, cpu_wen = 0, per_en = 0;
  logic [15:0] cpu_daddr = 0, cpu_sp = 16'(SP_MAIN), v_supply = 16'(V_FULL);
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
  ctx_t ctx, nv_ctx;
  bit nv_flag, nv_valid, done;
  int v12, drop12, lam12, lambda_sw, dead12, wl;
  int checks = 0, failures = 0;
  int n_boot, n_ckpt, n_incomplete, n_blocks;
  logic [7:0] sbox [256];
  logic [31:0] sha_k [64];
  logic [31:0] sha_h0 [8];

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic int unsigned hsh(input int unsigned x);
    int unsigned h;
    h = x * 32'h9E3779B1 + 32'h7F4A7C15;
    h = h ^ (h >> 15); h = h * 32'h2C1B3C6D; h = h ^ (h >> 12);
    h = h * 32'h297A2D39; h = h ^ (h >> 15);
    return h;
  endfunction

  // ---------------- constant tables, computed ----------------
  function automatic logic [7:0] gmul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p = 0;
    for (int i = 0; i < 8; i++) begin
      if (b[0]) p ^= a;
      a = {a[6:0], 1'b0} ^ (a[7] ? 8'h1B : 8'h00);
      b = b >> 1;
    end
    return p;
  endfunction

  // S-box: multiplicative inverse in GF(2^8) followed by the affine map
  // s = b ^ rotl(b,1) ^ rotl(b,2) ^ rotl(b,3) ^ rotl(b,4) ^ 0x63.
  task automatic make_sbox();
    for (int x = 0; x < 256; x++) begin
      logic [7:0] inv, b;
      inv = 0;
      for (int y = 1; y < 256; y++) if (gmul(8'(x), 8'(y)) == 8'h01) inv = 8'(y);
      b = inv;
      sbox[x] = b ^ {b[6:0], b[7]} ^ {b[5:0], b[7:6]} ^ {b[4:0], b[7:5]} ^ {b[3:0], b[7:4]} ^ 8'h63;
    end
  endtask

  function automatic logic [127:0] iroot(input logic [127:0] x, input int k);
    logic [127:0] lo = 0, hi = 128'h1 << 40, mid, p;
    while (lo < hi) begin
      mid = (lo + hi + 1) >> 1;
      p = (k == 2) ? mid * mid : mid * mid * mid;
      if (p <= x) lo = mid; else hi = mid - 1;
    end
    return lo;
  endfunction

  // SHA-256 constants: fractional bits of square and cube roots of primes.
  task automatic make_sha_consts();
    int p = 2, n = 0;
    while (n < 64) begin
      bit prime = 1;
      for (int d = 2; d * d <= p; d++) if (p % d == 0) prime = 0;
      if (prime) begin
        sha_k[n] = 32'(iroot(128'(p) << 96, 3));
        if (n < 8) sha_h0[n] = 32'(iroot(128'(p) << 64, 2));
        n++;
      end
      p++;
    end
  endtask

  // ---------------- memory access by the program ----------------
  function automatic logic [7:0] ld8(input int a);  return vm[a - VM_MIN]; endfunction
  function automatic logic [15:0] ld16(input int a); return {vm[a - VM_MIN + 1], vm[a - VM_MIN]}; endfunction
  function automatic logic [31:0] ld32(input int a); return {ld16(a + 2), ld16(a)}; endfunction

  task automatic cycle(input bit w, input int a);
    cpu_wen = w; cpu_daddr = 16'(a); cpu_sp = 16'(ctx.sp);
    v12 -= drop12; v_supply = 16'(v12 / 12);
    @(negedge clk);
    cpu_wen = 0;
    chk(v12 >= dead12, "brown-out before the checkpoint interrupt");
  endtask
  task automatic idle(input int n); repeat (n) cycle(0, 0); endtask
  task automatic st8(input int a, input logic [7:0] d); vm[a - VM_MIN] = d; cycle(1, a); endtask
  task automatic st16(input int a, input logic [15:0] d);
    vm[a - VM_MIN] = d[7:0]; vm[a - VM_MIN + 1] = d[15:8]; cycle(1, a);
  endtask
  task automatic st32(input int a, input logic [31:0] d); st16(a, d[15:0]); st16(a + 2, d[31:16]); endtask

  // ---------------- AES-128 ----------------
  localparam int AES_ST = VM_MIN, AES_RK = VM_MIN + 16, AES_BUF = VM_MIN + 256, AES_NBLK = 16;
  function automatic logic [7:0] aes_key(input int i); return 8'(i); endfunction
  function automatic logic [7:0] aes_pt(input int i); return 8'(i * 17); endfunction
  localparam logic [127:0] AES_CT = 128'h69c4e0d86a7b0430d8cdb78070b4c55a;
  typedef logic [7:0] st_t [16];
  function automatic st_t ld_state(input int a);
    st_t s; for (int i = 0; i < 16; i++) s[i] = ld8(a + i); return s;
  endfunction
  task automatic st_state(input int a, input st_t s);
    for (int i = 0; i < 16; i += 2) st16(a + i, {s[i+1], s[i]});
  endtask

  task automatic aes_step();
    st_t s, t;
    logic [7:0] rcon;
    case (ctx.pc)
      0: begin                                   // key expansion, one word per step
        int i = ctx.r[0];
        logic [7:0] w [4];
        if (i < 4) for (int j = 0; j < 4; j++) w[j] = aes_key(4*i + j);
        else begin
          for (int j = 0; j < 4; j++) w[j] = ld8(AES_RK + 4*(i-1) + j);
          if (i % 4 == 0) begin
            logic [7:0] t0 = w[0];
            rcon = 8'h01;
            for (int q = 1; q < i / 4; q++) rcon = gmul(rcon, 8'h02);
            w[0] = sbox[w[1]] ^ rcon; w[1] = sbox[w[2]]; w[2] = sbox[w[3]]; w[3] = sbox[t0];
          end
          for (int j = 0; j < 4; j++) w[j] ^= ld8(AES_RK + 4*(i-4) + j);
        end
        st16(AES_RK + 4*i, {w[1], w[0]}); st16(AES_RK + 4*i + 2, {w[3], w[2]});
        idle(4);
        ctx.r[0]++;
        if (ctx.r[0] == 44) begin ctx.pc = 1; ctx.r[0] = 0; end
      end
      1: begin                                   // fill the plaintext buffer
        for (int i = 0; i < 16; i++) s[i] = aes_pt(i);
        st_state(AES_BUF + 16 * ctx.r[0], s);
        ctx.r[0]++;
        if (ctx.r[0] == AES_NBLK) begin ctx.pc = 2; ctx.r = '{0, 0, 0, 0}; end
      end
      2: begin                                   // r0 block, r1 round, r2 sub-step
        int b = ctx.r[0], rnd = ctx.r[1];
        case (ctx.r[2])
          0: begin
            s = ld_state(AES_BUF + 16*b);
            for (int i = 0; i < 16; i++) s[i] ^= ld8(AES_RK + i);
            st_state(AES_ST, s); ctx.r[1] = 1; ctx.r[2] = 1;
          end
          1: begin
            s = ld_state(AES_ST);
            for (int i = 0; i < 16; i++) s[i] = sbox[s[i]];
            st_state(AES_ST, s); ctx.r[2] = 2;
          end
          2: begin
            s = ld_state(AES_ST);
            for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) t[r + 4*c] = s[r + 4*((c + r) % 4)];
            st_state(AES_ST, t); ctx.r[2] = (rnd == 10) ? 4 : 3;
          end
          3: begin
            s = ld_state(AES_ST);
            for (int c = 0; c < 4; c++)
              for (int r = 0; r < 4; r++)
                t[r + 4*c] = gmul(s[r + 4*c], 8'h02) ^ gmul(s[(r+1)%4 + 4*c], 8'h03) ^
                             s[(r+2)%4 + 4*c] ^ s[(r+3)%4 + 4*c];
            st_state(AES_ST, t); idle(8); ctx.r[2] = 4;
          end
          4: begin
            s = ld_state(AES_ST);
            for (int i = 0; i < 16; i++) s[i] ^= ld8(AES_RK + 16*rnd + i);
            st_state(AES_ST, s);
            if (rnd == 10) ctx.r[2] = 5; else begin ctx.r[1] = rnd + 1; ctx.r[2] = 1; end
          end
          default: begin
            st_state(AES_BUF + 16*b, ld_state(AES_ST));
            ctx.r[0] = b + 1; ctx.r[2] = 0;
            if (ctx.r[0] == AES_NBLK) done = 1;
          end
        endcase
      end
      default: done = 1;
    endcase
  endtask

  task automatic aes_check();
    for (int b = 0; b < AES_NBLK; b++)
      for (int i = 0; i < 16; i++)
        chk(ld8(AES_BUF + 16*b + i) == AES_CT[127 - 8*i -: 8], $sformatf("AES block %0d byte %0d", b, i));
  endtask

  // ---------------- MatMul 16x16 ----------------
  localparam int MM_N = 16, MM_A = VM_MIN, MM_B = VM_MIN + 512, MM_C = VM_MIN + 1024;
  function automatic logic [15:0] mm_init(input int i); return 16'(hsh(i + 5000) % 97); endfunction
  task automatic mm_step();
    case (ctx.pc)
      0: begin
        st16(MM_A + 2 * ctx.r[0], mm_init(ctx.r[0])); idle(2);
        ctx.r[0]++;
        if (ctx.r[0] == 2 * MM_N * MM_N) begin ctx.pc = 1; ctx.r = '{0, 0, 0, 0}; end
      end
      1: begin                                   // r0 = i, r1 = j, r2 = k
        int i = ctx.r[0], j = ctx.r[1], k = ctx.r[2];
        logic [15:0] acc;
        acc = (k == 0) ? 16'h0 : ld16(MM_C + 2 * (MM_N*i + j));
        acc += ld16(MM_A + 2 * (MM_N*i + k)) * ld16(MM_B + 2 * (MM_N*k + j));
        st16(MM_C + 2 * (MM_N*i + j), acc); idle(6);
        ctx.r[2]++;
        if (ctx.r[2] == MM_N) begin ctx.r[2] = 0; ctx.r[1]++; end
        if (ctx.r[1] == MM_N) begin ctx.r[1] = 0; ctx.r[0]++; end
        if (ctx.r[0] == MM_N) done = 1;
      end
      default: done = 1;
    endcase
  endtask
  task automatic mm_check();
    for (int i = 0; i < MM_N; i++)
      for (int j = 0; j < MM_N; j++) begin
        logic [15:0] e = 0;
        for (int k = 0; k < MM_N; k++) e += mm_init(MM_N*i + k) * mm_init(MM_N*MM_N + MM_N*k + j);
        chk(ld16(MM_C + 2 * (MM_N*i + j)) == e, $sformatf("MatMul C[%0d][%0d]", i, j));
      end
  endtask

  // ---------------- SHA-256 of the NIST two-block message, repeated ----------------
  localparam int SHA_W = VM_MIN, SHA_H = VM_MIN + 256, SHA_V = VM_MIN + 288, SHA_OUT = VM_MIN + 512;
  localparam int SHA_REPS = 6;
  localparam string SHA_MSG = "abcdbcdecdefdefgefghfghighijhijkijkljklmklmnlmnomnopnopq";
  localparam logic [255:0] SHA_DIGEST =
    256'h248d6a61d20638b8e5c026930c3e6039a33ce45964ff2167f6ecedd419db06c1;
  function automatic logic [7:0] sha_byte(input int i);   // padded message, 128 bytes
    if (i < 56) return 8'(SHA_MSG[i]);
    if (i == 56) return 8'h80;
    if (i == 126) return 8'h01;
    if (i == 127) return 8'hC0;
    return 8'h00;
  endfunction
  function automatic logic [31:0] rotr(input logic [31:0] x, input int n);
    return (x >> n) | (x << (32 - n));
  endfunction
  task automatic sha_step();
    int t = ctx.r[2];
    logic [31:0] v [8];
    logic [31:0] s0, s1, t1, t2, ch, maj, w;
    case (ctx.pc)
      0: begin for (int i = 0; i < 8; i++) st32(SHA_H + 4*i, sha_h0[i]); ctx.pc = 1; ctx.r[2] = 0; end
      1: begin
        int o = 64 * ctx.r[1] + 4 * t;
        st32(SHA_W + 4*t, {sha_byte(o), sha_byte(o+1), sha_byte(o+2), sha_byte(o+3)});
        ctx.r[2]++; if (ctx.r[2] == 16) ctx.pc = 2;
      end
      2: begin
        s0 = rotr(ld32(SHA_W + 4*(t-15)), 7) ^ rotr(ld32(SHA_W + 4*(t-15)), 18) ^ (ld32(SHA_W + 4*(t-15)) >> 3);
        s1 = rotr(ld32(SHA_W + 4*(t-2)), 17) ^ rotr(ld32(SHA_W + 4*(t-2)), 19) ^ (ld32(SHA_W + 4*(t-2)) >> 10);
        st32(SHA_W + 4*t, ld32(SHA_W + 4*(t-16)) + s0 + ld32(SHA_W + 4*(t-7)) + s1); idle(6);
        ctx.r[2]++; if (ctx.r[2] == 64) ctx.pc = 3;
      end
      3: begin for (int i = 0; i < 8; i++) st32(SHA_V + 4*i, ld32(SHA_H + 4*i)); ctx.pc = 4; ctx.r[2] = 0; end
      4: begin
        for (int i = 0; i < 8; i++) v[i] = ld32(SHA_V + 4*i);
        w   = ld32(SHA_W + 4*t);
        s1  = rotr(v[4], 6) ^ rotr(v[4], 11) ^ rotr(v[4], 25);
        ch  = (v[4] & v[5]) ^ (~v[4] & v[6]);
        t1  = v[7] + s1 + ch + sha_k[t] + w;
        s0  = rotr(v[0], 2) ^ rotr(v[0], 13) ^ rotr(v[0], 22);
        maj = (v[0] & v[1]) ^ (v[0] & v[2]) ^ (v[1] & v[2]);
        t2  = s0 + maj;
        for (int i = 7; i > 0; i--) v[i] = v[i-1];
        v[4] += t1;
        v[0] = t1 + t2;
        for (int i = 0; i < 8; i++) st32(SHA_V + 4*i, v[i]);
        idle(10);
        ctx.r[2]++; if (ctx.r[2] == 64) ctx.pc = 5;
      end
      5: begin
        for (int i = 0; i < 8; i++) st32(SHA_H + 4*i, ld32(SHA_H + 4*i) + ld32(SHA_V + 4*i));
        ctx.r[1]++; ctx.r[2] = 0;
        ctx.pc = (ctx.r[1] == 2) ? 6 : 1;
      end
      default: begin
        for (int i = 0; i < 8; i++) st32(SHA_OUT + 32*ctx.r[0] + 4*i, ld32(SHA_H + 4*i));
        ctx.r[0]++; ctx.r[1] = 0; ctx.r[2] = 0; ctx.pc = 0;
        if (ctx.r[0] == SHA_REPS) done = 1;
      end
    endcase
  endtask
  task automatic sha_check();
    for (int r = 0; r < SHA_REPS; r++)
      for (int i = 0; i < 8; i++)
        chk(ld32(SHA_OUT + 32*r + 4*i) == SHA_DIGEST[255 - 32*i -: 32], $sformatf("SHA-256 rep %0d word %0d", r, i));
  endtask

  // ---------------- BitCount ----------------
  localparam int BC_N = 1024, BC_A = VM_MIN, BC_CNT = VM_MIN + 2048;
  task automatic bc_step();
    case (ctx.pc)
      0: begin
        st16(BC_A + 2 * ctx.r[0], 16'(hsh(ctx.r[0]))); idle(2);
        ctx.r[0]++;
        if (ctx.r[0] == BC_N) begin ctx.pc = 1; ctx.r[0] = 0; st32(BC_CNT, 0); end
      end
      1: begin
        st32(BC_CNT, ld32(BC_CNT) + $countones(ld16(BC_A + 2 * ctx.r[0]))); idle(8);
        ctx.r[0]++;
        if (ctx.r[0] == BC_N) done = 1;
      end
      default: done = 1;
    endcase
  endtask
  task automatic bc_check();
    int e = 0;
    for (int i = 0; i < BC_N; i++) e += $countones(16'(hsh(i)));
    chk(ld32(BC_CNT) == e, $sformatf("BitCount %0d expected %0d", ld32(BC_CNT), e));
  endtask

  // ---------------- recursive DFS ----------------
  localparam int DFS_N = 256, DFS_DEG = 3, DFS_VIS = VM_MIN, DFS_ORD = VM_MIN + 256, DFS_CNT = VM_MIN + 768;
  localparam int DFS_FRAME = 8;
  function automatic int dfs_adj(input int n, input int k); return int'(hsh(7 * n + k + 99) % DFS_N); endfunction
  task automatic dfs_call(input int n);
    logic [15:0] c;
    ctx.sp -= DFS_FRAME;
    st16(ctx.sp, 16'hC0DE); st16(ctx.sp + 2, 16'(n)); st16(ctx.sp + 4, 16'h0);
    st8(DFS_VIS + n, 8'h01);
    c = ld16(DFS_CNT);
    st16(DFS_ORD + 2 * int'(c), 16'(n)); st16(DFS_CNT, c + 1'b1);
  endtask
  task automatic dfs_step();
    case (ctx.pc)
      0: begin
        st16(DFS_VIS + 2 * ctx.r[0], 16'h0);
        ctx.r[0]++;
        if (ctx.r[0] == DFS_N / 2) begin st16(DFS_CNT, 0); ctx.pc = 1; end
      end
      1: begin dfs_call(0); ctx.pc = 2; end
      2: begin
        int n, k, m;
        if (ctx.sp == SP_MAIN) done = 1;
        else begin
          n = int'(ld16(ctx.sp + 2)); k = int'(ld16(ctx.sp + 4));
          if (k == DFS_DEG) begin ctx.sp += DFS_FRAME; idle(2); end
          else begin
            st16(ctx.sp + 4, 16'(k + 1)); idle(2);
            m = dfs_adj(n, k);
            if (ld8(DFS_VIS + m) == 0) dfs_call(m);
          end
        end
      end
      default: done = 1;
    endcase
  endtask
  int ref_order [$];
  bit ref_vis [DFS_N];
  function automatic void ref_dfs(input int n);
    ref_vis[n] = 1; ref_order.push_back(n);
    for (int k = 0; k < DFS_DEG; k++) if (!ref_vis[dfs_adj(n, k)]) ref_dfs(dfs_adj(n, k));
  endfunction
  task automatic dfs_check();
    ref_order.delete();
    foreach (ref_vis[i]) ref_vis[i] = 0;
    ref_dfs(0);
    chk(int'(ld16(DFS_CNT)) == ref_order.size(), $sformatf("DFS count %0d expected %0d", ld16(DFS_CNT), ref_order.size()));
    foreach (ref_order[i]) chk(int'(ld16(DFS_ORD + 2*i)) == ref_order[i], $sformatf("DFS order %0d", i));
  endtask

  // ---------------- checkpoint routine, boot, run ----------------
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

  function automatic bit live(input int a);
    return (VM_MIN + a < SPLIM) || (VM_MIN + a >= ctx.sp);
  endfunction

  task automatic isr();
    logic [15:0] d;
    logic [DT-1:0] dt;
    bit ok = 1;
    nv_flag = 1;
    for (int k = 0; k < DT / 16; k++) begin
      bus_read(2 * (REG_DTABLE + k), d); dt[16*k +: 16] = d;
    end
    for (int i = 0; i < DT; i++) if (dt[i]) begin
      if (v12 - lam12 < dead12) begin ok = 0; break; end
      for (int b = 0; b < BLOCK; b++) nvm[i*BLOCK + b] = vm[i*BLOCK + b];
      v12 -= lam12; n_blocks++;
    end
    if (ok) begin
      nv_ctx = ctx; nv_flag = 0; nv_valid = 1; n_ckpt++;
      for (int a = 0; a < VM_SIZE; a++)
        if (live(a) && nvm[a] !== vm[a]) begin
          chk(0, $sformatf("checkpoint differs from VM at %h", VM_MIN + a)); break;
        end
      checks++;
    end else n_incomplete++;
  endtask

  task automatic boot();
    n_boot++;
    v12 = 12 * V_FULL; v_supply = 16'(V_FULL);
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    for (int a = 0; a < VM_SIZE; a++) vm[a] = 8'($urandom);
    if (!nv_valid || nv_flag) begin
      if (nv_flag) lambda_sw = lambda_sw + lambda_sw / 2;
      nv_ctx.pc = 0; nv_ctx.r = '{0, 0, 0, 0}; nv_ctx.sp = SP_MAIN;
      for (int a = 0; a < VM_SIZE; a++) nvm[a] = 8'h00;
      nv_valid = 1; nv_flag = 0;
    end
    ctx = nv_ctx; cpu_sp = 16'(ctx.sp);
    for (int a = 0; a < VM_SIZE; a += 2) begin
      cpu_wen = 1; cpu_daddr = 16'(VM_MIN + a);
      vm[a] = nvm[a]; vm[a+1] = nvm[a+1];
      @(negedge clk);
    end
    cpu_wen = 0;
    bus_write(2 * REG_LAMBDA, 16'(lambda_sw));
    bus_write(2 * REG_SPLIM, 16'(SPLIM));
    bus_write(2 * REG_CTRL, 16'h0001);
  endtask

  // Calibration at deployment: from a full charge, copy blocks until the
  // supply reaches V_MIN; lambda = (V_FULL - V_MIN) / N, rounded up.
  task automatic calibrate();
    int n = 0;
    v12 = 12 * V_FULL;
    while (v12 - lam12 >= 12 * V_MIN) begin v12 -= lam12; n++; end
    lambda_sw = (V_FULL - V_MIN + n - 1) / n;
    chk(12 * lambda_sw >= lam12, "calibrated lambda below the true block cost");
  endtask

  task automatic run(input int w, input int cap_uf, output int cycles_needed);
    wl = w;
    drop12 = 480 / cap_uf;
    lam12 = 64 * drop12;
    calibrate();
    dead12 = 12 * V_MIN - lam12 - 12 * 16;
    nv_valid = 0; nv_flag = 0; done = 0;
    n_boot = 0; n_ckpt = 0; n_incomplete = 0; n_blocks = 0;
    while (!done && n_boot < MAX_BOOTS) begin
      boot();
      while (!done && !nmi) begin
        case (wl)
          0: aes_step();
          1: mm_step();
          2: sha_step();
          3: bc_step();
          default: dfs_step();
        endcase
      end
      if (!done) isr();
    end
    chk(done, "program did not finish");
    case (wl)
      0: aes_check();
      1: mm_check();
      2: sha_check();
      3: bc_check();
      default: dfs_check();
    endcase
    cycles_needed = n_boot;
  endtask

  initial begin
    #1s;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    string names [5] = '{"AES128", "MatMul", "SHA256", "BitCount", "RecursiveDFS"};
    int caps [4] = '{10, 20, 30, 40};
    int res;
    make_sbox();
    make_sha_consts();
    chk(sbox[0] == 8'h63 && sbox[8'h53] == 8'hED, "S-box");
    chk(sha_k[0] == 32'h428a2f98 && sha_h0[0] == 32'h6a09e667, "SHA-256 constants");
    @(negedge clk);
    $display("power cycles needed (incomplete checkpoints, mean blocks copied per checkpoint of %0d)", DT);
    for (int w = 0; w < 5; w++) begin
      string line;
      line = $sformatf("%-13s", names[w]);
      foreach (caps[c]) begin
        run(w, caps[c], res);
        line = {line, $sformatf("  %2d uF: %3d (%0d, %0d)", caps[c], res, n_incomplete,
                                 n_ckpt ? n_blocks / n_ckpt : 0)};
      end
      $display("%s", line);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
