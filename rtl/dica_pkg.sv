// dica_pkg -- shared constants and helper functions of the DiCA differential
// checkpoint assistant.
//
// DiCA watches the data-memory writes of a small MCU, marks which fixed-size
// blocks of volatile memory (VM) have been written since the last checkpoint
// (the DTable), and raises a non-maskable interrupt when the supply voltage
// falls below a threshold that grows with the number of dirty blocks.
//
// The default sizes follow the reference configuration: a 16-bit MSP430
// address space, 8 KiB of SRAM as VM and 128-byte tracking blocks, which gives
// a 64-bit DTable. The VM base address 0x2000 is the SRAM base of an
// MSP430FR2476-class part; it is this design's choice, as is the voltage code
// scale (one code = 100 uV, so 2.0 V = 20000 and 3.6 V = 36000).
package dica_pkg;

  // CPU data-address width (MSP430: 16-bit byte addresses).
  localparam int unsigned ADDR_W_DEF     = 16;
  // Volatile memory window.
  localparam int unsigned VM_MIN_DEF     = 32'h2000;
  localparam int unsigned VM_SIZE_DEF    = 8192;
  // Tracking granularity (VM^block_size), a power of two.
  localparam int unsigned BLOCK_SIZE_DEF = 128;

  // Supply-voltage code width and the two voltages of the linear decay model.
  localparam int unsigned V_W_DEF        = 16;
  localparam int unsigned V_MIN_DEF      = 20000;  // 2.0 V, minimum operating voltage
  localparam int unsigned V_FULL_DEF     = 36000;  // 3.6 V, fully charged supply

  // Width of an index that can hold 0 .. n (inclusive).
  function automatic int unsigned idx_width(input int unsigned n);
    return (n < 2) ? 1 : $clog2(n + 1);
  endfunction

  // Peripheral register map, as word offsets from the peripheral base.
  localparam int unsigned REG_CTRL   = 0;  // W: bit0 = clear DTable, n_d, n_d', V_ths
  localparam int unsigned REG_LAMBDA = 1;  // RW: lambda, V_ths step per dirty block
  localparam int unsigned REG_SPLIM  = 2;  // RW: SP_Lim, lowest stack address
  localparam int unsigned REG_ND     = 3;  // R : n_d
  localparam int unsigned REG_VTHS   = 4;  // R : V_ths (low 16 bits)
  localparam int unsigned REG_STATUS = 5;  // R : bit0 = IT_sig, bit1 = V_ths settled (n_d' == n_d)
  localparam int unsigned REG_VTHSH  = 6;  // R : V_ths bits above 15
  localparam int unsigned REG_DTABLE = 8;  // R : DTable, 16 bits per word, word k = bits 16k+15..16k

endpackage
