// dica_regs -- software interface of DiCA on the MCU peripheral bus.
//
// The checkpoint software needs to (a) clear the DTable and n_d after a
// checkpoint has been restored, (b) load lambda found by calibration, (c) tell
// the stack-frame cleaner where the stack ends (SP_Lim), and (d) read the
// DTable to know which blocks to copy. This block provides those as 16-bit
// registers on an openMSP430-style peripheral bus:
//   per_addr  word address (byte address >> 1), per_en selects a cycle,
//   per_we    byte write enables (0 = read), per_din write data,
//   per_dout  read data, combinational, 0 when the block is not addressed.
//
// Register map (byte offset from BASE_ADDR):
//   0x00 CTRL    W   bit0: write 1 to clear DTable, n_d, n_d' and V_ths (one cycle)
//   0x02 LAMBDA  RW  V_ths step per dirty block, in supply-voltage codes
//   0x04 SPLIM   RW  SP_Lim, lowest byte address the stack may use
//   0x06 ND      R   n_d
//   0x08 VTHS    R   V_ths, low 16 bits
//   0x0A STATUS  R   bit0 IT_sig, bit1 V_ths settled (n_d' == n_d)
//   0x0C VTHSH   R   V_ths, bits above 15
//   0x10+2k DTAB R   DTable bits 16k+15 .. 16k
// Writes take effect at the clock edge that ends the bus cycle; clr is high
// during that cycle so the DTable is cleared at the same edge.
//
// The paper asks for a software clear of the DTable, a lambda that software
// sets, and a DTable that the checkpoint routine reads; the bus, the map, the
// SP_Lim register and the reset values are this design's choices. LAMBDA
// resets to (V_FULL - V_MIN) / DT_SIZE, so a full table asks for a full
// supply before calibration has run; SPLIM resets to the VM end, which leaves
// the stack-frame cleaner idle until software sets it.
module dica_regs #(
  parameter int unsigned ADDR_W     = dica_pkg::ADDR_W_DEF,
  parameter int unsigned BASE_ADDR  = 32'h0190,
  parameter int unsigned DT_SIZE    = dica_pkg::VM_SIZE_DEF / dica_pkg::BLOCK_SIZE_DEF,
  parameter int unsigned V_W        = dica_pkg::V_W_DEF,
  parameter int unsigned LAMBDA_RST = (dica_pkg::V_FULL_DEF - dica_pkg::V_MIN_DEF) / DT_SIZE,
  parameter int unsigned SPLIM_RST  = dica_pkg::VM_MIN_DEF + dica_pkg::VM_SIZE_DEF,
  localparam int unsigned IDX_W     = dica_pkg::idx_width(DT_SIZE),
  localparam int unsigned VTH_W     = V_W + IDX_W
) (
  input  logic               clk,
  input  logic               rst_n,
  // peripheral bus
  input  logic [13:0]        per_addr,
  input  logic [15:0]        per_din,
  input  logic               per_en,
  input  logic [1:0]         per_we,
  output logic [15:0]        per_dout,
  // to the tracker
  output logic               clr,
  output logic [V_W-1:0]     lambda,
  output logic [ADDR_W-1:0]  sp_lim,
  // from the tracker
  input  logic [DT_SIZE-1:0] dtable,
  input  logic [IDX_W-1:0]   n_d,
  input  logic [VTH_W-1:0]   vths,
  input  logic               settled,
  input  logic               it_sig
);
  import dica_pkg::*;

  localparam int unsigned DT_WORDS = (DT_SIZE + 15) / 16;
  localparam int unsigned N_WORDS  = REG_DTABLE + DT_WORDS;
  localparam int unsigned BASE_W   = BASE_ADDR / 2;

  logic [16*DT_WORDS-1:0] dt_pad;
  logic                   sel;
  logic [13:0]            off;
  logic                   rd, wr;
  logic [15:0]            wmask;

  assign off   = per_addr - 14'(BASE_W);
  assign sel   = per_en && (per_addr >= 14'(BASE_W)) && (32'(off) < N_WORDS);
  assign rd    = sel && (per_we == 2'b00);
  assign wr    = sel && (per_we != 2'b00);
  assign wmask = {{8{per_we[1]}}, {8{per_we[0]}}};
  assign clr   = wr && (off == 14'(REG_CTRL)) && per_we[0] && per_din[0];
  assign dt_pad = (16*DT_WORDS)'(dtable);

  // 16-bit register with byte-lane writes
  function automatic logic [15:0] merge(input logic [15:0] old, input logic [15:0] din,
                                        input logic [15:0] m);
    return (old & ~m) | (din & m);
  endfunction

  logic [15:0] lambda_q, splim_q;
  logic [31:0] vths_hi;

  assign vths_hi = 32'(vths) >> 16;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lambda_q <= 16'(LAMBDA_RST);
      splim_q  <= 16'(SPLIM_RST);
    end else if (wr) begin
      if (off == 14'(REG_LAMBDA)) lambda_q <= merge(lambda_q, per_din, wmask);
      if (off == 14'(REG_SPLIM))  splim_q  <= merge(splim_q, per_din, wmask);
    end
  end

  assign lambda = V_W'(lambda_q);
  assign sp_lim = ADDR_W'(splim_q);

  always_comb begin
    per_dout = '0;
    if (rd) begin
      if (off >= 14'(REG_DTABLE)) begin
        per_dout = dt_pad[16*(32'(off) - REG_DTABLE) +: 16];
      end else begin
        unique case (32'(off))
          REG_LAMBDA: per_dout = lambda_q;
          REG_SPLIM:  per_dout = splim_q;
          REG_ND:     per_dout = 16'(n_d);
          REG_VTHS:   per_dout = vths[15:0];
          REG_STATUS: per_dout = {14'b0, settled, it_sig};
          REG_VTHSH:  per_dout = 16'(vths_hi);
          default:    per_dout = '0;
        endcase
      end
    end
  end
endmodule
