// tb_dica_regs -- self-checking test of the DiCA peripheral registers.
//
// Checks the reset values of LAMBDA and SPLIM, word and byte-lane writes,
// read-back of every status register and every DTable word against the
// values driven into the block, the one-cycle clr strobe of a CTRL write
// (and its absence for other writes or CTRL with bit0 = 0), and that accesses
// outside the register window neither answer nor write.
module tb_dica_regs;
  import dica_pkg::*;
  localparam int unsigned DT = 64, BASE = 32'h0190;
  localparam int unsigned IW = idx_width(DT);
  localparam int unsigned VTW = 16 + IW;

  logic clk = 0, rst_n = 0;
  logic [13:0] per_addr = 0;
  logic [15:0] per_din = 0, per_dout;
  logic per_en = 0;
  logic [1:0] per_we = 0;
  logic clr;
  logic [15:0] lambda, sp_lim;
  logic [DT-1:0] dtable = 0;
  logic [IW-1:0] n_d = 0;
  logic [VTW-1:0] vths = 0;
  logic settled = 0, it_sig = 0;
  int checks = 0, failures = 0, clr_seen = 0;
  logic [15:0] m_lambda, m_splim;

  dica_regs dut (.clk(clk), .rst_n(rst_n), .per_addr(per_addr), .per_din(per_din),
                 .per_en(per_en), .per_we(per_we), .per_dout(per_dout), .clr(clr),
                 .lambda(lambda), .sp_lim(sp_lim), .dtable(dtable), .n_d(n_d), .vths(vths),
                 .settled(settled), .it_sig(it_sig));

  always #5 clk = ~clk;
  always @(posedge clk) if (clr) clr_seen++;

  task automatic expect16(input string what, input logic [15:0] got, input logic [15:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask

  task automatic bus_write(input int unsigned byte_off, input logic [15:0] d, input logic [1:0] we,
                           input bit exp_clr);
    per_addr = 14'((BASE + byte_off) >> 1); per_din = d; per_we = we; per_en = 1;
    #1;
    checks++;
    if (clr !== exp_clr) begin failures++; $display("FAIL clr=%b at offset %h", clr, byte_off); end
    @(posedge clk); #1;
    per_en = 0; per_we = 0;
    #1;
    checks++;
    if (clr !== 1'b0) begin failures++; $display("FAIL clr held after the write"); end
    @(negedge clk);
  endtask

  task automatic bus_read(input int unsigned byte_off, output logic [15:0] d);
    per_addr = 14'((BASE + byte_off) >> 1); per_we = 0; per_en = 1;
    #1; d = per_dout;
    @(posedge clk); #1; per_en = 0;
    #1;
    checks++;
    if (per_dout !== 16'h0) begin failures++; $display("FAIL dout not zero when idle"); end
    @(negedge clk);
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] d;
    repeat (2) @(negedge clk);
    rst_n = 1;
    expect16("lambda reset", lambda, 16'((36000 - 20000) / DT));
    expect16("splim reset", sp_lim, 16'h4000);
    m_lambda = lambda; m_splim = sp_lim;
    for (int n = 0; n < 400; n++) begin
      // random tracker state
      dtable = {$urandom, $urandom}; n_d = IW'($urandom % (DT + 1));
      vths = VTW'({$urandom} % (1 << VTW)); settled = 1'($urandom); it_sig = 1'($urandom);
      case ($urandom % 8)
        0: begin d = 16'($urandom); bus_write(2 * REG_LAMBDA, d, 2'b11, 0); m_lambda = d; end
        1: begin d = 16'($urandom); bus_write(2 * REG_LAMBDA, d, 2'b01, 0); m_lambda[7:0] = d[7:0]; end
        2: begin d = 16'($urandom); bus_write(2 * REG_SPLIM, d, 2'b11, 0); m_splim = d; end
        3: begin d = 16'($urandom); bus_write(2 * REG_SPLIM, d, 2'b10, 0); m_splim[15:8] = d[15:8]; end
        4: begin d = 16'($urandom); bus_write(2 * REG_CTRL, d, 2'b11, d[0]); end
        5: begin d = 16'($urandom); bus_write(BASE == 0 ? 0 : 32'h0100, d, 2'b11, 0); end  // other device
        default: ;
      endcase
      expect16("lambda out", lambda, m_lambda);
      expect16("splim out", sp_lim, m_splim);
      bus_read(2 * REG_LAMBDA, d); expect16("LAMBDA", d, m_lambda);
      bus_read(2 * REG_SPLIM, d);  expect16("SPLIM", d, m_splim);
      bus_read(2 * REG_ND, d);     expect16("ND", d, 16'(n_d));
      bus_read(2 * REG_VTHS, d);   expect16("VTHS", d, vths[15:0]);
      bus_read(2 * REG_VTHSH, d);  expect16("VTHSH", d, 16'(vths >> 16));
      bus_read(2 * REG_STATUS, d); expect16("STATUS", d, {14'b0, settled, it_sig});
      for (int k = 0; k < DT / 16; k++) begin
        bus_read(2 * (REG_DTABLE + k), d); expect16("DTABLE", d, dtable[16*k +: 16]);
      end
      bus_read(2 * (REG_DTABLE + DT / 16), d); expect16("past window", d, 16'h0);
    end
    checks++;
    if (clr_seen < 5) begin failures++; $display("FAIL clr seen only %0d times", clr_seen); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
