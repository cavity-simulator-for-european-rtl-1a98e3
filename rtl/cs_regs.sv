// cs_regs: configuration registers and table-write decoder.
//
// The processor that talks to the outside world (Ethernet/USB) sets the
// simulation parameters through a simple synchronous bus: a write
// (wr_en, addr, wdata) to region 0 (addr[15:12] = 0) stores wdata in
// register addr[6:0]; a write to regions 1..6 raises the write strobe of
// the corresponding table (tbl_we[region]) with tbl_addr = addr[9:0] and
// tbl_data = wdata.  rd_en returns a register (or the read-only status
// word at REG_STATUS) on rdata one clock later.  Registers reset to
// reg_default() of cs_pkg.  The bus and the map are this design's.
module cs_regs
  import cs_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en,
  input  logic        rd_en,
  input  logic [15:0] addr,
  input  logic [31:0] wdata,
  input  logic [31:0] status,
  output logic [31:0] rdata,
  output logic [31:0] regs [NREGS],
  output logic [15:0] tbl_we,
  output logic [TBL_AW-1:0] tbl_addr,
  output logic [31:0] tbl_data
);
  logic [3:0] rgn;
  assign rgn = addr[15:12];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NREGS; k++) regs[k] <= reg_default(k);
      rdata <= '0; tbl_we <= '0; tbl_addr <= '0; tbl_data <= '0;
    end else begin
      tbl_we   <= '0;
      tbl_addr <= addr[TBL_AW-1:0];
      tbl_data <= wdata;
      if (wr_en) begin
        if (rgn == RGN_REGS) regs[addr[6:0]] <= wdata;
        else                 tbl_we[rgn] <= 1'b1;
      end
      if (rd_en)
        rdata <= (addr[6:0] == 7'(REG_STATUS)) ? status : regs[addr[6:0]];
    end
  end
endmodule
