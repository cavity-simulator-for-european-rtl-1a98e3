// Testbench for cs_regs: reset values, register write/read-back, status
// read, and table write strobes with address and data.
module tb_cs_regs;
  import cs_pkg::*;
  logic clk = 0, rst_n = 0, wr_en = 0, rd_en = 0;
  logic [15:0] addr;
  logic [31:0] wdata, status, rdata, tbl_data;
  logic [31:0] regs [NREGS];
  logic [15:0] tbl_we;
  logic [TBL_AW-1:0] tbl_addr;
  int checks = 0, failures = 0;

  cs_regs dut (.clk, .rst_n, .wr_en, .rd_en, .addr, .wdata, .status, .rdata, .regs,
               .tbl_we, .tbl_addr, .tbl_data);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string w, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 10) $display("FAIL %s got=%h exp=%h", w, got, exp); end
  endtask

  initial begin
    addr = '0; wdata = '0; status = 32'h5;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int k = 0; k < NREGS; k++) chk("reset", regs[k], reg_default(k));
    for (int k = 0; k < 60; k++) begin
      @(negedge clk); wr_en = 1; addr = 16'(k); wdata = 32'(k * 32'h01010101 + 7);
    end
    @(negedge clk); wr_en = 0;
    for (int k = 0; k < 60; k++) begin
      @(negedge clk); rd_en = 1; addr = 16'(k);
      @(negedge clk); rd_en = 0;
      chk("readback", rdata, 32'(k * 32'h01010101 + 7));
      chk("regs", regs[k], 32'(k * 32'h01010101 + 7));
    end
    @(negedge clk); rd_en = 1; addr = 16'(REG_STATUS);
    @(negedge clk); rd_en = 0;
    chk("status", rdata, 32'h5);
    for (int r = 1; r < 7; r++) begin
      @(negedge clk); wr_en = 1; addr = {4'(r), 2'b00, 10'(r * 77)}; wdata = 32'(r * 1111);
      @(negedge clk); wr_en = 0;
      chk("tbl_we", 32'(tbl_we), 32'(1 << r));
      chk("tbl_addr", 32'(tbl_addr), 32'(r * 77));
      chk("tbl_data", tbl_data, 32'(r * 1111));
      @(negedge clk);
      chk("tbl_we pulse", 32'(tbl_we), 32'h0);
    end
    chk("regs untouched by table writes", regs[1], 32'h01010108);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
