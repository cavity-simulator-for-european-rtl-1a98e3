// Testbench for daq (NCH = 3, DEPTH = 64): nothing is stored before arm and
// trigger; after them every div+1-th sample of each channel is stored,
// done rises after DEPTH samples and the read-back returns the samples.
module tb_daq;
  import cs_pkg::*;
  localparam int NCH = 3, DEPTH = 64;
  logic clk = 0, rst_n = 0, arm = 0, trig = 0, busy, done;
  logic [15:0] div;
  iq_t ch [NCH];
  logic [1:0] rd_ch;
  logic [5:0] rd_addr;
  iq_t rd_data;
  int checks = 0, failures = 0;
  int cyc = 0, t_start, t0;

  daq #(.NCH(NCH), .DEPTH(DEPTH)) dut (.clk, .rst_n, .arm, .trig, .div, .ch, .rd_ch,
                                        .rd_addr, .rd_data, .busy, .done);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // channel c carries a counter value known from the clock number
  function automatic iq_t val(input int c, input int t);
    return '{i: 18'(t * 3 + c), q: 18'(-t - 100 * c)};
  endfunction
  always @(negedge clk) begin
    cyc <= cyc + 1;
    for (int c = 0; c < NCH; c++) ch[c] <= val(c, cyc + 1);
  end

  initial begin
    div = 16'd1; rd_ch = '0; rd_addr = '0;
    for (int c = 0; c < NCH; c++) ch[c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    trig = 1; @(negedge clk); trig = 0;        // not armed: ignored
    checks++;
    if (busy) begin failures++; $display("FAIL capture without arm"); end
    arm = 1; @(negedge clk); arm = 0;
    repeat (3) @(negedge clk);
    trig = 1; t_start = cyc; @(negedge clk); trig = 0;
    repeat (2 * DEPTH + 5) @(negedge clk);
    checks++;
    if (!done || busy) begin failures++; $display("FAIL done=%0d busy=%0d", done, busy); end
    // time stamp of the first stored sample: within 3 clocks of the trigger
    rd_ch = '0; rd_addr = '0;
    @(negedge clk);
    t0 = int'(rd_data.i) / 3;
    checks++;
    if (t0 < t_start || t0 > t_start + 3) begin failures++; $display("FAIL first sample t=%0d trig=%0d", t0, t_start); end
    for (int c = 0; c < NCH; c++)
      for (int a = 0; a < DEPTH; a++) begin
        rd_ch = 2'(c); rd_addr = 6'(a);
        @(negedge clk);
        checks++;
        if (rd_data != val(c, t0 + 2 * a)) begin
          failures++;
          if (failures < 10) $display("FAIL ch%0d[%0d]=(%0d,%0d)", c, a, rd_data.i, rd_data.q);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
