// tb_fortalesa_ctrl -- checks the controller sequence: mode and M latched at
// start, one clr cycle, buffer reads at addresses 0..M-1 in consecutive
// cycles, done exactly L+3 edges after the edge that samples start (L from
// the paper's formulas, written out here per mode for N = 12, TRG3), start
// ignored while busy.
module tb_fortalesa_ctrl;
  import fortalesa_pkg::*;
  localparam int N = 12, DEPTH = 64, AW = $clog2(DEPTH);

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0;
  mode_e mode_i = MODE_PM, mode_q;
  logic [AW:0] m_len = '0;
  logic clr, rd_en, busy, done;
  logic [AW-1:0] rd_addr;
  logic [15:0] lat_q;

  fortalesa_ctrl #(.N(N), .TRG_IMPL(TRG3), .DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic op(input mode_e md, input int m);
    int L, cyc, nclr, nrd, expa;
    bit addr_ok;
    // Paper: PM M+2N-2, DRG M+3N/2-1, TRG3 M+7N/6-1
    L = (md == MODE_PM) ? m + 2*N - 2 : (md == MODE_DRG) ? m + 3*N/2 - 1 : m + 7*N/6 - 1;
    @(negedge clk);
    mode_i = md; m_len = (AW+1)'(m); start = 1'b1;
    @(posedge clk); #1 start = 1'b0;
    mode_i = MODE_PM;   // must not matter any more
    cyc = 0; nclr = 0; nrd = 0; expa = 0; addr_ok = 1'b1;
    while (!done && cyc < L + 20) begin
      if (clr) nclr++;
      if (rd_en) begin
        if (rd_addr != AW'(expa) || nclr != 1) addr_ok = 1'b0;
        expa++; nrd++;
      end
      if (cyc == 3) begin
        // a start while busy is ignored
        start = 1'b1;
      end
      if (cyc == 4) start = 1'b0;
      @(posedge clk); #1 cyc++;
      check(mode_q == md || done, "mode_q changed during operation");
    end
    check(cyc == L + 3, $sformatf("%s M=%0d: done after %0d, expected %0d", md.name(), m, cyc, L + 3));
    check(nclr == 1, "exactly one clr cycle");
    check(nrd == m && addr_ok, $sformatf("reads: %0d of %0d, order ok=%0b", nrd, m, addr_ok));
    check(int'(lat_q) == L, "lat_q");
    check(!busy, "busy low at done");
    repeat (2) @(posedge clk);
    #1 check(done, "done held");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    op(MODE_PM, 1);
    op(MODE_DRG, 5);
    op(MODE_TRG, 17);
    op(MODE_PM, 64);
    op(MODE_TRG, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
