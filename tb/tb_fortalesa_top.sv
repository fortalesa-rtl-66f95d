// tb_fortalesa_top -- end-to-end testbench of fortalesa_top at N = 12, for
// two implementation options (PM-DRGA-TRG3 and PM-DRG0-TRG4), which together
// cover both DRG corrections and both TRG group shapes. Each instance of
// tb_top_core runs every execution mode, mode switches and the fault
// scenarios; this module requires every mechanism to have happened at
// least once.
module tb_fortalesa_top;
  import fortalesa_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int  checks, failures;
  int  ck [2], fl [2];
  bit  fin [2];
  int  nm [2][3];
  int  nsw [2], npf [2], ndc [2], ntm [2], npm [2];
  logic go = 1'b1;

  tb_top_core #(.N(12), .DEPTH(64), .DRG_CORR(DRG_AVG), .TRG_IMPL(TRG3)) u_a (
    .clk, .go, .checks(ck[0]), .failures(fl[0]), .finished(fin[0]), .n_mode(nm[0]),
    .n_switch(nsw[0]), .n_pm_fault(npf[0]), .n_drg_corr(ndc[0]), .n_trg_mask(ntm[0]),
    .n_perm_mask(npm[0])
  );

  tb_top_core #(.N(12), .DEPTH(64), .DRG_CORR(DRG_ZERO), .TRG_IMPL(TRG4)) u_b (
    .clk, .go, .checks(ck[1]), .failures(fl[1]), .finished(fin[1]), .n_mode(nm[1]),
    .n_switch(nsw[1]), .n_pm_fault(npf[1]), .n_drg_corr(ndc[1]), .n_trg_mask(ntm[1]),
    .n_perm_mask(npm[1])
  );

  task automatic need(input int n, input string what);
    checks++;
    $display("  %-34s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never happened: %s", what);
    end
  endtask

  initial begin
    checks = 0; failures = 0;
    wait (fin[0] && fin[1]);
    for (int i = 0; i < 2; i++) begin
      $display("option %0d:", i);
      checks += ck[i]; failures += fl[i];
      need(nm[i][0], "operations in PM");
      need(nm[i][1], "operations in DRG");
      need(nm[i][2], "operations in TRG");
      need(nsw[i],   "mode switches");
      need(npf[i],   "faults corrupting PM results");
      need(ndc[i],   "DRG corrections");
      need(ntm[i],   "transient faults masked in TRG");
      need(npm[i],   "permanent faults masked in TRG");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

endmodule
