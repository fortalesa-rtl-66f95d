// tb_drg_corrector -- checks both DRG correction rules against values
// computed here: floor of the exact average (DRGA) and bitwise AND (DRG0),
// for random pairs, equal pairs, single-bit differences and the extremes.
module tb_drg_corrector;
  import fortalesa_pkg::*;

  int checks = 0, failures = 0;
  logic signed [31:0] a, b, y_avg, y_zero;

  drg_corrector #(.W(32), .CORR(DRG_AVG))  u_avg  (.a, .b, .y(y_avg));
  drg_corrector #(.W(32), .CORR(DRG_ZERO)) u_zero (.a, .b, .y(y_zero));

  task automatic try(input logic signed [31:0] x, input logic signed [31:0] z);
    longint s;
    logic signed [31:0] e_avg, e_zero;
    a = x; b = z;
    #1;
    s = longint'(x) + longint'(z);
    e_avg  = 32'(s >>> 1);           // floor((x+z)/2)
    e_zero = 32'h0;
    for (int i = 0; i < 32; i++) e_zero[i] = (x[i] == z[i]) ? x[i] : 1'b0;
    checks += 2;
    if (y_avg !== e_avg) begin
      failures++; $display("FAIL avg(%0d,%0d)=%0d expected %0d", x, z, y_avg, e_avg);
    end
    if (y_zero !== e_zero) begin
      failures++; $display("FAIL zero(%0h,%0h)=%0h expected %0h", x, z, y_zero, e_zero);
    end
  endtask

  initial begin
    logic signed [31:0] v;
    try(32'sd0, 32'sd0);
    try(32'h7FFF_FFFF, 32'h7FFF_FFFF);
    try(32'h8000_0000, 32'h8000_0000);
    try(32'h7FFF_FFFF, 32'h8000_0000);
    try(-32'sd3, 32'sd0);
    for (int i = 0; i < 300; i++) try($urandom, $urandom);
    for (int i = 0; i < 100; i++) begin
      v = $urandom;
      try(v, v);                              // agreement: output equals input
      try(v, v ^ (32'h1 << $urandom_range(31)));  // single-bit fault
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
