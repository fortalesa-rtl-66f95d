// tb_tmr_voter -- checks the bitwise majority voter: any single corrupted
// copy (random, up to all bits wrong) is outvoted, and for three unrelated
// words every bit equals the majority counted bit by bit here.
module tb_tmr_voter;
  int checks = 0, failures = 0;
  logic [31:0] a, b, c, y;

  tmr_voter #(.W(32)) dut (.a, .b, .c, .y);

  task automatic expect_y(input logic [31:0] e, input string what);
    #1;
    checks++;
    if (y !== e) begin
      failures++;
      $display("FAIL %s: a=%h b=%h c=%h y=%h expected %h", what, a, b, c, y, e);
    end
  endtask

  initial begin
    logic [31:0] g, e;
    for (int i = 0; i < 200; i++) begin
      g = $urandom;
      a = g ^ $urandom; b = g; c = g; expect_y(g, "a corrupted");
      a = g; b = g ^ $urandom; c = g; expect_y(g, "b corrupted");
      a = g; b = g; c = ~g;           expect_y(g, "c inverted");
    end
    for (int i = 0; i < 200; i++) begin
      a = $urandom; b = $urandom; c = $urandom;
      for (int k = 0; k < 32; k++) e[k] = (int'(a[k]) + int'(b[k]) + int'(c[k])) >= 2;
      expect_y(e, "random");
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
