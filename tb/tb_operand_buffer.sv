// tb_operand_buffer -- writes random words to random addresses, reads them
// back and checks data, the one-cycle read latency and rd_valid.
module tb_operand_buffer;
  localparam int N = 6, EW = 8, DEPTH = 32, AW = $clog2(DEPTH);

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic wr_en = 1'b0, rd_en = 1'b0, rd_valid;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [N-1:0][EW-1:0] wr_data = '0, rd_data;
  logic [N-1:0][EW-1:0] model [DEPTH];

  operand_buffer #(.N(N), .EW(EW), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int k = 0; k < DEPTH; k++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_addr = AW'(k);
      for (int l = 0; l < N; l++) wr_data[l] = EW'($urandom);
      model[k] = wr_data;
    end
    @(negedge clk) wr_en = 1'b0;
    for (int t = 0; t < 100; t++) begin
      int a;
      a = $urandom_range(DEPTH - 1);
      @(negedge clk);
      rd_en = 1'b1; rd_addr = AW'(a);
      // overwrite another address at the same time
      wr_en = 1'b1; wr_addr = AW'((a + 1) % DEPTH);
      for (int l = 0; l < N; l++) wr_data[l] = EW'($urandom);
      @(posedge clk);
      model[(a + 1) % DEPTH] = wr_data;
      #1;
      checks += 2;
      if (!rd_valid) begin failures++; $display("FAIL rd_valid low"); end
      if (rd_data !== model[a]) begin failures++; $display("FAIL data at %0d", a); end
      rd_en = 1'b0; wr_en = 1'b0;
      @(posedge clk); #1;
      checks++;
      if (rd_valid) begin failures++; $display("FAIL rd_valid stuck"); end
    end
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
