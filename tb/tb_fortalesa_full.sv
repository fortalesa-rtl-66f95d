// tb_fortalesa_full -- fortalesa_top at its default parameters (48 x 48
// array, PM-DRGA-TRG3, 4608-word buffers). Runs one complete tile operation
// in each execution mode (PM 48x48, DRG 48x24, TRG3 32x24) with random int8
// operands and M = 24, checks every output element against a matrix product
// computed here, checks that done comes exactly L+3 edges after start
// (L from the paper's latency formulas for N = 48), and checks that a bit
// flip in one PE's multiplier during the TRG operation is outvoted.
module tb_fortalesa_full;
  import fortalesa_pkg::*;
  localparam int N = 48, M = 24, AW = 13;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                  act_wr_en = 1'b0, wgt_wr_en = 1'b0, start = 1'b0, busy, done;
  logic [AW-1:0]         act_wr_addr = '0, wgt_wr_addr = '0;
  logic [N-1:0][7:0]     act_wr_data = '0, wgt_wr_data = '0;
  mode_e                 mode = MODE_PM;
  logic [AW:0]           m_len = '0;
  logic signed [31:0]    c_out [N][N];
  fi_req_t               fi;

  fortalesa_top dut (
    .clk, .rst_n, .act_wr_en, .act_wr_addr, .act_wr_data,
    .wgt_wr_en, .wgt_wr_addr, .wgt_wr_data,
    .mode, .m_len, .start, .busy, .done, .c_out, .fi
  );

  int A [N][M];
  int B [M][N];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic op(input mode_e md, input int R, input int C, input int L, input bit inject);
    int cyc, bad;
    for (int r = 0; r < N; r++) for (int k = 0; k < M; k++) A[r][k] = $signed(8'($urandom));
    for (int k = 0; k < M; k++) for (int c = 0; c < N; c++) B[k][c] = $signed(8'($urandom));
    for (int k = 0; k < M; k++) begin
      @(negedge clk);
      act_wr_en = 1'b1; act_wr_addr = AW'(k);
      wgt_wr_en = 1'b1; wgt_wr_addr = AW'(k);
      for (int l = 0; l < N; l++) begin
        act_wr_data[l] = 8'(A[l][k]);
        wgt_wr_data[l] = 8'(B[k][l]);
      end
    end
    @(negedge clk);
    act_wr_en = 1'b0; wgt_wr_en = 1'b0;
    mode = md; m_len = (AW+1)'(M); start = 1'b1;
    @(posedge clk); #1 start = 1'b0;
    cyc = 0;
    while (!done && cyc < L + 20) begin
      if (inject && cyc == M) begin
        fi.en = 1'b1; fi.row = 8'd10; fi.col = 8'd11; fi.target = FI_MULT;
        fi.kind = FI_FLIP; fi.bit_idx = 5'd9;
      end else fi = '0;
      @(posedge clk); #1 cyc++;
    end
    fi = '0;
    check(cyc == L + 3, $sformatf("%s: done after %0d edges, expected %0d", md.name(), cyc, L + 3));
    bad = 0;
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) begin
      int g = 0;
      if (r < R && c < C) for (int k = 0; k < M; k++) g += A[r][k] * B[k][c];
      if (c_out[r][c] != g) bad++;
    end
    check(bad == 0, $sformatf("%s: %0d wrong outputs", md.name(), bad));
    $display("%s done, %0d cycles, %0d wrong", md.name(), cyc, bad);
  endtask

  initial begin
    fi = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    op(MODE_PM,  48, 48, M + 2 * N - 2,     1'b0);
    op(MODE_DRG, 48, 24, M + 3 * N / 2 - 1, 1'b0);
    op(MODE_TRG, 32, 24, M + 7 * N / 6 - 1, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
