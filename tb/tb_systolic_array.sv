// tb_systolic_array -- drives the edge streams of two 6 x 6 arrays
// (PM-DRGA-TRG3 and PM-DRG0-TRG4) directly with skewed operands built here
// and checks, in every mode, the effective output matrix against a matrix
// product computed here, the effective size (zeros outside it), and the
// timing: with the first operand on the edge in cycle 0, the results are
// final in cycle L+1 and the last element is one product short in cycle L
// (L = the paper's latency, written out here per mode). It also checks that
// a transient fault in a TRG group is outvoted and that a bit flip in a DRG
// shadow's partial sum is corrected by the design-time rule.
module tb_systolic_array;
  import fortalesa_pkg::*;
  localparam int N = 6, MMAX = 16;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0;
  always #5 clk = ~clk;

  mode_e mode = MODE_PM;
  logic signed [7:0]  a_edge [N];
  logic signed [7:0]  w_edge [N];
  fi_req_t fi;
  logic signed [31:0] c0 [N][N];
  logic signed [31:0] c1 [N][N];

  systolic_array #(.N(N), .DRG_CORR(DRG_AVG),  .TRG_IMPL(TRG3)) u0 (.clk, .rst_n, .clr, .mode, .a_edge, .w_edge, .fi, .c_eff(c0));
  systolic_array #(.N(N), .DRG_CORR(DRG_ZERO), .TRG_IMPL(TRG4)) u1 (.clk, .rst_n, .clr, .mode, .a_edge, .w_edge, .fi, .c_eff(c1));

  int A [N][MMAX];
  int B [MMAX][N];
  int G [N][N];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Effective rows/cols and edge-lane mapping, written out from the paper's
  // Table I and the group shapes (independent of the package functions).
  function automatic int rows(int inst, mode_e md);
    if (md != MODE_TRG) return N;
    return (inst == 0) ? 2 * N / 3 : N / 2;
  endfunction
  function automatic int cols(mode_e md);
    return (md == MODE_PM) ? N : N / 2;
  endfunction
  function automatic int row_src(int inst, mode_e md, int i);
    if (md != MODE_TRG) return i;
    if (inst == 0) return 2 * (i / 3) + ((i % 3) == 2 ? 1 : 0);
    return i / 2;
  endfunction
  function automatic int col_src(mode_e md, int j);
    return (md == MODE_PM) ? j : j / 2;
  endfunction
  function automatic int lat(int inst, mode_e md, int m);
    case (md)
      MODE_PM:  return m + 2 * N - 2;
      MODE_DRG: return m + 3 * N / 2 - 1;
      default:  return (inst == 0) ? m + 7 * N / 6 - 1 : m + N - 1;
    endcase
  endfunction

  // Runs both arrays on the same tiles; they are fed separately only in the
  // TRG activation lanes, so drive per-instance values through a mux.
  task automatic run(input int inst, input mode_e md, input int m,
                     input fi_req_t f, input int fcyc);
    int R, C, L, p;
    R = rows(inst, md); C = cols(md); L = lat(inst, md, m);
    for (int r = 0; r < N; r++) for (int k = 0; k < m; k++) A[r][k] = $signed(8'($urandom));
    for (int k = 0; k < m; k++) for (int c = 0; c < N; c++) B[k][c] = $signed(8'($urandom));
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) begin
      G[r][c] = 0;
      if (r < R && c < C) for (int k = 0; k < m; k++) G[r][c] += A[r][k] * B[k][c];
    end
    mode = md;
    @(negedge clk) clr = 1'b1;
    @(negedge clk) clr = 1'b0;
    for (int t = 0; t <= L + 1; t++) begin
      for (int i = 0; i < N; i++) begin
        int s = row_src(inst, md, i);
        a_edge[i] = (t - s >= 0 && t - s < m) ? 8'(A[s][t - s]) : 8'sd0;
      end
      for (int j = 0; j < N; j++) begin
        int s = col_src(md, j);
        w_edge[j] = (t - s >= 0 && t - s < m) ? 8'(B[t - s][s]) : 8'sd0;
      end
      fi = (t == fcyc) ? f : '0;
      #1;
      if (t == L) begin
        logic signed [31:0] v;
        p = A[R-1][m-1] * B[m-1][C-1];
        v = (inst == 0) ? c0[R-1][C-1] : c1[R-1][C-1];
        check(v == G[R-1][C-1] - p, $sformatf("inst %0d %s: last element early (%0d vs %0d-%0d)",
                                              inst, md.name(), v, G[R-1][C-1], p));
      end
      @(negedge clk);
    end
    fi = '0;
    #1;
    begin
      int bad = 0;
      for (int r = 0; r < N; r++) for (int c = 0; c < N; c++)
        if (((inst == 0) ? c0[r][c] : c1[r][c]) != G[r][c]) bad++;
      check(bad == 0, $sformatf("inst %0d %s M=%0d: %0d wrong outputs", inst, md.name(), m, bad));
    end
  endtask

  initial begin
    fi = '0;
    for (int i = 0; i < N; i++) begin a_edge[i] = 0; w_edge[i] = 0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int inst = 0; inst < 2; inst++)
      for (int rep = 0; rep < 3; rep++)
        for (int mi = 0; mi < 3; mi++)
          run(inst, mode_e'(mi), 1 + $urandom_range(MMAX - 1), '0, -1);
    // TRG: a transient fault anywhere mid-operation is outvoted.
    for (int inst = 0; inst < 2; inst++)
      for (int t = 0; t < 8; t++) begin
        fi_req_t f;
        f.en = 1'b1; f.row = 8'($urandom_range(N - 1)); f.col = 8'($urandom_range(N - 1));
        f.target = fi_target_e'(t % 4); f.kind = FI_FLIP; f.bit_idx = 5'($urandom_range(7));
        run(inst, MODE_TRG, MMAX, f, MMAX / 2 + 2);
      end
    // DRG: flip bit b of a shadow's final partial sum; expect the correction.
    for (int inst = 0; inst < 2; inst++)
      for (int t = 0; t < 4; t++) begin
        int r, c, b, faulty, e;
        logic signed [31:0] v;
        run(inst, MODE_DRG, MMAX, '0, -1);
        r = $urandom_range(N - 1); c = $urandom_range(N / 2 - 1); b = $urandom_range(30);
        faulty = G[r][c] ^ (1 << b);
        e = (inst == 0) ? int'((longint'(G[r][c]) + longint'(faulty)) >>> 1) : (G[r][c] & faulty);
        fi.en = 1'b1; fi.row = 8'(r); fi.col = 8'(2 * c); fi.target = FI_OREG;
        fi.kind = FI_FLIP; fi.bit_idx = 5'(b);
        @(negedge clk) fi = '0;
        @(negedge clk);
        v = (inst == 0) ? c0[r][c] : c1[r][c];
        check(v == e, $sformatf("inst %0d DRG correction bit %0d: %0d expected %0d", inst, b, v, e));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
