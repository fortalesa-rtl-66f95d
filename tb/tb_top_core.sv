// tb_top_core -- end-to-end test sequence for one implementation option of
// fortalesa_top; instantiated by tb_fortalesa_top (once per option) and by
// tb_fortalesa_full (at the default size).
//
// For random int8 tiles it loads both buffers, runs an operation in every
// execution mode, and compares c_out with a matrix product computed here.
// It also checks: done rises exactly L+3 clock edges after the edge that
// samples start (L = the paper's tile latency for the mode; the extra 3 are
// the CLEAR cycle, the buffer read and the array edge register); the last
// output element still lacks its last product one cycle before done;
// outputs outside the effective size are 0; a transient fault in PM mode
// corrupts its output; a fault in a DRG shadow or main partial sum is
// corrected by the design-time rule (average or zeroing); transient and
// permanent faults in TRG mode are fully masked. Counters of every
// mechanism are outputs so the caller can require each one to happen.
module tb_top_core
  import fortalesa_pkg::*;
#(
  parameter int unsigned N        = 12,
  parameter int unsigned DEPTH    = 64,
  parameter drg_corr_e   DRG_CORR = DRG_AVG,
  parameter trg_impl_e   TRG_IMPL = TRG3,
  parameter int          ROUNDS   = 2,       // operations per mode
  parameter int          MMAX     = 20,      // largest M used
  parameter bit          FAULTS   = 1'b1     // run the fault scenarios
) (
  input  logic clk,
  input  logic go,
  output int   checks,
  output int   failures,
  output bit   finished,
  output int   n_mode [3],       // operations per mode
  output int   n_switch,         // mode changes between operations
  output int   n_pm_fault,       // faults seen to corrupt a PM result
  output int   n_drg_corr,       // DRG corrections observed
  output int   n_trg_mask,       // transient faults masked in TRG
  output int   n_perm_mask       // permanent faults masked in TRG
);

  localparam int AW = $clog2(DEPTH);
  localparam int IM = (TRG_IMPL == TRG3) ? IM_TRG3 : IM_TRG4;

  logic                  rst_n;
  logic                  act_wr_en, wgt_wr_en;
  logic [AW-1:0]         act_wr_addr, wgt_wr_addr;
  logic [N-1:0][A_W-1:0] act_wr_data;
  logic [N-1:0][W_W-1:0] wgt_wr_data;
  mode_e                 mode;
  logic [AW:0]           m_len;
  logic                  start, busy, done;
  logic signed [P_W-1:0] c_out [N][N];
  fi_req_t               fi;

  fortalesa_top #(.N(N), .DRG_CORR(DRG_CORR), .TRG_IMPL(TRG_IMPL), .DEPTH(DEPTH)) dut (
    .clk, .rst_n,
    .act_wr_en, .act_wr_addr, .act_wr_data,
    .wgt_wr_en, .wgt_wr_addr, .wgt_wr_data,
    .mode, .m_len, .start, .busy, .done, .c_out, .fi
  );

  int A [N][MMAX];
  int B [MMAX][N];
  int G [N][N];
  int R, C, M;
  mode_e last_mode;
  bit    have_last;

  function automatic int s8(int v);
    return (v & 8'h80) ? (v | 32'hFFFF_FF00) : (v & 8'hFF);
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL [%s N=%0d %s] %s", DRG_CORR.name(), N, TRG_IMPL.name(), what);
    end
  endtask

  task automatic load(input mode_e md, input int m);
    M = m;
    // effective size per mode (Table I of the architecture), written out
    R = (md != MODE_TRG) ? N : (TRG_IMPL == TRG3) ? 2 * N / 3 : N / 2;
    C = (md == MODE_PM) ? N : N / 2;
    for (int r = 0; r < N; r++) for (int k = 0; k < M; k++) A[r][k] = s8($urandom);
    for (int k = 0; k < M; k++) for (int c = 0; c < N; c++) B[k][c] = s8($urandom);
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) begin
      G[r][c] = 0;
      if (r < R && c < C) for (int k = 0; k < M; k++) G[r][c] += A[r][k] * B[k][c];
    end
    for (int k = 0; k < M; k++) begin
      @(negedge clk);
      act_wr_en = 1'b1; act_wr_addr = AW'(k);
      wgt_wr_en = 1'b1; wgt_wr_addr = AW'(k);
      for (int l = 0; l < N; l++) begin
        act_wr_data[l] = A_W'(A[l][k]);
        wgt_wr_data[l] = W_W'(B[k][l]);
      end
    end
    @(negedge clk);
    act_wr_en = 1'b0; wgt_wr_en = 1'b0;
  endtask

  // Runs one operation. fi_cycle >= 0: apply f in that cycle after start
  // (for fi_len cycles; fi_len < 0 means until done).
  task automatic run(input mode_e md, input fi_req_t f, input int fi_cycle, input int fi_len);
    int cyc, lat;
    bit pre_ok;
    // tile latency formulas of the architecture, written out
    case (md)
      MODE_PM:  lat = M + 2 * N - 2;
      MODE_DRG: lat = M + 3 * N / 2 - 1;
      default:  lat = (TRG_IMPL == TRG3) ? M + 7 * N / 6 - 1 : M + N - 1;
    endcase
    if (have_last && last_mode != md) n_switch++;
    last_mode = md; have_last = 1'b1;
    n_mode[int'(md)]++;
    @(negedge clk);
    mode = md; m_len = (AW+1)'(M); start = 1'b1;
    @(posedge clk);
    #1 start = 1'b0;
    cyc = 0; pre_ok = 1'b0;
    while (!done && cyc < lat + 20) begin
      if (fi_cycle >= 0 && cyc == fi_cycle) fi = f;
      if (fi_cycle >= 0 && fi_len >= 0 && cyc == fi_cycle + fi_len) fi.en = 1'b0;
      @(posedge clk);
      #1 cyc++;
      if (cyc == lat + 2) begin
        int p;
        p = A[R-1][M-1] * B[M-1][C-1];
        pre_ok = (p == 0) || (c_out[R-1][C-1] == G[R-1][C-1] - p);
      end
    end
    fi.en = 1'b0;
    check(cyc == lat + 3, $sformatf("%s M=%0d: done after %0d edges, expected L+3=%0d",
                                    md.name(), M, cyc, lat + 3));
    check(pre_ok, $sformatf("%s: last element not exactly one product short a cycle before done",
                            md.name()));
  endtask

  function automatic int mismatches();
    int n = 0;
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++)
      if (c_out[r][c] !== G[r][c]) n++;
    return n;
  endfunction

  function automatic fi_req_t mk_fi(int row, int col, fi_target_e t, fi_kind_e k, int b);
    fi_req_t f;
    f.en = 1'b1; f.row = 8'(row); f.col = 8'(col);
    f.target = t; f.kind = k; f.bit_idx = 5'(b);
    return f;
  endfunction

  function automatic int corr(int m, int s);
    longint sum;
    if (DRG_CORR == DRG_AVG) begin
      sum = longint'(m) + longint'(s);
      return int'(sum >>> 1);
    end
    return m & s;
  endfunction

  fi_req_t none;

  initial begin
    checks = 0; failures = 0; finished = 1'b0;
    n_mode = '{default: 0};
    n_switch = 0; n_pm_fault = 0; n_drg_corr = 0; n_trg_mask = 0; n_perm_mask = 0;
    have_last = 1'b0; last_mode = MODE_PM;
    none = '0;
    fi = '0; start = 1'b0; act_wr_en = 1'b0; wgt_wr_en = 1'b0;
    act_wr_addr = '0; wgt_wr_addr = '0; act_wr_data = '0; wgt_wr_data = '0;
    mode = MODE_PM; m_len = '0;
    rst_n = 1'b0;
    wait (go);
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // Plain operations in every mode, mode changing every time.
    for (int rd = 0; rd < ROUNDS; rd++) begin
      for (int mi = 0; mi < 3; mi++) begin
        mode_e md;
        int    bad, zero_ok;
        md = mode_e'(mi);
        load(md, (rd == 0) ? 1 : 1 + int'($urandom_range(MMAX - 1)));
        run(md, none, -1, 0);
        bad = mismatches();
        check(bad == 0, $sformatf("%s M=%0d: %0d wrong outputs", md.name(), M, bad));
        zero_ok = 1;
        for (int r = 0; r < N; r++) for (int c = 0; c < N; c++)
          if ((r >= R || c >= C) && c_out[r][c] != 0) zero_ok = 0;
        check(zero_ok == 1, $sformatf("%s: nonzero output outside effective size", md.name()));
      end
    end

    if (FAULTS) begin
      // PM: a transient OREG flip shows up in exactly one output.
      begin
        int r, c, b, bad;
        load(MODE_PM, MMAX);
        r = $urandom_range(N - 1); c = $urandom_range(N - 1); b = $urandom_range(20);
        run(MODE_PM, mk_fi(r, c, FI_OREG, FI_FLIP, b), MMAX / 2, 1);
        bad = mismatches();
        check(bad == 1 && c_out[r][c] != G[r][c], $sformatf("PM OREG flip: %0d wrong outputs", bad));
        if (bad == 1) n_pm_fault++;
      end

      // DRG: flip a bit of the shadow's (or the main's) final partial sum.
      for (int t = 0; t < 4; t++) begin
        int r, c, b, pc, faulty, expv;
        load(MODE_DRG, 1 + int'($urandom_range(MMAX - 1)));
        run(MODE_DRG, none, -1, 0);
        check(mismatches() == 0, "DRG before fault");
        r = $urandom_range(N - 1); c = $urandom_range(N / 2 - 1); b = $urandom_range(30);
        pc = 2 * c + (t % 2);   // even: shadow, odd: main
        faulty = G[r][c] ^ (1 << b);
        expv = corr(G[r][c], faulty);
        @(negedge clk); fi = mk_fi(r, pc, FI_OREG, FI_FLIP, b);
        @(negedge clk); fi.en = 1'b0;
        @(negedge clk);
        check(c_out[r][c] == expv,
              $sformatf("DRG correction of bit %0d in PE(%0d,%0d): got %0d expected %0d (golden %0d)",
                        b, r, pc, c_out[r][c], expv, G[r][c]));
        if (c_out[r][c] == expv && expv != faulty) n_drg_corr++;
      end

      // TRG: transient faults of every type, in a random PE, mid-operation.
      for (int t = 0; t < 8; t++) begin
        int r, c, b, bad;
        fi_target_e tg;
        tg = fi_target_e'(t % 4);
        load(MODE_TRG, MMAX);
        r = $urandom_range(N - 1); c = $urandom_range(N - 1); b = $urandom_range(7);
        run(MODE_TRG, mk_fi(r, c, tg, FI_FLIP, (tg == FI_OREG) ? b + 8 : b), M / 2, 1);
        bad = mismatches();
        check(bad == 0, $sformatf("TRG %s flip in PE(%0d,%0d) bit %0d: %0d wrong outputs",
                                  tg.name(), r, c, b, bad));
        if (bad == 0) n_trg_mask++;
      end

      // TRG: permanent stuck-at-1 in a WREG bit of one PE for the whole
      // operation; first shown to corrupt PM, then masked in TRG.
      begin
        int r, c, b, bad;
        r = pos_row(N, MD_TRG, IM, 0, 0, 1); c = pos_col(N, MD_TRG, IM, 0, 0, 1);
        b = $urandom_range(6);
        load(MODE_PM, MMAX);
        run(MODE_PM, mk_fi(r, c, FI_WREG, FI_SA1, b), 0, -1);
        bad = mismatches();
        check(bad > 0, "PM stuck-at-1 WREG left outputs intact");
        if (bad > 0) n_pm_fault++;
        load(MODE_TRG, MMAX);
        run(MODE_TRG, mk_fi(r, c, FI_WREG, FI_SA1, b), 0, -1);
        bad = mismatches();
        check(bad == 0, $sformatf("TRG stuck-at-1 WREG: %0d wrong outputs", bad));
        if (bad == 0) n_perm_mask++;
      end
    end

    finished = 1'b1;
  end

endmodule
