// tb_fortalesa_pe -- cycle-by-cycle check of a main-capable PE against a
// reference model written here, for random operands in all three modes:
// input multiplexer selection (PM: left/top links; DRG: skip-one activation,
// top weight; TRG: skip-one activation, group-chained weight), the signed
// 8x8 -> 32-bit accumulation, clr, the DRG correction (averaging) and the
// TRG vote (TRG3 votes its own OREG with two shadows; TRG4 votes three
// shadows and keeps its MAC idle), and fault injection into each register.
module tb_fortalesa_pe;
  import fortalesa_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0;
  always #5 clk = ~clk;

  mode_e mode = MODE_PM;
  logic signed [7:0]  a_pm, a_red, w_pm, w_trg;
  logic signed [31:0] ps_1, ps_2, ps_3;
  fi_req_t fi;
  logic signed [7:0]  a_q3, w_q3, a_q4, w_q4;
  logic signed [31:0] o_q3, r3, o_q4, r4;

  // DUT 3: main in DRG and TRG3. DUT 4: main in DRG and TRG4, averaging.
  fortalesa_pe #(.ROW(3), .COL(5), .DRG_MAIN(1), .TRG_MAIN(1), .DRG_CORR(DRG_AVG), .TRG_IMPL(TRG3)) u3 (
    .clk, .rst_n, .clr, .mode, .a_pm, .a_red, .w_pm, .w_trg, .ps_1, .ps_2, .ps_3, .fi,
    .a_q(a_q3), .w_q(w_q3), .oreg_q(o_q3), .res(r3));
  fortalesa_pe #(.ROW(4), .COL(5), .DRG_MAIN(1), .TRG_MAIN(1), .DRG_CORR(DRG_AVG), .TRG_IMPL(TRG4)) u4 (
    .clk, .rst_n, .clr, .mode, .a_pm, .a_red, .w_pm, .w_trg, .ps_1, .ps_2, .ps_3, .fi,
    .a_q(a_q4), .w_q(w_q4), .oreg_q(o_q4), .res(r4));

  // Reference state per DUT.
  int ma [2], mw [2], mo [2], mv [2];

  function automatic int maj(int x, int y, int z);
    return (x & y) | (x & z) | (y & z);
  endfunction

  function automatic int avg(int x, int y);
    longint s = longint'(x) + longint'(y);
    return int'(s >>> 1);
  endfunction

  task automatic step();
    int na [2], nw [2], no [2], nv [2];
    int sel_a, sel_w;
    sel_a = (mode == MODE_PM) ? int'(a_pm) : int'(a_red);
    sel_w = (mode == MODE_TRG) ? int'(w_trg) : int'(w_pm);
    for (int d = 0; d < 2; d++) begin
      int row, prod;
      bit hit;
      row = 3 + d;
      hit = fi.en && fi.row == 8'(row) && fi.col == 8'd5;
      na[d] = sel_a; nw[d] = sel_w;
      if (hit && fi.target == FI_IREG) na[d] = int'($signed(8'(sel_a ^ (1 << fi.bit_idx[2:0]))));
      if (hit && fi.target == FI_WREG) nw[d] = int'($signed(8'(sel_w ^ (1 << fi.bit_idx[2:0]))));
      prod = ma[d] * mw[d];
      if (hit && fi.target == FI_MULT) prod = int'($signed(16'(prod ^ (1 << fi.bit_idx[3:0]))));
      no[d] = (d == 1 && mode == MODE_TRG) ? mo[d] : mo[d] + prod;
      if (hit && fi.target == FI_OREG) no[d] = no[d] ^ (1 << fi.bit_idx);
      case (mode)
        MODE_DRG: nv[d] = avg(mo[d], int'(ps_1));
        MODE_TRG: nv[d] = (d == 0) ? maj(mo[d], int'(ps_1), int'(ps_2))
                                   : maj(int'(ps_1), int'(ps_2), int'(ps_3));
        default:  nv[d] = mo[d];
      endcase
      if (clr) begin na[d] = 0; nw[d] = 0; no[d] = 0; nv[d] = 0; end
    end
    @(posedge clk);
    ma = na; mw = nw; mo = no; mv = nv;
    #1;
    checks++;
    if (a_q3 != 8'(ma[0]) || w_q3 != 8'(mw[0]) || o_q3 != mo[0] ||
        a_q4 != 8'(ma[1]) || w_q4 != 8'(mw[1]) || o_q4 != mo[1] ||
        r3 != ((mode == MODE_PM) ? mo[0] : mv[0]) ||
        r4 != ((mode == MODE_PM) ? mo[1] : mv[1])) begin
      failures++;
      $display("FAIL %s: o3=%0d/%0d o4=%0d/%0d r3=%0d r4=%0d v=%0d/%0d a=%0d/%0d w=%0d/%0d",
               mode.name(), o_q3, mo[0], o_q4, mo[1], r3, r4, mv[0], mv[1],
               a_q3, ma[0], w_q3, mw[0]);
    end
  endtask

  task automatic randomize_inputs();
    a_pm = 8'($urandom); a_red = 8'($urandom);
    w_pm = 8'($urandom); w_trg = 8'($urandom);
    ps_1 = $urandom; ps_2 = $urandom; ps_3 = $urandom;
    // make the shadows agree with the main PE most of the time
    if ($urandom_range(3) != 0) begin ps_1 = o_q3; ps_2 = o_q3; end
  endtask

  initial begin
    fi = '0;
    a_pm = 0; a_red = 0; w_pm = 0; w_trg = 0; ps_1 = 0; ps_2 = 0; ps_3 = 0;
    ma = '{0, 0}; mw = '{0, 0}; mo = '{0, 0}; mv = '{0, 0};
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int blk = 0; blk < 12; blk++) begin
      mode = mode_e'(blk % 3);
      @(negedge clk);
      clr = 1'b1; step(); clr = 1'b0;
      for (int t = 0; t < 40; t++) begin
        @(negedge clk);
        randomize_inputs();
        fi = '0;
        if (t == 20) begin
          fi.en = 1'b1; fi.row = 8'(3 + (blk % 2)); fi.col = 8'd5;
          fi.target = fi_target_e'(blk % 4); fi.kind = FI_FLIP;
          fi.bit_idx = 5'($urandom_range(7));
        end
        step();
      end
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
