// tb_conv_layers -- runs a small two-layer CNN through fortalesa_top
// (N = 12, PM-DRGA-TRG3) the way a host would: each 3x3 convolution is
// lowered to a matrix product with im2col (P = Hout*Wout output pixels,
// M = 3*3*Cin, K = Cout) and cut into tiles of the mode's effective size,
// one tile operation per start. Layers are mapped to different execution
// modes, which is the intended use of the array. Layer shapes are scaled
// down from the convolution layers of the CNNs the architecture was
// evaluated on; they are chosen so that P and K are not multiples of the
// effective size and partial tiles occur.
//   conv1: 10x10x3 -> 8x8x16 (M = 27, P = 64, K = 16), run in TRG and in PM
//   conv2: 8x8x16 -> 6x6x8  (M = 144, P = 36, K = 8),   run in DRG
// Every output is compared with a direct convolution computed here, and the
// compute cycles of each layer are compared with the total-latency formula
// ceil(P/R) * ceil(K/C) * (L + 3), L being the mode's tile latency (the +3
// is the per-tile clear, buffer-read and edge-register overhead).
module tb_conv_layers;
  import fortalesa_pkg::*;
  localparam int N = 12, DEPTH = 256, AW = $clog2(DEPTH);

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                  act_wr_en = 1'b0, wgt_wr_en = 1'b0, start = 1'b0, busy, done;
  logic [AW-1:0]         act_wr_addr = '0, wgt_wr_addr = '0;
  logic [N-1:0][7:0]     act_wr_data = '0, wgt_wr_data = '0;
  mode_e                 mode = MODE_PM;
  logic [AW:0]           m_len = '0;
  logic signed [31:0]    c_out [N][N];
  fi_req_t               fi = '0;

  fortalesa_top #(.N(N), .DEPTH(DEPTH)) dut (
    .clk, .rst_n, .act_wr_en, .act_wr_addr, .act_wr_data,
    .wgt_wr_en, .wgt_wr_addr, .wgt_wr_data,
    .mode, .m_len, .start, .busy, .done, .c_out, .fi
  );

  // Feature maps [c][y][x] and weights [cout][cin][ky][kx], int8 values.
  int x0 [3][10][10];
  int w1 [16][3][3][3];
  int y1 [16][8][8];     // conv1 output (32-bit)
  int x1 [16][8][8];     // requantised conv1 output, conv2 input
  int w2 [8][16][3][3];
  int y2 [8][6][6];
  int res [16][8][8];    // result collected from the array
  int mode_use [3];

  function automatic int s8(int v);
    return (v & 8'h80) ? (v | 32'hFFFF_FF00) : (v & 8'hFF);
  endfunction

  // im2col element: pixel p, column m of a layer with Cin, Wout.
  function automatic int act1(int p, int m);
    return x0[m / 9][p / 8 + (m % 9) / 3][p % 8 + m % 3];
  endfunction
  function automatic int act2(int p, int m);
    return x1[m / 9][p / 6 + (m % 9) / 3][p % 6 + m % 3];
  endfunction

  // Runs one layer as tiles; returns the compute cycles (start to done).
  task automatic layer(input int lid, input mode_e md, input int P, input int K, input int M,
                       output int cycles);
    int R, C, ta, tw;
    R = eff_rows(N, int'(md), IM_TRG3);
    C = eff_cols(N, int'(md), IM_TRG3);
    cycles = 0;
    for (ta = 0; ta < (P + R - 1) / R; ta++)
      for (tw = 0; tw < (K + C - 1) / C; tw++) begin
        int cyc;
        for (int m = 0; m < M; m++) begin
          @(negedge clk);
          act_wr_en = 1'b1; act_wr_addr = AW'(m);
          wgt_wr_en = 1'b1; wgt_wr_addr = AW'(m);
          for (int l = 0; l < N; l++) begin
            int p = ta * R + l, k = tw * C + l;
            act_wr_data[l] = (l < R && p < P) ? 8'((lid == 1) ? act1(p, m) : act2(p, m)) : 8'd0;
            wgt_wr_data[l] = (l < C && k < K) ?
                             8'((lid == 1) ? w1[k][m / 9][(m % 9) / 3][m % 3]
                                           : w2[k][m / 9][(m % 9) / 3][m % 3]) : 8'd0;
          end
        end
        @(negedge clk);
        act_wr_en = 1'b0; wgt_wr_en = 1'b0;
        mode = md; m_len = (AW+1)'(M); start = 1'b1;
        @(posedge clk); #1 start = 1'b0;
        cyc = 0;
        while (!done && cyc < 2000) begin @(posedge clk); #1 cyc++; end
        cycles += cyc;
        mode_use[int'(md)]++;
        for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
          int p = ta * R + r, k = tw * C + c;
          if (p < P && k < K) begin
            if (lid == 1) res[k][p / 8][p % 8] = c_out[r][c];
            else          res[k][p / 6][p % 6] = c_out[r][c];
          end
        end
      end
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic check_conv1(input string tag);
    int bad = 0;
    for (int k = 0; k < 16; k++) for (int y = 0; y < 8; y++) for (int x = 0; x < 8; x++)
      if (res[k][y][x] != y1[k][y][x]) bad++;
    check(bad == 0, $sformatf("conv1 %s: %0d wrong outputs", tag, bad));
  endtask

  initial begin
    int cyc, R, C, L, S;
    mode_use = '{0, 0, 0};
    for (int c = 0; c < 3; c++) for (int y = 0; y < 10; y++) for (int x = 0; x < 10; x++)
      x0[c][y][x] = s8($urandom);
    for (int k = 0; k < 16; k++) for (int c = 0; c < 3; c++) for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) w1[k][c][i][j] = s8($urandom);
    for (int k = 0; k < 8; k++) for (int c = 0; c < 16; c++) for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) w2[k][c][i][j] = s8($urandom);
    // reference convolutions
    for (int k = 0; k < 16; k++) for (int y = 0; y < 8; y++) for (int x = 0; x < 8; x++) begin
      y1[k][y][x] = 0;
      for (int c = 0; c < 3; c++) for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++)
        y1[k][y][x] += w1[k][c][i][j] * x0[c][y + i][x + j];
      // ReLU and requantisation to int8 (scale 2^-8, saturate)
      x1[k][y][x] = (y1[k][y][x] <= 0) ? 0 : ((y1[k][y][x] >>> 8) > 127 ? 127 : (y1[k][y][x] >>> 8));
    end
    for (int k = 0; k < 8; k++) for (int y = 0; y < 6; y++) for (int x = 0; x < 6; x++) begin
      y2[k][y][x] = 0;
      for (int c = 0; c < 16; c++) for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++)
        y2[k][y][x] += w2[k][c][i][j] * x1[c][y + i][x + j];
    end

    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // conv1 in TRG (TRG3 effective 8 x 6)
    layer(1, MODE_TRG, 64, 16, 27, cyc);
    check_conv1("TRG");
    R = 2 * N / 3; C = N / 2; L = 27 + 7 * N / 6 - 1; S = ((64 + R - 1) / R) * ((16 + C - 1) / C);
    check(cyc == S * (L + 3), $sformatf("conv1 TRG cycles %0d, formula %0d", cyc, S * (L + 3)));
    $display("conv1 TRG: %0d tiles, %0d compute cycles", S, cyc);

    // conv2 in DRG (effective 12 x 6)
    layer(2, MODE_DRG, 36, 8, 144, cyc);
    begin
      automatic int bad = 0;
      for (int k = 0; k < 8; k++) for (int y = 0; y < 6; y++) for (int x = 0; x < 6; x++)
        if (res[k][y][x] != y2[k][y][x]) bad++;
      check(bad == 0, $sformatf("conv2 DRG: %0d wrong outputs", bad));
    end
    R = N; C = N / 2; L = 144 + 3 * N / 2 - 1; S = ((36 + R - 1) / R) * ((8 + C - 1) / C);
    check(cyc == S * (L + 3), $sformatf("conv2 DRG cycles %0d, formula %0d", cyc, S * (L + 3)));
    $display("conv2 DRG: %0d tiles, %0d compute cycles", S, cyc);

    // conv1 again in PM (effective 12 x 12)
    layer(1, MODE_PM, 64, 16, 27, cyc);
    check_conv1("PM");
    R = N; C = N; L = 27 + 2 * N - 2; S = ((64 + R - 1) / R) * ((16 + C - 1) / C);
    check(cyc == S * (L + 3), $sformatf("conv1 PM cycles %0d, formula %0d", cyc, S * (L + 3)));
    $display("conv1 PM: %0d tiles, %0d compute cycles", S, cyc);

    for (int md = 0; md < 3; md++)
      check(mode_use[md] > 0, $sformatf("mode %0d never used", md));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
