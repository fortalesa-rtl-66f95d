// tb_skew_feeder -- streams random words through activation and weight
// feeders (TRG3 and TRG4 variants) and checks every lane in every cycle:
// lane l must carry element s of the word issued s cycles earlier, with s
// the lane's effective row/column written out here independently
// (activation, TRG3: rows 3b,3b+1 -> 2b and 3b+2 -> 2b+1; TRG4: row/2;
// weights in DRG/TRG: column/2), and zeros for words with valid low.
module tb_skew_feeder;
  import fortalesa_pkg::*;
  localparam int N = 12, EW = 8, T = 60;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0;
  always #5 clk = ~clk;

  mode_e mode = MODE_PM;
  logic valid = 1'b0;
  logic [N-1:0][EW-1:0] word = '0;
  logic [EW-1:0] o [4][N];

  skew_feeder #(.N(N), .EW(EW), .IS_ACT(1), .TRG_IMPL(TRG3)) u0 (.clk, .rst_n, .clr, .mode, .valid, .word, .lane_o(o[0]));
  skew_feeder #(.N(N), .EW(EW), .IS_ACT(1), .TRG_IMPL(TRG4)) u1 (.clk, .rst_n, .clr, .mode, .valid, .word, .lane_o(o[1]));
  skew_feeder #(.N(N), .EW(EW), .IS_ACT(0), .TRG_IMPL(TRG3)) u2 (.clk, .rst_n, .clr, .mode, .valid, .word, .lane_o(o[2]));
  skew_feeder #(.N(N), .EW(EW), .IS_ACT(0), .TRG_IMPL(TRG4)) u3 (.clk, .rst_n, .clr, .mode, .valid, .word, .lane_o(o[3]));

  logic [N-1:0][EW-1:0] hist [T];   // word issued in cycle t (0 if invalid)

  function automatic int src(int inst, mode_e md, int l);
    bit act = (inst < 2);
    if (md == MODE_PM) return l;
    if (!act) return l / 2;
    if (md == MODE_DRG) return l;
    if (inst == 0) return 2 * (l / 3) + ((l % 3) == 2 ? 1 : 0);
    return l / 2;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int mi = 0; mi < 3; mi++) begin
      mode = mode_e'(mi);
      @(negedge clk) clr = 1'b1;
      @(negedge clk) clr = 1'b0;
      for (int t = 0; t < T; t++) begin
        valid = (t < T - N - 5) && ($urandom_range(5) != 0);
        for (int l = 0; l < N; l++) word[l] = EW'($urandom);
        hist[t] = valid ? word : '0;
        #1;
        for (int inst = 0; inst < 4; inst++)
          for (int l = 0; l < N; l++) begin
            int s;
            logic [EW-1:0] e;
            s = src(inst, mode, l);
            e = (t - s >= 0) ? hist[t - s][s] : '0;
            checks++;
            if (o[inst][l] !== e) begin
              failures++;
              $display("FAIL %s inst %0d lane %0d t=%0d: %h expected %h",
                       mode.name(), inst, l, t, o[inst][l], e);
            end
          end
        @(negedge clk);
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
