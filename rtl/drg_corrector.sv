// drg_corrector -- correction unit of a main PE in the dual-redundancy
// grouping (DRG) mode.
//
// The main PE and its shadow compute the same partial sum. When a fault hits
// one of them the two values differ and DRG cannot tell which one is right,
// so it limits the damage instead. The paper gives two corrections, selected
// at design time:
//   DRG_AVG  (DRGA): y = floor((a + b) / 2), computed on W+1 bits so it never
//                    overflows; the error of a single faulty copy is halved.
//   DRG_ZERO (DRG0): every bit on which a and b disagree is forced to 0,
//                    y = a & b.
// When a == b both give y = a. The paper names both rules; the floor
// rounding of the average is this design's choice. Purely combinational;
// the main PE registers the result.
module drg_corrector
  import fortalesa_pkg::*;
#(
  parameter int unsigned W    = P_W,
  parameter drg_corr_e   CORR = DRG_AVG
) (
  input  logic signed [W-1:0] a,   // partial sum of the main PE
  input  logic signed [W-1:0] b,   // partial sum of the shadow PE
  output logic signed [W-1:0] y
);

  if (CORR == DRG_AVG) begin : g_avg
    logic signed [W:0] sum;
    always_comb begin
      sum = {a[W-1], a} + {b[W-1], b};
      y   = sum[W:1];
    end
  end else begin : g_zero
    always_comb y = a & b;
  end

endmodule
