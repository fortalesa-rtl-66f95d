// tmr_voter -- voter of a main PE in the triple-redundancy grouping (TRG) mode.
//
// Three copies of the same partial sum come in; the output is their bitwise
// majority, so any error confined to one copy is removed completely. The
// paper only names a "voter" in the main PE; bitwise majority is this
// design's choice (it equals word-wise voting whenever two copies agree).
// Purely combinational; the main PE registers the result.
module tmr_voter
  import fortalesa_pkg::*;
#(
  parameter int unsigned W = P_W
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  output logic [W-1:0] y
);

  always_comb y = (a & b) | (a & c) | (b & c);

endmodule
