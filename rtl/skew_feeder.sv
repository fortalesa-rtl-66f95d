// skew_feeder -- turns one buffer word per cycle into the skewed edge streams
// of the systolic array for the current execution mode.
//
// An output-stationary array needs row r of the activation tile delayed by r
// cycles and column c of the weight tile delayed by c cycles (paper,
// Sec. II-B and the zero padding drawn in Figs. 1-3). In the redundant modes
// several physical lanes carry the same effective row/column, because every
// PE of a group must see the same operands: lane l is fed element
// src(mode, l) of the word, delayed by src(mode, l) cycles, where src is the
// effective row (IS_ACT=1, lanes are physical rows) or the effective column
// (IS_ACT=0, lanes are physical columns) of that lane; see fortalesa_pkg.
// A word with valid low is fed as zeros, which is also what the array sees
// outside an operation. Each lane has a shift register as long as the
// largest delay it needs in any mode and a tap selected by the mode.
// Combinational from word to the lanes with zero delay; clr empties the
// shift registers.
module skew_feeder
  import fortalesa_pkg::*;
#(
  parameter int unsigned N        = 48,
  parameter int unsigned EW       = 8,
  parameter bit          IS_ACT   = 1'b1,
  parameter trg_impl_e   TRG_IMPL = TRG3
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clr,
  input  mode_e                mode,
  input  logic                 valid,
  input  logic [N-1:0][EW-1:0] word,
  output logic [EW-1:0]        lane_o [N]
);

  localparam int IM = (TRG_IMPL == TRG3) ? IM_TRG3 : IM_TRG4;

  function automatic int lane_src(int md, int l);
    return IS_ACT ? pe_er(N, md, IM, l, 0) : pe_ec(N, md, IM, 0, l);
  endfunction

  for (genvar l = 0; l < N; l++) begin : g_lane
    localparam int S_PM  = lane_src(MD_PM, l);
    localparam int S_DRG = lane_src(MD_DRG, l);
    localparam int S_TRG = lane_src(MD_TRG, l);
    localparam int D_MAX = (S_PM > S_DRG) ? ((S_PM > S_TRG) ? S_PM : S_TRG)
                                          : ((S_DRG > S_TRG) ? S_DRG : S_TRG);

    logic [EW-1:0] dl [D_MAX+1];   // dl[d] = element delayed by d cycles
    int unsigned   src;

    always_comb begin
      case (mode)
        MODE_DRG: src = S_DRG;
        MODE_TRG: src = S_TRG;
        default:  src = S_PM;
      endcase
      dl[0] = valid ? word[src] : '0;
    end

    for (genvar d = 1; d <= D_MAX; d++) begin : g_dly
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n)   dl[d] <= '0;
        else if (clr) dl[d] <= '0;
        else          dl[d] <= dl[d-1];
      end
    end

    assign lane_o[l] = dl[src];
  end

endmodule
