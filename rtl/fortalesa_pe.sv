// fortalesa_pe -- output-stationary processing element of the FORTALESA array.
//
// Every PE holds an 8-bit activation register (IREG), an 8-bit weight
// register (WREG) and a 32-bit partial-sum register (OREG), and a signed
// multiply-accumulate unit: OREG <= OREG + IREG * WREG every cycle.
// Activations move left to right and weights top to bottom, one PE per cycle.
//
// Reconfiguration (paper, Sec. III and Figs. 1-3): in front of IREG a
// multiplexer takes the activation either from the direct left neighbour
// (MODE_PM) or from the PE two columns to the left (MODE_DRG/MODE_TRG, the
// "skip one" link, so each copy of an operand only ever passes through PEs of
// the same role). In front of WREG a multiplexer takes the weight from the PE
// above (MODE_PM, MODE_DRG) or from the same-role PE of the group above
// (MODE_TRG). The array supplies the candidates; this module only selects.
//
// A PE that is a main PE in some mode (parameters DRG_MAIN, TRG_MAIN) also
// holds the correction logic and a result register VREG that is written
// every cycle with the corrected partial sum, so a corrected result appears
// one cycle after the OREGs it comes from (the "+1" of the paper's DRG and
// TRG latencies):
//   DRG main : VREG <= drg_corrector(OREG, OREG of its shadow, ps_1)
//   TRG3 main: VREG <= vote(OREG, ps_1, ps_2)
//   TRG4 main: VREG <= vote(ps_1, ps_2, ps_3); its own MAC is idle (OREG is
//              held) in MODE_TRG, as in the paper.
// res is VREG while the PE acts as main in the current mode, otherwise OREG.
// That the correction goes to a separate register, and is not written back
// into OREG, is this design's reading of the paper.
//
// clr (synchronous) zeroes IREG, WREG, OREG and VREG before an operation;
// rst_n is an asynchronous active-low reset doing the same.
//
// Fault injection (this design's verification aid): when fi.en is set and
// fi.row/fi.col equal ROW/COL, bit fi.bit_idx of the targeted value is
// flipped or forced on its way into the register (IREG, WREG, OREG) or at
// the multiplier output (MULT) for that cycle.
module fortalesa_pe
  import fortalesa_pkg::*;
#(
  parameter int unsigned ROW      = 0,
  parameter int unsigned COL      = 0,
  parameter bit          DRG_MAIN = 1'b0,
  parameter bit          TRG_MAIN = 1'b0,
  parameter drg_corr_e   DRG_CORR = DRG_AVG,
  parameter trg_impl_e   TRG_IMPL = TRG3
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clr,
  input  mode_e                 mode,
  input  logic signed [A_W-1:0] a_pm,    // activation from the left neighbour
  input  logic signed [A_W-1:0] a_red,   // activation over the skip-one link
  input  logic signed [W_W-1:0] w_pm,    // weight from the PE above
  input  logic signed [W_W-1:0] w_trg,   // weight from the group above (TRG)
  input  logic signed [P_W-1:0] ps_1,    // shadow partial sums (main PEs only)
  input  logic signed [P_W-1:0] ps_2,
  input  logic signed [P_W-1:0] ps_3,
  input  fi_req_t               fi,
  output logic signed [A_W-1:0] a_q,     // IREG
  output logic signed [W_W-1:0] w_q,     // WREG
  output logic signed [P_W-1:0] oreg_q,  // OREG
  output logic signed [P_W-1:0] res      // result seen by the output mapping
);

  localparam bit IDLE_MAC_IN_TRG = TRG_MAIN && (TRG_IMPL == TRG4);

  // Corrupt bit `idx` of `v` according to `kind` when `hit` is set.
  function automatic logic [P_W-1:0] corrupt(logic [P_W-1:0] v, logic hit,
                                             fi_kind_e kind, int unsigned idx);
    logic [P_W-1:0] m;
    m = P_W'(1) << idx;
    if (!hit) return v;
    case (kind)
      FI_SA0:  return v & ~m;
      FI_SA1:  return v | m;
      default: return v ^ m;
    endcase
  endfunction

  logic hit;
  logic signed [A_W-1:0]   a_d;
  logic signed [W_W-1:0]   w_d;
  logic signed [MUL_W-1:0] prod;
  logic signed [P_W-1:0]   oreg_d;
  logic                    mac_en;

  always_comb begin
    hit  = fi.en && (fi.row == 8'(ROW)) && (fi.col == 8'(COL));
    a_d  = A_W'(corrupt(P_W'((mode == MODE_PM)  ? a_pm  : a_red),
                        hit && fi.target == FI_IREG, fi.kind, 32'(fi.bit_idx[2:0])));
    w_d  = W_W'(corrupt(P_W'((mode == MODE_TRG) ? w_trg : w_pm),
                        hit && fi.target == FI_WREG, fi.kind, 32'(fi.bit_idx[2:0])));
    prod = MUL_W'(corrupt(P_W'(a_q * w_q),
                          hit && fi.target == FI_MULT, fi.kind, 32'(fi.bit_idx[3:0])));
    mac_en = !(IDLE_MAC_IN_TRG && mode == MODE_TRG);
    oreg_d = mac_en ? oreg_q + P_W'(prod) : oreg_q;
    oreg_d = corrupt(oreg_d, hit && fi.target == FI_OREG, fi.kind, 32'(fi.bit_idx));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q    <= '0;
      w_q    <= '0;
      oreg_q <= '0;
    end else if (clr) begin
      a_q    <= '0;
      w_q    <= '0;
      oreg_q <= '0;
    end else begin
      a_q    <= a_d;
      w_q    <= w_d;
      oreg_q <= oreg_d;
    end
  end

  if (DRG_MAIN || TRG_MAIN) begin : g_main
    logic signed [P_W-1:0] drg_y, trg_y, vreg_q;
    logic                  act_main;

    if (DRG_MAIN) begin : g_drg
      drg_corrector #(.W(P_W), .CORR(DRG_CORR)) u_corr (
        .a(oreg_q), .b(ps_1), .y(drg_y)
      );
    end else begin : g_no_drg
      assign drg_y = oreg_q;
    end

    if (TRG_MAIN && TRG_IMPL == TRG3) begin : g_trg3
      tmr_voter #(.W(P_W)) u_vote (.a(oreg_q), .b(ps_1), .c(ps_2), .y(trg_y));
    end else if (TRG_MAIN) begin : g_trg4
      tmr_voter #(.W(P_W)) u_vote (.a(ps_1), .b(ps_2), .c(ps_3), .y(trg_y));
    end else begin : g_no_trg
      assign trg_y = oreg_q;
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)   vreg_q <= '0;
      else if (clr) vreg_q <= '0;
      else          vreg_q <= (mode == MODE_TRG) ? trg_y : drg_y;
    end

    always_comb begin
      act_main = (DRG_MAIN && mode == MODE_DRG) || (TRG_MAIN && mode == MODE_TRG);
      res      = act_main ? vreg_q : oreg_q;
    end
  end else begin : g_plain
    assign res = oreg_q;
  end

endmodule
