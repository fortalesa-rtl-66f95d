// systolic_array -- the N x N reconfigurable output-stationary PE grid of
// FORTALESA, with the interconnect of all three execution modes.
//
// Inputs are the edge streams: a_edge[i] enters physical row i from the left,
// w_edge[j] enters physical column j from the top. They must already be
// skewed and, in the redundant modes, duplicated for every PE of a group
// (skew_feeder does that). Links, all one register (one cycle) long:
//   activation, MODE_PM   : PE(i,j-1) -> PE(i,j)
//   activation, DRG/TRG   : PE(i,j-2) -> PE(i,j) (skip one, same role)
//   weight, MODE_PM/DRG   : PE(i-1,j) -> PE(i,j)
//   weight, MODE_TRG      : same-role PE of the group above -> PE(i,j)
//   partial sums          : OREG of every shadow -> main PE of its group
// In the redundant modes the first group column (physical columns 0 and 1)
// takes its activations from the edge; in TRG every PE of a group reads the
// edge row of its group's main PE. The first group row reads w_edge of its
// own physical column. Group shapes follow the paper's Figs. 1-3; which
// same-role PE feeds which in TRG3 is this design's choice (see
// fortalesa_pkg), chosen so that each copy of an operand stays in its own
// chain of PEs and a faulty register corrupts only one copy per group.
//
// Output: c_eff[r][c] is the result of the main PE of effective group (r,c)
// in the current mode (plain OREG in MODE_PM, the corrected/voted VREG
// otherwise), and 0 outside the mode's effective size. It holds the final
// product one cycle after the last MAC (PM) or one cycle after the last
// correction (DRG/TRG); see fortalesa_ctrl for the exact cycle.
//
// N must be a multiple of 6 (TRG3) or of 2 (TRG4); the paper's sizes 48 and
// 132 are both multiples of 6.
module systolic_array
  import fortalesa_pkg::*;
#(
  parameter int unsigned N        = 48,
  parameter drg_corr_e   DRG_CORR = DRG_AVG,
  parameter trg_impl_e   TRG_IMPL = TRG3
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clr,
  input  mode_e                 mode,
  input  logic signed [A_W-1:0] a_edge [N],
  input  logic signed [W_W-1:0] w_edge [N],
  input  fi_req_t               fi,
  output logic signed [P_W-1:0] c_eff  [N][N]
);

  localparam int IM = (TRG_IMPL == TRG3) ? IM_TRG3 : IM_TRG4;
  localparam int RT = eff_rows(N, MD_TRG, IM);   // effective rows in TRG
  localparam int CR = eff_cols(N, MD_DRG, IM);   // effective cols in DRG/TRG

  if ((N % 2) != 0 || (TRG_IMPL == TRG3 && (N % 3) != 0)) begin : g_bad_size
    $error("systolic_array: N=%0d does not divide into the redundancy groups", N);
  end

  logic signed [A_W-1:0] a_q  [N][N];
  logic signed [W_W-1:0] w_q  [N][N];
  logic signed [P_W-1:0] o_q  [N][N];
  logic signed [P_W-1:0] res  [N][N];

  for (genvar i = 0; i < N; i++) begin : g_row
    for (genvar j = 0; j < N; j++) begin : g_col
      // Group membership of this PE in DRG and TRG.
      localparam int ER_T   = pe_er(N, MD_TRG, IM, i, j);
      localparam int EC_T   = pe_ec(N, MD_TRG, IM, i, j);
      localparam int ROLE_T = pe_role(N, MD_TRG, IM, i, j);
      localparam int ROLE_D = pe_role(N, MD_DRG, IM, i, j);
      localparam bit DMAIN  = (ROLE_D == 0);
      localparam bit TMAIN  = (ROLE_T == 0);
      // Edge row of this PE's TRG group (row of its main PE).
      localparam int TEDGE  = pos_row(N, MD_TRG, IM, ER_T, 0, 0);

      logic signed [A_W-1:0] a_pm, a_red;
      logic signed [W_W-1:0] w_pm, w_trg;
      logic signed [P_W-1:0] ps_1, ps_2, ps_3;

      // Activation candidates.
      if (j == 0) begin : g_a_pm_edge
        assign a_pm = a_edge[i];
      end else begin : g_a_pm_link
        assign a_pm = a_q[i][j-1];
      end
      if (j >= 2) begin : g_a_red_link
        assign a_red = a_q[i][j-2];
      end else begin : g_a_red_edge
        assign a_red = (mode == MODE_TRG) ? a_edge[TEDGE] : a_edge[i];
      end

      // Weight candidates.
      if (i == 0) begin : g_w_pm_edge
        assign w_pm = w_edge[j];
      end else begin : g_w_pm_link
        assign w_pm = w_q[i-1][j];
      end
      if (ER_T == 0) begin : g_w_trg_edge
        assign w_trg = w_edge[j];
      end else begin : g_w_trg_link
        localparam int SR = pos_row(N, MD_TRG, IM, ER_T - 1, EC_T, ROLE_T);
        localparam int SC = pos_col(N, MD_TRG, IM, ER_T - 1, EC_T, ROLE_T);
        assign w_trg = w_q[SR][SC];
      end

      // Partial sums of the shadows, for main PEs.
      if (TMAIN) begin : g_ps_trg
        localparam int R1 = pos_row(N, MD_TRG, IM, ER_T, EC_T, 1);
        localparam int C1 = pos_col(N, MD_TRG, IM, ER_T, EC_T, 1);
        localparam int R2 = pos_row(N, MD_TRG, IM, ER_T, EC_T, 2);
        localparam int C2 = pos_col(N, MD_TRG, IM, ER_T, EC_T, 2);
        assign ps_1 = (mode == MODE_TRG) ? o_q[R1][C1] : o_q[i][j-1];
        assign ps_2 = o_q[R2][C2];
        if (TRG_IMPL == TRG4) begin : g_ps3
          localparam int R3 = pos_row(N, MD_TRG, IM, ER_T, EC_T, 3);
          localparam int C3 = pos_col(N, MD_TRG, IM, ER_T, EC_T, 3);
          assign ps_3 = o_q[R3][C3];
        end else begin : g_no_ps3
          assign ps_3 = '0;
        end
      end else if (DMAIN) begin : g_ps_drg
        assign ps_1 = o_q[i][j-1];
        assign ps_2 = '0;
        assign ps_3 = '0;
      end else begin : g_ps_none
        assign ps_1 = '0;
        assign ps_2 = '0;
        assign ps_3 = '0;
      end

      fortalesa_pe #(
        .ROW(i), .COL(j), .DRG_MAIN(DMAIN), .TRG_MAIN(TMAIN),
        .DRG_CORR(DRG_CORR), .TRG_IMPL(TRG_IMPL)
      ) u_pe (
        .clk, .rst_n, .clr, .mode,
        .a_pm, .a_red, .w_pm, .w_trg, .ps_1, .ps_2, .ps_3,
        .fi,
        .a_q(a_q[i][j]), .w_q(w_q[i][j]), .oreg_q(o_q[i][j]), .res(res[i][j])
      );
    end
  end

  // Effective output matrix: pick the main PE of each group for the mode.
  for (genvar r = 0; r < N; r++) begin : g_out_row
    for (genvar c = 0; c < N; c++) begin : g_out_col
      logic signed [P_W-1:0] v_drg, v_trg;
      if (c < CR) begin : g_drg_in
        assign v_drg = res[r][2*c+1];
      end else begin : g_drg_out
        assign v_drg = '0;
      end
      if (r < RT && c < CR) begin : g_trg_in
        localparam int MR = pos_row(N, MD_TRG, IM, r, c, 0);
        localparam int MC = pos_col(N, MD_TRG, IM, r, c, 0);
        assign v_trg = res[MR][MC];
      end else begin : g_trg_out
        assign v_trg = '0;
      end
      always_comb begin
        case (mode)
          MODE_DRG: c_eff[r][c] = v_drg;
          MODE_TRG: c_eff[r][c] = v_trg;
          default:  c_eff[r][c] = res[r][c];
        endcase
      end
    end
  end

endmodule
