// fortalesa_pkg -- types, widths and group geometry shared by the FORTALESA
// reconfigurable systolic array.
//
// The array is an N x N output-stationary grid of processing elements (PEs).
// At run time it works in one of three execution modes:
//   MODE_PM  : performance mode, every PE computes its own output (N x N).
//   MODE_DRG : dual-redundancy grouping, two horizontally neighbouring PEs
//              form a group (shadow on the left, main on the right), N x N/2.
//   MODE_TRG : triple-redundancy grouping, three PEs vote. Two design-time
//              implementations exist: TRG3 (L-shaped groups of three PEs,
//              2N/3 x N/2) and TRG4 (2 x 2 groups whose main PE only votes,
//              N/2 x N/2).
// The DRG correction (average, DRGA, or zero the differing bits, DRG0) is a
// second design-time option. The widths (8-bit activations and weights,
// 32-bit partial sums), the group sizes and the effective sizes follow the
// paper. The exact placement of the roles inside a TRG3 group and the way the
// weight copies are chained from one group to the next are this design's
// choice; they are all encoded in the functions below, which are evaluated
// at elaboration time only.
//
// Geometry vocabulary: a PE at physical (row i, column j) belongs in a given
// mode to the group at effective (er, ec) and has a role in it. Role 0 is
// the main PE, roles 1..3 are shadows. pos_row/pos_col are the inverse map.
package fortalesa_pkg;

  localparam int unsigned A_W   = 8;          // activation (IREG) width
  localparam int unsigned W_W   = 8;          // weight (WREG) width
  localparam int unsigned P_W   = 32;         // partial sum (OREG) width
  localparam int unsigned MUL_W = A_W + W_W;  // multiplier product width

  typedef enum logic [1:0] {
    MODE_PM  = 2'd0,
    MODE_DRG = 2'd1,
    MODE_TRG = 2'd2
  } mode_e;

  typedef enum logic {
    DRG_AVG  = 1'b0,   // DRGA: average the two partial sums
    DRG_ZERO = 1'b1    // DRG0: set the bits that differ to zero
  } drg_corr_e;

  typedef enum logic {
    TRG3 = 1'b0,
    TRG4 = 1'b1
  } trg_impl_e;

  // Fault injection (verification aid, not part of the paper's hardware):
  // which register or unit of the addressed PE is corrupted, and how.
  typedef enum logic [1:0] {
    FI_IREG = 2'd0,
    FI_WREG = 2'd1,
    FI_OREG = 2'd2,
    FI_MULT = 2'd3
  } fi_target_e;

  typedef enum logic [1:0] {
    FI_FLIP = 2'd0,    // transient: invert the bit once per asserted cycle
    FI_SA0  = 2'd1,    // permanent: hold the bit at 0 while asserted
    FI_SA1  = 2'd2     // permanent: hold the bit at 1 while asserted
  } fi_kind_e;

  typedef struct packed {
    logic       en;
    logic [7:0] row;
    logic [7:0] col;
    fi_target_e target;
    fi_kind_e   kind;
    logic [4:0] bit_idx;
  } fi_req_t;

  localparam int MD_PM  = 0;
  localparam int MD_DRG = 1;
  localparam int MD_TRG = 2;
  localparam int IM_TRG3 = 0;
  localparam int IM_TRG4 = 1;

  // Effective size of the array (number of groups) per mode.
  function automatic int eff_rows(int n, int mode, int impl);
    if (mode == MD_TRG) return (impl == IM_TRG3) ? (2 * n) / 3 : n / 2;
    return n;
  endfunction

  function automatic int eff_cols(int n, int mode, int impl);
    if (mode == MD_PM) return n;
    return n / 2;
  endfunction

  // Latency of one tile in cycles (paper, Eqs. 1, 5, 9, 11):
  // M + rows + cols - 2, plus one cycle for correction/voting in DRG and TRG.
  function automatic int tile_latency(int n, int mode, int impl, int m);
    return m + eff_rows(n, mode, impl) + eff_cols(n, mode, impl) - 2
             + ((mode == MD_PM) ? 0 : 1);
  endfunction

  function automatic int pe_er(int n, int mode, int impl, int i, int j);
    if (mode == MD_TRG) begin
      if (impl == IM_TRG3)
        return 2 * (i / 3) + (((i % 3) == 2 || ((i % 3) == 1 && (j % 2) == 1)) ? 1 : 0);
      return i / 2;
    end
    return i;
  endfunction

  function automatic int pe_ec(int n, int mode, int impl, int i, int j);
    if (mode == MD_PM) return j;
    return j / 2;
  endfunction

  function automatic int pe_role(int n, int mode, int impl, int i, int j);
    if (mode == MD_DRG) return ((j % 2) == 1) ? 0 : 1;
    if (mode == MD_TRG) begin
      if (impl == IM_TRG3) begin
        if ((i % 3) == 1) return 2;
        return ((j % 2) == 1) ? 0 : 1;
      end
      if ((i % 2) == 1 && (j % 2) == 1) return 0;
      if ((i % 2) == 0 && (j % 2) == 0) return 1;
      if ((i % 2) == 0) return 2;
      return 3;
    end
    return 0;
  endfunction

  function automatic int pos_row(int n, int mode, int impl, int er, int ec, int role);
    if (mode == MD_TRG) begin
      if (impl == IM_TRG3) begin
        if ((er % 2) == 0) return 3 * (er / 2) + ((role == 2) ? 1 : 0);
        return 3 * (er / 2) + ((role == 2) ? 1 : 2);
      end
      return 2 * er + ((role == 0 || role == 3) ? 1 : 0);
    end
    return er;
  endfunction

  function automatic int pos_col(int n, int mode, int impl, int er, int ec, int role);
    if (mode == MD_DRG) return 2 * ec + ((role == 0) ? 1 : 0);
    if (mode == MD_TRG) begin
      if (impl == IM_TRG3) begin
        if (role == 0) return 2 * ec + 1;
        if (role == 1) return 2 * ec;
        return 2 * ec + (er % 2);
      end
      return 2 * ec + ((role == 0 || role == 2) ? 1 : 0);
    end
    return ec;
  endfunction

endpackage
