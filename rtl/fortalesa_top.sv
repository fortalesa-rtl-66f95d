// fortalesa_top -- FORTALESA accelerator core: a run-time reconfigurable,
// fault-tolerant output-stationary systolic array with its operand buffers.
//
// Data path: the host writes the activation tile (one column of N elements
// per word) into the activation buffer and the weight tile (one row of N
// elements per word) into the weight buffer, selects the execution mode and
// starts. fortalesa_ctrl reads one word of each buffer per cycle, two
// skew_feeder instances turn them into the skewed and, in the redundant
// modes, duplicated edge streams, and systolic_array computes
//   C[r][c] = sum_k A[r][k] * B[k][c]
// for the effective size of the mode (PM: N x N, DRG: N x N/2,
// TRG3: 2N/3 x N/2, TRG4: N/2 x N/2). c_out is valid while done is high and
// stays valid until the next start. Elements of the buffer words beyond the
// effective size are ignored.
//
// Design-time options (paper, Table I): DRG_CORR selects DRGA or DRG0,
// TRG_IMPL selects TRG3 or TRG4. The default, PM-DRGA-TRG3 on a 48 x 48 array
// with 8-bit operands and 32-bit partial sums, is one of the paper's four
// evaluated implementations at its smaller evaluated size. Buffer depth
// DEPTH and all interface details are this design's choice.
//
// fi is a fault-injection port for verification (not part of the paper's
// hardware); tie fi.en to 0 in use.
module fortalesa_top
  import fortalesa_pkg::*;
#(
  parameter int unsigned N        = 48,
  parameter drg_corr_e   DRG_CORR = DRG_AVG,
  parameter trg_impl_e   TRG_IMPL = TRG3,
  parameter int unsigned DEPTH    = 4608,
  parameter int unsigned AW       = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // host: operand loading
  input  logic                  act_wr_en,
  input  logic [AW-1:0]         act_wr_addr,
  input  logic [N-1:0][A_W-1:0] act_wr_data,
  input  logic                  wgt_wr_en,
  input  logic [AW-1:0]         wgt_wr_addr,
  input  logic [N-1:0][W_W-1:0] wgt_wr_data,
  // host: control
  input  mode_e                 mode,
  input  logic [AW:0]           m_len,
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  // results
  output logic signed [P_W-1:0] c_out [N][N],
  // verification
  input  fi_req_t               fi
);

  mode_e                 mode_q;
  logic                  clr, rd_en;
  logic [AW-1:0]         rd_addr;
  logic [15:0]           lat_q;
  logic [N-1:0][A_W-1:0] act_word;
  logic [N-1:0][W_W-1:0] wgt_word;
  logic                  act_valid, wgt_valid;
  logic [A_W-1:0]        a_lane [N];
  logic [W_W-1:0]        w_lane [N];
  logic signed [A_W-1:0] a_edge [N];
  logic signed [W_W-1:0] w_edge [N];

  fortalesa_ctrl #(.N(N), .TRG_IMPL(TRG_IMPL), .DEPTH(DEPTH), .AW(AW)) u_ctrl (
    .clk, .rst_n, .start, .mode_i(mode), .m_len,
    .mode_q, .clr, .rd_en, .rd_addr, .busy, .done, .lat_q
  );

  operand_buffer #(.N(N), .EW(A_W), .DEPTH(DEPTH), .AW(AW)) u_act_buf (
    .clk, .rst_n,
    .wr_en(act_wr_en), .wr_addr(act_wr_addr), .wr_data(act_wr_data),
    .rd_en, .rd_addr, .rd_data(act_word), .rd_valid(act_valid)
  );

  operand_buffer #(.N(N), .EW(W_W), .DEPTH(DEPTH), .AW(AW)) u_wgt_buf (
    .clk, .rst_n,
    .wr_en(wgt_wr_en), .wr_addr(wgt_wr_addr), .wr_data(wgt_wr_data),
    .rd_en, .rd_addr, .rd_data(wgt_word), .rd_valid(wgt_valid)
  );

  skew_feeder #(.N(N), .EW(A_W), .IS_ACT(1'b1), .TRG_IMPL(TRG_IMPL)) u_act_feed (
    .clk, .rst_n, .clr, .mode(mode_q), .valid(act_valid), .word(act_word), .lane_o(a_lane)
  );

  skew_feeder #(.N(N), .EW(W_W), .IS_ACT(1'b0), .TRG_IMPL(TRG_IMPL)) u_wgt_feed (
    .clk, .rst_n, .clr, .mode(mode_q), .valid(wgt_valid), .word(wgt_word), .lane_o(w_lane)
  );

  for (genvar l = 0; l < N; l++) begin : g_edge
    assign a_edge[l] = a_lane[l];
    assign w_edge[l] = w_lane[l];
  end

  systolic_array #(.N(N), .DRG_CORR(DRG_CORR), .TRG_IMPL(TRG_IMPL)) u_array (
    .clk, .rst_n, .clr, .mode(mode_q), .a_edge, .w_edge, .fi, .c_eff(c_out)
  );

endmodule
