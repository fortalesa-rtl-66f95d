// operand_buffer -- on-chip buffer for one operand of the systolic array
// (activations on the left side, weights on the top side).
//
// The paper only places "memory buffers for activations and weights" at the
// left and top of the array; their organisation is this design's choice.
// Each entry is one wide word of N elements: for the activation buffer,
// word k holds column k of the activation tile (element r = A[r][k]); for
// the weight buffer, word k holds row k of the weight tile (element c =
// B[k][c]). The host writes one word per cycle on the write port; the array
// side reads one word per cycle. Read latency is one cycle: rd_data and
// rd_valid belong to the address presented in the previous cycle.
// The memory itself is an array without reset (a RAM); rd_valid is reset.
module operand_buffer #(
  parameter int unsigned N     = 48,
  parameter int unsigned EW    = 8,
  parameter int unsigned DEPTH = 4608,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  wr_en,
  input  logic [AW-1:0]         wr_addr,
  input  logic [N-1:0][EW-1:0]  wr_data,
  input  logic                  rd_en,
  input  logic [AW-1:0]         rd_addr,
  output logic [N-1:0][EW-1:0]  rd_data,
  output logic                  rd_valid
);

  logic [N-1:0][EW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_en;
  end

endmodule
