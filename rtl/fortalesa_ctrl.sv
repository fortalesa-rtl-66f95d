// fortalesa_ctrl -- sequencer of one tile operation on the FORTALESA array.
//
// The host selects the execution mode (paper: "a control signal that
// controls multiplexers", coming from the host processor) and the length M
// of the shared dimension, then pulses start. The controller latches both,
// spends one cycle clearing the array (clr), then reads the M operand words
// from both buffers, addresses 0..M-1, one per cycle, and counts until the
// results are final. States: IDLE -> CLEAR -> RUN -> DONE (DONE waits for
// the next start like IDLE).
//
// Timing: let s0 be the first RUN cycle (buffer address 0 is presented).
// done rises in cycle s0 + L + 2, where L is the paper's tile latency for
// the latched mode (Eqs. 1, 5, 9, 11):
//   PM   : M + 2N - 2          DRG : M + 3N/2 - 1
//   TRG3 : M + 7N/6 - 1        TRG4: M + N - 1
// The two extra cycles are this design's buffer read register and the
// array's edge register. The mode output stays constant from CLEAR to the
// next start, so the array's multiplexers never change during an operation.
// start is ignored while busy. M must be at least 1 (asserted).
// lat_q is LW = 16 bits wide, a round size: at the default sizes L stays
// below 2^15, so its top bit is always 0 (a constant output bit).
module fortalesa_ctrl
  import fortalesa_pkg::*;
#(
  parameter int unsigned N        = 48,
  parameter trg_impl_e   TRG_IMPL = TRG3,
  parameter int unsigned DEPTH    = 4608,
  parameter int unsigned AW       = $clog2(DEPTH),
  parameter int unsigned LW       = 16               // latency counter width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  mode_e         mode_i,
  input  logic [AW:0]   m_len,     // M, 1..DEPTH
  output mode_e         mode_q,
  output logic          clr,
  output logic          rd_en,
  output logic [AW-1:0] rd_addr,
  output logic          busy,
  output logic          done,
  output logic [LW-1:0] lat_q      // L of the running operation
);

  localparam int IM = (TRG_IMPL == TRG3) ? IM_TRG3 : IM_TRG4;
  // Per-mode constant part of L (L = M + LAT_x).
  localparam int LAT_PM  = tile_latency(N, MD_PM,  IM, 0);
  localparam int LAT_DRG = tile_latency(N, MD_DRG, IM, 0);
  localparam int LAT_TRG = tile_latency(N, MD_TRG, IM, 0);

  typedef enum logic [1:0] {S_IDLE, S_CLEAR, S_RUN, S_DONE} state_e;

  state_e        state_q;
  logic [AW:0]   m_q;
  logic [LW-1:0] cnt_q;
  logic [LW-1:0] lat_d;

  always_comb begin
    case (mode_i)
      MODE_DRG: lat_d = LW'(m_len) + LW'(LAT_DRG);
      MODE_TRG: lat_d = LW'(m_len) + LW'(LAT_TRG);
      default:  lat_d = LW'(m_len) + LW'(LAT_PM);
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      mode_q  <= MODE_PM;
      m_q     <= '0;
      lat_q   <= '0;
      cnt_q   <= '0;
    end else begin
      case (state_q)
        S_IDLE, S_DONE: begin
          if (start) begin
            state_q <= S_CLEAR;
            mode_q  <= mode_i;
            m_q     <= m_len;
            lat_q   <= lat_d;
          end
        end
        S_CLEAR: begin
          state_q <= S_RUN;
          cnt_q   <= '0;
        end
        default: begin  // S_RUN
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == lat_q + 1'b1) state_q <= S_DONE;
        end
      endcase
    end
  end

  always_comb begin
    clr     = (state_q == S_CLEAR);
    rd_en   = (state_q == S_RUN) && ((AW+1)'(cnt_q) < m_q);
    rd_addr = AW'(cnt_q);
    busy    = (state_q == S_CLEAR) || (state_q == S_RUN);
    done    = (state_q == S_DONE);
  end

  a_m_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
                                (start && !busy) |-> (m_len != '0 && m_len <= (AW+1)'(DEPTH)))
    else $error("fortalesa_ctrl: M=%0d out of range", m_len);

endmodule
