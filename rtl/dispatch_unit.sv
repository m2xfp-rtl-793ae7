// dispatch_unit: sequences one GEMM on the compute engine and delivers
// elements, scales and metadata from the buffers to the decode units, the
// PE array and the quantization engine.
//
// A command (start_i) computes OUT[m][0..ROWS-1] = sum over kg K groups of
// ACT[m][g] . W[r][g] for m_i activation rows:
//   for g in 0..kg-1:
//     LOADW : ROWS cycles, weight group wbase + g*ROWS + r -> array row r
//     STREAM: m_i cycles, activation group abase + m*kg + g -> decode units
//             -> array, partial sum read from output buffer entry m (zero
//             for g = 0 unless acc_i was set) and the result written back
//   WAIT  : 2 cycles until the last write-back has landed
//   DRAIN : m_i cycles, output buffer entry m -> FP32 output port and,
//           through FP32->FP16 conversion, the quantization engine
//   FLUSH : 3 cycles, then done_o pulses for one cycle, one cycle after the
//           last quantized group has left the engine.
// Timing seen from this unit: buffer reads return one cycle after issue
// (the *_d1 outputs), the array adds one more cycle (obuf write at +2) and
// the quantization engine two (done at +3 after the last drain read).
// The paper only names a dispatch unit; the loop order, command format and
// all of this timing are this design's choices. Activation rows must not
// exceed the output buffer depth. A command with m_i or kg_i of zero
// completes at once.
module dispatch_unit #(
  parameter int unsigned ROWS = 32,
  parameter int unsigned A_AW = 13,
  parameter int unsigned W_AW = 13,
  parameter int unsigned O_AW = 9,
  parameter int unsigned RW   = $clog2(ROWS)
) (
  input  logic            clk,
  input  logic            rst_n,
  // command
  input  logic            start_i,
  input  logic [O_AW:0]   m_i,
  input  logic [A_AW:0]   kg_i,
  input  logic [A_AW-1:0] abase_i,
  input  logic [W_AW-1:0] wbase_i,
  input  logic            acc_i,     // continue the sums already in the output buffer
  output logic            busy_o,
  output logic            done_o,
  // buffer reads (issue cycle)
  output logic            w_rd_en_o,
  output logic [W_AW-1:0] w_rd_addr_o,
  output logic            a_rd_en_o,
  output logic [A_AW-1:0] a_rd_addr_o,
  output logic            o_rd_en_o,
  output logic [O_AW-1:0] o_rd_addr_o,
  // one cycle after issue
  output logic            wload_en_d1_o,
  output logic [RW-1:0]   wload_row_d1_o,
  output logic            act_valid_d1_o,
  output logic            psum_zero_d1_o,
  output logic            drain_valid_d1_o,
  output logic [O_AW-1:0] drain_row_d1_o,
  // two cycles after issue
  output logic            o_wr_en_d2_o,
  output logic [O_AW-1:0] o_wr_addr_d2_o
);
  typedef enum logic [2:0] {S_IDLE, S_LOADW, S_STREAM, S_WAIT, S_DRAIN, S_FLUSH} state_t;

  state_t          state;
  logic [O_AW:0]   m_q;
  logic [A_AW:0]   kg_q;
  logic            acc_q;
  logic [A_AW-1:0] abase_q;
  logic [A_AW:0]   g;          // current K group
  logic [RW-1:0]   r;          // weight row being loaded
  logic [O_AW-1:0] mi;         // activation row
  logic [W_AW-1:0] w_addr;
  logic [A_AW-1:0] a_addr;
  logic [1:0]      wait_cnt;

  // issue-cycle strobes
  logic is_loadw, is_stream, is_drain;
  assign is_loadw  = (state == S_LOADW);
  assign is_stream = (state == S_STREAM);
  assign is_drain  = (state == S_DRAIN);

  assign busy_o      = (state != S_IDLE);
  assign w_rd_en_o   = is_loadw;
  assign w_rd_addr_o = w_addr;
  assign a_rd_en_o   = is_stream;
  assign a_rd_addr_o = a_addr;
  assign o_rd_en_o   = (is_stream && (g != '0 || acc_q)) || is_drain;
  assign o_rd_addr_o = mi;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      done_o   <= 1'b0;
      g        <= '0;
      r        <= '0;
      mi       <= '0;
      wait_cnt <= '0;
    end else begin
      done_o <= 1'b0;
      case (state)
        S_IDLE: if (start_i) begin
          m_q     <= m_i;
          kg_q    <= kg_i;
          acc_q   <= acc_i;
          abase_q <= abase_i;
          g       <= '0;
          r       <= '0;
          mi      <= '0;
          w_addr  <= wbase_i;
          a_addr  <= abase_i;
          if (m_i == '0 || kg_i == '0) done_o <= 1'b1;
          else                         state  <= S_LOADW;
        end
        S_LOADW: begin
          w_addr <= w_addr + W_AW'(1);
          r      <= r + RW'(1);
          if (r == RW'(ROWS - 1)) begin
            state <= S_STREAM;
            mi    <= '0;
            a_addr <= abase_q + A_AW'(g);
          end
        end
        S_STREAM: begin
          a_addr <= a_addr + A_AW'(kg_q);
          mi     <= mi + O_AW'(1);
          if ({1'b0, mi} == m_q - 1'b1) begin
            r <= '0;
            if (g == kg_q - 1'b1) begin
              state    <= S_WAIT;
              wait_cnt <= 2'd1;
            end else begin
              state <= S_LOADW;
              g     <= g + 1'b1;
            end
          end
        end
        S_WAIT: begin
          wait_cnt <= wait_cnt - 2'd1;
          if (wait_cnt == 2'd0) begin
            state <= S_DRAIN;
            mi    <= '0;
          end
        end
        S_DRAIN: begin
          mi <= mi + O_AW'(1);
          if ({1'b0, mi} == m_q - 1'b1) begin
            state    <= S_FLUSH;
            wait_cnt <= 2'd2;
          end
        end
        S_FLUSH: begin
          wait_cnt <= wait_cnt - 2'd1;
          if (wait_cnt == 2'd0) begin
            state  <= S_IDLE;
            done_o <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // delayed strobes
  logic            stream_d1, first_d1;
  logic [O_AW-1:0] mi_d1;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wload_en_d1_o    <= 1'b0;
      stream_d1        <= 1'b0;
      drain_valid_d1_o <= 1'b0;
      o_wr_en_d2_o     <= 1'b0;
    end else begin
      wload_en_d1_o    <= is_loadw;
      stream_d1        <= is_stream;
      drain_valid_d1_o <= is_drain;
      o_wr_en_d2_o     <= stream_d1;
    end
    wload_row_d1_o <= r;
    first_d1       <= (g == '0) && !acc_q;
    mi_d1          <= mi;
    o_wr_addr_d2_o <= mi_d1;
  end
  assign act_valid_d1_o = stream_d1;
  assign psum_zero_d1_o = first_d1;
  assign drain_row_d1_o = mi_d1;
endmodule
