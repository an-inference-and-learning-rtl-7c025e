// Neuron sequencer: runs the LIF or the STDP microprogram on one array.
//
// 'start' with 'learn' = 0 runs the leaky integrate-and-fire time step
// (lif_prog), with 'learn' = 1 the STDP update (stdp_prog). The sequencer
// fetches a program line, applies its loop counter to the row operands
// (row = base + iteration * step; konst = iteration; shift = J >> (it + 1)),
// passes the macro operation to the array controller over a valid/ready
// handshake and waits for the controller's 'm_done' before the next line.
// A loop is one level deep: a line flagged loop_start marks the body start,
// the line flagged loop_end holds the iteration count. M_END finishes the
// program with a one-cycle 'done'.
//
// The paper describes the steps of both programs and leaves their control to
// the per-array controller; the program format and this loop mechanism are
// this design's own.
module neuron_seq
  import cram_pkg::*;
#(
  parameter int unsigned S     = 1,
  parameter int unsigned LF    = 64,
  parameter int unsigned J     = 1024,
  parameter bit          NOISE = 1'b1
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  logic   learn,
  output logic   busy,
  output logic   done,
  // to the array controller
  output logic   m_valid,
  input  logic   m_ready,
  output macro_t m_out,
  input  logic   m_done
);

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_WAIT} state_e;
  state_e      st;
  logic        mode;       // 0 LIF, 1 STDP
  logic [7:0]  pc, loop_pc;
  logic [15:0] it;

  prog_t e_lif, e_stdp, e;
  lif_prog  #(.S(S), .LF(LF), .J(J), .NOISE(NOISE)) u_lif (.pc(pc), .e(e_lif));
  stdp_prog #(.S(S), .LF(LF))                        u_stdp(.pc(pc), .e(e_stdp));
  assign e = mode ? e_stdp : e_lif;

  always_comb begin
    m_out   = e.m;
    m_out.a = row_t'(int'(e.m.a) + int'(it) * int'(e.a_step));
    m_out.b = row_t'(int'(e.m.b) + int'(it) * int'(e.b_step));
    m_out.d = row_t'(int'(e.m.d) + int'(it) * int'(e.d_step));
    if (e.konst_it)   m_out.konst = it;
    if (e.shift_half) m_out.shift = 16'(J >> (it + 1));
  end

  assign m_valid = (st == S_ISSUE) && (e.m.op != M_END);
  assign busy    = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= S_IDLE;
      mode    <= 1'b0;
      pc      <= '0;
      loop_pc <= '0;
      it      <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          mode <= learn;
          pc   <= '0;
          it   <= '0;
          st   <= S_ISSUE;
        end
        S_ISSUE: begin
          if (e.m.op == M_END) begin
            st   <= S_IDLE;
            done <= 1'b1;
          end else if (m_ready) begin
            if (e.loop_start) loop_pc <= pc;
            st <= S_WAIT;
          end
        end
        default: if (m_done) begin  // S_WAIT
          st <= S_ISSUE;
          if (e.loop_end && (it + 1 < e.iters)) begin
            it <= it + 1;
            pc <= e.loop_start ? pc : loop_pc;
          end else begin
            if (e.loop_end) it <= '0;
            pc <= pc + 1;
          end
        end
      endcase
    end
  end

endmodule
