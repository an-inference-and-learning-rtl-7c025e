// Pairwise STDP microprogram (one learning update of one neuron's weights).
//
// Combinational program store, walked by the neuron sequencer after the
// output spikes of a time step have been distributed. Circled numbers refer
// to the steps of the STDP data layout:
//   (1)-(3) in every column j: dt_pre = (dt_pre + (dt_pre != t_max)) AND NOT s_j
//           (saturating time since the last presynaptic spike, cleared by one)
//   (4)-(5) F(dt_pre) by table lookup: OR over entries e of
//           (dt_pre == e) AND alpha(e), scaled by the constant tau_u
//           (F = tau_u * alpha), then dw_pre = round_S(A+ * F)
//   (6)-(10) the same for the neuron's own spike s_i with dt_post, computed
//           in column 0, dw_post = round_S(A- * F(dt_post)), copied to all
//           columns
//   (11)-(12) w_j = min(w_j + dw_pre * s_i, 2^S - 1)        (potentiation)
//            w_j = max(w_j - dw_post * s_j, 0)             (depression)
// t_max is LF-1, the last lookup-table entry. The presynaptic spikes s_j are
// the newest spike row, s_i is the neuron's new spike.
//
// Follows the paper: the step structure, counter reset by multiplying with
// the inverted spike, overflow check against t_max, re-use of the alpha table
// with a scaling multiply, the postsynaptic term computed once and copied
// to all columns, the pairing A+ with dt_pre on a postsynaptic spike and A-
// with dt_post on a presynaptic spike (Eq. 3). Design choices: weight updates
// saturate at the ends of the S-bit range, A- is stored as a magnitude and
// subtracted, and the update uses the same S-bit precision as the weights.
module stdp_prog
  import cram_pkg::*;
#(
  parameter int unsigned S  = 1,
  parameter int unsigned LF = 64
) (
  input  logic [7:0] pc,
  output prog_t      e
);
  `include "cram_layout.svh"

  localparam int TMAX = LF - 1;

  // line numbers of the two mirrored halves
  localparam int POST = 15;

  function automatic prog_t half(int q, int dt, int spk, int amul, int dw);
    prog_t p;
    p = line(mk(M_END, 0, 0, 0, 0, 0, 0));
    case (q)
      0:  begin
        p = line(mk(M_EQC, dt, TW, 0, 0, R_NEQ, TW));
        p.m.konst = 16'(TMAX);
      end
      1:  p = line(mk(M_NOT, R_NEQ, 1, 0, 0, R_NEQ, 1));
      2:  p = line(mk(M_ADD, dt, TW, R_NEQ, 1, R_DT2, TW));
      3:  p = line(mk(M_NOT, spk, 1, 0, 0, R_MATCH, 1));
      4:  p = line(mk(M_AND, R_DT2, TW, R_MATCH, 1, dt, TW, 1));
      5:  p = line(mk(M_COPY, 0, 0, 0, 0, R_FV, S));
      6:  begin
        p = line(mk(M_EQC, dt, TW, 0, 0, R_MATCH, TW));
        p.loop_start = 1'b1;  p.konst_it = 1'b1;
      end
      7:  begin
        p = line(mk(M_AND, R_ALPHA, S, R_MATCH, 1, R_T, S, 1));
        p.a_step = 8'(S);
      end
      8:  begin
        p = line(mk(M_OR, R_FV, S, R_T, S, R_FV, S));
        p.loop_end = 1'b1;  p.iters = 16'(LF);
      end
      9:  p = line(mk(M_MUL, R_FV, S, R_FSC, S, R_PROD, S));
      10: p = line(mk(M_ADD, R_PROD, 2 * S, R_RND, S, R_PROD, 2 * S));
      11: p = line(mk(M_COPY, R_PROD + S, S, 0, 0, R_FS, S));
      12: p = line(mk(M_MUL, R_FS, S, amul, S, R_PROD, S));
      13: p = line(mk(M_ADD, R_PROD, 2 * S, R_RND, S, R_PROD, 2 * S));
      default: p = line(mk(M_COPY, R_PROD + S, S, 0, 0, dw, S));
    endcase
    return p;
  endfunction

  always_comb begin
    e = line(mk(M_END, 0, 0, 0, 0, 0, 0));
    if (pc == 0)       e = line(mk(M_CONST, 0, 0, 0, 0, 0, 0));
    else if (pc == 1)  begin e = line(mk(M_SETEN, 0, 0, 0, 0, 0, 0)); e.m.all = 1'b1; end
    else if (int'(pc) < 2 + POST)            // presynaptic half: (1)-(5)
      e = half(int'(pc) - 2, R_DTPRE, R_SPK, R_AP, R_DWP);
    else if (int'(pc) < 2 + 2 * POST)        // postsynaptic half: (6)-(10)
      e = half(int'(pc) - 2 - POST, R_DTPOST, R_SPKN, R_AM, R_DWN);
    else case (int'(pc) - 2 - 2 * POST)
      0: e = line(mk(M_BCAST, R_DWN, S, 0, 0, R_DWN, S));
      // (11)-(12): potentiation on the postsynaptic spike
      1: e = line(mk(M_BCAST, R_SPKN, 1, 0, 0, R_SIALL, 1));
      2: e = line(mk(M_AND, R_DWP, S, R_SIALL, 1, R_T, S, 1));
      3: e = line(mk(M_ADD, R_W, S, R_T, S, R_SUM, S + 1));
      4: e = line(mk(M_OR, R_SUM, S, R_SUM + S, 1, R_W, S, 1));
      // depression on the presynaptic spike
      5: e = line(mk(M_AND, R_DWN, S, R_SPK, 1, R_T, S, 1));
      6: e = line(mk(M_NOT, R_T, S, 0, 0, R_T, S));
      7: e = line(mk(M_ADD, R_W, S, R_T, S, R_SUM, S + 1, 0, 1));
      8: e = line(mk(M_AND, R_SUM, S, R_SUM + S, 1, R_W, S, 1));
      default: ;
    endcase
  end

endmodule
