// Leaky integrate-and-fire microprogram (one time step of one neuron).
//
// A combinational program store: 'e' is the program line at 'pc'. The
// neuron sequencer walks it and hands each macro operation to the array
// controller. The program computes, in every column (= presynaptic input j)
// in parallel and then for the neuron in column 0:
//   delay  : dly = dly + 1; en = (dly == d_ij); dly = en ? 0 : dly;
//            en becomes the column enable for steps 1-3.
//   step 1 : newest spike row <- routed input spikes
//   step 2 : conv_j = sum_s spike_j(t-s) AND alpha(s)      (LF AND + ADD)
//            summed at S + log2(LF) bits so it cannot overflow, then
//            rounded to S bits: (conv + 2^(log2 LF - 1)) >> log2 LF;
//            then the spike history shifts by one row
//   step 3 : p_j = round_S(conv_j * w_j)                   (S*S full adders)
//   step 4 : log2(J) stages: x = round_S(x[c] + x[c + J/2^k])
//   step 5 : u = x + b + r(t)
//   step 6 : m = u + round_S(v * tau_v^-1) + r(t);  m = max(m - theta*s_old, 0)
//            s = (m >= theta); v = s ? 0 : m
//   step 7 : s_old = s; s is read out for routing.
// round_S(x) adds the rounding factor 2^(S-1) and keeps the S most
// significant bits. Sums after step 3 are S bits wide and drop the carry.
//
// Follows the paper: the order of the steps, AND-based convolution against
// the alpha table summed at full width and rounded to S bits, multiply then
// round to S bits, halving reduction across columns with rounding after
// each addition, the delay counter used as a
// column enable, bias and noise added to u, the membrane update of Fig. 2,
// comparison with theta, reset of v by AND with the inverted spike.
// Design choices: the subtraction of theta*s_old saturates at zero (the
// paper both subtracts theta*s_old and resets v, which on unsigned values
// would wrap); the filter sum is rounded by adding half of the dropped
// range; sums after the weighting wrap at S bits; the
// noise r(t) is the low min(S,9) bits of the LFSR, stepped once per use; the
// delay counter matches when dly+1 == d (so d = 1 enables every step).
module lif_prog
  import cram_pkg::*;
#(
  parameter int unsigned S     = 1,   // bit length (weights, alpha entries)
  parameter int unsigned LF    = 64,  // alpha lookup-table entries
  parameter int unsigned J     = 1024,// presynaptic inputs = columns
  parameter bit          NOISE = 1'b1 // add r(t) to u and v
) (
  input  logic [7:0] pc,
  output prog_t      e
);
  `include "cram_layout.svh"

  localparam int LOG2J = $clog2(J);
  localparam int NB    = NOISE ? ((S < 9) ? S : 9) : 0;

  always_comb begin
    e = line(mk(M_END, 0, 0, 0, 0, 0, 0));
    case (pc)
      8'd0:  e = line(mk(M_CONST, 0, 0, 0, 0, 0, 0));
      8'd1:  begin e = line(mk(M_SETEN, 0, 0, 0, 0, 0, 0)); e.m.all = 1'b1; end
      // synaptic delay
      8'd2:  e = line(mk(M_ADD, R_DLY, S, 0, 0, R_DLYT, S, 0, 1));
      8'd3:  e = line(mk(M_EQ, R_DLYT, S, R_D, S, R_EQ, S));
      8'd4:  e = line(mk(M_NOT, R_EQ, 1, 0, 0, R_NEQ, 1));
      8'd5:  e = line(mk(M_AND, R_DLYT, S, R_NEQ, 1, R_DLY, S, 1));
      8'd6:  e = line(mk(M_SETEN, R_EQ, 1, 0, 0, 0, 0));
      // step 1: input spikes
      8'd7:  e = line(mk(M_WRITE, 0, 0, 0, 0, R_SPK, 1, 0, 0, 1));
      // step 2: filter
      8'd8:  e = line(mk(M_COPY, 0, 0, 0, 0, R_CONV, S + TW, 0, 0, 1));
      8'd9:  begin
        e = line(mk(M_AND, R_ALPHA, S, R_SPK, 1, R_ANDR, S, 1, 0, 1));
        e.loop_start = 1'b1;  e.a_step = 8'(S);  e.b_step = 8'sd1;
      end
      8'd10: begin
        e = line(mk(M_ADD, R_CONV, S + TW, R_ANDR, S, R_CONV, S + TW, 0, 0, 1));
        e.loop_end = 1'b1;  e.iters = 16'(LF);
      end
      8'd11: begin  // shift the history: spk[k] <- spk[k-1], oldest first
        e = line(mk(M_COPY, R_SPK + LF - 2, 1, 0, 0, R_SPK + LF - 1, 1, 0, 0, 1));
        e.loop_start = 1'b1;  e.loop_end = 1'b1;  e.iters = 16'(LF - 1);
        e.a_step = -8'sd1;  e.d_step = -8'sd1;
      end
      // round the LF-term sum to S bits: add 2^(TW-1), keep the top S bits
      8'd12: e = line(mk(M_ADD, R_CONV + TW - 1, S + 1, 0, 0, R_CONV + TW - 1, S + 1, 0, 1, 1));
      // step 3: weight
      8'd13: e = line(mk(M_MUL, R_CONV + TW, S, R_W, S, R_PROD, S, 0, 0, 1));
      8'd14: e = line(mk(M_ADD, R_PROD, 2 * S, R_RND, S, R_PROD, 2 * S, 0, 0, 1));
      8'd15: e = line(mk(M_COPY, R_PROD + S, S, 0, 0, R_P3, S, 0, 0, 1));
      // step 4: reduce over columns
      8'd16: begin e = line(mk(M_SETEN, 0, 0, 0, 0, 0, 0)); e.m.all = 1'b1; end
      8'd17: e = line(mk(M_COPY, R_P3, S, 0, 0, R_RED, S));
      8'd18: begin
        e = line(mk(M_SHR, R_RED, S, 0, 0, R_TMPR, S));
        e.loop_start = 1'b1;  e.shift_half = 1'b1;
      end
      8'd19: e = line(mk(M_ADD, R_RED, S, R_TMPR, S, R_SUM, S + 1, 0, 1));
      8'd20: begin
        e = line(mk(M_COPY, R_SUM + 1, S, 0, 0, R_RED, S));
        e.loop_end = 1'b1;  e.iters = 16'(LOG2J);
      end
      // step 5: synaptic response current
      8'd21: e = line(mk(M_ADD, R_RED, S, R_B, S, R_U, S));
      8'd22: e = line(mk(M_LFSR, R_LFSR, 0, 0, 0, 0, 0));
      8'd23: e = line(mk(M_ADD, R_U, S, R_LFSR, NB, R_U, S));
      // step 6: membrane potential
      8'd24: e = line(mk(M_MUL, R_V, S, R_TAUV, S, R_PROD, S));
      8'd25: e = line(mk(M_ADD, R_PROD, 2 * S, R_RND, S, R_PROD, 2 * S));
      8'd26: e = line(mk(M_ADD, R_U, S, R_PROD + S, S, R_MEM, S));
      8'd27: e = line(mk(M_LFSR, R_LFSR, 0, 0, 0, 0, 0));
      8'd28: e = line(mk(M_ADD, R_MEM, S, R_LFSR, NB, R_MEM, S));
      8'd29: e = line(mk(M_AND, R_THETA, S, R_SOLD, 1, R_TS, S, 1));
      8'd30: e = line(mk(M_NOT, R_TS, S, 0, 0, R_NTS, S));
      8'd31: e = line(mk(M_ADD, R_MEM, S, R_NTS, S, R_SUM, S + 1, 0, 1));
      8'd32: e = line(mk(M_AND, R_SUM, S, R_SUM + S, 1, R_MEM, S, 1));
      8'd33: e = line(mk(M_GE, R_MEM, S, R_THETA, S, R_SPKN, S));
      8'd34: e = line(mk(M_NOT, R_SPKN, 1, 0, 0, R_NSPK, 1));
      8'd35: e = line(mk(M_AND, R_MEM, S, R_NSPK, 1, R_V, S, 1));
      // step 7: spike
      8'd36: e = line(mk(M_COPY, R_SPKN, 1, 0, 0, R_SOLD, 1));
      8'd37: e = line(mk(M_READ, R_SPKN, 1, 0, 0, 0, 0));
      default: ;
    endcase
  end

endmodule
