// Array controller: turns multi-bit macro operations into CRAM gate sequences.
//
// The paper gives every CRAM array a controller that drives its bitlines,
// wordlines and logic lines. Here that controller accepts one macro_t at a
// time (valid/ready handshake, 'm_done' pulse at the end) and issues one
// uop_t per cycle to cram_array.
// Each macro is walked by three counters: i (outer pass, used by multiply),
// k (bit position) and s (step within the per-bit recipe).
//
// Recipes. Addition is the 3-step full adder of the paper applied bit by bit
// (ripple carry kept in a carry row C):
//     T1 = MAJ3(A,B,C); T2,T3 = INV1-2(T1); T4 = MAJ5(A,B,C,T2,T3) = sum;
//     C = T1; D = T4
// with the presets those gates need. Multiplication is shift-and-add:
// for each multiplier bit one AND per partial-product bit followed by a full
// adder, i.e. n*(n+1) full adders for n-bit numbers. Equality uses XOR built
// from four NANDs (as in the paper's LFSR), comparison (a >= b) is the carry
// of a + ~b + 1, OR is MAJ3 with a constant-1 input. The LFSR step is the
// paper's 14-cycle sequence for x^9 + x^5 + 1: one bulk preset, four NANDs
// forming XOR(b5,b9), then nine COPYs shifting b1..b9.
// Column shift and broadcast (moving data between columns) read a row out of
// the array and write it back shifted or replicated, the paper's "reading half
// of the rows and writing them back to the adjacent rows".
//
// Reserved rows: the top RESERVED rows of the array hold constant 0 and 1,
// the carry row and scratch rows; programs must not use them.
//
// Column enable: a register loaded from an array row (M_SETEN), applied to
// macros flagged 'masked'. This is the paper's delay mechanism: "The
// comparison output is then read by the array controller and used as column
// enable."
//
// Timing: one micro-operation per clock, issued combinationally from the
// counters; 'm_done' is a registered pulse in the cycle after the last step.
// A macro takes (steps per bit) x (bits) cycles, e.g. 7n+1 for an n-bit add,
// 2n for a column shift, 14 for the LFSR step. M_READ data is on 'rd_out'
// when 'm_done' pulses.
//
// Lint note: rst_n is both the asynchronous reset of the flops and the
// 'disable iff' condition of the assertion below; the assertion's use is
// sampled on the clock, so lint reports rst_n as used both ways. Only the
// assertion reads it synchronously; no logic does.
module array_ctrl
  import cram_pkg::*;
#(
  parameter int unsigned ROWS = 512,
  parameter int unsigned COLS = 1024
) (
  input  logic            clk,
  input  logic            rst_n,
  // macro operation port
  input  logic            m_valid,
  output logic            m_ready,
  input  macro_t          m_in,
  output logic            m_done,
  input  logic [COLS-1:0] ext_wdata,  // row for M_WRITE
  output logic [COLS-1:0] rd_out,     // row captured by M_READ
  output logic [COLS-1:0] col_en_q,   // current column-enable register
  // array port
  output logic            uop_valid,
  output uop_t            uop,
  output logic [COLS-1:0] col_en,
  output logic [COLS-1:0] wdata,
  input  logic [COLS-1:0] rdata
);

  // ------------------------------------------------------ reserved rows
  localparam int unsigned RESERVED = 13;
  localparam row_t R_ONE  = row_t'(ROWS - 1);
  localparam row_t R_ZERO = row_t'(ROWS - 2);
  localparam row_t R_C    = row_t'(ROWS - 3);
  localparam row_t R_T4   = row_t'(ROWS - 4);
  localparam row_t R_T1   = row_t'(ROWS - 5);   // T1,T4 preset together
  localparam row_t R_T3   = row_t'(ROWS - 6);
  localparam row_t R_T2   = row_t'(ROWS - 7);   // T2,T3 preset together
  localparam row_t R_T5   = row_t'(ROWS - 8);
  localparam row_t R_T6   = row_t'(ROWS - 9);
  localparam row_t R_N1   = row_t'(ROWS - 13);  // N1..N4 preset together
  localparam row_t R_N2   = row_t'(ROWS - 12);
  localparam row_t R_N3   = row_t'(ROWS - 11);
  localparam row_t R_N4   = row_t'(ROWS - 10);

  typedef enum logic [1:0] {W_EXT, W_SHIFT, W_BCAST} wsrc_e;
  typedef enum logic [1:0] {C_NONE, C_RD, C_EN} cap_e;

  typedef struct packed {
    uop_t  u;
    logic  v;
    logic  last;   // last step of this bit
    wsrc_e wsrc;
    cap_e  cap;    // capture rdata (issued the step after a READ)
    logic  en_all; // M_SETEN all
  } step_t;

  // ------------------------------------------------------ uop builders
  function automatic uop_t u_pre(row_t r, int cnt, logic v);
    uop_t u;
    u = '0;
    u.kind = U_PRESET;  u.out0 = r;  u.pcnt = 4'(cnt);  u.pval = v;
    return u;
  endfunction

  function automatic uop_t u_g(gate_e g, row_t o, row_t a, row_t b = '0, row_t c = '0,
                               row_t d = '0, row_t e = '0, row_t o1 = '0);
    uop_t u;
    u = '0;
    u.kind = U_GATE;  u.gate = g;  u.out0 = o;  u.out1 = o1;
    u.in0 = a;  u.in1 = b;  u.in2 = c;  u.in3 = d;  u.in4 = e;
    return u;
  endfunction

  function automatic uop_t u_rd(row_t r);
    uop_t u;
    u = '0;
    u.kind = U_READ;  u.in0 = r;
    return u;
  endfunction

  function automatic uop_t u_wr(row_t r);
    uop_t u;
    u = '0;
    u.kind = U_WRITE;  u.out0 = r;
    return u;
  endfunction

  // Full-adder step f (0..6): D = A + B + C, carry out into C.
  function automatic step_t fa(int f, row_t a, row_t b, row_t d);
    step_t st;
    st = '0;
    st.v = 1'b1;
    case (f)
      0: st.u = u_pre(R_T1, 2, 1'b0);
      1: st.u = u_pre(R_T2, 2, 1'b1);
      2: st.u = u_g(G_MAJ3, R_T1, a, b, R_C);
      3: st.u = u_g(G_INV12, R_T2, R_T1, '0, '0, '0, '0, R_T3);
      4: st.u = u_g(G_MAJ5, R_T4, a, b, R_C, R_T2, R_T3);
      5: st.u = u_g(G_COPY, R_C, R_T1);
      default: begin st.u = u_g(G_COPY, d, R_T4); st.last = 1'b1; end
    endcase
    return st;
  endfunction

  // ------------------------------------------------------ state
  macro_t m;
  logic   busy;
  int unsigned i, k, s;

  function automatic row_t opa(macro_t mm, int unsigned kk);
    return (kk < mm.an) ? row_t'(mm.a + kk) : R_ZERO;
  endfunction
  function automatic row_t opb(macro_t mm, int unsigned kk);
    if (mm.bsc) return mm.b;
    return (kk < mm.bn) ? row_t'(mm.b + kk) : R_ZERO;
  endfunction

  function automatic int unsigned k_last(macro_t mm, int unsigned ii);
    case (mm.op)
      M_MUL:   return (ii == 0) ? 2 * mm.n - 1 : mm.n;
      M_GE:    return mm.n;
      M_COPY, M_NOT, M_AND, M_OR, M_ADD, M_EQ, M_EQC, M_SHR, M_BCAST:
               return (mm.n == 0) ? 0 : mm.n - 1;
      default: return 0;
    endcase
  endfunction

  function automatic int unsigned i_last(macro_t mm);
    return (mm.op == M_MUL) ? mm.n : 0;
  endfunction

  // The recipe: micro-operation for (macro, i, k, s).
  function automatic step_t expand(macro_t mm, int unsigned ii, int unsigned kk,
                                   int unsigned ss);
    step_t st;
    row_t  a, b, d;
    int unsigned t;
    st = '0;
    st.v = 1'b1;
    a = opa(mm, kk);
    b = opb(mm, kk);
    d = row_t'(mm.d + kk);
    case (mm.op)
      M_CONST: begin
        if (ss == 0) st.u = u_pre(R_ZERO, 1, 1'b0);
        else begin st.u = u_pre(R_ONE, 1, 1'b1); st.last = 1'b1; end
      end
      M_COPY: begin st.u = u_g(G_COPY, d, a); st.last = 1'b1; end
      M_NOT, M_AND, M_OR: begin
        case (ss)
          0: st.u = u_pre(R_T4, 1, (mm.op == M_NOT));
          1: case (mm.op)
               M_NOT:   st.u = u_g(G_INV, R_T4, a);
               M_AND:   st.u = u_g(G_AND, R_T4, a, b);
               default: st.u = u_g(G_MAJ3, R_T4, a, b, R_ONE);
             endcase
          default: begin st.u = u_g(G_COPY, d, R_T4); st.last = 1'b1; end
        endcase
      end
      M_ADD: begin
        if (kk == 0 && ss == 0) st.u = u_pre(R_C, 1, mm.cin);
        else st = fa(int'(ss) - ((kk == 0) ? 1 : 0), a, b, d);
      end
      M_MUL: begin
        if (ii == 0) begin
          st.u = u_g(G_COPY, d, R_ZERO);
          st.last = 1'b1;
        end else begin
          t = ss - ((kk == 0) ? 1 : 0);
          if (kk == 0 && ss == 0) st.u = u_pre(R_C, 1, 1'b0);
          else if (t == 0) st.u = u_pre(R_T5, 1, 1'b0);
          else if (t == 1) st.u = u_g(G_AND, R_T5, (kk < mm.n) ? row_t'(mm.a + kk) : R_ZERO,
                                      row_t'(mm.b + ii - 1));
          else st = fa(int'(t) - 2, row_t'(mm.d + ii - 1 + kk), R_T5,
                       row_t'(mm.d + ii - 1 + kk));
        end
      end
      M_EQ: begin
        t = ss - ((kk == 0) ? 1 : 0);
        if (kk == 0 && ss == 0) st.u = u_g(G_COPY, mm.d, R_ONE);
        else case (t)
          0: st.u = u_pre(R_N1, 4, 1'b1);
          1: st.u = u_g(G_NAND, R_N1, a, b);
          2: st.u = u_g(G_NAND, R_N2, a, R_N1);
          3: st.u = u_g(G_NAND, R_N3, b, R_N1);
          4: st.u = u_g(G_NAND, R_N4, R_N2, R_N3);
          5: st.u = u_pre(R_T6, 1, 1'b1);
          6: st.u = u_g(G_INV, R_T6, R_N4);
          7: st.u = u_pre(R_T4, 1, 1'b0);
          8: st.u = u_g(G_AND, R_T4, R_T6, mm.d);
          default: begin st.u = u_g(G_COPY, mm.d, R_T4); st.last = 1'b1; end
        endcase
      end
      M_EQC: begin
        t = ss - ((kk == 0) ? 1 : 0);
        if (kk == 0 && ss == 0) st.u = u_g(G_COPY, mm.d, R_ONE);
        else case (t)
          0: st.u = u_pre(R_T6, 1, 1'b1);
          1: st.u = mm.konst[kk[3:0]] ? u_g(G_COPY, R_T6, a) : u_g(G_INV, R_T6, a);
          2: st.u = u_pre(R_T4, 1, 1'b0);
          3: st.u = u_g(G_AND, R_T4, R_T6, mm.d);
          default: begin st.u = u_g(G_COPY, mm.d, R_T4); st.last = 1'b1; end
        endcase
      end
      M_GE: begin
        t = ss - ((kk == 0) ? 1 : 0);
        if (kk == 0 && ss == 0) st.u = u_pre(R_C, 1, 1'b1);
        else if (kk == mm.n) begin st.u = u_g(G_COPY, mm.d, R_C); st.last = 1'b1; end
        else case (t)
          0: st.u = u_pre(R_T6, 1, 1'b1);
          1: st.u = u_g(G_INV, R_T6, b);
          2: st.u = u_pre(R_T1, 2, 1'b0);
          3: st.u = u_g(G_MAJ3, R_T1, a, R_T6, R_C);
          default: begin st.u = u_g(G_COPY, R_C, R_T1); st.last = 1'b1; end
        endcase
      end
      M_SHR, M_BCAST: begin
        if (ss == 0) st.u = u_rd(row_t'(mm.a + kk));
        else begin
          st.u = u_wr(d);
          st.wsrc = (mm.op == M_SHR) ? W_SHIFT : W_BCAST;
          st.last = 1'b1;
        end
      end
      M_LFSR: begin
        // b1..b9 = a..a+8, t = a+9, a0..a2 = a+10..a+12
        case (ss)
          0:  st.u = u_pre(row_t'(mm.a + 9), 4, 1'b1);
          1:  st.u = u_g(G_NAND, row_t'(mm.a + 10), row_t'(mm.a + 4), row_t'(mm.a + 8));
          2:  st.u = u_g(G_NAND, row_t'(mm.a + 11), row_t'(mm.a + 4), row_t'(mm.a + 10));
          3:  st.u = u_g(G_NAND, row_t'(mm.a + 12), row_t'(mm.a + 8), row_t'(mm.a + 10));
          4:  st.u = u_g(G_NAND, row_t'(mm.a + 9), row_t'(mm.a + 11), row_t'(mm.a + 12));
          13: begin st.u = u_g(G_COPY, mm.a, row_t'(mm.a + 9)); st.last = 1'b1; end
          // ss = 5..12: COPY b(13-ss) -> b(14-ss), i.e. b8->b9 ... b1->b2
          default: st.u = u_g(G_COPY, row_t'(mm.a + 13 - ss), row_t'(mm.a + 12 - ss));
        endcase
      end
      M_WRITE: begin st.u = u_wr(mm.d); st.wsrc = W_EXT; st.last = 1'b1; end
      M_READ: begin
        if (ss == 0) st.u = u_rd(mm.a);
        else begin st.v = 1'b0; st.cap = C_RD; st.last = 1'b1; end
      end
      M_SETEN: begin
        if (mm.all) begin st.v = 1'b0; st.en_all = 1'b1; st.last = 1'b1; end
        else if (ss == 0) st.u = u_rd(mm.a);
        else begin st.v = 1'b0; st.cap = C_EN; st.last = 1'b1; end
      end
      default: begin st.v = 1'b0; st.last = 1'b1; end
    endcase
    return st;
  endfunction

  step_t cur;
  assign cur = expand(m, i, k, s);

  assign m_ready   = !busy;
  assign uop_valid = busy && cur.v;
  assign uop       = cur.u;
  assign col_en    = (m.masked && m.op != M_CONST) ? col_en_q : '1;
  always_comb begin
    case (cur.wsrc)
      W_SHIFT: wdata = rdata >> m.shift;
      W_BCAST: wdata = {COLS{rdata[0]}};
      default: wdata = ext_wdata;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      m        <= '0;
      i        <= 0;
      k        <= 0;
      s        <= 0;
      m_done   <= 1'b0;
      rd_out   <= '0;
      col_en_q <= '1;
    end else begin
      m_done <= 1'b0;
      if (!busy) begin
        if (m_valid) begin
          m    <= m_in;
          busy <= 1'b1;
          i    <= 0;
          k    <= 0;
          s    <= 0;
        end
      end else begin
        if (cur.cap == C_RD) rd_out <= rdata;
        if (cur.cap == C_EN) col_en_q <= rdata;
        if (cur.en_all)      col_en_q <= '1;
        if (cur.last) begin
          s <= 0;
          if (k == k_last(m, i)) begin
            k <= 0;
            if (i == i_last(m)) begin
              busy   <= 1'b0;
              m_done <= 1'b1;
            end else i <= i + 1;
          end else k <= k + 1;
        end else s <= s + 1;
      end
    end
  end

  // The program must keep clear of the reserved rows.
  property p_no_reserved;
    @(posedge clk) disable iff (!rst_n)
      (m_valid && m_ready && m_in.op inside {M_COPY, M_NOT, M_AND, M_OR, M_ADD, M_EQ,
                                             M_EQC, M_GE, M_SHR, M_BCAST, M_WRITE})
      |-> (int'(m_in.d) + int'(m_in.n) <= int'(ROWS - RESERVED));
  endproperty
  a_no_reserved: assert property (p_no_reserved);

endmodule
