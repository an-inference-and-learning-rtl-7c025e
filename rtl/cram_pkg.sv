// Shared types for the CRAM spiking-neuron engine.
//
// Three levels of operation are defined here:
//  * gate_e / uop_t   : one micro-operation of a CRAM array. It is either a
//                       bulk preset of a row range, one Boolean gate applied in
//                       every enabled column at once (inputs and outputs are
//                       cells of the same column, i.e. rows), or a plain
//                       memory read or write of a whole row.
//  * mop_e / macro_t  : a multi-bit operation (copy, add, multiply, compare,
//                       column shift, LFSR step, ...) that the array controller
//                       expands into a sequence of micro-operations.
//  * prog_t           : one line of a neuron microprogram: a macro operation
//                       whose row operands may advance with a loop counter.
// The gate set (NAND, AND, MAJ3, MAJ5, INV, INV1-2, COPY) is the one the CRAM
// literature names; OR is built as MAJ3 with a constant-1 input.
package cram_pkg;

  // ---------------------------------------------------------------- gates
  typedef enum logic [2:0] {
    G_NAND  = 3'd0,
    G_AND   = 3'd1,
    G_MAJ3  = 3'd2,
    G_MAJ5  = 3'd3,
    G_INV   = 3'd4,
    G_INV12 = 3'd5,   // inverter writing two output cells at once
    G_COPY  = 3'd6
  } gate_e;

  typedef enum logic [2:0] {
    U_NOP    = 3'd0,
    U_PRESET = 3'd1,  // rows [out0, out0+pcnt) <= pval in enabled columns
    U_GATE   = 3'd2,  // out0 (and out1 for INV12) <= gate(in0..in4)
    U_READ   = 3'd3,  // rdata <= row in0 (valid next cycle)
    U_WRITE  = 3'd4   // row out0 <= wdata in enabled columns
  } uop_kind_e;

  localparam int unsigned RA = 16;  // row address width carried in the types
  typedef logic [RA-1:0] row_t;

  typedef struct packed {
    uop_kind_e  kind;
    gate_e      gate;
    row_t       in0, in1, in2, in3, in4;
    row_t       out0, out1;
    logic [3:0] pcnt;  // number of rows a PRESET covers
    logic       pval;  // preset value
  } uop_t;

  // Preset value a gate's output cell must hold before evaluation. COPY needs
  // none (see cram_array): it is reported as 'x-free' by the flag below.
  function automatic logic gate_preset(gate_e g);
    case (g)
      G_NAND, G_INV, G_INV12: return 1'b1;
      default:                return 1'b0;
    endcase
  endfunction

  function automatic logic gate_needs_preset(gate_e g);
    return g != G_COPY;
  endfunction

  // ------------------------------------------------------ macro operations
  typedef enum logic [4:0] {
    M_NOP   = 5'd0,
    M_CONST = 5'd1,   // preset the constant-0 and constant-1 rows
    M_COPY  = 5'd2,   // d = a                       (n bits)
    M_NOT   = 5'd3,   // d = ~a                      (n bits)
    M_AND   = 5'd4,   // d = a & b                   (n bits)
    M_OR    = 5'd5,   // d = a | b                   (n bits)
    M_ADD   = 5'd6,   // d = a + b + cin             (n bits, ripple)
    M_MUL   = 5'd7,   // d = a * b                   (a,b: n bits, d: 2n bits)
    M_EQ    = 5'd8,   // d = (a == b)                (1 bit)
    M_EQC   = 5'd9,   // d = (a == konst)            (1 bit)
    M_GE    = 5'd10,  // d = (a >= b), unsigned      (1 bit)
    M_SHR   = 5'd11,  // d[col] = a[col + shift]     (column shift, n rows)
    M_BCAST = 5'd12,  // d[col] = a[0]               (n rows)
    M_LFSR  = 5'd13,  // one step of the x^9+x^5+1 LFSR stored at row a
    M_WRITE = 5'd14,  // row d = external input row
    M_READ  = 5'd15,  // external output row = row a
    M_SETEN = 5'd16,  // column enable = row a (or all ones if 'all')
    M_END   = 5'd17
  } mop_e;

  typedef struct packed {
    mop_e        op;
    row_t        a, b, d;
    logic [7:0]  an, bn, n;  // operand widths; bits past an/bn read as 0
    logic        bsc;        // b is one row used for every bit position
    logic        cin;        // carry-in of M_ADD
    logic        masked;     // apply the column-enable register
    logic        all;        // M_SETEN: enable every column
    logic [15:0] konst;      // M_EQC constant
    logic [15:0] shift;      // M_SHR column distance
  } macro_t;

  // ------------------------------------------------------ program entries
  typedef struct packed {
    macro_t            m;
    logic              loop_start;  // first line of a loop body
    logic              loop_end;    // last line of a loop body
    logic [15:0]       iters;       // loop count, given on the loop_end line
    logic signed [7:0] a_step, b_step, d_step;  // row advance per iteration
    logic              konst_it;    // konst = iteration number
    logic              shift_half;  // shift = (J >> (iteration + 1))
  } prog_t;

  function automatic macro_t mk(mop_e op, int a, int an, int b, int bn, int d, int n,
                                bit bsc = 0, bit cin = 0, bit masked = 0);
    macro_t m;
    m = '0;
    m.op = op;
    m.a = row_t'(a);  m.an = 8'(an);
    m.b = row_t'(b);  m.bn = 8'(bn);
    m.d = row_t'(d);  m.n  = 8'(n);
    m.bsc = bsc;  m.cin = cin;  m.masked = masked;
    return m;
  endfunction

  function automatic prog_t line(macro_t m);
    prog_t p;
    p = '0;
    p.m = m;
    return p;
  endfunction

endpackage
