// CRAM array: a ROWS x COLS bit memory that can also compute in place.
//
// Every cell is a magnetic tunnel junction. As a memory the array reads or
// writes one whole row per cycle. As a logic substrate it applies one Boolean
// gate per cycle in every enabled column simultaneously: the gate's inputs
// and output are cells of the same column, addressed by row. This gives the
// column-level parallelism that the neuron engine relies on.
//
// Gate model. A CRAM gate works by passing current through the input cells
// into the output cell, which can only switch away from its preset state.
// The model keeps that property: before a gate the controller must preset
// the output cell(s) to gate_preset(gate) (U_PRESET, which presets a range
// of up to 15 rows at once, a "bulk preset"); the gate then leaves the cell
// at gate(inputs) if the cell held the preset value and unchanged otherwise.
// A forgotten preset therefore gives a wrong result, as it would in silicon.
// COPY is modelled as preset-free, following the LFSR sequence of the paper,
// which copies into cells it never presets.
// INV12 writes the inverse of in0 to out0 and out1 (two cells at once).
//
// Interface: one micro-operation per cycle on 'uop' when 'uop_valid'; the
// column mask 'col_en' selects the columns a PRESET, GATE or WRITE touches.
// U_READ returns the row on 'rdata' one cycle later. There is no reset: the
// contents are non-volatile and are initialised by writes.
//
// Paper: the gate set, the column parallelism, the preset-then-evaluate
// principle and the 3-step full adder come from the paper. The array
// geometry default (512 rows x 1024 columns: one column per presynaptic
// connection, 1024 of them) is this design's reading of "1024 x 512 cells".
// The exact preset value of each gate type is this design's choice.
module cram_array
  import cram_pkg::*;
#(
  parameter int unsigned ROWS = 512,
  parameter int unsigned COLS = 1024
) (
  input  logic            clk,
  input  logic            rst_n,      // clears the activity counters only
  input  logic            uop_valid,
  input  uop_t            uop,
  input  logic [COLS-1:0] col_en,
  input  logic [COLS-1:0] wdata,
  output logic [COLS-1:0] rdata,
  // activity counters (for energy accounting / observation)
  output logic [31:0]     n_preset,
  output logic [31:0]     n_gate
);

  logic [COLS-1:0] mem [ROWS];

  localparam int unsigned AW = $clog2(ROWS);

  function automatic logic [AW-1:0] ra(row_t r);
    return r[AW-1:0];
  endfunction

  logic [COLS-1:0] i0, i1, i2, i3, i4, f, o0, o1;
  logic            pre;

  always_comb begin
    i0 = mem[ra(uop.in0)];
    i1 = mem[ra(uop.in1)];
    i2 = mem[ra(uop.in2)];
    i3 = mem[ra(uop.in3)];
    i4 = mem[ra(uop.in4)];
    o0 = mem[ra(uop.out0)];
    o1 = mem[ra(uop.out1)];
    pre = gate_preset(uop.gate);
    case (uop.gate)
      G_NAND:  f = ~(i0 & i1);
      G_AND:   f = i0 & i1;
      G_MAJ3:  f = (i0 & i1) | (i0 & i2) | (i1 & i2);
      G_MAJ5:  f = (i0 & i1 & i2) | (i0 & i1 & i3) | (i0 & i1 & i4) | (i0 & i2 & i3) |
                   (i0 & i2 & i4) | (i0 & i3 & i4) | (i1 & i2 & i3) | (i1 & i2 & i4) |
                   (i1 & i3 & i4) | (i2 & i3 & i4);
      G_INV,
      G_INV12: f = ~i0;
      default: f = i0;  // G_COPY
    endcase
  end

  // Result written to an output cell: the gate value where the cell held the
  // preset, the old value elsewhere; COPY always takes the input value.
  function automatic logic [COLS-1:0] settle(logic [COLS-1:0] old, logic [COLS-1:0] fv,
                                             logic p, logic needs);
    logic [COLS-1:0] at_preset;
    at_preset = needs ? ~(old ^ {COLS{p}}) : '1;
    return (at_preset & fv) | (~at_preset & old);
  endfunction

  always_ff @(posedge clk) begin
    if (uop_valid) begin
      case (uop.kind)
        U_PRESET: begin
          for (int r = 0; r < 15; r++) begin
            if (r < int'(uop.pcnt) && int'(ra(uop.out0)) + r < ROWS)
              mem[int'(ra(uop.out0)) + r] <= (mem[int'(ra(uop.out0)) + r] & ~col_en) |
                                             ({COLS{uop.pval}} & col_en);
          end
        end
        U_GATE: begin
          mem[ra(uop.out0)] <= (settle(o0, f, pre, gate_needs_preset(uop.gate)) & col_en) |
                               (o0 & ~col_en);
          if (uop.gate == G_INV12)
            mem[ra(uop.out1)] <= (settle(o1, f, pre, 1'b1) & col_en) | (o1 & ~col_en);
        end
        U_WRITE: mem[ra(uop.out0)] <= (wdata & col_en) | (mem[ra(uop.out0)] & ~col_en);
        U_READ:  rdata <= i0;
        default: ;
      endcase
    end
  end

  // Activity counters, cleared by reset, wrapping.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_preset <= '0;
      n_gate   <= '0;
    end else begin
      if (uop_valid && uop.kind == U_PRESET) n_preset <= n_preset + 1;
      if (uop_valid && uop.kind == U_GATE)   n_gate   <= n_gate + 1;
    end
  end

endmodule
