// Self-checking testbench for cram_array.
//
// Runs a random mix of row writes, bulk presets, gates of every type (with
// and without the required preset, under random column masks) and reads, and
// compares every read with a shadow copy updated by the gate truth tables
// and the preset rule: an output cell takes the gate value only if it held
// the gate's preset value (COPY always takes the input). Also checks a
// 1-bit full adder built from the three printed gate steps against a + b + c.
module tb_cram_array;
  import cram_pkg::*;

  localparam int unsigned ROWS = 32, COLS = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            uop_valid = 0;
  uop_t            uop = '0;
  logic [COLS-1:0] col_en = '1, wdata = '0, rdata;
  logic [31:0]     n_preset, n_gate;

  cram_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [COLS-1:0] sh [ROWS];

  function automatic logic gate_bit(gate_e g, logic a, logic b, logic c, logic d, logic e);
    int cnt3, cnt5;
    cnt3 = int'(a) + int'(b) + int'(c);
    cnt5 = cnt3 + int'(d) + int'(e);
    case (g)
      G_NAND:  return !(a && b);
      G_AND:   return a && b;
      G_MAJ3:  return cnt3 >= 2;
      G_MAJ5:  return cnt5 >= 3;
      G_INV, G_INV12: return !a;
      default: return a;
    endcase
  endfunction

  task automatic issue(uop_t u, logic [COLS-1:0] en, logic [COLS-1:0] wd);
    @(negedge clk);
    uop = u;  col_en = en;  wdata = wd;  uop_valid = 1;
    @(negedge clk);
    uop_valid = 0;
  endtask

  task automatic do_write(int r, logic [COLS-1:0] d, logic [COLS-1:0] en);
    uop_t u;
    u = '0;  u.kind = U_WRITE;  u.out0 = row_t'(r);
    issue(u, en, d);
    for (int c = 0; c < COLS; c++) if (en[c]) sh[r][c] = d[c];
  endtask

  task automatic do_preset(int r, int cnt, logic v, logic [COLS-1:0] en);
    uop_t u;
    u = '0;  u.kind = U_PRESET;  u.out0 = row_t'(r);  u.pcnt = 4'(cnt);  u.pval = v;
    issue(u, en, '0);
    for (int q = 0; q < cnt; q++)
      if (r + q < ROWS) for (int c = 0; c < COLS; c++) if (en[c]) sh[r + q][c] = v;
  endtask

  task automatic do_gate(gate_e g, int o, int o1, int a, int b, int c3, int d, int e,
                         logic [COLS-1:0] en);
    uop_t u;
    logic [COLS-1:0] n0, n1;
    logic f, p;
    u = '0;  u.kind = U_GATE;  u.gate = g;
    u.out0 = row_t'(o);  u.out1 = row_t'(o1);
    u.in0 = row_t'(a);  u.in1 = row_t'(b);  u.in2 = row_t'(c3);  u.in3 = row_t'(d);  u.in4 = row_t'(e);
    issue(u, en, '0);
    p = gate_preset(g);
    n0 = sh[o];  n1 = sh[o1];
    for (int c = 0; c < COLS; c++) begin
      f = gate_bit(g, sh[a][c], sh[b][c], sh[c3][c], sh[d][c], sh[e][c]);
      if (en[c]) begin
        if (g == G_COPY || sh[o][c] == p) n0[c] = f;
        if (g == G_INV12 && sh[o1][c] == p) n1[c] = f;
      end
    end
    sh[o] = n0;
    if (g == G_INV12) sh[o1] = n1;
  endtask

  task automatic check_row(int r);
    uop_t u;
    u = '0;  u.kind = U_READ;  u.in0 = row_t'(r);
    issue(u, '1, '0);
    checks++;
    if (rdata !== sh[r]) begin
      failures++;
      $display("MISMATCH row %0d: got %h expected %h", r, rdata, sh[r]);
    end
  endtask

  int unsigned o, o1, pcnt;
  gate_e g;
  logic [COLS-1:0] en;
  int sum_ok;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) do_write(r, COLS'($urandom), '1);
    for (int r = 0; r < ROWS; r++) check_row(r);
    for (int t = 0; t < 600; t++) begin
      en = ($urandom_range(0, 2) == 0) ? COLS'($urandom) : '1;
      o  = $urandom_range(0, ROWS - 1);
      o1 = (o + 1) % ROWS;
      g  = gate_e'($urandom_range(0, 6));
      case ($urandom_range(0, 3))
        0: do_write(o, COLS'($urandom), en);
        1: begin
          pcnt = $urandom_range(1, 4);
          do_preset(o, pcnt, $urandom_range(0, 1), en);
        end
        default: begin
          // usually preset first, sometimes not (the gate must then hold)
          if ($urandom_range(0, 3) != 0) begin
            do_preset(o, 1, gate_preset(g), en);
            if (g == G_INV12) do_preset(o1, 1, gate_preset(g), en);
          end
          do_gate(g, o, o1, $urandom_range(0, ROWS - 1), $urandom_range(0, ROWS - 1),
                  $urandom_range(0, ROWS - 1), $urandom_range(0, ROWS - 1),
                  $urandom_range(0, ROWS - 1), en);
        end
      endcase
      check_row(o);
      if (g == G_INV12) check_row(o1);
    end
    // full adder from the three gate steps: rows 0=A 1=B 2=Cin 3=Cout 4=D 5=E 6=S
    do_write(0, 16'b1010101010101010, '1);
    do_write(1, 16'b1100110011001100, '1);
    do_write(2, 16'b1111000011110000, '1);
    do_preset(3, 1, 1'b0, '1);
    do_gate(G_MAJ3, 3, 0, 0, 1, 2, 0, 0, '1);
    do_preset(4, 2, 1'b1, '1);
    do_gate(G_INV12, 4, 5, 3, 0, 0, 0, 0, '1);
    do_preset(6, 1, 1'b0, '1);
    do_gate(G_MAJ5, 6, 0, 0, 1, 2, 4, 5, '1);
    check_row(3);
    check_row(6);
    sum_ok = 1;
    for (int c = 0; c < 8; c++) begin
      int s3;
      s3 = (c & 1) + ((c >> 1) & 1) + ((c >> 2) & 1);
      if (sh[6][c] != (s3 & 1) || sh[3][c] != (s3 >> 1)) sum_ok = 0;
    end
    checks++;
    if (!sum_ok) begin failures++; $display("full adder truth table wrong"); end
    checks++;
    if (n_preset == 0 || n_gate == 0) begin failures++; $display("counters idle"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
