// Self-checking testbench for array_ctrl (driving a cram_array).
//
// Writes random operands into the array through M_WRITE, runs every macro
// operation, reads the results back with M_READ and compares them column by
// column with integer arithmetic: copy, not, and (per bit and with a single
// broadcast row), or, add with and without carry-in, multiply, equality,
// equality with a constant, unsigned >=, column shift, column broadcast and
// the LFSR step (x^9 + x^5 + 1). It also counts array micro-operations per
// macro and checks the fixed latencies: 7n+1 for an n-bit add and 14 for an
// LFSR step (one preset plus the 13 gate cycles of the paper's sequence).
// Masked operation is checked by running an add under a column enable.
module tb_array_ctrl;
  import cram_pkg::*;

  localparam int unsigned ROWS = 64, COLS = 8, N = 4;
  localparam int RA_ = 0, RB_ = 4, RD_ = 8, RE_ = 16, RL_ = 24;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic m_valid = 0, m_ready, m_done;
  macro_t m_in = '0;
  logic [COLS-1:0] ext_wdata = '0, rd_out, col_en_q;
  logic uop_valid;
  uop_t uop;
  logic [COLS-1:0] col_en, wdata, rdata;
  logic [31:0] n_preset, n_gate;

  array_ctrl #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  cram_array #(.ROWS(ROWS), .COLS(COLS)) u_arr (.*);

  int checks = 0, failures = 0;
  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int nuops;
  always @(posedge clk) if (uop_valid) nuops++;

  task automatic run(macro_t m);
    @(negedge clk);
    while (!m_ready) @(negedge clk);
    m_in = m;  m_valid = 1;
    nuops = 0;
    @(negedge clk);
    m_valid = 0;
    while (!m_done) @(negedge clk);
  endtask

  task automatic wrow(int r, logic [COLS-1:0] d);
    ext_wdata = d;
    run(mk(M_WRITE, 0, 0, 0, 0, r, 1));
  endtask

  task automatic rrow(int r, output logic [COLS-1:0] d);
    run(mk(M_READ, r, 1, 0, 0, 0, 0));
    d = rd_out;
  endtask

  task automatic wfield(int base, int n, int v [COLS]);
    logic [COLS-1:0] r;
    for (int k = 0; k < n; k++) begin
      for (int c = 0; c < COLS; c++) r[c] = v[c][k];
      wrow(base + k, r);
    end
  endtask

  task automatic rfield(int base, int n, output int v [COLS]);
    logic [COLS-1:0] r;
    for (int c = 0; c < COLS; c++) v[c] = 0;
    for (int k = 0; k < n; k++) begin
      rrow(base + k, r);
      for (int c = 0; c < COLS; c++) v[c] |= int'(r[c]) << k;
    end
  endtask

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("MISMATCH %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  int a [COLS], b [COLS], g [COLS];
  int mask4;
  logic [COLS-1:0] r1, r0;
  bit lf [1:9], t;
  macro_t mm;

  initial begin
    mask4 = (1 << N) - 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(mk(M_CONST, 0, 0, 0, 0, 0, 0));
    for (int rep = 0; rep < 6; rep++) begin
      for (int c = 0; c < COLS; c++) begin
        a[c] = $urandom_range(0, mask4);
        b[c] = (c == rep) ? a[c] : $urandom_range(0, mask4);
      end
      wfield(RA_, N, a);
      wfield(RB_, N, b);

      run(mk(M_COPY, RA_, N, 0, 0, RD_, N));
      rfield(RD_, N, g);
      for (int c = 0; c < COLS; c++) check("copy", g[c], a[c]);
      run(mk(M_NOT, RA_, N, 0, 0, RD_, N));
      rfield(RD_, N, g);
      for (int c = 0; c < COLS; c++) check("not", g[c], ~a[c] & mask4);
      run(mk(M_AND, RA_, N, RB_, N, RD_, N));
      rfield(RD_, N, g);
      for (int c = 0; c < COLS; c++) check("and", g[c], a[c] & b[c]);
      run(mk(M_AND, RA_, N, RB_ + 1, 1, RD_, N, 1));
      rfield(RD_, N, g);
      for (int c = 0; c < COLS; c++) check("and-bcast", g[c], b[c][1] ? a[c] : 0);
      run(mk(M_OR, RA_, N, RB_, N, RD_, N));
      rfield(RD_, N, g);
      for (int c = 0; c < COLS; c++) check("or", g[c], a[c] | b[c]);
      run(mk(M_ADD, RA_, N, RB_, N, RD_, N + 1));
      check("add latency", nuops, 7 * (N + 1) + 1);
      rfield(RD_, N + 1, g);
      for (int c = 0; c < COLS; c++) check("add", g[c], a[c] + b[c]);
      run(mk(M_ADD, RA_, N, RB_, N, RD_, N, 0, 1));
      rfield(RD_, N, g);
      for (int c = 0; c < COLS; c++) check("add+cin", g[c], (a[c] + b[c] + 1) & mask4);
      run(mk(M_MUL, RA_, N, RB_, N, RE_, N));
      rfield(RE_, 2 * N, g);
      for (int c = 0; c < COLS; c++) check("mul", g[c], a[c] * b[c]);
      run(mk(M_EQ, RA_, N, RB_, N, RD_, N));
      rfield(RD_, 1, g);
      for (int c = 0; c < COLS; c++) check("eq", g[c], int'(a[c] == b[c]));
      mm = mk(M_EQC, RA_, N, 0, 0, RD_, N);
      mm.konst = 16'(a[0]);
      run(mm);
      rfield(RD_, 1, g);
      for (int c = 0; c < COLS; c++) check("eqc", g[c], int'(a[c] == a[0]));
      run(mk(M_GE, RA_, N, RB_, N, RD_, N));
      rfield(RD_, 1, g);
      for (int c = 0; c < COLS; c++) check("ge", g[c], int'(a[c] >= b[c]));
      mm = mk(M_SHR, RA_, N, 0, 0, RD_, N);
      mm.shift = 16'(rep % 4 + 1);
      run(mm);
      rfield(RD_, N, g);
      for (int c = 0; c < COLS; c++)
        check("shr", g[c], (c + rep % 4 + 1 < COLS) ? a[c + rep % 4 + 1] : 0);
      run(mk(M_BCAST, RB_, N, 0, 0, RD_, N));
      rfield(RD_, N, g);
      for (int c = 0; c < COLS; c++) check("bcast", g[c], b[0]);
      // masked add: only enabled columns change
      wfield(RD_, N, a);
      wrow(RL_ + 12, 8'b1010_0110);
      run(mk(M_SETEN, RL_ + 12, 1, 0, 0, 0, 0));
      check("enable loaded", int'(col_en_q), 8'b1010_0110);
      run(mk(M_ADD, RA_, N, RB_, N, RD_, N, 0, 0, 1));
      rfield(RD_, N, g);
      for (int c = 0; c < COLS; c++)
        check("masked add", g[c], ((8'b1010_0110 >> c) & 1) ? (a[c] + b[c]) & mask4 : a[c]);
      mm = mk(M_SETEN, 0, 0, 0, 0, 0, 0);
      mm.all = 1'b1;
      run(mm);
    end
    // LFSR: seed differs per column
    for (int q = 1; q <= 9; q++) begin
      r0 = COLS'($urandom);
      if (q == 1) r0[0] = 1'b1;
      wrow(RL_ + q - 1, r0);
    end
    for (int st = 0; st < 20; st++) begin
      int seq [COLS];
      logic [COLS-1:0] rows [9];
      for (int q = 0; q < 9; q++) rrow(RL_ + q, rows[q]);
      run(mk(M_LFSR, RL_, 0, 0, 0, 0, 0));
      check("lfsr latency", nuops, 14);
      for (int c = 0; c < COLS; c++) begin
        for (int q = 1; q <= 9; q++) lf[q] = rows[q - 1][c];
        t = lf[5] ^ lf[9];
        for (int q = 9; q > 1; q--) lf[q] = lf[q - 1];
        lf[1] = t;
        seq[c] = 0;
        for (int q = 1; q <= 9; q++) seq[c] |= int'(lf[q]) << (q - 1);
      end
      rfield(RL_, 9, g);
      for (int c = 0; c < COLS; c++) check("lfsr", g[c], seq[c]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
