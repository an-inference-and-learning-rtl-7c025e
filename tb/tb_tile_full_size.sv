// Workload testbench: one neuron array at the evaluated full size.
//
// Runs neuron_tile with all parameters at their defaults, i.e. one neuron
// with J = 1024 presynaptic inputs (columns), 1-bit weights (S = 1), a
// 64-entry alpha table (LF = 64) in a 512-row array: the array of the
// billion-neuron configuration. Parameters are random; the 1024-bit input
// rows are random. After every LIF step the spike and membrane potential,
// and after every STDP update all 1024 weights and time counters, are
// compared with an integer model of the equations (the same model as the
// block testbench). Every LIF step and every STDP update must take the same
// number of cycles, and firing, delay-masked columns, the theta clamp,
// potentiation and depression must each occur.
module tb_tile_full_size;
  import cram_pkg::*;

  localparam int unsigned J = 1024, S = 1, LF = 64, ROWS = 512;
  localparam int STEPS = 60;
  `include "cram_layout.svh"
  localparam int MAXV = (1 << S) - 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         host_we = 0, host_re = 0;
  logic [15:0]  host_row = 0;
  logic [J-1:0] host_wdata = 0, host_rdata;
  logic         start = 0, learn = 0, busy, done, spike_out;
  logic [J-1:0] in_train = 0;
  logic [31:0]  n_preset, n_gate;

  neuron_tile dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    #(10 * 3000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- model
  int alpha [LF];
  int w [J], d [J], dly [J], p3 [J];
  int spk [J][LF];
  int b, tauv, theta, v, sold, fsc, ap, am;
  int dtpre [J], dtpost;
  bit lfsr [1:9];
  int n_conv = 0, n_disabled = 0, n_fire = 0, n_clamp = 0, n_pot = 0, n_dep = 0;

  function automatic int rnd(int x);  // round_S of a 2S-bit product
    return ((x + (1 << (S - 1))) & ((1 << (2 * S)) - 1)) >> S;
  endfunction

  function automatic int noise();
    bit t;
    int r;
    t = lfsr[5] ^ lfsr[9];
    for (int q = 9; q > 1; q--) lfsr[q] = lfsr[q - 1];
    lfsr[1] = t;
    r = 0;
    for (int q = 0; q < S; q++) r |= int'(lfsr[q + 1]) << q;
    return r;
  endfunction

  function automatic int model_lif(logic [J-1:0] inp);
    int red [J], tmp [J], u, mem, ts, s_new, conv, dlyt;
    bit en;
    for (int c = 0; c < J; c++) begin
      dlyt = (dly[c] + 1) & MAXV;
      en = (dlyt == d[c]);
      dly[c] = en ? 0 : dlyt;
      if (!en) n_disabled++;
      if (en) begin
        spk[c][0] = int'(inp[c]);
        conv = 0;
        for (int q = 0; q < LF; q++) if (spk[c][q] != 0) conv = conv + alpha[q];
        conv = (conv + (1 << (TW - 1))) >> TW;  // summed without overflow, rounded to S bits
        if (conv != 0) n_conv++;
        for (int q = LF - 1; q > 0; q--) spk[c][q] = spk[c][q - 1];
        p3[c] = rnd(conv * w[c]);
      end
    end
    for (int c = 0; c < J; c++) red[c] = p3[c];
    for (int h = J / 2; h >= 1; h = h / 2) begin
      for (int c = 0; c < J; c++) tmp[c] = (c + h < J) ? red[c + h] : 0;
      for (int c = 0; c < J; c++) red[c] = (red[c] + tmp[c] + 1) >> 1;
    end
    u = (red[0] + b) & MAXV;
    u = (u + noise()) & MAXV;
    mem = (u + rnd(v * tauv)) & MAXV;
    mem = (mem + noise()) & MAXV;
    ts = sold ? theta : 0;
    if (mem < ts) n_clamp++;
    mem = (mem >= ts) ? mem - ts : 0;
    s_new = (mem >= theta) ? 1 : 0;
    v = s_new ? 0 : mem;
    sold = s_new;
    if (s_new) n_fire++;
    return s_new;
  endfunction

  function automatic void model_stdp();
    int dwp, dwn, nw;
    for (int c = 0; c < J; c++) begin
      dtpre[c] = (dtpre[c] + ((dtpre[c] != LF - 1) ? 1 : 0)) & (LF - 1);
      if (spk[c][0] != 0) dtpre[c] = 0;
    end
    dtpost = (dtpost + ((dtpost != LF - 1) ? 1 : 0)) & (LF - 1);
    if (sold != 0) dtpost = 0;
    dwn = rnd(rnd(alpha[dtpost] * fsc) * am);
    for (int c = 0; c < J; c++) begin
      dwp = rnd(rnd(alpha[dtpre[c]] * fsc) * ap);
      nw = w[c];
      if (sold != 0) nw = (nw + dwp > MAXV) ? MAXV : nw + dwp;
      if (nw != w[c]) n_pot++;
      if (spk[c][0] != 0) begin
        if (dwn != 0 && nw != 0) n_dep++;
        nw = (nw >= dwn) ? nw - dwn : 0;
      end
      w[c] = nw;
    end
  endfunction

  // ---------------------------------------------------------------- host
  task automatic hwrite(int row, logic [J-1:0] data);
    @(negedge clk);
    host_we = 1;  host_row = 16'(row);  host_wdata = data;
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic hread(int row, output logic [J-1:0] data);
    @(negedge clk);
    host_re = 1;  host_row = 16'(row);
    @(negedge clk);
    host_re = 0;
    data = host_rdata;
  endtask

  // write an n-bit field holding val[c] in column c
  task automatic wfield(int base, int n, int val [J]);
    logic [J-1:0] r;
    for (int k = 0; k < n; k++) begin
      for (int c = 0; c < J; c++) r[c] = val[c][k];
      hwrite(base + k, r);
    end
  endtask

  task automatic wconst(int base, int n, int val);
    int vv [J];
    for (int c = 0; c < J; c++) vv[c] = val;
    wfield(base, n, vv);
  endtask

  task automatic rfield(int base, int n, output int val [J]);
    logic [J-1:0] r;
    for (int c = 0; c < J; c++) val[c] = 0;
    for (int k = 0; k < n; k++) begin
      hread(base + k, r);
      for (int c = 0; c < J; c++) val[c] |= int'(r[c]) << k;
    end
  endtask

  task automatic run(bit l);
    @(negedge clk);
    start = 1;  learn = l;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
  endtask

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("MISMATCH %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  int zero [J], got [J];
  int s_model, t0, lif_cycles, stdp_cycles;

  initial begin
    for (int c = 0; c < J; c++) zero[c] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // parameters
    for (int q = 0; q < LF; q++) begin
      alpha[q] = (q < 56) ? 1 : $urandom_range(0, 1);
      wconst(R_ALPHA + q * S, S, alpha[q]);
    end
    for (int c = 0; c < J; c++) begin
      w[c] = $urandom_range(0, MAXV);
      d[c] = (c % 3 == 2) ? 0 : 1;  // d = 0: enabled every second step
      dly[c] = 0;  p3[c] = 0;  dtpre[c] = 0;
      for (int q = 0; q < LF; q++) spk[c][q] = 0;
    end
    wfield(R_W, S, w);
    wfield(R_D, S, d);
    wfield(R_DLY, S, zero);
    wfield(R_P3, S, zero);
    for (int q = 0; q < LF; q++) wconst(R_SPK + q, 1, 0);
    b = 0;  tauv = 1;  theta = 1;  v = 0;  sold = 0;  fsc = 1;  ap = 1;  am = 1;
    dtpost = 0;
    wconst(R_RND, S, 1 << (S - 1));
    wconst(R_B, S, b);
    wconst(R_TAUV, S, tauv);
    wconst(R_THETA, S, theta);
    wconst(R_V, S, 0);
    wconst(R_SOLD, 1, 0);
    wconst(R_FSC, S, fsc);
    wconst(R_AP, S, ap);
    wconst(R_AM, S, am);
    wconst(R_DTPRE, TW, 0);
    wconst(R_DTPOST, TW, 0);
    for (int q = 1; q <= 9; q++) begin
      lfsr[q] = (q == 1 || q == 4);
      wconst(R_LFSR + q - 1, 1, int'(lfsr[q]));
    end

    for (int st = 0; st < STEPS; st++) begin
      for (int c = 0; c < J; c++) in_train[c] = ($urandom_range(0, 7) != 0);
      if (st % 7 == 6) in_train = '0;
      t0 = cyc;
      run(1'b0);
      if (st > 0) check("LIF step length", cyc - t0, lif_cycles);
      lif_cycles = cyc - t0;
      s_model = model_lif(in_train);
      check($sformatf("step %0d spike", st), int'(spike_out), s_model);
      rfield(R_V, S, got);
      check($sformatf("step %0d v", st), got[0], v);
      t0 = cyc;
      run(1'b1);
      if (st > 0) check("STDP update length", cyc - t0, stdp_cycles);
      stdp_cycles = cyc - t0;
      model_stdp();
      rfield(R_W, S, got);
      for (int c = 0; c < J; c++) check($sformatf("step %0d w[%0d]", st, c), got[c], w[c]);
      rfield(R_DTPRE, TW, got);
      for (int c = 0; c < J; c++) check($sformatf("step %0d dtpre[%0d]", st, c), got[c], dtpre[c]);
      rfield(R_DTPOST, TW, got);
      check($sformatf("step %0d dtpost", st), got[0], dtpost);
    end
    $display("LIF step: %0d cycles, STDP update: %0d cycles; fired %0d, disabled columns %0d, clamps %0d, potentiations %0d, depressions %0d",
             lif_cycles, stdp_cycles, n_fire, n_disabled, n_clamp, n_pot, n_dep);
    check("neuron fired", int'(n_fire > 0), 1);
    check("neuron stayed silent at times", int'(n_fire < STEPS), 1);
    check("filter sum rounded to a nonzero value", int'(n_conv > 0), 1);
    check("delay disabled a column", int'(n_disabled > 0), 1);
    check("theta subtraction clamped", int'(n_clamp > 0), 1);
    check("potentiation happened", int'(n_pot > 0), 1);
    check("depression happened", int'(n_dep > 0), 1);
    check("array computed with gates", int'(n_gate > 0 && n_preset > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
