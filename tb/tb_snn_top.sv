// End-to-end testbench for snn_top at its default size (N = 16 neuron arrays
// of 512 rows, J = 8 inputs, S = 1, LF = 64), with no parameter overrides.
//
// Loads every array with random synaptic weights, delays, alpha tables,
// biases, decay constants and LFSR seeds, and the router with random bit
// indicators and reordering addresses. It then runs time steps (most with
// learning enabled) while four neurons receive random external spikes.
// A reference model in plain integer arithmetic follows each neuron's LIF
// equations, the LFSR, the STDP rule and the De Bruijn routing (tracking
// which source spike lands in which slot). After every step the testbench
// compares all 16 output spikes, all 16 delivered input rows, and each
// array's membrane potential, weights and STDP counters with the model.
// Mechanism counters: neuron fired, delay-disabled column, theta clamp,
// LFSR noise bit added, spike carried through a concatenation stage, spike
// picked from either parent by a selection stage, external injection
// overriding a neuron, potentiation, depression, learning phase run. Each
// one that never happened is a failure. Step lengths must not depend on
// data: every step of the same kind must take the same number of cycles.
module tb_snn_top;
  import cram_pkg::*;

  localparam int unsigned N = 16, J = 8, S = 1, LF = 64;
  localparam int unsigned LOG2N = $clog2(N), LOG2J = $clog2(J), NSEL = LOG2N - LOG2J;
  localparam int STEPS = 48;
  localparam int MAXV = (1 << S) - 1;
  `include "cram_layout.svh"

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 host_we = 0, host_re = 0;
  logic [LOG2N-1:0]     host_node = '0;
  logic [15:0]          host_row = '0;
  logic [J-1:0]         host_wdata = '0, host_rdata;
  logic                 cfg_we = 0, cfg_ind = 0;
  logic [LOG2N-1:0]     cfg_node = '0;
  logic [7:0]           cfg_stage = '0;
  logic [LOG2J-1:0]     cfg_slot = '0, cfg_addr = '0;
  logic                 step = 0, learn_en = 0, busy, step_done;
  logic [N-1:0]         ext_spike = '0, ext_en = '0, spikes;
  logic [J-1:0]         trains [N];
  logic [31:0]          phase_cycles;

  snn_top dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #(10 * 5000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- model
  int alpha [N][LF];
  int w [N][J], d [N][J], dly [N][J], p3 [N][J];
  int spk [N][J][LF];
  int b [N], tauv [N], theta [N], v [N], sold [N], dtpost [N];
  int dtpre [N][J];
  bit lfsr [N][1:9];
  int fsc, ap, am;
  int m_ind [N][NSEL][J], m_addr [N][NSEL][J];
  int src [N][J], nsrc [N][J];
  int mtrain [N][J];
  int n_conv = 0, n_fire = 0, n_disabled = 0, n_clamp = 0, n_noise = 0, n_concat = 0;
  int n_sel0 = 0, n_sel1 = 0, n_inject = 0, n_pot = 0, n_dep = 0, n_learn = 0;

  function automatic int rnd(int x);
    return ((x + (1 << (S - 1))) & ((1 << (2 * S)) - 1)) >> S;
  endfunction

  function automatic int noise(int i);
    bit t;
    int r;
    t = lfsr[i][5] ^ lfsr[i][9];
    for (int q = 9; q > 1; q--) lfsr[i][q] = lfsr[i][q - 1];
    lfsr[i][1] = t;
    r = 0;
    for (int q = 0; q < S; q++) r |= int'(lfsr[i][q + 1]) << q;
    if (r != 0) n_noise++;
    return r;
  endfunction

  function automatic int model_lif(int i);
    int red [J], tmp [J], u, mem, ts, s_new, conv, dlyt;
    bit en;
    for (int c = 0; c < J; c++) begin
      dlyt = (dly[i][c] + 1) & MAXV;
      en = (dlyt == d[i][c]);
      dly[i][c] = en ? 0 : dlyt;
      if (!en) n_disabled++;
      if (en) begin
        spk[i][c][0] = mtrain[i][c];
        conv = 0;
        for (int q = 0; q < LF; q++) if (spk[i][c][q] != 0) conv = conv + alpha[i][q];
        conv = (conv + (1 << (TW - 1))) >> TW;  // summed without overflow, rounded to S bits
        if (conv != 0) n_conv++;
        for (int q = LF - 1; q > 0; q--) spk[i][c][q] = spk[i][c][q - 1];
        p3[i][c] = rnd(conv * w[i][c]);
      end
    end
    for (int c = 0; c < J; c++) red[c] = p3[i][c];
    for (int h = J / 2; h >= 1; h = h / 2) begin
      for (int c = 0; c < J; c++) tmp[c] = (c + h < J) ? red[c + h] : 0;
      for (int c = 0; c < J; c++) red[c] = (red[c] + tmp[c] + 1) >> 1;
    end
    u = (red[0] + b[i]) & MAXV;
    u = (u + noise(i)) & MAXV;
    mem = (u + rnd(v[i] * tauv[i])) & MAXV;
    mem = (mem + noise(i)) & MAXV;
    ts = sold[i] ? theta[i] : 0;
    if (mem < ts) n_clamp++;
    mem = (mem >= ts) ? mem - ts : 0;
    s_new = (mem >= theta[i]) ? 1 : 0;
    v[i] = s_new ? 0 : mem;
    sold[i] = s_new;
    if (s_new) n_fire++;
    return s_new;
  endfunction

  function automatic void model_stdp(int i);
    int dwp, dwn, nw;
    for (int c = 0; c < J; c++) begin
      dtpre[i][c] = (dtpre[i][c] + ((dtpre[i][c] != LF - 1) ? 1 : 0)) & (LF - 1);
      if (spk[i][c][0] != 0) dtpre[i][c] = 0;
    end
    dtpost[i] = (dtpost[i] + ((dtpost[i] != LF - 1) ? 1 : 0)) & (LF - 1);
    if (sold[i] != 0) dtpost[i] = 0;
    dwn = rnd(rnd(alpha[i][dtpost[i]] * fsc) * am);
    for (int c = 0; c < J; c++) begin
      dwp = rnd(rnd(alpha[i][dtpre[i][c]] * fsc) * ap);
      nw = w[i][c];
      if (sold[i] != 0) nw = (nw + dwp > MAXV) ? MAXV : nw + dwp;
      if (nw != w[i][c]) n_pot++;
      if (spk[i][c][0] != 0) begin
        if (dwn != 0 && nw != 0) n_dep++;
        nw = (nw >= dwn) ? nw - dwn : 0;
      end
      w[i][c] = nw;
    end
  endfunction

  // which source neuron's spike each slot carries after a routing round
  function automatic void model_route();
    for (int q = 0; q < N; q++)
      for (int k = 0; k < J; k++) src[q][k] = (k == 0) ? q : -1;
    for (int c = 1; c <= LOG2N; c++) begin
      for (int q = 0; q < N; q++) begin
        int p0, p1, wd, s;
        p0 = q / 2;  p1 = q / 2 + N / 2;  wd = 1 << (c - 1);
        s = c - LOG2J - 1;
        for (int k = 0; k < J; k++) begin
          if (c <= LOG2J) nsrc[q][k] = (k < wd) ? src[p0][k] : (k < 2 * wd) ? src[p1][k - wd] : -1;
          else if (m_ind[q][s][k] != 0) nsrc[q][k] = src[p1][m_addr[q][s][k]];
          else nsrc[q][k] = src[p0][m_addr[q][s][k]];
        end
      end
      src = nsrc;
    end
  endfunction

  // ---------------------------------------------------------------- host
  task automatic hwrite(int node, int row, logic [J-1:0] data);
    @(negedge clk);
    host_we = 1;  host_node = LOG2N'(node);  host_row = 16'(row);  host_wdata = data;
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic hread(int node, int row, output logic [J-1:0] data);
    @(negedge clk);
    host_re = 1;  host_node = LOG2N'(node);  host_row = 16'(row);
    @(negedge clk);
    host_re = 0;
    data = host_rdata;
  endtask

  task automatic wfield(int node, int base, int n, int val [J]);
    logic [J-1:0] r;
    for (int k = 0; k < n; k++) begin
      for (int c = 0; c < J; c++) r[c] = val[c][k];
      hwrite(node, base + k, r);
    end
  endtask

  task automatic wconst(int node, int base, int n, int val);
    int vv [J];
    for (int c = 0; c < J; c++) vv[c] = val;
    wfield(node, base, n, vv);
  endtask

  task automatic rfield(int node, int base, int n, output int val [J]);
    logic [J-1:0] r;
    for (int c = 0; c < J; c++) val[c] = 0;
    for (int k = 0; k < n; k++) begin
      hread(node, base + k, r);
      for (int c = 0; c < J; c++) val[c] |= int'(r[c]) << k;
    end
  endtask

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("MISMATCH %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  int zero [J], got [J], sp [N], len_lif, len_learn;
  logic [N-1:0] xs, xe;

  initial begin
    for (int c = 0; c < J; c++) zero[c] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    fsc = 1;  ap = 1;  am = 1;
    for (int i = 0; i < N; i++) begin
      for (int q = 0; q < LF; q++) begin
        alpha[i][q] = (q < 56) ? 1 : $urandom_range(0, 1);
        wconst(i, R_ALPHA + q * S, S, alpha[i][q]);
        wconst(i, R_SPK + q, 1, 0);
      end
      for (int c = 0; c < J; c++) begin
        w[i][c] = $urandom_range(0, MAXV);
        d[i][c] = (c % 3 == 2) ? 0 : 1;  // d = 0: column enabled every second step
        dly[i][c] = 0;  p3[i][c] = 0;  dtpre[i][c] = 0;
        for (int q = 0; q < LF; q++) spk[i][c][q] = 0;
        mtrain[i][c] = 0;
      end
      wfield(i, R_W, S, w[i]);
      wfield(i, R_D, S, d[i]);
      wfield(i, R_DLY, S, zero);
      wfield(i, R_P3, S, zero);
      b[i] = $urandom_range(0, 1);  tauv[i] = $urandom_range(0, 1);  theta[i] = 1;
      v[i] = 0;  sold[i] = 0;  dtpost[i] = 0;
      wconst(i, R_RND, S, 1 << (S - 1));
      wconst(i, R_B, S, b[i]);
      wconst(i, R_TAUV, S, tauv[i]);
      wconst(i, R_THETA, S, theta[i]);
      wconst(i, R_V, S, 0);
      wconst(i, R_SOLD, 1, 0);
      wconst(i, R_FSC, S, fsc);
      wconst(i, R_AP, S, ap);
      wconst(i, R_AM, S, am);
      wconst(i, R_DTPRE, TW, 0);
      wconst(i, R_DTPOST, TW, 0);
      for (int q = 1; q <= 9; q++) begin
        lfsr[i][q] = (q == 1) || ($urandom_range(0, 1) == 1);
        wconst(i, R_LFSR + q - 1, 1, int'(lfsr[i][q]));
      end
    end
    for (int q = 0; q < N; q++)
      for (int s = 0; s < NSEL; s++)
        for (int k = 0; k < J; k++) begin
          m_ind[q][s][k]  = $urandom_range(0, 1);
          m_addr[q][s][k] = $urandom_range(0, J - 1);
          @(negedge clk);
          cfg_we = 1;  cfg_node = LOG2N'(q);  cfg_stage = 8'(s);  cfg_slot = LOG2J'(k);
          cfg_ind = m_ind[q][s][k][0];  cfg_addr = LOG2J'(m_addr[q][s][k]);
        end
    @(negedge clk);
    cfg_we = 0;
    model_route();

    len_lif = -1;  len_learn = -1;
    for (int st = 0; st < STEPS; st++) begin
      xe = N'(16'h0f00);
      xs = (st % 8 == 7) ? N'($urandom) & xe : xe;  // mostly held high
      @(negedge clk);
      ext_en = xe;  ext_spike = xs;  learn_en = (st % 4 != 3);
      step = 1;
      @(negedge clk);
      step = 0;
      while (!step_done) @(negedge clk);

      // model: compute, route, learn
      for (int i = 0; i < N; i++) begin
        sp[i] = model_lif(i);
        if (xe[i]) begin
          if (sp[i] != int'(xs[i])) n_inject++;
          sp[i] = int'(xs[i]);
        end
      end
      for (int i = 0; i < N; i++) begin
        check($sformatf("step %0d spike %0d", st, i), int'(spikes[i]), sp[i]);
        for (int k = 0; k < J; k++) begin
          mtrain[i][k] = (src[i][k] >= 0) ? sp[src[i][k]] : 0;
          if (mtrain[i][k] != 0) begin
            if (k < J / 2) n_concat++;
            if (m_ind[i][NSEL - 1][k] != 0) n_sel1++; else n_sel0++;
          end
          check($sformatf("step %0d train %0d[%0d]", st, i, k), int'(trains[i][k]), mtrain[i][k]);
        end
      end
      if (learn_en) begin
        n_learn++;
        for (int i = 0; i < N; i++) model_stdp(i);
        if (len_learn < 0) len_learn = phase_cycles;
        check("learning step length", phase_cycles, len_learn);
      end else begin
        if (len_lif < 0) len_lif = phase_cycles;
        check("inference step length", phase_cycles, len_lif);
      end
      for (int i = 0; i < N; i++) begin
        rfield(i, R_V, S, got);
        check($sformatf("step %0d v[%0d]", st, i), got[0], v[i]);
        rfield(i, R_W, S, got);
        for (int c = 0; c < J; c++) check($sformatf("step %0d w[%0d][%0d]", st, i, c), got[c], w[i][c]);
        if (learn_en) begin
          rfield(i, R_DTPRE, TW, got);
          for (int c = 0; c < J; c++)
            check($sformatf("step %0d dtpre[%0d][%0d]", st, i, c), got[c], dtpre[i][c]);
          rfield(i, R_DTPOST, TW, got);
          check($sformatf("step %0d dtpost[%0d]", st, i), got[0], dtpost[i]);
        end
      end
    end
    $display("step cycles: inference %0d, with learning %0d", len_lif, len_learn);
    $display("conv %0d fire %0d disabled %0d clamp %0d noise %0d concat %0d sel0 %0d sel1 %0d inject %0d pot %0d dep %0d learn %0d",
             n_conv, n_fire, n_disabled, n_clamp, n_noise, n_concat, n_sel0, n_sel1, n_inject, n_pot, n_dep, n_learn);
    check("mechanism: neuron fired", int'(n_fire > 0), 1);
    check("mechanism: filter sum rounded to a nonzero value", int'(n_conv > 0), 1);
    check("mechanism: delay disabled a column", int'(n_disabled > 0), 1);
    check("mechanism: theta subtraction clamped", int'(n_clamp > 0), 1);
    check("mechanism: LFSR noise added", int'(n_noise > 0), 1);
    check("mechanism: spike through concatenation stages", int'(n_concat > 0), 1);
    check("mechanism: selection took parent p0", int'(n_sel0 > 0), 1);
    check("mechanism: selection took parent p1", int'(n_sel1 > 0), 1);
    check("mechanism: external spike injection", int'(n_inject > 0), 1);
    check("mechanism: potentiation", int'(n_pot > 0), 1);
    check("mechanism: depression", int'(n_dep > 0), 1);
    check("mechanism: learning phase", int'(n_learn > 0), 1);
    check("mechanism: fixed-length inference step", int'(len_lif > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
