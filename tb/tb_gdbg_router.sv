// Self-checking testbench for gdbg_router (N = 16 arrays, J = 8 inputs).
//
// Loads random bit indicators and reordering addresses, then runs routing
// rounds with random spike vectors. A reference model tracks, for every
// array and train position, which source array's spike it carries: the
// concatenation stages place the trains of p0 = d/2 and p1 = d/2 + N/2 side
// by side, the selection stages gather out[k] = (ind ? p1 : p0)[addr]. The
// delivered rows must equal the spikes of those sources. It also checks
// that every round takes exactly log2 N cycles from start to done, and that
// with the configuration a plain concatenation would give, every array
// receives the spikes of J distinct sources.
module tb_gdbg_router;

  localparam int unsigned N = 16, J = 8;
  localparam int unsigned LOG2N = $clog2(N), LOG2J = $clog2(J), NSEL = LOG2N - LOG2J;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 start = 0, busy, done;
  logic [N-1:0]         spikes_in = '0;
  logic [J-1:0]         trains [N];
  logic                 cfg_we = 0, cfg_ind = 0;
  logic [LOG2N-1:0]     cfg_node = '0;
  logic [7:0]           cfg_stage = '0;
  logic [LOG2J-1:0]     cfg_slot = '0, cfg_addr = '0;

  gdbg_router #(.N(N), .J(J)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int m_ind  [N][NSEL][J];
  int m_addr [N][NSEL][J];
  int src [N][J], nsrc [N][J];

  task automatic configure(bit identity);
    for (int d = 0; d < N; d++)
      for (int s = 0; s < NSEL; s++)
        for (int k = 0; k < J; k++) begin
          m_ind[d][s][k]  = identity ? (k >= J / 2) : $urandom_range(0, 1);
          m_addr[d][s][k] = identity ? (2 * k) % J : $urandom_range(0, J - 1);
          @(negedge clk);
          cfg_we = 1;  cfg_node = LOG2N'(d);  cfg_stage = 8'(s);  cfg_slot = LOG2J'(k);
          cfg_ind = m_ind[d][s][k][0];  cfg_addr = LOG2J'(m_addr[d][s][k]);
        end
    @(negedge clk);
    cfg_we = 0;
  endtask

  // source tracking (-1 = empty slot)
  task automatic model();
    for (int d = 0; d < N; d++)
      for (int k = 0; k < J; k++) src[d][k] = (k == 0) ? d : -1;
    for (int c = 1; c <= LOG2N; c++) begin
      for (int d = 0; d < N; d++) begin
        int p0, p1, w;
        p0 = d / 2;  p1 = d / 2 + N / 2;  w = 1 << (c - 1);
        for (int k = 0; k < J; k++) begin
          if (c <= LOG2J) nsrc[d][k] = (k < w) ? src[p0][k] : (k < 2 * w) ? src[p1][k - w] : -1;
          else if (m_ind[d][c - LOG2J - 1][k] != 0) nsrc[d][k] = src[p1][m_addr[d][c - LOG2J - 1][k]];
          else nsrc[d][k] = src[p0][m_addr[d][c - LOG2J - 1][k]];
        end
      end
      src = nsrc;
    end
  endtask

  int cyc, ndistinct;
  logic [N-1:0] sp;
  bit seen [N];

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 40; round++) begin
      if (round % 10 == 0) begin
        configure(round == 0);
        model();
        if (round == 0) begin
          // concatenate-like selection: J distinct sources per array
          for (int d = 0; d < N; d++) begin
            ndistinct = 0;
            for (int q = 0; q < N; q++) seen[q] = 0;
            for (int k = 0; k < J; k++)
              if (src[d][k] >= 0 && !seen[src[d][k]]) begin seen[src[d][k]] = 1; ndistinct++; end
            checks++;
            if (ndistinct != J) begin
              failures++;
              $display("array %0d receives only %0d distinct sources", d, ndistinct);
            end
          end
        end
      end
      sp = N'($urandom);
      @(negedge clk);
      spikes_in = sp;  start = 1;
      @(negedge clk);
      start = 0;  spikes_in = '0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != LOG2N + 1) begin
        failures++;
        $display("latency %0d cycles, expected %0d", cyc - 1, LOG2N);
      end
      for (int d = 0; d < N; d++)
        for (int k = 0; k < J; k++) begin
          checks++;
          if (trains[d][k] !== ((src[d][k] >= 0) ? sp[src[d][k]] : 1'b0)) begin
            failures++;
            $display("round %0d array %0d slot %0d: got %b", round, d, k, trains[d][k]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
