// CRAM spiking neural network: N neuron arrays joined by a GDBG router.
//
// Each of the N neuron tiles is one CRAM array computing one leaky
// integrate-and-fire neuron with J presynaptic inputs (one per column). A
// time step runs in three phases that every tile performs in lock step:
//   1. COMPUTE : all tiles run the LIF microprogram on the input rows they
//                received in the previous routing round and produce one spike.
//   2. ROUTE   : the N spikes are distributed by the De Bruijn network in
//                log2 N fixed stages; each tile ends with a J-bit input row.
//                'ext_en[i]' replaces tile i's spike by 'ext_spike[i]',
//                which is how stimuli enter the network.
//   3. LEARN   : if 'learn_en', all tiles run the STDP microprogram.
// Because every phase has a data-independent length the whole network stays
// synchronous without any packet handling.
//
// Interface: before the first step the host loads each array through
// host_* (row writes to tile host_node; a read returns on host_rdata the
// next cycle) and the router's indicator/address memories through cfg_*.
// 'step' starts one time step; 'step_done' pulses at its end, with the
// tiles' spikes on 'spikes' and the rows delivered for the next step on
// 'trains'. 'phase_cycles' reports the length of the last step in clocks.
//
// Defaults: N = 16 neurons and J = 8 inputs is the paper's routing example;
// S = 1 bit and LF = 64 table entries are its main evaluated configuration,
// with 512-row arrays. The paper's evaluated network (10^9 neurons with 1024
// inputs each) is far beyond what can be elaborated as RTL.
//
// Lint note: rst_n is both the asynchronous reset of the flops and the
// 'disable iff' condition of the assertion below; the assertion's use is
// sampled on the clock, so lint reports rst_n as used both ways. Only the
// assertion reads it synchronously; no logic does.
module snn_top
  import cram_pkg::*;
#(
  parameter int unsigned N     = 16,
  parameter int unsigned J     = 8,
  parameter int unsigned S     = 1,
  parameter int unsigned LF    = 64,
  parameter int unsigned ROWS  = 512,
  parameter bit          NOISE = 1'b1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host access to the arrays
  input  logic                 host_we,
  input  logic                 host_re,
  input  logic [$clog2(N)-1:0] host_node,
  input  logic [15:0]          host_row,
  input  logic [J-1:0]         host_wdata,
  output logic [J-1:0]         host_rdata,
  // router configuration
  input  logic                 cfg_we,
  input  logic [$clog2(N)-1:0] cfg_node,
  input  logic [7:0]           cfg_stage,
  input  logic [$clog2(J)-1:0] cfg_slot,
  input  logic                 cfg_ind,
  input  logic [$clog2(J)-1:0] cfg_addr,
  // operation
  input  logic                 step,
  input  logic                 learn_en,
  input  logic [N-1:0]         ext_spike,
  input  logic [N-1:0]         ext_en,
  output logic                 busy,
  output logic                 step_done,
  output logic [N-1:0]         spikes,
  output logic [J-1:0]         trains [N],
  output logic [31:0]          phase_cycles
);

  typedef enum logic [2:0] {P_IDLE, P_COMPUTE, P_ROUTE, P_LEARN, P_WAIT} phase_e;
  phase_e phase;

  logic [N-1:0] t_busy, t_done, t_spike;
  logic         t_start, t_learn;
  logic [J-1:0] t_rdata [N];
  logic [31:0]  t_npre [N], t_ngate [N];
  logic         r_start, r_busy, r_done;
  logic [N-1:0] r_in;
  logic [31:0]  cyc;

  for (genvar g = 0; g < N; g++) begin : g_tile
    neuron_tile #(.ROWS(ROWS), .J(J), .S(S), .LF(LF), .NOISE(NOISE)) u_tile (
      .clk, .rst_n,
      .host_we   (host_we && host_node == g),
      .host_re   (host_re && host_node == g),
      .host_row, .host_wdata,
      .host_rdata(t_rdata[g]),
      .start     (t_start),
      .learn     (t_learn),
      .in_train  (trains[g]),
      .busy      (t_busy[g]),
      .done      (t_done[g]),
      .spike_out (t_spike[g]),
      .n_preset  (t_npre[g]),
      .n_gate    (t_ngate[g])
    );
  end

  assign host_rdata = t_rdata[host_node];

  gdbg_router #(.N(N), .J(J)) u_router (
    .clk, .rst_n, .start(r_start), .spikes_in(r_in), .trains, .busy(r_busy), .done(r_done),
    .cfg_we, .cfg_node, .cfg_stage, .cfg_slot, .cfg_ind, .cfg_addr
  );

  assign r_in = (t_spike & ~ext_en) | (ext_spike & ext_en);
  assign busy = (phase != P_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase        <= P_IDLE;
      t_start      <= 1'b0;
      t_learn      <= 1'b0;
      r_start      <= 1'b0;
      step_done    <= 1'b0;
      spikes       <= '0;
      cyc          <= '0;
      phase_cycles <= '0;
    end else begin
      t_start   <= 1'b0;
      r_start   <= 1'b0;
      step_done <= 1'b0;
      cyc       <= cyc + 1;
      case (phase)
        P_IDLE: if (step) begin
          t_start <= 1'b1;
          t_learn <= 1'b0;
          cyc     <= '0;
          phase   <= P_WAIT;
        end
        P_WAIT: phase <= t_learn ? P_LEARN : P_COMPUTE;  // tiles see start
        P_COMPUTE: if (t_busy == '0) begin
          spikes  <= r_in;
          r_start <= 1'b1;
          phase   <= P_ROUTE;
        end
        P_ROUTE: if (r_done) begin
          if (learn_en) begin
            t_start <= 1'b1;
            t_learn <= 1'b1;
            phase   <= P_WAIT;
          end else begin
            step_done    <= 1'b1;
            phase_cycles <= cyc;
            phase        <= P_IDLE;
          end
        end
        default: if (t_busy == '0) begin  // P_LEARN
          step_done    <= 1'b1;
          phase_cycles <= cyc;
          phase        <= P_IDLE;
        end
      endcase
    end
  end

  // All tiles run the same program and must finish in the same cycle.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               (t_done != '0) |-> (t_done == '1));

endmodule
