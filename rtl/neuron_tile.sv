// Neuron tile: one spiking neuron computed inside one CRAM array.
//
// The design maps one postsynaptic neuron onto one CRAM array whose J columns
// hold its J presynaptic connections (row map in cram_layout.svh). The tile
// joins the array, its controller and the sequencer:
//   neuron_seq --macro--> array_ctrl --uop--> cram_array
// 'start' with learn = 0 runs one LIF time step: the row 'in_train' (the
// spikes delivered by the routing network, one per column) is written as the
// newest spike row, and when 'done' pulses 'spike_out' holds the neuron's new
// output spike. 'start' with learn = 1 runs the STDP weight update.
// While the sequencer is idle a host port reads and writes whole rows, used
// to load the lookup table, weights, delays, bias, threshold and constants
// before operation (the paper's one-time initialisation) and to inspect the
// array afterwards; a host read returns data on 'host_rdata' one cycle later.
// 'n_preset' and 'n_gate' count the array's preset and gate operations.
//
// Latency: one array operation per clock and data-independent; at the
// defaults (J = 1024, S = 1, LF = 64) a LIF step takes 4372 clocks and an
// STDP update 5975, dominated by the LF-entry filter sum and table scan.
//
// Lint note: rst_n reaches the 'disable iff' of the array controller's
// assertion as well as the asynchronous resets, which lint reports as a net
// used both synchronously and asynchronously; no logic samples it.
module neuron_tile
  import cram_pkg::*;
#(
  parameter int unsigned ROWS  = 512,
  parameter int unsigned J     = 1024,
  parameter int unsigned S     = 1,
  parameter int unsigned LF    = 64,
  parameter bit          NOISE = 1'b1
) (
  input  logic         clk,
  input  logic         rst_n,
  // host access (only while idle)
  input  logic         host_we,
  input  logic         host_re,
  input  logic [15:0]  host_row,
  input  logic [J-1:0] host_wdata,
  output logic [J-1:0] host_rdata,
  // operation
  input  logic         start,
  input  logic         learn,
  input  logic [J-1:0] in_train,
  output logic         busy,
  output logic         done,
  output logic         spike_out,
  output logic [31:0]  n_preset,
  output logic [31:0]  n_gate
);
  `include "cram_layout.svh"

  if (R_END > int'(ROWS) - 13) begin : g_size_check
    $error("neuron_tile: array of %0d rows too small for S=%0d LF=%0d", ROWS, S, LF);
  end
  if (J < 2) begin : g_j_check
    $error("neuron_tile: J must be at least 2");
  end

  logic   m_valid, m_ready, m_done;
  macro_t m;
  logic   c_uop_valid;
  uop_t   c_uop;
  logic [J-1:0] c_col_en, c_wdata, rd_out, col_en_q, rdata;

  logic   a_uop_valid;
  uop_t   a_uop, h_uop;
  logic [J-1:0] a_col_en, a_wdata;

  neuron_seq #(.S(S), .LF(LF), .J(J), .NOISE(NOISE)) u_seq (
    .clk, .rst_n, .start, .learn, .busy, .done,
    .m_valid, .m_ready, .m_out(m), .m_done
  );

  array_ctrl #(.ROWS(ROWS), .COLS(J)) u_ctrl (
    .clk, .rst_n,
    .m_valid, .m_ready, .m_in(m), .m_done,
    .ext_wdata(in_train), .rd_out, .col_en_q,
    .uop_valid(c_uop_valid), .uop(c_uop), .col_en(c_col_en), .wdata(c_wdata),
    .rdata
  );

  // host access multiplexed in while the sequencer is idle
  logic host_sel;
  always_comb begin
    host_sel = !busy && (host_we || host_re);
    h_uop = '0;
    h_uop.kind = host_we ? U_WRITE : U_READ;
    h_uop.in0  = host_row;
    h_uop.out0 = host_row;
    a_uop_valid = host_sel ? 1'b1 : c_uop_valid;
    a_uop       = host_sel ? h_uop : c_uop;
    a_col_en    = host_sel ? '1 : c_col_en;
    a_wdata     = host_sel ? host_wdata : c_wdata;
  end

  cram_array #(.ROWS(ROWS), .COLS(J)) u_array (
    .clk, .rst_n, .uop_valid(a_uop_valid), .uop(a_uop), .col_en(a_col_en),
    .wdata(a_wdata), .rdata, .n_preset, .n_gate
  );

  assign host_rdata = rdata;
  assign spike_out  = rd_out[0];

endmodule
