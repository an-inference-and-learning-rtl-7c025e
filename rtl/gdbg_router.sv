// Generalized De Bruijn graph (GDBG) spike distribution network.
//
// N neuron arrays are joined in a binary De Bruijn pattern: array p drives
// arrays (2p) mod N and (2p+1) mod N, so array d listens to p0 = d/2 and
// p1 = d/2 + N/2. Every array thus has two outgoing and two incoming links
// (2N links in total), and a spike can reach any array in log2 N stages, the
// same fixed pattern repeated like the stages of an FFT.
//
// One routing round distributes the output spike of every array and leaves
// each array with a J-bit input row (its J presynaptic spikes):
//  * stage c = 1 .. log2 J : each array concatenates the two trains it
//    receives, train(p0) in the low half, train(p1) in the high half, so the
//    train doubles from 2^(c-1) to 2^c bits; no selection logic is involved.
//  * stage c = log2 J + 1 .. log2 N : the two incoming trains are J bits
//    each and only J spikes can be kept. For every output slot k a stored
//    bit indicator picks the train (0: from p0, 1: from p1) and a stored
//    log2 J-bit reordering address picks the position in it:
//        out[k] = (ind[k] ? train(p1) : train(p0))[addr[k]]
// The indicator and address memories (per array, per selection stage, per
// slot) are written through the cfg_* port before operation.
// Inputs whose spike must be forced (network inputs) can be injected through
// the spike inputs by the caller.
//
// Timing: 'start' latches spikes_in; one stage per clock; 'done' pulses after
// log2 N stages with the rows on 'trains'. The round therefore always takes
// the same, data-independent number of cycles.
//
// Follows the paper: topology, log2 N stages, concatenation while
// c <= log2 j, bit indicators and reordering masks of log2 j bits for later
// stages. This design's choices: the paper counts the stored addresses as
// (log2 j)(log2 N - log2 j) bits per array but also says each array reads an
// address "for each spike"; this design stores one indicator and one address
// per slot and stage, (1 + log2 J) * J * (log2 N - log2 J) bits per array.
// The address is used as a gather (which input position feeds slot k), and
// the stage buffers are registers rather than rows of the arrays.
module gdbg_router #(
  parameter int unsigned N = 16,
  parameter int unsigned J = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [N-1:0]         spikes_in,
  output logic [J-1:0]         trains [N],
  output logic                 busy,
  output logic                 done,
  // configuration: bit indicator and reordering address of one slot
  input  logic                 cfg_we,
  input  logic [$clog2(N)-1:0] cfg_node,
  input  logic [7:0]           cfg_stage,  // selection stage, 0 = stage log2 J + 1
  input  logic [$clog2(J)-1:0] cfg_slot,
  input  logic                 cfg_ind,
  input  logic [$clog2(J)-1:0] cfg_addr
);

  localparam int unsigned LOG2N = $clog2(N);
  localparam int unsigned LOG2J = $clog2(J);
  localparam int unsigned NSEL  = (LOG2N > LOG2J) ? LOG2N - LOG2J : 1;

  logic                 ind  [N][NSEL][J];
  logic [LOG2J-1:0]     addr [N][NSEL][J];
  logic [J-1:0]         buff [N];
  logic [J-1:0]         nxt  [N];
  logic [7:0]           c;  // current stage, 1-based

  always_ff @(posedge clk) begin
    if (cfg_we && int'(cfg_stage) < int'(NSEL))
      begin
        ind [cfg_node][cfg_stage][cfg_slot] <= cfg_ind;
        addr[cfg_node][cfg_stage][cfg_slot] <= cfg_addr;
      end
  end

  always_comb begin
    int unsigned w, p0, p1, sel;
    w = 1 << (int'(c) - 1);
    sel = (int'(c) > int'(LOG2J)) ? int'(c) - int'(LOG2J) - 1 : 0;
    if (sel >= NSEL) sel = 0;
    for (int unsigned d = 0; d < N; d++) begin
      p0 = d >> 1;
      p1 = (d >> 1) + N / 2;
      nxt[d] = '0;
      for (int unsigned k = 0; k < J; k++) begin
        if (int'(c) <= int'(LOG2J)) begin
          if (k < w)           nxt[d][k] = buff[p0][k];
          else if (k < 2 * w)  nxt[d][k] = buff[p1][k - w];
        end else begin
          nxt[d][k] = ind[d][sel][k] ? buff[p1][addr[d][sel][k]] : buff[p0][addr[d][sel][k]];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      c    <= '0;
      for (int unsigned d = 0; d < N; d++) buff[d] <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          for (int unsigned d = 0; d < N; d++) buff[d] <= J'(spikes_in[d]);
          c    <= 8'd1;
          busy <= 1'b1;
        end
      end else begin
        for (int unsigned d = 0; d < N; d++) buff[d] <= nxt[d];
        if (int'(c) == int'(LOG2N)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else c <= c + 1;
      end
    end
  end

  assign trains = buff;

  initial begin
    assert (N >= J && J >= 2 && (1 << LOG2N) == N && (1 << LOG2J) == J)
      else $error("gdbg_router: N and J must be powers of two with N >= J >= 2");
  end

endmodule
