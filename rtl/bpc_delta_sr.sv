// bpc_delta_sr -- base register, previous-value register, subtractor and the
// (N-1) x (M+1)-bit delta shift register of the bit-plane encoder.
//
// The non-zero values are grouped into data blocks of N words. The first word of a
// block is stored as the base. Every further word is subtracted from its
// predecessor (delta j = word j+1 - word j, computed on M+1 bits, words taken as
// unsigned) by the single subtractor and shifted into the shift register, which
// enters at index N-2 and moves towards index 0. After N-1 deltas, deltas[j] holds
// delta j. `full` then stays high until `done` marks the block as consumed.
//
// A block that ends early (end of stream) is completed with `pad`: each pad cycle
// shifts in a zero delta, i.e. as if the last word were repeated.
//
// Interface and timing: `push` with `word` adds a non-zero word; `pad` adds a zero
// delta; `done` releases a full block. `push` may coincide with `done` (the word
// then starts the next block); it must not be given while `full` is high without
// `done`. All updates happen on the clock edge; base/deltas/count are registers.
//
// Registers: base (M), previous value (M) and the shift register ((N-1)(M+1)),
// as in the paper (287 bits for M = N = 16); the word counter is added here.
module bpc_delta_sr #(
  parameter int unsigned M = 16,   // word width
  parameter int unsigned N = 16,   // block size in words
  localparam int unsigned CW = $clog2(N + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 push,
  input  logic [M-1:0]         word,
  input  logic                 pad,
  input  logic                 done,
  output logic [M-1:0]         base,
  output logic [N-2:0][M:0]    deltas,
  output logic [CW-1:0]        count,   // words held in the current block
  output logic                 full
);
  logic [M-1:0]      base_q, prev_q;
  logic [N-2:0][M:0] sr_q;
  logic [CW-1:0]     cnt_q;
  logic [M:0]        diff;

  // the single subtractor: current word minus previous word
  assign diff = {1'b0, word} - {1'b0, prev_q};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      base_q <= '0;
      prev_q <= '0;
      sr_q   <= '0;
      cnt_q  <= '0;
    end else if (push) begin
      prev_q <= word;
      if (cnt_q == '0 || done) begin
        base_q <= word;
        cnt_q  <= CW'(1);
      end else begin
        sr_q  <= {diff, sr_q[N-2:1]};
        cnt_q <= cnt_q + 1'b1;
      end
    end else if (pad) begin
      sr_q  <= {(M+1)'(0), sr_q[N-2:1]};
      cnt_q <= cnt_q + 1'b1;
    end else if (done) begin
      cnt_q <= '0;
    end
  end

  assign base   = base_q;
  assign deltas = sr_q;
  assign count  = cnt_q;
  assign full   = (cnt_q == CW'(N));

  // a full block may only be overwritten once it has been released
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    (full && !done) |-> !(push || pad));
endmodule
