// bpc_compressor -- extended bit-plane compressor for CNN feature-map streams.
//
// A stream of M-bit values is split in two. The zero/non-zero flag of every value
// goes to a run-length encoder (zero_rle): zero bursts cost one short symbol, each
// non-zero value one '1' bit. The non-zero values alone go to the bit-plane
// encoder: blocks of N values are turned into a base word, N-1 deltas, delta
// bit-planes and XORed bit-planes (bpc_delta_sr, bpc_block_encoder), which are
// coded with short symbols. A buffer and packer (bit_packer) merges both symbol
// streams into one bit-stream, cut into OUT_W-bit words.
//
// Stream format (first bit = MSB of the first output word):
//   * Zero-RLE symbols in input order: '1' per non-zero value, '0'+(burst-1) on
//     clog2(MAX_ZB) bits per zero burst of at most MAX_ZB values.
//   * Right after the symbol of the N-th non-zero value of a block, the coded
//     block follows (in hardware it is appended one cycle later, still ahead of
//     any symbol of later values).
//   * At the end of the stream (value flagged in_last) a pending zero burst is
//     sent, a partly filled block is completed with zero deltas (the last value
//     repeated) and sent, and the final word is zero-padded and flagged out_last.
//   The decoder knows the number of values, so padding is unambiguous.
//
// Interface: valid/ready input (in_data, in_last) and valid/ready output
// (out_data, out_last). One value per cycle is taken while the buffer has room
// for one Zero-RLE symbol; a completed block is appended (coded) once the buffer
// has room for a worst-case block, and input stalls (in_ready low) while it waits.
// With an always-ready output the default sizes never stall: a block adds at
// most 288 + 16 bits per 16 values, the output removes 32 bits per cycle. After in_last the compressor pads and flushes (a few cycles with
// in_ready low) before it takes the next stream.
//
// Follows the paper: the split into Zero-RLE and bit-plane coding, the block
// transform, the code table, the register set of the encoder, the default sizes
// (M = 16 bit words, N = 16 word blocks, zero bursts of up to 16). This design's
// own: the handshakes, the end-of-stream rule, the buffer size and output width,
// and coding a whole block in one cycle.
module bpc_compressor
  import bpc_pkg::*;
#(
  parameter int unsigned M      = 16,    // word width
  parameter int unsigned N      = 16,    // BPC block size (non-zero words)
  parameter int unsigned MAX_ZB = 16,    // max zero burst per Zero-RLE symbol
  parameter int unsigned OUT_W  = 32,    // output word width
  parameter int unsigned BUF_W  = 512    // packer buffer bits
) (
  input  logic              clk,
  input  logic              rst_n,
  // value stream
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [M-1:0]      in_data,
  input  logic              in_last,
  // compressed bit-stream
  output logic              out_valid,
  input  logic              out_ready,
  output logic [OUT_W-1:0]  out_data,
  output logic              out_last
);
  localparam int unsigned BW  = blk_w(M, N);
  localparam int unsigned BLW = $clog2(BW + 1);
  localparam int unsigned ZSW = zsym_w(MAX_ZB);
  localparam int unsigned ZLW = $clog2(ZSW + 1);
  localparam int unsigned ZB  = zb_w(MAX_ZB);
  localparam int unsigned CW  = $clog2(N + 1);
  localparam int unsigned LVW = $clog2(BUF_W + 1);

  // the buffer must take a worst-case block while it still holds an output word
  if (BUF_W < BW + ZSW + OUT_W) begin : g_buf_check
    $error("BUF_W too small for a worst-case block");
  end
  if (N < 3 || M < 2 || MAX_ZB < 2) begin : g_size_check
    $error("need N >= 3, M >= 2, MAX_ZB >= 2");
  end

  typedef enum logic [1:0] {S_RUN, S_PAD, S_FLUSH} state_e;
  state_e state_q, state_d;

  logic             nz, accept, room_sym, room_blk;
  logic [ZSW-1:0]   zsym;
  logic [ZLW-1:0]   zlen;
  logic [ZB-1:0]    zpend;
  logic [M-1:0]     base;
  logic [N-2:0][M:0] deltas;
  logic [CW-1:0]    count;
  logic             full, pad, take;
  logic [BW-1:0]    blk;
  logic [BLW-1:0]   blk_len;
  logic [LVW-1:0]   level;

  // room for a Zero-RLE symbol, and for a worst-case block plus a symbol
  assign room_sym = (32'(level) + ZSW <= BUF_W);
  assign room_blk = (32'(level) + BW + ZSW <= BUF_W);
  // while a block waits for room, no value is taken (it could overwrite the block)
  assign in_ready = (state_q == S_RUN) && (full ? room_blk : room_sym);
  assign accept   = in_valid && in_ready;

  nonzero_detect #(.M(M)) u_nz (.value(in_data), .nonzero(nz));

  zero_rle #(.MAX_ZB(MAX_ZB)) u_zrle (
    .clk, .rst_n,
    .accept  (accept),
    .nonzero (nz),
    .last    (in_last),
    .sym     (zsym),
    .sym_len (zlen),
    .pending (zpend)
  );

  // a full block is coded and appended as soon as the buffer has room
  assign take = full && room_blk;
  assign pad  = (state_q == S_PAD) && (count != '0) && !full;

  bpc_delta_sr #(.M(M), .N(N)) u_dsr (
    .clk, .rst_n,
    .push   (accept && nz),
    .word   (in_data),
    .pad    (pad),
    .done   (take),
    .base   (base),
    .deltas (deltas),
    .count  (count),
    .full   (full)
  );

  bpc_block_encoder #(.M(M), .N(N)) u_benc (
    .base    (base),
    .deltas  (deltas),
    .blk     (blk),
    .blk_len (blk_len)
  );

  // block first: it belongs to values accepted before this cycle's value
  bit_packer #(.BUF_W(BUF_W), .OUT_W(OUT_W), .A_W(BW), .B_W(ZSW)) u_pack (
    .clk, .rst_n,
    .a_bits    (blk),
    .a_len     (take ? blk_len : '0),
    .b_bits    (zsym),
    .b_len     (zlen),
    .flush     (state_q == S_FLUSH),
    .level     (level),
    .out_valid (out_valid),
    .out_data  (out_data),
    .out_last  (out_last),
    .out_ready (out_ready)
  );

  always_comb begin
    state_d = state_q;
    unique case (state_q)
      S_RUN:   if (accept && in_last) state_d = S_PAD;
      S_PAD:   if (count == '0 || (full && take)) state_d = S_FLUSH;
      S_FLUSH: if (out_valid && out_ready && out_last) state_d = S_RUN;
      default: state_d = S_RUN;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) state_q <= S_RUN;
    else        state_q <= state_d;
  end

  // the Zero-RLE holds no burst once the stream has ended
  a_no_pending_after_last: assert property (@(posedge clk) disable iff (!rst_n)
    (state_q != S_RUN) |-> (zpend == '0));
  a_in_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && !in_ready) |=> in_valid && $stable(in_data) && $stable(in_last))
    else $error("input changed while stalled");
endmodule
