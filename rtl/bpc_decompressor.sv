// bpc_decompressor -- rebuilds the value stream from the bit-stream of
// bpc_compressor (same M, N, MAX_ZB; IN_W = the compressor's OUT_W).
//
// The decoder reads the stream through a BBW-bit window that is refilled with
// IN_W-bit words and decodes one symbol per cycle:
//   S_RLE    Zero-RLE symbols. For each '1' the number of zeros seen since the
//            previous non-zero value is stored (zcnt[k]); after N '1's, or when
//            the stream length is reached with some '1's pending, a block follows.
//   S_BASE   the base word (M bits).
//   S_PLANE  plane symbols, top plane first, rebuilding each delta bit-plane:
//            DBP_i = DBX_i ^ DBP_i+1, DBP_i = 0 for the "DBP zero" code, and one
//            plane per cycle for a run of zero planes.
//   S_OUT    one value per cycle: zcnt[k] zeros, then value k, where value 0 is
//            the base and value k+1 = value k + delta k.
//   S_TAIL   zeros after the last non-zero value of the stream.
//   S_DRAIN  drops the padding up to the word flagged in_last.
// Since the compressor pads the last block and the last word, the decoder must be
// told the number of values of the stream: `stream_len`, held stable while the
// stream is decoded.
//
// Interface: valid/ready input of IN_W-bit words (in_last on the last word of a
// stream) and valid/ready output of M-bit values (out_last on the last value).
// Timing: the non-zero values of a block can only be produced once the whole
// block has been read, so output comes in bursts of one group (up to N non-zero
// values with the zeros before them) after the group's code has been decoded.
//
// The paper names a decompressor but does not describe it; this decoder is
// this design's own and follows only from the format the compressor produces.
module bpc_decompressor
  import bpc_pkg::*;
#(
  parameter int unsigned M      = 16,   // word width
  parameter int unsigned N      = 16,   // BPC block size
  parameter int unsigned MAX_ZB = 16,   // max zero burst per Zero-RLE symbol
  parameter int unsigned IN_W   = 32,   // input word width
  parameter int unsigned BBW    = 64,   // bit window
  parameter int unsigned CNT_W  = 32    // width of value counters
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [CNT_W-1:0]  stream_len,  // values in the current stream (>= 1)
  // compressed words
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [IN_W-1:0]   in_data,
  input  logic              in_last,
  // values
  output logic              out_valid,
  input  logic              out_ready,
  output logic [M-1:0]      out_data,
  output logic              out_last
);
  localparam int unsigned NP = M + 1;
  localparam int unsigned PW = plane_w(N);
  localparam int unsigned QW = pos_w(N);
  localparam int unsigned RW = run_w(M);
  localparam int unsigned ZB = zb_w(MAX_ZB);
  localparam int unsigned SW = sym_w(M, N);
  localparam int unsigned KW = $clog2(N + 1);
  localparam int unsigned IW = $clog2(NP + 1);
  localparam int unsigned BCW = $clog2(BBW + 1);
  localparam int unsigned LW = $clog2(BBW + 1);

  if (BBW < IN_W + max2(M, SW)) begin : g_win_check
    $error("BBW too small");
  end

  typedef enum logic [2:0] {S_RLE, S_BASE, S_PLANE, S_OUT, S_TAIL, S_DRAIN} state_e;
  state_e state_q, state_d;

  // bit window: valid bits at the top, zeros below
  logic [BBW-1:0]        bb_q, bb_d;
  logic [BCW-1:0]        bcnt_q, bcnt_d;
  logic                  seen_last_q, seen_last_d;
  // Zero-RLE bookkeeping
  logic [CNT_W-1:0]      seen_q, seen_d;        // values covered by decoded symbols
  logic [CNT_W-1:0]      zacc_q, zacc_d;        // zeros since the last non-zero value
  logic [N-1:0][CNT_W-1:0] zcnt_q, zcnt_d;      // zeros before non-zero value k
  logic [KW-1:0]         k_q, k_d;              // non-zero values in this group
  logic                  ending_q, ending_d;    // stream length reached
  // block reconstruction
  logic [M-1:0]          base_q, base_d;
  logic [NP-1:0][PW-1:0] dbp_q, dbp_d;
  logic [IW-1:0]         pl_q, pl_d;            // plane being decoded
  logic [IW-1:0]         run_q, run_d;          // zero planes still to fill
  // output
  logic [KW-1:0]         ok_q, ok_d;            // next value index
  logic [CNT_W-1:0]      oz_q, oz_d;            // zeros still to send before it
  logic [M-1:0]          acc_q, acc_d;          // value ok_q
  logic [CNT_W-1:0]      sent_q, sent_d;        // values sent in this stream

  logic [LW-1:0]         use_len;               // bits consumed this cycle
  logic [PW-1:0]         up, dbx;
  logic                  fire;
  logic                  step;                  // a plane was completed
  logic                  load, load_last;       // a word enters the window
  logic [BCW-1:0]        rem;

  function automatic logic have(logic [BCW-1:0] cnt, logic last_seen, int unsigned n);
    return (32'(cnt) >= n) || last_seen;
  endfunction

  // delta j of the current block, assembled from the planes
  function automatic logic [M-1:0] delta(logic [NP-1:0][PW-1:0] p, logic [QW-1:0] j);
    logic [M-1:0] d;
    for (int i = 0; i < M; i++) d[i] = p[i][j];
    return d;
  endfunction

  assign fire      = out_valid && out_ready;
  assign out_valid = (state_q == S_OUT) || (state_q == S_TAIL && zacc_q != '0);
  assign out_data  = (state_q == S_OUT && oz_q == '0) ? acc_q : '0;
  assign out_last  = out_valid && (sent_q + 1'b1 == stream_len);

  always_comb begin
    state_d     = state_q;
    seen_d      = seen_q;
    zacc_d      = zacc_q;
    zcnt_d      = zcnt_q;
    k_d         = k_q;
    ending_d    = ending_q;
    base_d      = base_q;
    dbp_d       = dbp_q;
    pl_d        = pl_q;
    run_d       = run_q;
    ok_d        = ok_q;
    oz_d        = oz_q;
    acc_d       = acc_q;
    sent_d      = sent_q;
    seen_last_d = seen_last_q;
    use_len     = '0;
    up          = (32'(pl_q) == M) ? '0 : dbp_q[pl_q + 1'b1];
    dbx         = '0;
    step        = 1'b0;

    unique case (state_q)
      S_RLE: begin
        if (seen_q == stream_len) begin
          // all values accounted for
          ending_d = 1'b1;
          if (k_q != '0) begin
            state_d = S_BASE;
          end else begin
            state_d = S_TAIL;
          end
        end else if (bb_q[BBW-1] && have(bcnt_q, seen_last_q, 1)) begin
          use_len      = LW'(1);
          zcnt_d[k_q]  = zacc_q;
          zacc_d       = '0;
          k_d          = k_q + 1'b1;
          seen_d       = seen_q + 1'b1;
          if (32'(k_q) + 1 == N) state_d = S_BASE;
        end else if (!bb_q[BBW-1] && have(bcnt_q, seen_last_q, ZB + 1)) begin
          use_len = LW'(ZB + 1);
          zacc_d  = zacc_q + CNT_W'(bb_q[BBW-2 -: ZB]) + 1'b1;
          seen_d  = seen_q + CNT_W'(bb_q[BBW-2 -: ZB]) + 1'b1;
        end
      end

      S_BASE: begin
        if (have(bcnt_q, seen_last_q, M)) begin
          use_len = LW'(M);
          base_d  = bb_q[BBW-1 -: M];
          pl_d    = IW'(M);
          run_d   = '0;
          state_d = S_PLANE;
        end
      end

      S_PLANE: begin
        if (run_q != '0) begin
          dbp_d[pl_q] = up;                    // zero DBX
          run_d       = run_q - 1'b1;
          step        = 1'b1;
        end else if (bb_q[BBW-1]) begin          // raw plane
          if (have(bcnt_q, seen_last_q, 1 + PW)) begin
            use_len     = LW'(1 + PW);
            dbx         = bb_q[BBW-2 -: PW];
            dbp_d[pl_q] = dbx ^ up;
            step        = 1'b1;
          end
        end else if (bb_q[BBW-2]) begin          // 01: zero run of >= 2
          if (have(bcnt_q, seen_last_q, 2 + RW)) begin
            use_len     = LW'(2 + RW);
            dbp_d[pl_q] = up;
            run_d       = IW'(bb_q[BBW-3 -: RW]) + 1'b1;
            step        = 1'b1;
          end
        end else if (bb_q[BBW-3]) begin          // 001: one zero plane
          if (have(bcnt_q, seen_last_q, 3)) begin
            use_len     = LW'(3);
            dbp_d[pl_q] = up;
            step        = 1'b1;
          end
        end else if (!bb_q[BBW-4]) begin         // 0000x
          if (have(bcnt_q, seen_last_q, 5)) begin
            use_len     = LW'(5);
            dbp_d[pl_q] = bb_q[BBW-5] ? '0 : ~up;
            step        = 1'b1;
          end
        end else begin                           // 0001x + position
          if (have(bcnt_q, seen_last_q, 5 + QW)) begin
            use_len     = LW'(5 + QW);
            dbx         = (bb_q[BBW-5] ? PW'(1) : PW'(3)) << bb_q[BBW-6 -: QW];
            dbp_d[pl_q] = dbx ^ up;
            step        = 1'b1;
          end
        end
        if (step) begin
          if (pl_q == '0) begin
            state_d = S_OUT;
            ok_d    = '0;
            oz_d    = zcnt_q[0];
            acc_d   = base_q;
          end else begin
            pl_d = pl_q - 1'b1;
          end
        end
      end

      S_OUT: begin
        if (fire) begin
          sent_d = sent_q + 1'b1;
          if (oz_q != '0) begin
            oz_d = oz_q - 1'b1;
          end else begin
            ok_d  = ok_q + 1'b1;
            acc_d = acc_q + delta(dbp_q, QW'(ok_q));
            oz_d  = zcnt_q[(32'(ok_q) + 1 < N) ? ok_q + 1'b1 : '0];
            if (ok_q + 1'b1 == k_q) begin
              k_d     = '0;
              state_d = ending_q ? S_TAIL : S_RLE;
            end
          end
        end
      end

      S_TAIL: begin
        if (zacc_q == '0) begin
          state_d = S_DRAIN;
        end else if (fire) begin
          sent_d = sent_q + 1'b1;
          zacc_d = zacc_q - 1'b1;
        end
      end

      S_DRAIN: begin
        if (seen_last_q) begin
          state_d     = S_RLE;
          seen_last_d = 1'b0;
          seen_d      = '0;
          sent_d      = '0;
          ending_d    = 1'b0;
        end
      end

      default: state_d = S_RLE;
    endcase
  end

  // bit window: consume, then refill behind the remaining bits
  assign in_ready  = !seen_last_q && (state_q == S_DRAIN ||
                     32'(bcnt_q) - 32'(use_len) + IN_W <= BBW);
  assign load      = in_valid && in_ready;
  assign load_last = load && in_last;

  always_comb begin
    bb_d     = bb_q << use_len;
    rem      = (32'(use_len) > 32'(bcnt_q)) ? '0 : bcnt_q - BCW'(use_len);
    if (state_q == S_DRAIN) begin
      bb_d = '0;
      rem  = '0;
    end
    if (load) begin
      bb_d = bb_d | ({in_data, {(BBW-IN_W){1'b0}}} >> rem);
      bcnt_d = rem + BCW'(IN_W);
    end else begin
      bcnt_d = rem;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q     <= S_RLE;
      bb_q        <= '0;
      bcnt_q      <= '0;
      seen_last_q <= 1'b0;
      seen_q      <= '0;
      zacc_q      <= '0;
      zcnt_q      <= '0;
      k_q         <= '0;
      ending_q    <= 1'b0;
      base_q      <= '0;
      dbp_q       <= '0;
      pl_q        <= '0;
      run_q       <= '0;
      ok_q        <= '0;
      oz_q        <= '0;
      acc_q       <= '0;
      sent_q      <= '0;
    end else begin
      state_q     <= state_d;
      bb_q        <= bb_d;
      bcnt_q      <= bcnt_d;
      seen_last_q <= seen_last_d || load_last;
      seen_q      <= seen_d;
      zacc_q      <= zacc_d;
      zcnt_q      <= zcnt_d;
      k_q         <= k_d;
      ending_q    <= ending_d;
      base_q      <= base_d;
      dbp_q       <= dbp_d;
      pl_q        <= pl_d;
      run_q       <= run_d;
      ok_q        <= ok_d;
      oz_q        <= oz_d;
      acc_q       <= acc_d;
      sent_q      <= sent_d;
    end
  end
endmodule
