// bit_packer -- buffer and packer: joins variable-length symbols into one
// bit-stream and cuts it into OUT_W-bit output words.
//
// The buffer is a BUF_W-bit register whose upper `level` bits are valid, the
// oldest bit at the MSB. Each cycle it can append two left-aligned symbols, first
// `a` then `b`, behind the valid bits, while an output word leaves from the top.
// Outside a flush a word is offered only while more than OUT_W bits are held, so
// at least one bit always remains for the word that ends the stream. With `flush`
// high the remaining bits go out, zero-padded, and the word that empties the
// buffer carries out_last.
//
// Interface: appends happen on the clock edge whenever a_len/b_len are non-zero
// (a symbol's bits past its length must be zero; a zero length ignores the bits);
// the caller must check `level` leaves room (the assertion below guards it). The
// output is a valid/ready stream; out_data is the top of the buffer register.
//
// The paper names a buffer and packer that packs the bit-stream into words and
// gives no sizes; the widths and the ordering rules here are this design's.
module bit_packer #(
  parameter int unsigned BUF_W = 512,   // buffer bits
  parameter int unsigned OUT_W = 32,    // output word bits
  parameter int unsigned A_W   = 288,   // widest `a` symbol
  parameter int unsigned B_W   = 6,     // widest `b` symbol
  localparam int unsigned CW   = $clog2(BUF_W + 1),
  localparam int unsigned ALW  = $clog2(A_W + 1),
  localparam int unsigned BLW  = $clog2(B_W + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [A_W-1:0]    a_bits,
  input  logic [ALW-1:0]    a_len,
  input  logic [B_W-1:0]    b_bits,
  input  logic [BLW-1:0]    b_len,
  input  logic              flush,
  output logic [CW-1:0]     level,
  output logic              out_valid,
  output logic [OUT_W-1:0]  out_data,
  output logic              out_last,
  input  logic              out_ready
);
  logic [BUF_W-1:0] buf_q, buf_d;
  logic [CW-1:0]    cnt_q, cnt_d;

  assign out_last  = flush && (cnt_q <= CW'(OUT_W)) && (cnt_q != '0);
  assign out_valid = (cnt_q > CW'(OUT_W)) || out_last;
  assign out_data  = buf_q[BUF_W-1 -: OUT_W];
  assign level     = cnt_q;

  always_comb begin
    logic [CW-1:0] c;
    buf_d = buf_q;
    c     = cnt_q;
    if (out_valid && out_ready) begin
      if (out_last) begin
        buf_d = '0;
        c     = '0;
      end else begin
        buf_d = buf_q << OUT_W;
        c     = cnt_q - CW'(OUT_W);
      end
    end
    if (a_len != '0) begin
      buf_d = buf_d | ({a_bits, {(BUF_W-A_W){1'b0}}} >> c);
      c     = c + CW'(a_len);
    end
    if (b_len != '0) begin
      buf_d = buf_d | ({b_bits, {(BUF_W-B_W){1'b0}}} >> c);
      c     = c + CW'(b_len);
    end
    cnt_d = c;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      buf_q <= '0;
      cnt_q <= '0;
    end else begin
      buf_q <= buf_d;
      cnt_q <= cnt_d;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    32'(cnt_q) + 32'(a_len) + 32'(b_len) <= BUF_W);
  a_stable_out: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && !out_ready && !flush) |=> out_valid && $stable(out_data));
endmodule
