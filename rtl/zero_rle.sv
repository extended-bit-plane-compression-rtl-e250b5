// zero_rle -- stream-level run-length encoder of the zero/non-zero flags.
//
// Each accepted value contributes one flag. A non-zero value is sent as a single
// '1'. Zeros are counted; a burst is sent as a '0' followed by ZB bits holding
// (burst length - 1), ZB = clog2(MAX_ZB). A burst that reaches MAX_ZB zeros is sent
// at once and counting restarts, so longer bursts are split into several symbols.
// A pending burst is also sent when a non-zero value arrives (burst symbol and '1'
// combined into one symbol of ZB+2 bits) and when the value flagged `last` is
// accepted, so the stream ends with no pending state.
//
// Interface: `accept` qualifies `nonzero`/`last`. The symbol of an accepted value
// appears combinationally in the same cycle on sym/sym_len, left-aligned (first bit
// in the MSB), unused low bits zero; sym_len = 0 when nothing is emitted. The burst
// counter is the only state and updates on the clock edge.
//
// The paper gives the scheme (a single 0 plus a fixed-width length, a 1 per
// non-zero, splitting at the maximum). The length field holding length-1, the
// combined burst+'1' symbol and the flush on `last` are choices of this design.
module zero_rle
  import bpc_pkg::*;
#(
  parameter int unsigned MAX_ZB = 16,                  // maximum zero burst per symbol
  localparam int unsigned ZB    = zb_w(MAX_ZB),        // burst length field
  localparam int unsigned SW    = zsym_w(MAX_ZB),      // symbol bus width
  localparam int unsigned LW    = $clog2(SW + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          accept,     // a value is consumed this cycle
  input  logic          nonzero,    // that value is non-zero
  input  logic          last,       // that value ends the stream
  output logic [SW-1:0] sym,        // left-aligned symbol
  output logic [LW-1:0] sym_len,    // its length in bits (0: none)
  output logic [ZB-1:0] pending     // zeros counted but not yet sent
);
  logic [ZB-1:0] zcnt_q, zcnt_d;

  always_comb begin
    zcnt_d  = zcnt_q;
    sym     = '0;
    sym_len = '0;
    if (accept) begin
      if (nonzero) begin
        zcnt_d = '0;
        if (zcnt_q != '0) begin
          // '0' + (burst-1), then '1'
          sym     = SW'({1'b0, ZB'(zcnt_q - 1'b1), 1'b1});
          sym_len = LW'(ZB + 2);
        end else begin
          sym     = {1'b1, {(SW-1){1'b0}}};
          sym_len = LW'(1);
        end
      end else if ((32'(zcnt_q) + 1 == MAX_ZB) || last) begin
        // burst of zcnt_q+1 zeros, field holds zcnt_q
        zcnt_d  = '0;
        sym     = {1'b0, zcnt_q, 1'b0};
        sym_len = LW'(ZB + 1);
      end else begin
        zcnt_d = zcnt_q + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) zcnt_q <= '0;
    else        zcnt_q <= zcnt_d;
  end

  assign pending = zcnt_q;
endmodule
