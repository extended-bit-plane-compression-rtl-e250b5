// dbp_enc_unit -- encoder of one delta bit-plane (DBP enc. unit).
//
// A delta bit-plane holds bit i of each of the N-1 deltas of a block (bit j of the
// plane belongs to delta j). The unit XORs its plane with the plane above it
// (DBX_i = DBP_i ^ DBP_i+1; the top plane is XORed with zero and so stays the
// base-DBP) and maps the result to one code symbol:
//
//   DBX all ones               -> 00000
//   DBX != 0 and DBP == 0      -> 00001
//   exactly two adjacent ones  -> 00010 + position of the lower one
//   exactly one one            -> 00011 + its position
//   anything else              -> 1 + DBX (N-1 bits, bit N-2 first)
//
// An all-zero DBX is reported on is_zero and produces no symbol here: runs of
// zero planes are coded by bp_zero_rle. Checks are made in the order above.
//
// Interface: combinational. sym is left-aligned (first bit at the MSB), unused low
// bits are zero, sym_len is its length in bits.
//
// The code table is the paper's. The paper writes the raw code as 1 + M bits; a
// plane has N-1 bits, so the raw code here is 1 + (N-1) bits (equal to the paper's
// count minus one for M = N = 16). Positions are clog2(N-1) bits wide (the paper's
// log2 M for M = N = 16). "Position of the first one" is read as the lower index.
module dbp_enc_unit
  import bpc_pkg::*;
#(
  parameter int unsigned M  = 16,
  parameter int unsigned N  = 16,
  localparam int unsigned PW = plane_w(N),
  localparam int unsigned QW = pos_w(N),
  localparam int unsigned SW = sym_w(M, N),
  localparam int unsigned LW = $clog2(SW + 1),
  localparam int unsigned OW = $clog2(PW + 1)
) (
  input  logic [PW-1:0] dbp,       // this plane
  input  logic [PW-1:0] dbp_up,    // plane above (zero for the top plane)
  output logic          is_zero,   // DBX == 0
  output logic [SW-1:0] sym,
  output logic [LW-1:0] sym_len
);
  logic [PW-1:0] dbx;
  logic [QW-1:0] low_pos;
  logic [OW-1:0] ones;

  assign dbx     = dbp ^ dbp_up;
  assign is_zero = (dbx == '0);

  always_comb begin
    ones    = '0;
    low_pos = '0;
    for (int j = PW - 1; j >= 0; j--) begin
      if (dbx[j]) begin
        ones    = ones + 1'b1;
        low_pos = QW'(j);
      end
    end
  end

  always_comb begin
    sym     = '0;
    sym_len = '0;
    if (is_zero) begin
      sym_len = '0;
    end else if (&dbx) begin
      sym[SW-1 -: 5] = CODE_ALL1;
      sym_len        = LW'(5);
    end else if (dbp == '0) begin
      sym[SW-1 -: 5] = CODE_DBP0;
      sym_len        = LW'(5);
    end else if (ones == OW'(2) && (dbx & (dbx >> 1)) != '0) begin
      sym[SW-1 -: 5+QW] = {CODE_TWO1, low_pos};
      sym_len           = LW'(5 + QW);
    end else if (ones == OW'(1)) begin
      sym[SW-1 -: 5+QW] = {CODE_ONE1, low_pos};
      sym_len           = LW'(5 + QW);
    end else begin
      sym[SW-1 -: 1+PW] = {CODE_RAW, dbx};
      sym_len           = LW'(1 + PW);
    end
  end
endmodule
