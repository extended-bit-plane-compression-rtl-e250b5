// bpc_block_encoder -- codes one data block of the bit-plane compressor.
//
// Input: the base word and the N-1 deltas (M+1 bits each) of a block. The deltas
// are viewed as M+1 delta bit-planes of N-1 bits (plane i, bit j = bit i of delta
// j). One dbp_enc_unit per plane forms DBX_i = DBP_i ^ DBP_i+1 (the top plane M is
// XORed with zero) and codes it; bp_zero_rle merges runs of zero planes. The coded
// block is the base word (M bits, MSB first) followed by the symbols of planes M,
// M-1, ..., 0 in that order, concatenated without gaps.
//
// Output: blk (left-aligned: first bit at the MSB, bits past blk_len are zero) and
// blk_len. Purely combinational; the caller holds the inputs in registers
// (bpc_delta_sr), so the block is coded in the cycle it is taken.
//
// The transform and the code table follow the paper, and the block layout follows
// its overview figure (base, then DBP M, then DBX M-1 down to DBX 0). Coding all
// planes in parallel in one cycle, with one unit per plane as the paper's encoder
// diagram shows, and concatenating them here is this design's choice.
module bpc_block_encoder
  import bpc_pkg::*;
#(
  parameter int unsigned M  = 16,
  parameter int unsigned N  = 16,
  localparam int unsigned NP = M + 1,
  localparam int unsigned PW = plane_w(N),
  localparam int unsigned SW = sym_w(M, N),
  localparam int unsigned LW = $clog2(SW + 1),
  localparam int unsigned BW = blk_w(M, N),
  localparam int unsigned BLW = $clog2(BW + 1)
) (
  input  logic [M-1:0]          base,
  input  logic [N-2:0][M:0]     deltas,
  output logic [BW-1:0]         blk,
  output logic [BLW-1:0]        blk_len
);
  logic [NP-1:0][PW-1:0] dbp;       // delta bit-planes
  logic [NP:0][PW-1:0]   dbp_ext;   // with an all-zero plane above the top
  logic [NP-1:0]         is_zero;
  logic [NP-1:0][SW-1:0] unit_sym, sym;
  logic [NP-1:0][LW-1:0] unit_len, sym_len;

  // view the deltas as bit-planes
  always_comb begin
    for (int i = 0; i < NP; i++)
      for (int j = 0; j < PW; j++)
        dbp[i][j] = deltas[j][i];
  end
  assign dbp_ext = {{PW{1'b0}}, dbp};

  for (genvar i = 0; i < NP; i++) begin : g_unit
    dbp_enc_unit #(.M(M), .N(N)) u_enc (
      .dbp     (dbp_ext[i]),
      .dbp_up  (dbp_ext[i+1]),
      .is_zero (is_zero[i]),
      .sym     (unit_sym[i]),
      .sym_len (unit_len[i])
    );
  end

  bp_zero_rle #(.M(M), .N(N)) u_zrle (
    .is_zero  (is_zero),
    .unit_sym (unit_sym),
    .unit_len (unit_len),
    .sym      (sym),
    .sym_len  (sym_len)
  );

  // concatenate base and plane symbols, top plane first
  always_comb begin
    logic [BW-1:0]  acc;
    logic [BLW-1:0] pos;
    acc = '0;
    acc[BW-1 -: M] = base;
    pos = BLW'(M);
    for (int p = NP - 1; p >= 0; p--) begin
      acc = acc | ({sym[p], {(BW-SW){1'b0}}} >> pos);
      pos = pos + BLW'(sym_len[p]);
    end
    blk     = acc;
    blk_len = pos;
  end
endmodule
