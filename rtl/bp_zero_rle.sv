// bp_zero_rle -- plane-level zero run-length encoder of the bit-plane encoder.
//
// The M+1 planes of a block are sent from the top plane (M) down to plane 0.
// Consecutive planes whose DBX is zero are merged into one symbol placed at the
// first plane of the run: a run of one plane is "001", a run of L >= 2 planes is
// "01" followed by L-2 on clog2(M) bits (L can reach M+1, the whole block). Planes
// inside a run after its first produce nothing; a non-zero plane passes the symbol
// of its dbp_enc_unit through.
//
// Interface: combinational, one symbol slot per plane (left-aligned bits plus a
// length, 0 = empty slot), indexed by plane number.
//
// The paper's symbol table gives "001 & to_bin(runLength-2)" with length 2+log2 M
// and "01" with length 3 for a single zero plane; codes and lengths disagree. This
// design follows the length column (runs: 01+field, single plane: 001), which
// keeps the code prefix-free with the other codes.
module bp_zero_rle
  import bpc_pkg::*;
#(
  parameter int unsigned M  = 16,
  parameter int unsigned N  = 16,
  localparam int unsigned NP = M + 1,
  localparam int unsigned RW = run_w(M),
  localparam int unsigned SW = sym_w(M, N),
  localparam int unsigned LW = $clog2(SW + 1)
) (
  input  logic [NP-1:0]          is_zero,
  input  logic [NP-1:0][SW-1:0]  unit_sym,
  input  logic [NP-1:0][LW-1:0]  unit_len,
  output logic [NP-1:0][SW-1:0]  sym,
  output logic [NP-1:0][LW-1:0]  sym_len
);
  // zrun[p]: number of consecutive zero planes from p downwards (p, p-1, ...)
  logic [NP-1:0][RW:0] zrun;
  // is_zero with a non-zero plane assumed above the top plane
  logic [NP:0]         zext;

  assign zext = {1'b0, is_zero};

  always_comb begin
    for (int p = 0; p < NP; p++) begin
      if (!is_zero[p])  zrun[p] = '0;
      else if (p == 0)  zrun[p] = (RW+1)'(1);
      else              zrun[p] = zrun[p-1] + 1'b1;
    end
  end

  always_comb begin
    for (int p = 0; p < NP; p++) begin
      sym[p]     = '0;
      sym_len[p] = '0;
      if (!is_zero[p]) begin
        sym[p]     = unit_sym[p];
        sym_len[p] = unit_len[p];
      end else if (!zext[p+1]) begin
        // first plane of a zero run
        if (zrun[p] == (RW+1)'(1)) begin
          sym[p][SW-1 -: 3] = CODE_ZONE;
          sym_len[p]        = LW'(3);
        end else begin
          sym[p][SW-1 -: 2+RW] = {CODE_ZRUN, RW'(zrun[p] - 2'd2)};
          sym_len[p]           = LW'(2 + RW);
        end
      end
    end
  end
endmodule
