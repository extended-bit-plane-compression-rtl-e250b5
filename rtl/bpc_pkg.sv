// bpc_pkg -- constants and width helpers shared by the bit-plane compressor.
//
// Holds the prefix codes of the bit-plane symbol encoder and small functions that
// derive the widths of the symbol and block buses from the word width M and the
// block size N, so that every module sizes its buses the same way.
//
// The code prefixes follow the paper's symbol table. The two zero-plane codes are
// taken from that table's length column (see dbp_enc_unit / bp_zero_rle): a run of
// two or more zero planes is "01" + (run-2), a single zero plane is "001".
package bpc_pkg;

  // Prefixes of the bit-plane symbol codes (MSB sent first).
  localparam logic [1:0] CODE_ZRUN   = 2'b01;     // run of >= 2 zero DBX planes
  localparam logic [2:0] CODE_ZONE   = 3'b001;    // single zero DBX plane
  localparam logic [4:0] CODE_ALL1   = 5'b00000;  // DBX is all ones
  localparam logic [4:0] CODE_DBP0   = 5'b00001;  // DBX != 0 and DBP == 0
  localparam logic [4:0] CODE_TWO1   = 5'b00010;  // two adjacent ones
  localparam logic [4:0] CODE_ONE1   = 5'b00011;  // a single one
  localparam logic       CODE_RAW    = 1'b1;      // uncompressed plane follows

  function automatic int unsigned max2(int unsigned a, int unsigned b);
    return (a > b) ? a : b;
  endfunction

  // Bits of a delta bit-plane: one per delta, N-1 deltas per block.
  function automatic int unsigned plane_w(int unsigned n);
    return n - 1;
  endfunction

  // Bits of a position field inside a plane (at least 1).
  function automatic int unsigned pos_w(int unsigned n);
    return max2(1, $clog2(n - 1));
  endfunction

  // Bits of the zero-plane run field: runs of 2..M+1 planes are sent as run-2.
  function automatic int unsigned run_w(int unsigned m);
    return max2(1, $clog2(m));
  endfunction

  // Widest symbol one plane can produce.
  function automatic int unsigned sym_w(int unsigned m, int unsigned n);
    return max2(max2(1 + plane_w(n), 5 + pos_w(n)), max2(2 + run_w(m), 3));
  endfunction

  // Widest coded block: base word plus M+1 plane symbols.
  function automatic int unsigned blk_w(int unsigned m, int unsigned n);
    return m + (m + 1) * sym_w(m, n);
  endfunction

  // Bits of the stream-level zero-burst length field (burst length - 1).
  function automatic int unsigned zb_w(int unsigned max_zb);
    return max2(1, $clog2(max_zb));
  endfunction

  // Widest stream-level Zero-RLE symbol: a flushed zero burst plus a '1'.
  function automatic int unsigned zsym_w(int unsigned max_zb);
    return zb_w(max_zb) + 2;
  endfunction

endpackage
