// bpc_codec -- the compressor and the decompressor side by side, as they would
// sit next to a DMA engine: feature maps leaving the accelerator are compressed
// on their way to external memory (write path) and decompressed when they are
// read back (read path).
//
// Write path: bpc_compressor, values in (wr_in_*), compressed words out
// (wr_out_*). Read path: bpc_decompressor, compressed words in (rd_in_*), values
// out (rd_out_*); the read path must be told the number of values of the stream
// it decodes (rd_stream_len). The two paths are independent and share only clock
// and reset; the DMA engine and the memory they talk to are outside this design.
//
// The compressor follows the paper's scheme; the read path, the pairing and the
// port names are this design's.
module bpc_codec #(
  parameter int unsigned M      = 16,    // word width
  parameter int unsigned N      = 16,    // BPC block size
  parameter int unsigned MAX_ZB = 16,    // max zero burst per Zero-RLE symbol
  parameter int unsigned W      = 32,    // compressed word width
  parameter int unsigned BUF_W  = 512,   // compressor buffer bits
  parameter int unsigned BBW    = 64     // decompressor bit window
) (
  input  logic          clk,
  input  logic          rst_n,
  // write path: values in, compressed words out
  input  logic          wr_in_valid,
  output logic          wr_in_ready,
  input  logic [M-1:0]  wr_in_data,
  input  logic          wr_in_last,
  output logic          wr_out_valid,
  input  logic          wr_out_ready,
  output logic [W-1:0]  wr_out_data,
  output logic          wr_out_last,
  // read path: compressed words in, values out
  input  logic [31:0]   rd_stream_len,
  input  logic          rd_in_valid,
  output logic          rd_in_ready,
  input  logic [W-1:0]  rd_in_data,
  input  logic          rd_in_last,
  output logic          rd_out_valid,
  input  logic          rd_out_ready,
  output logic [M-1:0]  rd_out_data,
  output logic          rd_out_last
);
  bpc_compressor #(.M(M), .N(N), .MAX_ZB(MAX_ZB), .OUT_W(W), .BUF_W(BUF_W)) u_comp (
    .clk, .rst_n,
    .in_valid  (wr_in_valid),
    .in_ready  (wr_in_ready),
    .in_data   (wr_in_data),
    .in_last   (wr_in_last),
    .out_valid (wr_out_valid),
    .out_ready (wr_out_ready),
    .out_data  (wr_out_data),
    .out_last  (wr_out_last)
  );

  bpc_decompressor #(.M(M), .N(N), .MAX_ZB(MAX_ZB), .IN_W(W), .BBW(BBW), .CNT_W(32)) u_decomp (
    .clk, .rst_n,
    .stream_len (rd_stream_len),
    .in_valid   (rd_in_valid),
    .in_ready   (rd_in_ready),
    .in_data    (rd_in_data),
    .in_last    (rd_in_last),
    .out_valid  (rd_out_valid),
    .out_ready  (rd_out_ready),
    .out_data   (rd_out_data),
    .out_last   (rd_out_last)
  );
endmodule
