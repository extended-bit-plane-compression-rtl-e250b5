// bpc_block_encoder_tb -- codes random blocks of 16 16-bit words (smooth ramps,
// small noise around a level, ReLU-clipped walks, full-range random, ramps of
// step -2, constant blocks) and compares the coded block, bit for bit, and its length with the
// reference block coder of bpc_ref_pkg. Deltas are formed in the testbench.
module bpc_block_encoder_tb;
  import bpc_ref_pkg::*;
  localparam int M = 16, N = 16, BW = 16 + 17 * 16;
  logic [M-1:0]      base;
  logic [N-2:0][M:0] deltas;
  logic [BW-1:0]     blk;
  logic [8:0]        blk_len;
  logic clk = 0;
  int checks = 0, failures = 0;

  bpc_block_encoder #(.M(M), .N(N)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned w[$];
    bit q[$];
    clear_stats();
    for (int t = 0; t < 3000; t++) begin
      int lvl, kind;
      lvl  = $urandom_range(60000);
      kind = t % 6;
      w.delete();
      for (int j = 0; j < N; j++) begin
        case (kind)
          0: w.push_back((lvl + j * ($urandom_range(4) - 2)) & 16'hFFFF);
          1: w.push_back((lvl + $urandom_range(6)) & 16'hFFFF);
          2: w.push_back(($urandom_range(1)) ? 64'($urandom_range(300, 1)) : 64'd1);
          3: w.push_back($urandom_range(65535));
          4: w.push_back((lvl - 2 * j) & 16'hFFFF);   // constant step -2: an all-ones DBX
          default: w.push_back(lvl);
        endcase
      end
      base = w[0][M-1:0];
      for (int j = 0; j < N - 1; j++) deltas[j] = (M+1)'(w[j+1] - w[j]);
      #1;
      q.delete();
      encode_block(q, M, N, w);
      checks++;
      begin
        bit ok;
        ok = (blk_len == q.size());
        for (int i = 0; i < BW; i++)
          if (blk[BW-1-i] !== ((i < q.size()) ? q[i] : 1'b0)) ok = 0;
        if (!ok) begin
          failures++;
          $display("FAIL: block %0d (kind %0d): len %0d expected %0d", t, kind, blk_len,
                   q.size());
        end
      end
    end
    checks++;
    if (stats[ST_ZRUN] == 0 || stats[ST_ZONE] == 0 || stats[ST_ALL1] == 0 ||
        stats[ST_DBP0] == 0 || stats[ST_TWO1] == 0 || stats[ST_ONE1] == 0 ||
        stats[ST_RAW] == 0) begin
      failures++;
      $display("FAIL: code coverage zrun=%0d zone=%0d all1=%0d dbp0=%0d two1=%0d one1=%0d raw=%0d",
               stats[ST_ZRUN], stats[ST_ZONE], stats[ST_ALL1], stats[ST_DBP0],
               stats[ST_TWO1], stats[ST_ONE1], stats[ST_RAW]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
