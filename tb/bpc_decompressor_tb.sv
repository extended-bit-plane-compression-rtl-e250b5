// bpc_decompressor_tb -- feeds bit-streams produced by the reference model
// (bpc_ref_pkg) for many value streams (ReLU-like walks, dense random data, long
// zero runs, ramps, very short streams) into the decoder as 32-bit words, with
// random input valid and output ready, and compares every decoded value and the
// out_last flag with the original values. Counts that every plane code, zero
// bursts at the maximum and padded (partial) blocks were decoded.
module bpc_decompressor_tb;
  import bpc_ref_pkg::*;
  localparam int M = 16, N = 16, MAX_ZB = 16, IN_W = 32;

  logic            clk = 0, rst_n = 0;
  logic [31:0]     stream_len = 1;
  logic            in_valid = 0, in_ready, in_last = 0;
  logic [IN_W-1:0] in_data = '0;
  logic            out_valid, out_ready = 0, out_last;
  logic [M-1:0]    out_data;
  int checks = 0, failures = 0;

  bpc_decompressor dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint unsigned vals[$];
  int got_n = 0, bad = 0, lasts = 0;
  always @(posedge clk) begin
    out_ready <= ($urandom_range(99) < 75);
    if (rst_n && out_valid && out_ready) begin
      if (got_n >= vals.size() || out_data != vals[got_n][M-1:0]) begin
        if (bad == 0) $display("value %0d: %h, expected %h", got_n, out_data,
                               (got_n < vals.size()) ? vals[got_n] : 0);
        bad++;
      end
      if (out_last != (got_n == vals.size() - 1)) bad++;
      if (out_last) lasts++;
      got_n++;
    end
  end

  function automatic void gen(int kind);
    int len;
    longint signed w;
    len = (kind == 4) ? $urandom_range(5, 1) : $urandom_range(300, 20);
    w = $urandom_range(2000);
    vals.delete();
    for (int k = 0; k < len; k++)
      case (kind)
        0: begin
          w += $signed($urandom_range(400)) - 200;
          vals.push_back((w < 0) ? 0 : (w > 65535) ? 65535 : w);
        end
        1: vals.push_back(($urandom_range(1)) ? 64'($urandom_range(65535)) : 64'd0);
        2: vals.push_back(($urandom_range(60) == 0) ? 64'($urandom_range(255, 1)) : 64'd0);
        3: vals.push_back(64'((30000 - 2 * k) & 16'hFFFF));
        default: vals.push_back(64'($urandom_range(65535)));
      endcase
  endfunction

  initial begin
    bit q[$];
    clear_stats();
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int s = 0; s < 60; s++) begin
      gen(s % 5);
      q.delete();
      compress(q, M, N, MAX_ZB, vals);
      while (q.size() % IN_W != 0) q.push_back(0);
      got_n = 0; bad = 0; lasts = 0;
      stream_len <= vals.size();
      for (int i = 0; i < q.size(); i += IN_W) begin
        logic [IN_W-1:0] wd;
        for (int b = 0; b < IN_W; b++) wd[IN_W-1-b] = q[i+b];
        while ($urandom_range(3) == 0) begin
          in_valid <= 0;
          @(posedge clk);
        end
        in_valid <= 1;
        in_data  <= wd;
        in_last  <= (i + IN_W >= q.size());
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
      in_valid <= 0;
      in_last  <= 0;
      while (lasts == 0) @(posedge clk);
      repeat (3) @(posedge clk);
      checks++;
      if (bad != 0 || got_n != vals.size()) begin
        failures++;
        $display("FAIL: stream %0d (kind %0d): %0d of %0d values, %0d wrong", s, s % 5, got_n,
                 vals.size(), bad);
      end
    end
    checks++;
    if (stats[ST_ZRUN] == 0 || stats[ST_ZONE] == 0 || stats[ST_ALL1] == 0 ||
        stats[ST_DBP0] == 0 || stats[ST_TWO1] == 0 || stats[ST_ONE1] == 0 ||
        stats[ST_RAW] == 0 || stats[ST_BURST_SPLIT] == 0 || stats[ST_PARTIAL] == 0) begin
      failures++;
      $display("FAIL: not every code was decoded");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
