// bpc_codec_tb -- end-to-end round trip through the codec at its default sizes
// (16-bit words, 16-word blocks, zero bursts of up to 16, 32-bit words).
//
// Each of many value streams goes through the write path; the compressed words
// are kept (standing in for external memory), compared bit for bit with
// bpc_ref_pkg, and then played back through the read path, whose output must
// equal the original values. Streams: ReLU-clipped random walks (like CNN feature
// maps), dense random data, long zero runs, arithmetic sequences, very short
// streams. Valid and ready toggle at random; some streams run with a mostly
// blocked output to force input stalls, one with both sides always ready to check
// the rate of one value per cycle. Every mechanism (each plane code, zero-plane
// runs, zero bursts at the maximum, full and padded blocks, input stall, output
// back-pressure, zero-plane runs rebuilt by the decoder) must occur at least once.
module bpc_codec_tb;
  import bpc_ref_pkg::*;

  localparam int M = 16, N = 16, MAX_ZB = 16, OUT_W = 32;
  localparam int NSTREAMS = 80;

  logic             clk = 0, rst_n = 0;
  logic             in_valid = 0, in_ready, in_last = 0;
  logic [M-1:0]     in_data = '0;
  logic             out_valid, out_ready = 0, out_last;
  logic [OUT_W-1:0] out_data;
  logic [31:0]      rd_stream_len = 1;
  logic             rd_in_valid = 0, rd_in_ready, rd_in_last = 0;
  logic [OUT_W-1:0] rd_in_data = '0;
  logic             rd_out_valid, rd_out_ready = 0, rd_out_last;
  logic [M-1:0]     rd_out_data;
  int               dec_runs = 0;

  int checks = 0, failures = 0;
  longint unsigned cycle = 0;
  int stall_cycles = 0, bp_cycles = 0, pad_cycles = 0;
  int in_prob = 70, out_prob = 80;

  bpc_codec dut (
    .clk, .rst_n,
    .wr_in_valid (in_valid), .wr_in_ready (in_ready), .wr_in_data (in_data),
    .wr_in_last (in_last), .wr_out_valid (out_valid), .wr_out_ready (out_ready),
    .wr_out_data (out_data), .wr_out_last (out_last),
    .rd_stream_len, .rd_in_valid, .rd_in_ready, .rd_in_data, .rd_in_last,
    .rd_out_valid, .rd_out_ready, .rd_out_data, .rd_out_last
  );

  // read path: compare decoded values with the stream being checked
  longint unsigned rd_vals[$];
  int rd_n = 0, rd_bad = 0, rd_lasts = 0;
  always @(posedge clk) begin
    rd_out_ready <= ($urandom_range(99) < 80);
    if (rst_n && rd_out_valid && rd_out_ready) begin
      if (rd_n >= rd_vals.size() || rd_out_data != rd_vals[rd_n][M-1:0]) rd_bad++;
      if (rd_out_last != (rd_n == rd_vals.size() - 1)) rd_bad++;
      if (rd_out_last) rd_lasts++;
      rd_n++;
    end
  end
  always @(posedge clk)
    if (dut.u_decomp.state_q == 2 && dut.u_decomp.run_q != 0) dec_runs++;

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (in_valid && !in_ready && dut.u_comp.state_q == 0) stall_cycles++;
    if (out_valid && !out_ready) bp_cycles++;
    if (dut.u_comp.pad) pad_cycles++;
  end

  // watchdog
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // output collector: one queue of bits per stream
  bit got[$];
  int got_words = 0, got_lasts = 0;
  bit stream_done = 0;
  always @(posedge clk) begin
    out_ready <= ($urandom_range(99) < out_prob);
    if (rst_n && out_valid && out_ready) begin
      for (int i = OUT_W - 1; i >= 0; i--) got.push_back(out_data[i]);
      got_words++;
      if (out_last) begin
        got_lasts++;
        stream_done = 1;
      end
    end
  end

  function automatic longint unsigned clip(longint signed v);
    if (v < 0) return 0;
    if (v > 65535) return 65535;
    return v;
  endfunction

  function automatic void gen(int kind, ref longint unsigned vals[$]);
    int len = (kind == 4) ? $urandom_range(5, 1) : $urandom_range(300, 20);
    longint signed w = $urandom_range(2000) - 1000;
    int step = 0;
    case ($urandom_range(4))
      0: step = -2; 1: step = 1; 2: step = -1; 3: step = 2; default: step = 4;
    endcase
    vals.delete();
    for (int k = 0; k < len; k++) begin
      case (kind)
        0: begin  // ReLU random walk
          w += $signed($urandom_range(400)) - 200;
          vals.push_back(clip(w));
        end
        1: vals.push_back(($urandom_range(1)) ? 64'($urandom_range(65535)) : 64'd0);
        2: vals.push_back(($urandom_range(40) == 0) ? 64'($urandom_range(255, 1)) : 64'd0);
        3: vals.push_back(64'((30000 + step * k) & 16'hFFFF) | 64'd1);
        default: vals.push_back(64'($urandom_range(65535)));
      endcase
    end
  endfunction

  task automatic send(longint unsigned vals[$], output longint unsigned first_acc,
                      output longint unsigned last_acc);
    first_acc = 0;
    last_acc  = 0;
    for (int k = 0; k < vals.size(); k++) begin
      while ($urandom_range(99) >= in_prob) begin
        in_valid <= 0;
        @(posedge clk);
      end
      in_valid <= 1;
      in_data  <= vals[k][M-1:0];
      in_last  <= (k == vals.size() - 1);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      if (k == 0) first_acc = cycle;
      last_acc = cycle;
    end
    in_valid <= 0;
    in_last  <= 0;
  endtask

  initial begin
    longint unsigned vals[$];
    bit exp[$];
    longint unsigned t0, t1;
    int kind;
    clear_stats();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < NSTREAMS; s++) begin
      kind = s % 5;
      // stream 7: both sides always ready; streams 10..14: output mostly blocked
      in_prob  = (s == 7) ? 100 : 70;
      out_prob = (s == 7) ? 100 : (s >= 10 && s < 15) ? 10 : 80;
      if (s == 7) kind = 1;
      gen(kind, vals);
      exp.delete();
      compress(exp, M, N, MAX_ZB, vals);
      got.delete();
      got_words = 0;
      got_lasts = 0;
      stream_done = 0;
      send(vals, t0, t1);
      while (!stream_done) @(posedge clk);
      check(got.size() >= exp.size(), $sformatf("stream %0d: %0d bits, expected %0d", s,
                                                got.size(), exp.size()));
      begin
        int bad;
        bad = -1;
        for (int i = 0; i < got.size(); i++) begin
          bit e;
          e = (i < exp.size()) ? exp[i] : 1'b0;
          if (got[i] !== e && bad < 0) bad = i;
        end
        if (bad >= 0 && s < 2) begin
          string a, b;
          a = "";
          b = "";
          for (int i = 0; i < 48 && i < exp.size(); i++) begin
            a = {a, got[i] ? "1" : "0"}; b = {b, exp[i] ? "1" : "0"};
          end
          $display("got %s", a);
          $display("exp %s", b);
        end
        check(bad < 0, $sformatf("stream %0d (kind %0d, %0d values): first wrong bit %0d of %0d",
                                 s, kind, vals.size(), bad, exp.size()));
      end
      check(got_words == (exp.size() + OUT_W - 1) / OUT_W,
            $sformatf("stream %0d: %0d words for %0d bits", s, got_words, exp.size()));
      check(got_lasts == 1, "exactly one out_last per stream");
      // play the stored words back through the read path
      rd_vals = vals;
      rd_n = 0; rd_bad = 0; rd_lasts = 0;
      rd_stream_len <= vals.size();
      for (int i = 0; i < got.size(); i += OUT_W) begin
        logic [OUT_W-1:0] wd;
        for (int b = 0; b < OUT_W; b++) wd[OUT_W-1-b] = got[i+b];
        while ($urandom_range(3) == 0) begin
          rd_in_valid <= 0;
          @(posedge clk);
        end
        rd_in_valid <= 1;
        rd_in_data  <= wd;
        rd_in_last  <= (i + OUT_W >= got.size());
        @(posedge clk);
        while (!rd_in_ready) @(posedge clk);
      end
      rd_in_valid <= 0;
      rd_in_last  <= 0;
      while (rd_lasts == 0) @(posedge clk);
      repeat (2) @(posedge clk);
      check(rd_bad == 0 && rd_n == vals.size(),
            $sformatf("stream %0d: read path gave %0d of %0d values, %0d wrong", s, rd_n,
                      vals.size(), rd_bad));
      if (s == 7)
        check(t1 - t0 == vals.size() - 1,
              $sformatf("rate: %0d values took %0d cycles", vals.size(), t1 - t0 + 1));
      repeat ($urandom_range(3)) @(posedge clk);
    end
    // mechanisms
    check(stats[ST_ZRUN] > 0,        "zero-plane run code used");
    check(stats[ST_ZONE] > 0,        "single zero-plane code used");
    check(stats[ST_ALL1] > 0,        "all-ones code used");
    check(stats[ST_DBP0] > 0,        "DBX!=0 && DBP==0 code used");
    check(stats[ST_TWO1] > 0,        "two-ones code used");
    check(stats[ST_ONE1] > 0,        "single-one code used");
    check(stats[ST_RAW] > 0,         "uncompressed plane code used");
    check(stats[ST_BURST_SPLIT] > 0, "zero burst reached the maximum");
    check(stats[ST_BLOCK] > 0,       "blocks coded");
    check(stats[ST_PARTIAL] > 0,     "partial block padded");
    check(pad_cycles > 0,            "pad cycles seen");
    check(stall_cycles > 0,          "input stalled on a full buffer");
    check(bp_cycles > 0,             "output back-pressure seen");
    check(dec_runs > 0,              "decoder rebuilt zero-plane runs");
    $display("codes: zrun=%0d zone=%0d all1=%0d dbp0=%0d two1=%0d one1=%0d raw=%0d",
             stats[ST_ZRUN], stats[ST_ZONE], stats[ST_ALL1], stats[ST_DBP0],
             stats[ST_TWO1], stats[ST_ONE1], stats[ST_RAW]);
    $display("blocks=%0d partial=%0d burst_max=%0d stall=%0d backpressure=%0d pad=%0d",
             stats[ST_BLOCK], stats[ST_PARTIAL], stats[ST_BURST_SPLIT], stall_cycles,
             bp_cycles, pad_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
