// bpc_compressor_tb -- end-to-end test of the compressor at its default sizes
// (16-bit words, 16-word blocks, zero bursts of up to 16, 32-bit output words).
//
// Many value streams of different character are sent through the compressor:
// ReLU-clipped random walks (zero bursts and correlated non-zero values, like CNN
// feature maps), dense random data, long zero runs, arithmetic sequences (which
// give the single-one, two-ones, all-ones and DBP-zero plane codes), and very
// short streams (partial blocks). The input valid and the output ready toggle at
// random; some streams run with a mostly blocked output to force input stalls,
// one with both sides always ready to check the rate of one value per cycle.
// The output words of each stream are compared bit for bit with bpc_ref_pkg,
// padding bits must be zero and out_last must mark exactly the last word.
// Every mechanism (each plane code, zero-plane runs, burst splitting, full and
// padded blocks, input stall, output back-pressure) must occur at least once.
module bpc_compressor_tb;
  import bpc_ref_pkg::*;

  localparam int M = 16, N = 16, MAX_ZB = 16, OUT_W = 32;
  localparam int NSTREAMS = 80;

  logic             clk = 0, rst_n = 0;
  logic             in_valid = 0, in_ready, in_last = 0;
  logic [M-1:0]     in_data = '0;
  logic             out_valid, out_ready = 0, out_last;
  logic [OUT_W-1:0] out_data;

  int checks = 0, failures = 0;
  longint unsigned cycle = 0;
  int stall_cycles = 0, bp_cycles = 0, pad_cycles = 0;
  int in_prob = 70, out_prob = 80;

  bpc_compressor dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (in_valid && !in_ready && dut.state_q == 0) stall_cycles++;
    if (out_valid && !out_ready) bp_cycles++;
    if (dut.pad) pad_cycles++;
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
          $display("got %s\nexp %s", a, b);
        end
        check(bad < 0, $sformatf("stream %0d (kind %0d, %0d values): first wrong bit %0d of %0d",
                                 s, kind, vals.size(), bad, exp.size()));
      end
      check(got_words == (exp.size() + OUT_W - 1) / OUT_W,
            $sformatf("stream %0d: %0d words for %0d bits", s, got_words, exp.size()));
      check(got_lasts == 1, "exactly one out_last per stream");
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
