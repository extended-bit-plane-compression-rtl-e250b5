// bpc_workloads_tb -- runs the number formats and block sizes evaluated for the
// compression scheme through differently sized compressors, each against the
// reference model: 16-bit fixed point (default sizes), 8-bit fixed point (M = 8),
// half precision (M = 16), single precision (M = 32) and the smaller block size of
// 8 words (N = 8). The data are synthetic feature-map-like streams, not real
// network activations; the printed ratios only show the scheme at work.
module bpc_workloads_tb;
  logic clk = 0, rst_n = 0;
  localparam int NH = 5;
  logic   done [NH];
  int     chk [NH], fail [NH];
  longint ib [NH], ob [NH];
  int checks = 0, failures = 0;
  string names [NH] = '{"fixed16", "fixed8", "float16", "float32", "fixed16 N=8"};

  always #5 clk = ~clk;

  bpc_stream_harness #(.M(16), .FMT(0)) h0 (.clk, .rst_n, .done(done[0]), .checks(chk[0]),
    .failures(fail[0]), .in_bits(ib[0]), .out_bits(ob[0]));
  bpc_stream_harness #(.M(8), .FMT(0)) h1 (.clk, .rst_n, .done(done[1]), .checks(chk[1]),
    .failures(fail[1]), .in_bits(ib[1]), .out_bits(ob[1]));
  bpc_stream_harness #(.M(16), .FMT(1)) h2 (.clk, .rst_n, .done(done[2]), .checks(chk[2]),
    .failures(fail[2]), .in_bits(ib[2]), .out_bits(ob[2]));
  bpc_stream_harness #(.M(32), .FMT(2), .BUF_W(1024)) h3 (.clk, .rst_n, .done(done[3]),
    .checks(chk[3]), .failures(fail[3]), .in_bits(ib[3]), .out_bits(ob[3]));
  bpc_stream_harness #(.M(16), .N(8), .FMT(0)) h4 (.clk, .rst_n, .done(done[4]),
    .checks(chk[4]), .failures(fail[4]), .in_bits(ib[4]), .out_bits(ob[4]));

  initial begin
    repeat (500_000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    bit all;
    repeat (3) @(posedge clk);
    rst_n = 1;
    do begin
      @(posedge clk);
      all = 1;
      foreach (done[i]) if (!done[i]) all = 0;
    end while (!all);
    foreach (chk[i]) begin
      checks += chk[i];
      failures += fail[i];
      $display("%-12s %0d streams checked, compression ratio %0.2f", names[i], chk[i],
               real'(ib[i]) / real'(ob[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
