// bpc_delta_sr_tb -- fills blocks of 16 words (with idle cycles), checks base,
// every delta (word j+1 - word j on 17 bits), the word count and `full`; releases
// blocks with `done`, also in the same cycle as the next push, and completes a
// partial block with `pad` (zero deltas after the real ones).
module bpc_delta_sr_tb;
  localparam int M = 16, N = 16;
  logic clk = 0, rst_n = 0;
  logic push = 0, pad = 0, done = 0;
  logic [M-1:0] word = '0;
  logic [M-1:0] base;
  logic [N-2:0][M:0] deltas;
  logic [$clog2(N+1)-1:0] count;
  logic full;
  int checks = 0, failures = 0;

  bpc_delta_sr #(.M(M), .N(N)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one clock cycle; inputs change and outputs are sampled 1 time unit after the edge
  task automatic tick();
    @(posedge clk);
    #1;
  endtask

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic check_block(int unsigned w[$], int k);
    // k real words; the rest repeat the last
    check(base == w[0], $sformatf("base %h exp %h", base, w[0]));
    for (int j = 0; j < N - 1; j++) begin
      int unsigned e;
      e = (j + 1 < k) ? ((w[j+1] - w[j]) & 32'h1FFFF) : 0;
      check(deltas[j] == e, $sformatf("delta %0d = %h exp %h", j, deltas[j], e));
    end
    check(full, "full after a block");
  endtask

  initial begin
    int unsigned w[$];
    repeat (2) tick();
    rst_n = 1;
    tick();
    for (int b = 0; b < 20; b++) begin
      int k;
      k = (b % 4 == 3) ? $urandom_range(N - 1, 1) : N;
      w.delete();
      for (int i = 0; i < k; i++) begin
        w.push_back($urandom_range(65535));
        push = 1; word = w[i];
        done = (i == 0 && b > 0);   // release the previous block with this push
        tick();
        push = 0; done = 0;
        if ($urandom_range(1)) tick();
        check(count == i + 1, $sformatf("count %0d exp %0d", count, i + 1));
      end
      while (!full) begin
        pad = 1;
        tick();
        pad = 0;
      end
      tick();
      check_block(w, k);
      if (b % 5 == 4) begin
        done = 1;
        tick();
        done = 0;
        tick();
        check(count == 0 && !full, "done empties the block");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
