// bit_packer_tb -- appends random pairs of symbols (a: 0..288 bits, b: 0..6 bits,
// respecting the free space) under random output back-pressure, then flushes.
// The output words must carry exactly the appended bits in order, then zero
// padding, with out_last on the last word only; held words must stay stable.
module bit_packer_tb;
  localparam int BUF_W = 512, OUT_W = 32, A_W = 288, B_W = 6;
  logic clk = 0, rst_n = 0;
  logic [A_W-1:0] a_bits = '0;
  logic [8:0]     a_len = '0;
  logic [B_W-1:0] b_bits = '0;
  logic [2:0]     b_len = '0;
  logic           flush = 0;
  logic [9:0]     level;
  logic           out_valid, out_last, out_ready = 0;
  logic [OUT_W-1:0] out_data;
  int checks = 0, failures = 0, words = 0, lasts = 0, full_waits = 0;
  bit sent[$], got[$];

  bit_packer #(.BUF_W(BUF_W), .OUT_W(OUT_W), .A_W(A_W), .B_W(B_W)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sample the output just before each edge
  always @(negedge clk)
    if (rst_n && out_valid && out_ready) begin
      for (int i = OUT_W - 1; i >= 0; i--) got.push_back(out_data[i]);
      words++;
      if (out_last) lasts++;
    end

  task automatic tick();
    @(posedge clk);
    #1;
  endtask

  initial begin
    tick();
    rst_n = 1;
    for (int r = 0; r < 6; r++) begin
      int pr;
      pr = (r % 2) ? 30 : 90;
      sent.delete(); got.delete(); words = 0; lasts = 0;
      for (int t = 0; t < 400; t++) begin
        int la, lb;
        out_ready = ($urandom_range(99) < pr);
        la = ($urandom_range(3) == 0) ? $urandom_range(A_W) : 0;
        lb = $urandom_range(B_W);
        if (level + la + lb > BUF_W) begin
          la = 0; lb = 0; full_waits++;
        end
        a_bits = '0; b_bits = '0;
        for (int i = 0; i < la; i++) begin
          a_bits[A_W-1-i] = $urandom_range(1);
          sent.push_back(a_bits[A_W-1-i]);
        end
        for (int i = 0; i < lb; i++) begin
          b_bits[B_W-1-i] = $urandom_range(1);
          sent.push_back(b_bits[B_W-1-i]);
        end
        a_len = la; b_len = lb;
        tick();
      end
      a_len = 0; b_len = 0;
      flush = 1;
      while (lasts == 0) begin
        out_ready = ($urandom_range(99) < pr);
        tick();
      end
      flush = 0;
      out_ready = 0;
      tick();
      checks++;
      if (words != (sent.size() + OUT_W - 1) / OUT_W || lasts != 1 || level != 0) begin
        failures++;
        $display("FAIL: run %0d: %0d words, %0d lasts for %0d bits", r, words, lasts,
                 sent.size());
      end
      begin
        bit ok;
        ok = 1;
        for (int i = 0; i < got.size(); i++)
          if (got[i] != ((i < sent.size()) ? sent[i] : 1'b0)) ok = 0;
        checks++;
        if (!ok) begin
          failures++;
          $display("FAIL: run %0d: bit-stream differs", r);
        end
      end
    end
    checks++;
    if (full_waits == 0) begin
      failures++;
      $display("FAIL: buffer never filled");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
