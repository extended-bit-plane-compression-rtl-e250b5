// zero_rle_tb -- drives random zero/non-zero flag streams (with gaps in `accept`
// and long zero bursts) into the Zero-RLE and compares the concatenated symbols
// with a bit-level model of the scheme: '1' per non-zero, '0' + (burst-1) on
// 4 bits per zero burst of at most 16, pending burst sent on `last`.
module zero_rle_tb;
  localparam int MAX_ZB = 16, ZB = 4, SW = ZB + 2;
  logic clk = 0, rst_n = 0;
  logic accept = 0, nonzero = 0, last = 0;
  logic [SW-1:0] sym;
  logic [$clog2(SW+1)-1:0] sym_len;
  logic [ZB-1:0] pending;
  int checks = 0, failures = 0, splits = 0;
  bit got[$], exp[$];

  zero_rle #(.MAX_ZB(MAX_ZB)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk)
    if (rst_n) for (int i = 0; i < sym_len; i++) got.push_back(sym[SW-1-i]);

  task automatic put(int v, int len);
    for (int i = len - 1; i >= 0; i--) exp.push_back(v[i]);
  endtask

  initial begin
    int z;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 40; s++) begin
      int len, zp;
      len = $urandom_range(120, 1);
      zp  = $urandom_range(95, 5);   // percentage of zeros
      z = 0;
      got.delete();
      exp.delete();
      for (int k = 0; k < len; k++) begin
        bit nz, lst;
        nz  = ($urandom_range(99) >= zp);
        lst = (k == len - 1);
        while ($urandom_range(3) == 0) begin
          accept <= 0;
          @(posedge clk);
        end
        accept <= 1; nonzero <= nz; last <= lst;
        if (nz) begin
          if (z > 0) begin put(0, 1); put(z - 1, ZB); end
          put(1, 1);
          z = 0;
        end else begin
          z++;
          if (z == MAX_ZB || lst) begin
            if (z == MAX_ZB) splits++;
            put(0, 1); put(z - 1, ZB); z = 0;
          end
        end
        @(posedge clk);
      end
      accept <= 0;
      @(posedge clk);
      @(posedge clk);
      checks++;
      if (got != exp) begin
        failures++;
        $display("FAIL: stream %0d: %0d bits, expected %0d", s, got.size(), exp.size());
      end
      checks++;
      if (pending != 0) begin
        failures++;
        $display("FAIL: burst pending after last");
      end
    end
    checks++;
    if (splits == 0) begin
      failures++;
      $display("FAIL: no burst reached the maximum");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
