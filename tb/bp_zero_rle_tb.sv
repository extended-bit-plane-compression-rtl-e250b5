// bp_zero_rle_tb -- random zero/non-zero plane patterns (sparse, dense, all zero)
// with random unit symbols. Expected slots are worked out by scanning the planes
// from the top: a zero run gets "001" (one plane) or "01" + (run-2) on 4 bits at
// its top plane and empty slots below; non-zero planes keep their unit symbol.
module bp_zero_rle_tb;
  localparam int M = 16, N = 16, NP = M + 1, SW = 16, LW = 5, RW = 4;
  logic [NP-1:0]         is_zero;
  logic [NP-1:0][SW-1:0] unit_sym, sym;
  logic [NP-1:0][LW-1:0] unit_len, sym_len;
  logic clk = 0;
  int checks = 0, failures = 0, runs1 = 0, runsn = 0;

  bp_zero_rle #(.M(M), .N(N)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NP-1:0][SW-1:0] esym;
    logic [NP-1:0][LW-1:0] elen;
    for (int t = 0; t < 2000; t++) begin
      int zp;
      zp = (t % 3 == 0) ? 90 : (t % 3 == 1) ? 50 : 10;
      for (int p = 0; p < NP; p++) begin
        is_zero[p]  = (t == 0) || ($urandom_range(99) < zp);
        unit_sym[p] = SW'($urandom);
        unit_len[p] = LW'($urandom_range(SW, 1));
      end
      #1;
      esym = '0;
      elen = '0;
      for (int p = NP - 1; p >= 0; ) begin
        if (!is_zero[p]) begin
          esym[p] = unit_sym[p];
          elen[p] = unit_len[p];
          p--;
        end else begin
          int l;
          l = 0;
          while (p - l >= 0 && is_zero[p-l]) l++;
          if (l == 1) begin
            esym[p] = {3'b001, 13'b0}; elen[p] = 3; runs1++;
          end else begin
            esym[p] = {2'b01, RW'(l - 2), 10'b0}; elen[p] = 2 + RW; runsn++;
          end
          p -= l;
        end
      end
      checks++;
      if (sym !== esym || sym_len !== elen) begin
        failures++;
        $display("FAIL: is_zero=%b", is_zero);
      end
    end
    checks++;
    if (runs1 == 0 || runsn == 0) begin
      failures++;
      $display("FAIL: run kinds not covered");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
