// dbp_enc_unit_tb -- feeds pairs of 15-bit planes (this plane, plane above) to one
// plane encoder: random pairs plus constructed DBX patterns (zero, all ones, one
// one, two adjacent ones, two separate ones, DBP zero) and compares is_zero,
// the symbol bits and the length with the code table in bpc_ref_pkg.
module dbp_enc_unit_tb;
  import bpc_ref_pkg::*;
  localparam int M = 16, N = 16, PW = N - 1, SW = 16;
  logic [PW-1:0] dbp, dbp_up;
  logic          is_zero;
  logic [SW-1:0] sym;
  logic [4:0]    sym_len;
  logic          clk = 0;
  int checks = 0, failures = 0;

  dbp_enc_unit #(.M(M), .N(N)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic try(logic [PW-1:0] p, logic [PW-1:0] up);
    bit q[$];
    logic [SW-1:0] e;
    dbp = p;
    dbp_up = up;
    #1;
    e = '0;
    if ((p ^ up) != 0) plane_sym(q, N, 64'(p), 64'(p ^ up));
    foreach (q[i]) e[SW-1-i] = q[i];
    checks++;
    if (is_zero !== ((p ^ up) == 0) || sym_len != q.size() || sym !== e) begin
      failures++;
      $display("FAIL: dbp=%h up=%h: len %0d sym %h, expected %0d %h", p, up, sym_len, sym,
               q.size(), e);
    end
  endtask

  initial begin
    logic [PW-1:0] x;
    clear_stats();
    for (int i = 0; i < 300; i++) begin
      x = PW'($urandom);
      try(x, x);                                    // zero
      try(x, ~x);                                   // all ones
      try('0, PW'($urandom) | 1);                   // DBP zero
      try(x, x ^ (PW'(1) << $urandom_range(PW-1))); // single one
      try(x, x ^ (PW'(3) << $urandom_range(PW-2))); // two adjacent
      try(x, x ^ (PW'(5) << $urandom_range(PW-3))); // two separate
      try(PW'($urandom), PW'($urandom));            // random
    end
    checks++;
    if (stats[ST_ALL1] == 0 || stats[ST_DBP0] == 0 || stats[ST_TWO1] == 0 ||
        stats[ST_ONE1] == 0 || stats[ST_RAW] == 0) begin
      failures++;
      $display("FAIL: a code was never produced");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
