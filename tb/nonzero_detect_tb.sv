// nonzero_detect_tb -- checks the non-zero flag on zero, single-bit and random
// 16-bit values against the plain comparison value != 0.
module nonzero_detect_tb;
  localparam int M = 16;
  logic [M-1:0] value;
  logic         nonzero;
  logic         clk = 0;
  int checks = 0, failures = 0;

  nonzero_detect #(.M(M)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic try(logic [M-1:0] v);
    value = v;
    @(posedge clk);
    checks++;
    if (nonzero !== (v != 0)) begin
      failures++;
      $display("FAIL: value %h gave %b", v, nonzero);
    end
  endtask

  initial begin
    try('0);
    for (int i = 0; i < M; i++) try(M'(1) << i);
    for (int i = 0; i < 200; i++) try(($urandom_range(3) == 0) ? '0 : M'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
