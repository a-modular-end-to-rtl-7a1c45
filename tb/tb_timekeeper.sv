// tb_timekeeper: with CLK_HZ = 10, checks that the cycle counter counts every clock,
// that UNIX seconds advance once per 10 clocks, that set loads the seconds, and that
// the 128-bit timestamp is {seconds, cycles} and strictly increasing.
module tb_timekeeper;
  logic clk = 0, rst_n = 0, set = 0;
  logic [63:0] set_sec = '0, unix_sec, cycles;
  logic [127:0] timestamp;
  int checks = 0, failures = 0;

  timekeeper #(.CLK_HZ(10)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] c0, s0;
    logic [127:0] ts_prev;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); set = 1; set_sec = 64'd1_600_000_000;
    @(negedge clk); set = 0;
    checks++; if (unix_sec != 64'd1_600_000_000) begin failures++; $display("FAIL set"); end
    c0 = cycles; s0 = unix_sec; ts_prev = timestamp;
    for (int i = 1; i <= 95; i++) begin
      @(negedge clk);
      checks++;
      if (cycles != c0 + 64'(i)) begin failures++; $display("FAIL cycles"); end
      checks++;
      if (unix_sec != s0 + 64'(i / 10)) begin failures++; $display("FAIL sec at %0d: %0d", i, unix_sec - s0); end
      checks++;
      if (timestamp != {unix_sec, cycles} || timestamp <= ts_prev) begin failures++; $display("FAIL ts"); end
      ts_prev = timestamp;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
