// tb_fail_guard: with MAX_FAILS = 3 and a 100-clock window, checks that three
// failures inside a window lock updates, that the lock holds past the window until
// admin_clear, and that failures spaced wider than the window never lock.
module tb_fail_guard;
  logic clk = 0, rst_n = 0, fail = 0, admin_clear = 0, locked;
  logic [7:0] fail_count;
  int checks = 0, failures = 0;

  fail_guard #(.MAX_FAILS(3), .WINDOW_CYCLES(64'd100)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pulse_fail();
    @(negedge clk); fail = 1; @(negedge clk); fail = 0;
  endtask

  task automatic expect_locked(input logic e, input string what);
    checks++;
    if (locked !== e) begin failures++; $display("FAIL %s: locked=%b", what, locked); end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    expect_locked(0, "after reset");
    pulse_fail(); repeat (20) @(negedge clk);
    pulse_fail(); repeat (20) @(negedge clk);
    expect_locked(0, "two fails");
    pulse_fail(); @(negedge clk);
    expect_locked(1, "three fails in window");
    repeat (300) @(negedge clk);
    expect_locked(1, "lock persists");
    @(negedge clk); admin_clear = 1; @(negedge clk); admin_clear = 0;
    expect_locked(0, "admin clear");
    checks++; if (fail_count != 0) begin failures++; $display("FAIL count not cleared"); end
    for (int i = 0; i < 6; i++) begin
      pulse_fail(); repeat (120) @(negedge clk);
      expect_locked(0, "spaced fails");
    end
    pulse_fail(); repeat (10) @(negedge clk);
    pulse_fail(); repeat (10) @(negedge clk);
    pulse_fail(); @(negedge clk);
    expect_locked(1, "burst");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
