// tb_uart_rx: drives 8N1 frames into the receiver (16 clocks per bit) and checks
// every byte, a frame with a broken stop bit (must be dropped), a short glitch that
// is not a start bit, and the delivery time of about 9.5 bit periods after the
// falling edge of the start bit.
module tb_uart_rx;
  localparam int CPB = 16;
  logic clk = 0, rst_n = 0, rx = 1, rx_valid;
  logic [7:0] rx_data;
  int checks = 0, failures = 0;
  byte unsigned got[$];

  uart_rx #(.CLKS_PER_BIT(CPB)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && rx_valid) got.push_back(rx_data);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input logic [7:0] b, input logic stop = 1'b1);
    logic [9:0] f = {stop, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      @(negedge clk); rx = f[i];
      repeat (CPB - 1) @(negedge clk);
    end
    @(negedge clk); rx = 1;
    repeat (CPB) @(negedge clk);
  endtask

  initial begin
    byte unsigned exp[$];
    int t0, t1;
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (5) @(negedge clk);
    for (int i = 0; i < 40; i++) begin
      logic [7:0] b;
      b = 8'($urandom);
      if (i == 0) b = 8'h00;
      if (i == 1) b = 8'hff;
      send(b); exp.push_back(b);
    end
    send(8'h3c, 1'b0);                    // framing error: dropped
    @(negedge clk); rx = 0; @(negedge clk); rx = 1;   // 1-clock glitch
    repeat (3 * CPB) @(negedge clk);
    send(8'h5a); exp.push_back(8'h5a);
    checks++;
    if (got.size() != exp.size()) begin
      failures++; $display("FAIL got %0d bytes, expected %0d", got.size(), exp.size());
    end
    for (int i = 0; i < exp.size() && i < got.size(); i++) begin
      checks++;
      if (got[i] != exp[i]) begin failures++; $display("FAIL byte %0d %h != %h", i, got[i], exp[i]); end
    end
    // latency: start edge to rx_valid
    fork
      send(8'ha5);
      begin
        @(negedge rx); t0 = 0;
        while (!rx_valid) begin @(posedge clk); t0++; end
        t1 = t0;
      end
    join
    checks++;
    if (t1 < 9 * CPB + CPB / 2 || t1 > 9 * CPB + CPB / 2 + 4) begin
      failures++; $display("FAIL latency %0d", t1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
