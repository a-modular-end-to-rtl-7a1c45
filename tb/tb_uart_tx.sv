// tb_uart_tx: sends random bytes through the transmitter (16 clocks per bit),
// decodes the line by sampling every bit at mid-period, and checks the data, the
// start and stop bits, the idle level, and that each frame occupies 10 bit periods.
module tb_uart_tx;
  localparam int CPB = 16;
  logic clk = 0, rst_n = 0, tx_valid = 0, tx_ready, tx;
  logic [7:0] tx_data = '0;
  int checks = 0, failures = 0;

  uart_tx #(.CLKS_PER_BIT(CPB)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  byte unsigned sent[$], rcvd[$];
  int frame_len[$];

  // line decoder
  initial begin
    forever begin
      logic [9:0] f;
      int len;
      @(negedge tx);
      repeat (CPB / 2) @(posedge clk);
      for (int i = 0; i < 10; i++) begin
        f[i] = tx;
        if (i < 9) repeat (CPB) @(posedge clk);
      end
      checks++;
      if (f[0] != 0 || f[9] != 1) begin failures++; $display("FAIL framing %b", f); end
      rcvd.push_back(f[8:1]);
    end
  end

  // frame duration: from start-bit edge until tx_ready returns
  initial begin
    forever begin
      int len;
      @(negedge tx); len = 0;
      @(posedge clk);
      while (!tx_ready) begin @(posedge clk); len++; end
      frame_len.push_back(len);
    end
  end

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (4) @(negedge clk);
    checks++; if (tx !== 1'b1) begin failures++; $display("FAIL idle level"); end
    for (int i = 0; i < 20; i++) begin
      logic [7:0] b;
      b = 8'($urandom);
      @(negedge clk);
      while (!tx_ready) @(negedge clk);
      tx_valid = 1; tx_data = b; sent.push_back(b);
      @(negedge clk); tx_valid = 0; tx_data = 8'hxx;
      if ($urandom_range(0, 1)) repeat ($urandom_range(1, 40)) @(negedge clk);
    end
    while (!tx_ready) @(negedge clk);
    repeat (2 * CPB) @(negedge clk);
    checks++;
    if (rcvd.size() != sent.size()) begin failures++; $display("FAIL %0d frames", rcvd.size()); end
    foreach (sent[i]) begin
      checks++;
      if (i >= rcvd.size() || rcvd[i] != sent[i]) begin failures++; $display("FAIL byte %0d", i); end
    end
    foreach (frame_len[i]) begin
      checks++;
      if (frame_len[i] < 10 * CPB - 2 || frame_len[i] > 10 * CPB + 1) begin
        failures++; $display("FAIL frame length %0d", frame_len[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
