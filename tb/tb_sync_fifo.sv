// tb_sync_fifo: random pushes and pops against a queue model; checks data order,
// that a full FIFO refuses writes (wr_ready low at DEPTH entries) and that an
// empty one reports no data.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  logic wr_valid = 0, wr_ready, rd_valid, rd_ready = 0;
  logic [7:0] wr_data = '0, rd_data;
  int checks = 0, failures = 0;
  byte unsigned model[$];
  int full_seen = 0;

  sync_fifo #(.W(8), .DEPTH(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      // phases: mostly-write, mostly-read, mixed
      wr_valid = ($urandom_range(0, 99) < ((t / 500) % 2 == 0 ? 80 : 20));
      rd_ready = ($urandom_range(0, 99) < ((t / 500) % 2 == 0 ? 20 : 80));
      wr_data  = 8'($urandom);
      #1;
      checks++;
      if (wr_ready != (model.size() < 16) || rd_valid != (model.size() > 0)) begin
        failures++; $display("FAIL flags size=%0d wr_ready=%b rd_valid=%b", model.size(), wr_ready, rd_valid);
      end
      if (model.size() == 16) full_seen++;
      if (rd_valid && rd_ready) begin
        checks++;
        if (rd_data != model[0]) begin failures++; $display("FAIL data %h != %h", rd_data, model[0]); end
      end
      @(posedge clk);
      if (rd_valid && rd_ready) void'(model.pop_front());
      if (wr_valid && wr_ready) model.push_back(wr_data);
    end
    checks++;
    if (full_seen == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
