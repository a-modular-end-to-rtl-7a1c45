// tb_rand_sel: draws offsets for several set sizes and checks that every draw is
// below n, that draws vary (many distinct values, mean near n/2), that n = 0 gives
// 0, and that an answer comes within a few clocks.
module tb_rand_sel;
  logic clk = 0, rst_n = 0, req = 0, ack;
  logic [19:0] n = '0, k;
  int checks = 0, failures = 0;

  rand_sel dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic draw(output logic [19:0] v, output int lat);
    @(negedge clk); req = 1; lat = 0;
    @(negedge clk); req = 0;
    while (!ack) begin @(negedge clk); lat++; end
    v = k;
  endtask

  initial begin
    logic [19:0] v;
    int lat, maxlat;
    int seen[int];
    real sum;
    int sizes[3] = '{1000000, 1000, 7};
    repeat (3) @(negedge clk); rst_n = 1;
    foreach (sizes[s]) begin
      n = 20'(sizes[s]); seen.delete(); sum = 0; maxlat = 0;
      for (int i = 0; i < 400; i++) begin
        draw(v, lat);
        if (lat > maxlat) maxlat = lat;
        checks++;
        if (v >= n) begin failures++; $display("FAIL %0d >= %0d", v, n); end
        seen[int'(v)] = 1;
        sum += v;
      end
      checks++;
      if (seen.num() < ((sizes[s] < 400) ? sizes[s] : 300)) begin
        failures++; $display("FAIL n=%0d only %0d distinct", sizes[s], seen.num());
      end
      checks++;
      if (sum / 400.0 < 0.35 * (sizes[s] - 1) || sum / 400.0 > 0.65 * (sizes[s] - 1)) begin
        failures++; $display("FAIL n=%0d mean %f", sizes[s], sum / 400.0);
      end
      if (sizes[s] == 1000000) begin
        checks++; if (maxlat > 12) begin failures++; $display("FAIL latency %0d", maxlat); end
      end
    end
    n = 0; draw(v, lat);
    checks++; if (v != 0) begin failures++; $display("FAIL n=0 gives %0d", v); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
