// tb_sha256_core: checks the SHA-256 compression core against the FIPS 180-4
// examples ("abc" in one block, the 56-byte message in two chained blocks) and
// against the reference function on random single-block messages, and checks that
// each block takes 65 clocks from start to done.
module tb_sha256_core;
  import fwu_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start = 0, first = 0, busy, done;
  logic [511:0] block = '0;
  logic [255:0] digest;
  int checks = 0, failures = 0;

  sha256_core dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [511:0] b, input logic f, output int lat);
    @(negedge clk); block = b; first = f; start = 1;
    @(negedge clk); start = 0; lat = 0;
    while (!done) begin @(negedge clk); lat++; end
  endtask

  task automatic check(input string what, input logic [255:0] got, exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", what, got, exp); end
  endtask

  initial begin
    int lat;
    bytes_t m;
    logic [511:0] b;
    repeat (3) @(negedge clk); rst_n = 1;
    run({32'h61626380, 416'b0, 64'd24}, 1'b1, lat);
    check("abc", digest, 256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad);
    checks++; if (lat != 65) begin failures++; $display("FAIL latency %0d", lat); end
    // two-block message, second block chained from the first
    run({"abcdbcdecdefdefgefghfghighijhijkijkljklmklmnlmnomnopnopq", 8'h80, 56'b0}, 1'b1, lat);
    run({448'b0, 64'd448}, 1'b0, lat);
    check("two-block", digest, 256'h248d6a61d20638b8e5c026930c3e6039a33ce45964ff2167f6ecedd419db06c1);
    for (int t = 0; t < 20; t++) begin
      int len;
      len = $urandom_range(0, 55);
      m.delete();
      for (int i = 0; i < len; i++) m.push_back(8'($urandom));
      b = '0;
      for (int i = 0; i < len; i++) b[511 - 8*i -: 8] = m[i];
      b[511 - 8*len -: 8] = 8'h80;
      b[63:0] = 64'(len * 8);
      run(b, 1'b1, lat);
      check($sformatf("random len %0d", len), digest, sha256(m));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
