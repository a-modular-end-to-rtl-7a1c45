// tb_simon64_128: checks SIMON 64/128 against the published test vector and against
// vectors from an independent implementation, in both directions, checks random
// encrypt/decrypt round trips against the reference functions, and checks the key
// schedule (40 clocks) and block (45 clocks) latencies.
module tb_simon64_128;
  import fwu_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic key_load = 0, key_ready, start = 0, decrypt = 0, busy, done;
  logic [127:0] key = '0;
  logic [63:0] din = '0, dout;
  int checks = 0, failures = 0;

  simon64_128 dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input logic [127:0] k, output int lat);
    @(negedge clk); key = k; key_load = 1;
    @(negedge clk); key_load = 0; lat = 0;
    while (!key_ready) begin @(negedge clk); lat++; end
  endtask

  task automatic blk(input logic d, input logic [63:0] x, output logic [63:0] y, output int lat);
    @(negedge clk); din = x; decrypt = d; start = 1;
    @(negedge clk); start = 0; lat = 0;
    while (!done) begin @(negedge clk); lat++; end
    y = dout;
  endtask

  task automatic check(input string what, input logic [63:0] got, exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", what, got, exp); end
  endtask

  initial begin
    int lat;
    logic [63:0] y, c;
    logic [127:0] k;
    logic [127:0] kv[3] = '{128'h5bc8fbbcbde5c0994164d8399f767c45, 128'ha6eb8c9ebd69fe29d76d4330f1446bea,
                            128'hc6a5387777330bdbd7210dff076ce2ef};
    logic [63:0]  pv[3] = '{64'hb0c11fdecb91ce37, 64'h87b0b125ec1d7da0, 64'h3fc1ea36f17fd374};
    logic [63:0]  cv[3] = '{64'h79e8a233925ee561, 64'h59b8179b18341bc3, 64'h4ec9d0142f0ca2b0};
    repeat (3) @(negedge clk); rst_n = 1;
    load(128'h1b1a1918_13121110_0b0a0908_03020100, lat);
    checks++; if (lat != 40) begin failures++; $display("FAIL key latency %0d", lat); end
    blk(0, 64'h656b696c_20646e75, y, lat);
    check("KAT enc", y, 64'h44c8fc20_b9dfa07a);
    checks++; if (lat != 45) begin failures++; $display("FAIL block latency %0d", lat); end
    blk(1, 64'h44c8fc20_b9dfa07a, y, lat);
    check("KAT dec", y, 64'h656b696c_20646e75);
    for (int i = 0; i < 3; i++) begin
      load(kv[i], lat);
      blk(0, pv[i], y, lat); check("vec enc", y, cv[i]);
      blk(1, cv[i], y, lat); check("vec dec", y, pv[i]);
    end
    for (int t = 0; t < 10; t++) begin
      k = {$urandom, $urandom, $urandom, $urandom};
      load(k, lat);
      for (int j = 0; j < 3; j++) begin
        logic [63:0] p;
        p = {$urandom, $urandom};
        blk(0, p, c, lat); check("rand enc", c, simon_enc(k, p));
        blk(1, c, y, lat); check("rand dec", y, p);
        blk(1, p, y, lat); check("rand dec2", y, simon_dec(k, p));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
