// tb_challenge_search: runs the key search against a dPPUF model with a small set
// (n = 24). A target made from element k = 13 must return I = S0 + 13 after 14
// tries; a target from another chip must end with found = 0 after all 24 tries. The
// search time is checked against 69 clocks per candidate.
module tb_challenge_search;
  import fwu_ref_pkg::*;
  localparam logic [127:0] S0 = 128'h0123_4567_89ab_cdef_0000_0000_0000_0000;
  localparam logic [31:0]  SEED = 32'h1234_5678;
  logic clk = 0, rst_n = 0;
  logic start = 0, ppuf_valid, ppuf_resp_valid, busy, done, found;
  logic [127:0] s0 = S0, key;
  logic [19:0] n = 20'd24, tries;
  logic [255:0] target = '0, ppuf_challenge, ppuf_response;
  int checks = 0, failures = 0;

  challenge_search dut (.*);
  dppuf #(.SEED(SEED)) u_puf (.clk, .rst_n, .valid(ppuf_valid), .challenge(ppuf_challenge),
                              .resp_valid(ppuf_resp_valid), .response(ppuf_response));
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic search(input logic [255:0] t, output int cyc);
    @(negedge clk); target = t; start = 1;
    @(negedge clk); start = 0; cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int cyc;
    repeat (3) @(negedge clk); rst_n = 1;
    search(ppuf(SEED, sha256_key(S0 + 128'd13)), cyc);
    checks++; if (!found)            begin failures++; $display("FAIL not found"); end
    checks++; if (key !== S0 + 13)   begin failures++; $display("FAIL key %h", key); end
    checks++; if (tries != 14)       begin failures++; $display("FAIL tries %0d", tries); end
    checks++; if (cyc != 14 * 69)    begin failures++; $display("FAIL cycles %0d", cyc); end
    search(ppuf(32'hcafe_f00d, sha256_key(S0 + 128'd13)), cyc);
    checks++; if (found)             begin failures++; $display("FAIL false match"); end
    checks++; if (tries != 24)       begin failures++; $display("FAIL tries %0d", tries); end
    search(ppuf(SEED, sha256_key(S0)), cyc);
    checks++; if (!found || key !== S0) begin failures++; $display("FAIL k=0"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
