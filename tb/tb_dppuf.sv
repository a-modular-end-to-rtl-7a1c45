// tb_dppuf: checks the dPPUF model against responses computed by an independent
// implementation of the same delay-race model, against the reference function on
// random challenges, that two chip seeds answer differently, and the one-clock
// response latency.
module tb_dppuf;
  import fwu_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic valid = 0, resp_valid, resp_valid2;
  logic [255:0] challenge = '0, response, response2;
  int checks = 0, failures = 0;

  dppuf #(.SEED(32'h1234_5678)) dut  (.clk, .rst_n, .valid, .challenge, .resp_valid, .response);
  dppuf #(.SEED(32'hcafe_f00d)) dut2 (.clk, .rst_n, .valid, .challenge,
                                      .resp_valid(resp_valid2), .response(response2));
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic ask(input logic [255:0] c);
    @(negedge clk); challenge = c; valid = 1;
    @(negedge clk); valid = 0;
    checks++;
    if (!resp_valid) begin failures++; $display("FAIL no resp_valid after one clock"); end
  endtask

  task automatic check(input string what, input logic [255:0] got, exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", what, got, exp); end
  endtask

  initial begin
    logic [255:0] c;
    repeat (3) @(negedge clk); rst_n = 1;
    ask('0);
    check("seed1 zero", response, 256'h50458b068dce0a088a06ce55ce0ecb16cc8c23187dfcee77bb6ec662f7006ece);
    c = 256'he5d6463e6c2d7f6eb9959be060620108b95ac6adae495bc59a417236ba793dc0;
    ask(c);
    check("seed1 vec", response,  256'hd1c1cf17cfca0a032a468e158d0eef56ccb425504de5c677876fe67a57adee5e);
    check("seed2 vec", response2, 256'he6c4468dbecd3e036b4c44460045c444015d14dd4fdac5209718d566174a26ec);
    for (int t = 0; t < 10; t++) begin
      c = {8{$urandom}};
      ask(c);
      check("seed1 rand", response, ppuf(32'h1234_5678, c));
      check("seed2 rand", response2, ppuf(32'hcafe_f00d, c));
      checks++;
      if (response == response2) begin failures++; $display("FAIL two chips agree"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
