// tb_sha256_stream: hashes messages of 1 to 20 64-bit words through the streaming
// hasher (covering one-block, two-block and three-block paddings) and compares the
// digests with the reference function; a few lengths are also checked against
// digests computed by an independent SHA-256 implementation. Input stalls are
// inserted at random.
module tb_sha256_stream;
  import fwu_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start = 0, in_valid = 0, in_ready, in_last = 0, digest_valid;
  logic [63:0] in_data = '0;
  logic [255:0] digest;
  int checks = 0, failures = 0;

  sha256_stream dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] word(int i);
    return 64'h0123_4567_89ab_cdef * 64'(i + 1);
  endfunction

  task automatic hash_words(input int n, output logic [255:0] d);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int i = 0; i < n; i++) begin
      while ($urandom_range(0, 3) == 0) @(negedge clk);
      in_valid = 1; in_data = word(i); in_last = (i == n - 1);
      @(posedge clk); while (!in_ready) @(posedge clk);
      @(negedge clk); in_valid = 0; in_last = 0;
    end
    while (!digest_valid) @(negedge clk);
    d = digest;
  endtask

  initial begin
    logic [255:0] d;
    bytes_t m;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int n = 1; n <= 20; n++) begin
      hash_words(n, d);
      m.delete();
      for (int i = 0; i < n; i++) put(m, 1024'(word(i)), 8);
      checks++;
      if (d !== sha256(m)) begin failures++; $display("FAIL n=%0d got %h exp %h", n, d, sha256(m)); end
      case (n)
        1:  begin checks++; if (d !== 256'h55c53f5d490297900cefa825d0c8e8e9532ee8a118abe7d8570762cd38be9818) failures++; end
        7:  begin checks++; if (d !== 256'h79ed9dbf31190ea0fde647711c94d9eb1168a6874b5d60c8918745ac895780f6) failures++; end
        8:  begin checks++; if (d !== 256'h66667e31a4822dade4dbf9559e4c02037b3c34d8f9484cefc005ee952271aa89) failures++; end
        15: begin checks++; if (d !== 256'hc766086344d85c4c0b9d3bb1b54eaaa7012bf87c760c247403444fc64e409906) failures++; end
        default: ;
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
