// tb_fw_update_ed_full: one complete firmware update through the top level with every
// parameter at its default: 100 MHz clock, 115200-baud serial line (868 clocks per
// bit), set S of one million elements, 256-bit PUF of six layers, 5 s deadline. The
// host model searches the whole set S with its PUF model to recover I1, and picks I2
// at random in S, so the device's own search covers on average half a million
// candidates (about 35 million clocks). The test checks the request, the go-ahead,
// the OK report, every image word on the staging port, the commit pulse and the new
// version number, and that the whole exchange ends inside the deadline.
module tb_fw_update_ed_full;
  import fwu_pkg::*;
  import fwu_ref_pkg::*;
  import fwu_host_pkg::*;

  localparam int unsigned  CPB = 868;
  localparam logic [127:0] S0 = 128'h0123_4567_89ab_cdef_0000_0000_0000_0000;
  localparam int unsigned  N = 1_000_000;
  localparam int unsigned  ED_SEED = 32'h1234_5678, FDS_SEED = 32'h0bad_cafe;
  localparam logic [31:0]  NOW = 32'd1_700_000_000;

  logic clk = 0, rst_n = 0;
  logic uart_rx = 1, uart_tx;
  logic update_req = 0, admin_clear = 0, time_set = 0;
  logic [63:0] time_sec = '0;
  logic [9:0] installed_fv = 10'd5, new_fv;
  logic busy, locked, fw_wr_valid, fw_commit, fw_discard;
  status_e status;
  logic [31:0] elapsed, fw_wr_addr;
  logic [63:0] fw_wr_data;
  int checks = 0, failures = 0;
  longint unsigned cyc = 0;

  fw_update_ed dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (120_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog: controller state %s", dut.u_ctrl.state.name());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  byte unsigned to_ed[$], from_ed[$];
  initial forever begin
    byte unsigned b;
    while (to_ed.size() == 0) @(negedge clk);
    b = to_ed.pop_front();
    uart_rx = 1'b0; repeat (CPB) @(negedge clk);
    for (int i = 0; i < 8; i++) begin uart_rx = b[i]; repeat (CPB) @(negedge clk); end
    uart_rx = 1'b1; repeat (CPB) @(negedge clk);
  end

  initial begin
    wait (rst_n); repeat (2) @(posedge clk);
    forever begin
      byte unsigned b;
      @(negedge uart_tx);
      repeat (CPB / 2) @(posedge clk);
      check(uart_tx == 1'b0, "tx start bit");
      for (int i = 0; i < 8; i++) begin repeat (CPB) @(posedge clk); b[i] = uart_tx; end
      repeat (CPB) @(posedge clk);
      check(uart_tx == 1'b1, "tx stop bit");
      from_ed.push_back(b);
    end
  end

  logic [63:0] wr_words[$];
  int commits = 0, discards = 0;
  always @(posedge clk) begin
    if (rst_n && fw_wr_valid) begin
      if (fw_wr_addr != 32'(wr_words.size())) begin failures++; $display("FAIL wr addr"); end
      wr_words.push_back(fw_wr_data);
    end
    if (rst_n && fw_commit) commits++;
    if (rst_n && fw_discard) discards++;
  end

  task automatic recv(input int n, output bytes_t q);
    q.delete();
    while (from_ed.size() < n) @(posedge clk);
    repeat (n) q.push_back(from_ed.pop_front());
  endtask

  initial begin
    bytes_t q, hdr, ct;
    logic [127:0] i1, ts, i2;
    logic [63:0] words[$];
    logic [255:0] h1;
    int unsigned n;
    longint unsigned t0;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); time_sec = 64'(NOW); time_set = 1; @(negedge clk); time_set = 0;
    @(negedge clk); update_req = 1; t0 = cyc; @(negedge clk); update_req = 0;
    recv(32, q);
    h1 = take(q, 32);
    put(to_ed, 1024'(ppmr_answer(FDS_SEED, h1)), 32);
    recv(83, q);
    check(fds_request(q, S0, FDS_SEED, i1, ts, n), "request digest and I1 search");
    check(n == N, "set size in request");
    check(sha256_key(i1) == h1, "I1 matches H(I1)");
    check(ts[127:64] == 64'(NOW), "timestamp seconds");
    $display("request received at cycle %0d, I1 = S0 + %0d", cyc - t0, i1 - S0);
    repeat (4) words.push_back({$urandom, $urandom});
    words.push_back(make_trailer(10'd6, 8'h5a, 8'h3c, NOW + 86400));
    i2 = S0 + 128'($urandom_range(0, N - 1));
    fds_package(i1, ts, i2, ED_SEED, words, hdr, ct);
    foreach (hdr[i]) to_ed.push_back(hdr[i]);
    recv(1, q);
    check(q[0] == 8'ha5, "go-ahead");
    $display("go-ahead at cycle %0d, I2 = S0 + %0d", cyc - t0, i2 - S0);
    foreach (ct[i]) to_ed.push_back(ct[i]);
    recv(5, q);
    check(q[0] == ST_OK, $sformatf("status %0h", q[0]));
    check({q[1], q[2], q[3], q[4]} == elapsed, "elapsed report");
    check(elapsed < 32'd500_000_000, "inside the deadline");
    repeat (3) @(posedge clk);
    check(commits == 1 && discards == 0, "commit pulse");
    check(wr_words.size() == 4, "word count");
    foreach (wr_words[i]) check(wr_words[i] == words[i], "image word");
    check(new_fv == 10'd6, "new version");
    $display("update done at cycle %0d, elapsed %0d", cyc - t0, elapsed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
