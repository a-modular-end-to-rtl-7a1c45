// tb_fw_update_ed: end-to-end test of the whole device over its serial line. A host
// model (server plus public PUF model repository) talks to the device through a
// bit-level UART at 8 clocks per bit, with a small set S (n = 16) and a short
// deadline. The sequence exercises every mechanism of the design and counts each:
// wall-clock time set, accepted update (image written, commit, new version), the
// 0xA5 go-ahead, corrupted ciphertext, foreign vendor, rollback, expired package,
// late header, response from another chip, empty package, lock-out after three
// failures, a request refused while locked, and the administrator's unlock. A
// mechanism that never happened counts as a failure. Expected values come from the
// reference models in the test packages, not from the design.
module tb_fw_update_ed;
  import fwu_pkg::*;
  import fwu_ref_pkg::*;
  import fwu_host_pkg::*;

  localparam int unsigned  CPB = 8;
  localparam logic [127:0] S0 = 128'h0123_4567_89ab_cdef_0000_0000_0000_0000;
  localparam int unsigned  N = 16;
  localparam int unsigned  ED_SEED = 32'h1234_5678, FDS_SEED = 32'h0bad_cafe;
  localparam logic [63:0]  DEADLINE = 64'd60_000;
  localparam logic [31:0]  NOW = 32'd1_700_000_000;

  typedef enum {M_TIMESET, M_OK, M_GOAHEAD, M_DIGEST, M_MISMATCH, M_ROLLBACK, M_EXPIRED,
                M_LATE, M_NOKEY, M_BADLEN, M_LOCKOUT, M_LOCKED_REQ, M_UNLOCK, M_COUNT} mech_e;
  int seen [M_COUNT];

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

  fw_update_ed #(.CLKS_PER_BIT(CPB), .CLK_HZ(100_000), .S0(S0), .SET_N(20'(N)),
                 .DEADLINE_CYCLES(DEADLINE), .PUF_SEED(ED_SEED),
                 .WINDOW_CYCLES(64'd50_000_000)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (8_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog: controller state %s", dut.u_ctrl.state.name());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // host transmitter: bytes queued in to_ed go out back to back, 8N1
  byte unsigned to_ed[$], from_ed[$];
  initial forever begin
    byte unsigned b;
    while (to_ed.size() == 0) @(negedge clk);
    b = to_ed.pop_front();
    uart_rx = 1'b0; repeat (CPB) @(negedge clk);
    for (int i = 0; i < 8; i++) begin uart_rx = b[i]; repeat (CPB) @(negedge clk); end
    uart_rx = 1'b1; repeat (CPB) @(negedge clk);
  end

  // host receiver: samples the device's line in the middle of each bit
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

  // image port and pulses
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

  task automatic run(input mech_e sc);
    bytes_t q, hdr, ct;
    logic [127:0] i1, ts, i2;
    logic [63:0] words[$];
    int unsigned n;
    int c0, d0;
    status_e exp;
    logic [255:0] h1;
    bit was_locked = locked;
    c0 = commits; d0 = discards;
    wr_words.delete();
    @(negedge clk); update_req = 1; @(negedge clk); update_req = 0;
    if (sc == M_LOCKED_REQ) begin
      recv(5, q);
      check(q[0] == ST_LOCKED, "locked status");
      repeat (3) @(posedge clk);
      check(commits == c0 && discards == d0, "locked: no pulses");
      if (q[0] == ST_LOCKED && was_locked) seen[M_LOCKED_REQ]++;
      return;
    end
    recv(32, q);
    h1 = take(q, 32);
    put(to_ed, 1024'(ppmr_answer(FDS_SEED, h1)), 32);
    recv(83, q);
    check(fds_request(q, S0, FDS_SEED, i1, ts, n), "request digest and I1 search");
    check(n == N, "set size in request");
    check(sha256_key(i1) == h1, "I1 matches H(I1)");
    check(ts[127:64] >= 64'(NOW) && ts[127:64] <= dut.unix_sec, "timestamp seconds");
    repeat ($urandom_range(2, 5)) words.push_back({$urandom, $urandom});
    case (sc)
      M_MISMATCH: words.push_back(make_trailer(installed_fv + 10'd1, 8'h77, 8'h3c, NOW + 1000));
      M_ROLLBACK: words.push_back(make_trailer(installed_fv, 8'h5a, 8'h3c, NOW + 1000));
      M_EXPIRED:  words.push_back(make_trailer(installed_fv + 10'd1, 8'h5a, 8'h3c, NOW - 1));
      default:    words.push_back(make_trailer(installed_fv + 10'd1 + 10'($urandom_range(0, 9)), 8'h5a, 8'h3c, NOW + 1000));
    endcase
    if (sc == M_BADLEN) words.delete();
    i2 = S0 + 128'($urandom_range(0, N - 1));
    fds_package(i1, ts, i2, (sc == M_NOKEY) ? FDS_SEED : ED_SEED, words, hdr, ct);
    if (sc == M_DIGEST) ct[$urandom_range(0, ct.size() - 1)] ^= 8'h01;
    if (sc == M_LATE) repeat (int'(DEADLINE)) @(posedge clk);
    foreach (hdr[i]) to_ed.push_back(hdr[i]);
    recv(1, q);
    if (q[0] == 8'ha5) begin
      seen[M_GOAHEAD]++;
      foreach (ct[i]) to_ed.push_back(ct[i]);
      recv(5, q);
    end else begin
      bytes_t r;
      recv(4, r);
      foreach (r[i]) q.push_back(r[i]);
    end
    case (sc)
      M_OK:       exp = ST_OK;
      M_DIGEST:   exp = ST_DIGEST;
      M_MISMATCH: exp = ST_MISMATCH;
      M_ROLLBACK: exp = ST_ROLLBACK;
      M_EXPIRED:  exp = ST_EXPIRED;
      M_LATE:     exp = ST_LATE;
      M_NOKEY:    exp = ST_NOKEY;
      default:    exp = ST_BADLEN;
    endcase
    check(q[0] == exp, $sformatf("%s: status %0h expected %0h", sc.name(), q[0], exp));
    check({q[1], q[2], q[3], q[4]} == elapsed && elapsed > 0, "elapsed report");
    check(status == exp, "status port");
    repeat (3) @(posedge clk);
    if (sc == M_OK) begin
      check(commits == c0 + 1 && discards == d0, "OK: commit pulse");
      check(wr_words.size() == words.size() - 1, "OK: word count");
      foreach (wr_words[i]) check(wr_words[i] == words[i], "OK: image word");
      check(new_fv == words[words.size() - 1][9:0], "OK: new version");
      if (q[0] == ST_OK && commits == c0 + 1) seen[M_OK]++;
    end else begin
      check(commits == c0 && discards == d0 + 1, $sformatf("%s: discard", sc.name()));
      if (q[0] == exp && discards == d0 + 1) seen[sc]++;
    end
    check(!busy, "idle after report");
  endtask

  task automatic expect_lock(input bit exp_locked, input string what);
    check(locked == exp_locked, what);
    if (exp_locked && locked) seen[M_LOCKOUT]++;
  endtask

  task automatic unlock();
    @(negedge clk); admin_clear = 1; @(negedge clk); admin_clear = 0;
    check(!locked, "unlocked by admin_clear");
    if (!locked) seen[M_UNLOCK]++;
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); time_sec = 64'(NOW); time_set = 1; @(negedge clk); time_set = 0;
    repeat (2) @(negedge clk);
    check(dut.unix_sec == 64'(NOW), "wall clock set");
    if (dut.unix_sec == 64'(NOW)) seen[M_TIMESET]++;
    run(M_OK);
    installed_fv = new_fv;
    run(M_DIGEST);   expect_lock(0, "one failure: still open");
    run(M_MISMATCH); expect_lock(0, "two failures: still open");
    run(M_ROLLBACK); expect_lock(1, "three failures: locked");
    run(M_LOCKED_REQ);
    unlock();
    run(M_EXPIRED);
    run(M_LATE);
    run(M_NOKEY);    expect_lock(1, "three more failures: locked");
    unlock();
    run(M_BADLEN);
    run(M_OK);
    check(!locked, "open at end");
    for (int m = 0; m < M_COUNT; m++) begin
      $display("mechanism %-13s happened %0d times", mech_e'(m), seen[m]);
      check(seen[m] > 0, $sformatf("mechanism %s never happened", mech_e'(m)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
