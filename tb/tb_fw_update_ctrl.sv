// tb_fw_update_ctrl: runs the update protocol at the byte level between the device
// controller (with a dPPUF model as its PUF) and the host model, with a small set S
// (n = 16). Scenarios: a good update (image words, commit, new version), a flipped
// ciphertext bit (digest), a foreign vendor, a rollback, an expired package, a late
// header, a response from another chip (no key), an empty package, and a request
// while locked. Each must end with its status code and the right commit/discard and
// fail pulses. The request's Timestamp and I1 recovered by the host are checked too.
module tb_fw_update_ctrl;
  import fwu_pkg::*;
  import fwu_ref_pkg::*;
  import fwu_host_pkg::*;

  localparam logic [127:0] S0 = 128'h0123_4567_89ab_cdef_0000_0000_0000_0000;
  localparam int unsigned  N = 16;
  localparam int unsigned  ED_SEED = 32'h1234_5678, FDS_SEED = 32'h0bad_cafe;
  localparam logic [63:0]  DEADLINE = 64'd40_000;
  localparam logic [31:0]  NOW = 32'd1_700_000_000;

  typedef enum {SC_OK, SC_DIGEST, SC_MISMATCH, SC_ROLLBACK, SC_EXPIRED, SC_LATE,
                SC_NOKEY, SC_BADLEN, SC_LOCKED} scen_e;

  logic clk = 0, rst_n = 0;
  logic update_req = 0, locked = 0, busy, fail;
  status_e status;
  logic [31:0] elapsed;
  logic [63:0] unix_sec = 64'(NOW), cycles = '0;
  logic [127:0] timestamp;
  logic rs_req, rs_ack = 0;
  logic [19:0] rs_k = '0;
  logic rx_valid, rx_ready, tx_valid, tx_ready = 1;
  logic [7:0] rx_data, tx_data;
  logic ppuf_valid, ppuf_resp_valid;
  logic [255:0] ppuf_challenge, ppuf_response;
  logic [9:0] installed_fv = 10'd5, new_fv;
  logic fw_wr_valid, fw_commit, fw_discard;
  logic [31:0] fw_wr_addr;
  logic [63:0] fw_wr_data;
  int checks = 0, failures = 0;

  assign timestamp = {unix_sec, cycles};

  fw_update_ctrl #(.S0(S0), .SET_N(20'(N)), .DEADLINE_CYCLES(DEADLINE)) dut (.*);
  dppuf #(.SEED(ED_SEED)) u_puf (.clk, .rst_n, .valid(ppuf_valid), .challenge(ppuf_challenge),
                                 .resp_valid(ppuf_resp_valid), .response(ppuf_response));

  always #5 clk = ~clk;
  always @(posedge clk) cycles <= cycles + 1;

  // random offset source
  always @(posedge clk) begin
    rs_ack <= rs_req && !rs_ack;
    rs_k   <= 20'($urandom_range(0, N - 1));
  end

  // byte links
  byte unsigned to_ed[$], from_ed[$];
  logic [63:0] wr_words[$];
  int commits = 0, discards = 0, fails = 0;
  initial begin rx_valid = 0; rx_data = '0; end
  always @(negedge clk) begin
    rx_valid = (to_ed.size() > 0);
    rx_data  = (to_ed.size() > 0) ? to_ed[0] : 8'h00;
  end
  always @(posedge clk) if (rst_n) begin
    if (rx_valid && rx_ready) void'(to_ed.pop_front());
    if (tx_valid && tx_ready) from_ed.push_back(tx_data);
    tx_ready <= ($urandom_range(0, 3) != 0);
    if (fw_wr_valid) begin
      wr_words.push_back(fw_wr_data);
      if (fw_wr_addr != 32'(wr_words.size() - 1)) begin failures++; $display("FAIL wr addr"); end
    end
    if (fw_commit) commits++;
    if (fw_discard) discards++;
    if (fail) fails++;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog: controller state %s, %0d bytes from device", dut.state.name(), from_ed.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic recv(input int n, output bytes_t q);
    q.delete();
    while (from_ed.size() < n) @(posedge clk);
    repeat (n) q.push_back(from_ed.pop_front());
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run(input scen_e sc);
    bytes_t q, hdr, ct;
    logic [127:0] i1, ts, i2;
    logic [63:0] words[$];
    logic [63:0] ts_lo_start;
    int unsigned n;
    int c0, d0, f0;
    status_e exp;
    logic [255:0] h1;
    c0 = commits; d0 = discards; f0 = fails;
    wr_words.delete();
    @(negedge clk); update_req = 1; ts_lo_start = cycles; @(negedge clk); update_req = 0;
    if (sc == SC_LOCKED) begin
      recv(5, q);
      check(q[0] == ST_LOCKED, "locked status");
      repeat (3) @(posedge clk);
      check(commits == c0 && discards == d0 && fails == f0, "locked: no pulses");
      return;
    end
    recv(32, q);
    h1 = take(q, 32);
    put(to_ed, 1024'(ppmr_answer(FDS_SEED, h1)), 32);
    recv(83, q);
    check(fds_request(q, S0, FDS_SEED, i1, ts, n), "request digest and I1 search");
    check(n == N, "set size in request");
    check(sha256_key(i1) == h1, "I1 matches H(I1)");
    check(ts[127:64] == unix_sec && ts[63:0] - ts_lo_start <= 4, "timestamp");
    // package contents
    repeat ($urandom_range(2, 6)) words.push_back({$urandom, $urandom});
    case (sc)
      SC_MISMATCH: words.push_back(make_trailer(10'd6, 8'h77, 8'h3c, NOW + 1000));
      SC_ROLLBACK: words.push_back(make_trailer(10'd5, 8'h5a, 8'h3c, NOW + 1000));
      SC_EXPIRED:  words.push_back(make_trailer(10'd9, 8'h5a, 8'h3c, NOW - 1));
      default:     words.push_back(make_trailer(10'd6 + 10'($urandom_range(0, 9)), 8'h5a, 8'h3c, NOW + 1000));
    endcase
    if (sc == SC_BADLEN) words.delete();
    i2 = S0 + 128'($urandom_range(0, N - 1));
    fds_package(i1, ts, i2, (sc == SC_NOKEY) ? FDS_SEED : ED_SEED, words, hdr, ct);
    if (sc == SC_DIGEST) ct[$urandom_range(0, ct.size() - 1)] ^= 8'h10;
    if (sc == SC_LATE) repeat (int'(DEADLINE)) @(posedge clk);
    foreach (hdr[i]) to_ed.push_back(hdr[i]);
    recv(1, q);
    if (q[0] == 8'ha5) begin
      foreach (ct[i]) to_ed.push_back(ct[i]);
      recv(5, q);
    end else begin
      bytes_t r;
      recv(4, r);
      foreach (r[i]) q.push_back(r[i]);
    end
    case (sc)
      SC_OK:       exp = ST_OK;
      SC_DIGEST:   exp = ST_DIGEST;
      SC_MISMATCH: exp = ST_MISMATCH;
      SC_ROLLBACK: exp = ST_ROLLBACK;
      SC_EXPIRED:  exp = ST_EXPIRED;
      SC_LATE:     exp = ST_LATE;
      SC_NOKEY:    exp = ST_NOKEY;
      default:     exp = ST_BADLEN;
    endcase
    check(q[0] == exp, $sformatf("%s: status %0h expected %0h", sc.name(), q[0], exp));
    check({q[1], q[2], q[3], q[4]} == elapsed && elapsed > 0, "elapsed report");
    repeat (3) @(posedge clk);
    if (sc == SC_OK) begin
      check(commits == c0 + 1 && discards == d0 && fails == f0, "OK: commit pulse");
      check(wr_words.size() == words.size() - 1, "OK: word count");
      foreach (wr_words[i]) check(wr_words[i] == words[i], "OK: image word");
      check(new_fv == words[words.size() - 1][9:0], "OK: new version");
    end else begin
      check(commits == c0 && discards == d0 + 1 && fails == f0 + 1, $sformatf("%s: discard and fail", sc.name()));
    end
    check(!busy, "idle after report");
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (5) @(negedge clk);
    run(SC_OK);
    run(SC_DIGEST);
    run(SC_MISMATCH);
    run(SC_ROLLBACK);
    run(SC_EXPIRED);
    run(SC_LATE);
    run(SC_NOKEY);
    run(SC_BADLEN);
    locked = 1; run(SC_LOCKED); locked = 0;
    run(SC_OK);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
