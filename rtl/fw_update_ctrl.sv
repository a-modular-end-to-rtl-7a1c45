// fw_update_ctrl: device-side engine of the PPUF-based firmware-update protocol.
//
// One update attempt, started by update_req, runs these steps (the numbers are the
// protocol steps of the framework):
//  (1) Draw k at random, set I1 = S0 + k, hash it and send H(I1) to the model
//      repository, which answers with O1, the distribution server's modelled PUF
//      response. Encrypt the 128-bit session Timestamp under I1 (two SIMON blocks),
//      and send the request {n, E_I1(Timestamp), O1} followed by its SHA-256 digest.
//  (5) Receive the package header {O2, block count, digest of FI||FV}. Reject it if
//      more than DEADLINE_CYCLES clocks passed since the request was started. Search
//      S for the I2 whose hash makes this device's PUF answer O2. Expand I2 and the
//      session key SK = I1 xor Timestamp into the two SIMON cores, send the byte
//      8'hA5 to let the server stream the ciphertext, and decrypt each 64-bit block
//      first under I2, then under SK. Plaintext blocks go to the staging port
//      (fw_wr_*) and into the running SHA-256; the last block is the version trailer
//      (fwu_pkg::fv_trailer_t). Accept only when the digest matches, vendor and device
//      type match, the version is newer than installed_fv and the best-before time
//      has not passed; then pulse fw_commit, otherwise fw_discard and fail.
//  Report {status, elapsed clocks[31:0]} to the host (5 bytes) and return to idle.
// A failure before the ciphertext phase ends the exchange with the report at once;
// the host tells the report (first byte below 8'h10) from the go-ahead byte 8'hA5.
// While locked is high a request is answered with status ST_LOCKED only.
// Serial framing: every field is sent most significant byte first; n travels as 3
// bytes, the 32-bit block count as 4. Digests are taken over 64-bit words: the
// request digest over {n zero-extended to 64 bits, E(Timestamp), O1}, the package
// digest over the plaintext words of FI||FV.
// Byte interfaces are valid/ready: rx_* from a receive FIFO, tx_* to the serial
// transmitter. The PUF is reached through ppuf_* (challenge in, response one or more
// clocks later).
// The protocol steps, the keys and the checks follow the published framework; the
// framing, the go-ahead byte, the trailer layout, ECB use of the cipher, the deadline
// value and the identifiers are this design's own choices.
module fw_update_ctrl
  import fwu_pkg::*;
#(
  parameter logic [127:0] S0              = 128'h0123_4567_89ab_cdef_0000_0000_0000_0000,
  parameter logic [19:0]  SET_N           = 20'd1_000_000,
  parameter logic [63:0]  DEADLINE_CYCLES = 64'd500_000_000,
  parameter logic [7:0]   VENDOR_ID       = 8'h5a,
  parameter logic [7:0]   DEVTYPE_ID      = 8'h3c
) (
  input  logic         clk,
  input  logic         rst_n,
  // control
  input  logic         update_req,
  input  logic         locked,
  output logic         busy,
  output logic         fail,
  output status_e      status,
  output logic [31:0]  elapsed,
  // time
  input  logic [63:0]  unix_sec,
  input  logic [63:0]  cycles,
  input  logic [127:0] timestamp,
  // random offset
  output logic         rs_req,
  input  logic         rs_ack,
  input  logic [19:0]  rs_k,
  // serial bytes
  input  logic         rx_valid,
  output logic         rx_ready,
  input  logic [7:0]   rx_data,
  output logic         tx_valid,
  input  logic         tx_ready,
  output logic [7:0]   tx_data,
  // device PUF
  output logic         ppuf_valid,
  output logic [255:0] ppuf_challenge,
  input  logic         ppuf_resp_valid,
  input  logic [255:0] ppuf_response,
  // firmware staging memory
  input  logic [FV_W-1:0] installed_fv,
  output logic         fw_wr_valid,
  output logic [31:0]  fw_wr_addr,
  output logic [63:0]  fw_wr_data,
  output logic         fw_commit,
  output logic         fw_discard,
  output logic [FV_W-1:0] new_fv
);
  localparam int unsigned TXB = 83;   // longest message sent (request), bytes
  localparam int unsigned RXB = 68;   // longest header received, bytes
  localparam logic [7:0]  GO  = 8'ha5;

  typedef enum logic [4:0] {
    S_IDLE, S_PICK, S_HSTART, S_HFEED, S_HDIG, S_SEND, S_RECV,
    S_I1_TX, S_O1, S_ENC_KEY, S_ENC_KWAIT, S_ENC_GO, S_ENC_WAIT, S_REQ_HASH, S_REQ_TX,
    S_HDR, S_HDR_CHK, S_SEARCH, S_SWAIT, S_KEYS, S_KWAIT, S_GO_TX,
    S_BLK, S_DEC1, S_DEC1W, S_DEC2, S_DEC2W, S_FEED, S_PDIG, S_VERIFY, S_REPORT
  } state_e;

  state_e state, ret;

  // session registers
  logic [127:0] i1, t0, i2;
  logic [63:0]  cyc0;
  logic [255:0] o1, o2, d2, dig;
  logic [63:0]  e_ts [2];
  logic         enc_half;
  logic [31:0]  nblk, bidx;
  logic [63:0]  pblk;
  fv_trailer_t  trailer;

  // byte mover
  logic [TXB*8-1:0] txbuf;
  logic [RXB*8-1:0] rxbuf;
  logic [6:0]       bcnt;

  // hash feed
  logic [63:0] fw [8];
  logic [3:0]  fn, fi;

  // engines
  logic         h_start, h_valid, h_ready, h_last, h_dvalid;
  logic [63:0]  h_data;
  logic [255:0] h_digest;
  logic         a_kload, a_kready, a_start, a_dec, a_busy, a_done;
  logic [127:0] a_key;
  logic [63:0]  a_din, a_dout;
  logic         b_kload, b_kready, b_start, b_busy, b_done;
  logic [63:0]  b_dout;
  logic         s_start, s_busy, s_done, s_found;
  logic [127:0] s_key;
  logic [19:0]  s_tries;

  sha256_stream u_hash (
    .clk, .rst_n, .start(h_start), .in_valid(h_valid), .in_ready(h_ready),
    .in_data(h_data), .in_last(h_last), .digest_valid(h_dvalid), .digest(h_digest)
  );

  // Core A: I1 (timestamp encryption), later I2 (outer layer). Core B: SK.
  simon64_128 u_cipher_a (
    .clk, .rst_n, .key_load(a_kload), .key(a_key), .key_ready(a_kready),
    .start(a_start), .decrypt(a_dec), .din(a_din), .busy(a_busy), .done(a_done), .dout(a_dout)
  );
  simon64_128 u_cipher_b (
    .clk, .rst_n, .key_load(b_kload), .key(i1 ^ t0), .key_ready(b_kready),
    .start(b_start), .decrypt(1'b1), .din(a_dout), .busy(b_busy), .done(b_done), .dout(b_dout)
  );

  challenge_search u_search (
    .clk, .rst_n, .start(s_start), .s0(S0), .n(SET_N), .target(o2),
    .ppuf_valid, .ppuf_challenge, .ppuf_resp_valid, .ppuf_response,
    .busy(s_busy), .done(s_done), .found(s_found), .key(s_key), .tries(s_tries)
  );

  // ---- strobes decoded from the state -------------------------------------------
  always_comb begin
    h_start  = (state == S_HSTART) || (state == S_KEYS);
    h_valid  = (state == S_HFEED) || (state == S_FEED);
    h_data   = (state == S_FEED) ? pblk : fw[fi[2:0]];
    h_last   = (state == S_FEED) ? (bidx == nblk - 1) : (fi == fn - 1);
    a_kload  = (state == S_ENC_KEY) || (state == S_KEYS);
    a_key    = (state == S_KEYS) ? i2 : i1;
    a_start  = (state == S_ENC_GO) || (state == S_DEC1);
    a_dec    = (state == S_DEC1);
    a_din    = (state == S_DEC1) ? rxbuf[63:0] : (enc_half ? t0[63:0] : t0[127:64]);
    b_kload  = (state == S_KEYS);
    b_start  = (state == S_DEC2);
    s_start  = (state == S_SEARCH);
    rs_req   = (state == S_PICK) && !rs_ack;
    tx_valid = (state == S_SEND) && (bcnt != 0);
    tx_data  = txbuf[TXB*8-1 -: 8];
    rx_ready = (state == S_RECV) && (bcnt != 0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; ret <= S_IDLE;
      i1 <= '0; t0 <= '0; i2 <= '0; cyc0 <= '0;
      o1 <= '0; o2 <= '0; d2 <= '0; dig <= '0;
      e_ts[0] <= '0; e_ts[1] <= '0; enc_half <= 1'b0;
      nblk <= '0; bidx <= '0; pblk <= '0; trailer <= '0;
      txbuf <= '0; rxbuf <= '0; bcnt <= '0;
      for (int i = 0; i < 8; i++) fw[i] <= '0;
      fn <= '0; fi <= '0;
      busy <= 1'b0; fail <= 1'b0; status <= ST_OK; elapsed <= '0;
      fw_wr_valid <= 1'b0; fw_wr_addr <= '0; fw_wr_data <= '0;
      fw_commit <= 1'b0; fw_discard <= 1'b0; new_fv <= '0;
    end else begin
      fail <= 1'b0; fw_wr_valid <= 1'b0; fw_commit <= 1'b0; fw_discard <= 1'b0;
      unique case (state)
        S_IDLE: if (update_req) begin
          busy <= 1'b1;
          cyc0 <= cycles;
          if (locked) begin
            status <= ST_LOCKED; state <= S_REPORT;
          end else begin
            t0 <= timestamp; state <= S_PICK;
          end
        end
        // (1) I1 = S0 + k, send H(I1) to the model repository
        S_PICK: if (rs_ack) begin
          i1 <= S0 + {108'b0, rs_k};
          fn <= 4'd2; ret <= S_I1_TX; state <= S_HSTART;
        end
        S_HSTART: begin
          fi <= '0;
          if (ret == S_I1_TX) begin fw[0] <= i1[127:64]; fw[1] <= i1[63:0]; end
          state <= S_HFEED;
        end
        S_HFEED: if (h_ready) begin
          fi <= fi + 1'b1;
          if (fi == fn - 1) state <= S_HDIG;
        end
        S_HDIG: if (h_dvalid) begin dig <= h_digest; state <= ret; end
        S_I1_TX: begin
          txbuf <= {dig, {(TXB-32)*8{1'b0}}}; bcnt <= 7'd32;
          ret <= S_O1; state <= S_SEND;
        end
        S_O1: begin
          // O1 arrives next; the receive step returns here through S_ENC_KEY
          bcnt <= 7'd32; ret <= S_ENC_KEY; state <= S_RECV;
        end
        S_ENC_KEY: begin
          o1 <= rxbuf[255:0]; enc_half <= 1'b0; state <= S_ENC_KWAIT;
        end
        S_ENC_KWAIT: if (a_kready) state <= S_ENC_GO;
        S_ENC_GO: state <= S_ENC_WAIT;
        S_ENC_WAIT: if (a_done) begin
          e_ts[enc_half] <= a_dout;
          if (!enc_half) begin enc_half <= 1'b1; state <= S_ENC_GO; end
          else state <= S_REQ_HASH;
        end
        S_REQ_HASH: begin
          fw[0] <= {44'b0, SET_N};
          fw[1] <= e_ts[0]; fw[2] <= e_ts[1];
          fw[3] <= o1[255:192]; fw[4] <= o1[191:128]; fw[5] <= o1[127:64]; fw[6] <= o1[63:0];
          fn <= 4'd7; ret <= S_REQ_TX; state <= S_HSTART;
        end
        S_REQ_TX: begin
          txbuf <= {4'b0, SET_N, e_ts[0], e_ts[1], o1, dig};
          bcnt <= 7'(TXB); ret <= S_HDR; state <= S_SEND;
        end
        // (5) package header, deadline, key search
        S_HDR: begin bcnt <= 7'(RXB); ret <= S_HDR_CHK; state <= S_RECV; end
        S_HDR_CHK: begin
          o2   <= rxbuf[RXB*8-1 -: 256];
          nblk <= rxbuf[RXB*8-257 -: 32];
          d2   <= rxbuf[255:0];
          if (cycles - cyc0 > DEADLINE_CYCLES) begin
            status <= ST_LATE; state <= S_REPORT;
          end else if (rxbuf[RXB*8-257 -: 32] == 0) begin
            status <= ST_BADLEN; state <= S_REPORT;
          end else state <= S_SEARCH;
        end
        S_SEARCH: state <= S_SWAIT;
        S_SWAIT: if (s_done) begin
          if (s_found) begin i2 <= s_key; state <= S_KEYS; end
          else begin status <= ST_NOKEY; state <= S_REPORT; end
        end
        S_KEYS: begin bidx <= '0; state <= S_KWAIT; end
        S_KWAIT: if (a_kready && b_kready) begin
          txbuf <= {GO, {(TXB-1)*8{1'b0}}}; bcnt <= 7'd1;
          ret <= S_BLK; state <= S_SEND;
        end
        S_BLK: begin bcnt <= 7'd8; ret <= S_DEC1; state <= S_RECV; end
        S_DEC1: state <= S_DEC1W;
        S_DEC1W: if (a_done) state <= S_DEC2;
        S_DEC2: state <= S_DEC2W;
        S_DEC2W: if (b_done) begin pblk <= b_dout; state <= S_FEED; end
        S_FEED: if (h_ready) begin
          if (bidx == nblk - 1) begin
            trailer <= pblk; state <= S_PDIG;
          end else begin
            fw_wr_valid <= 1'b1; fw_wr_addr <= bidx; fw_wr_data <= pblk;
            bidx <= bidx + 1'b1; state <= S_BLK;
          end
        end
        S_PDIG: if (h_dvalid) begin dig <= h_digest; state <= S_VERIFY; end
        S_VERIFY: begin
          state <= S_REPORT;
          if (dig != d2)                         status <= ST_DIGEST;
          else if (trailer.vendor != VENDOR_ID ||
                   trailer.devtype != DEVTYPE_ID) status <= ST_MISMATCH;
          else if (trailer.fv <= installed_fv)    status <= ST_ROLLBACK;
          else if ({32'b0, trailer.best_before} < unix_sec) status <= ST_EXPIRED;
          else                                    status <= ST_OK;
        end
        S_REPORT: begin
          elapsed <= 32'(cycles - cyc0);
          txbuf <= {status, 32'(cycles - cyc0), {(TXB-5)*8{1'b0}}};
          bcnt <= 7'd5; ret <= S_IDLE; state <= S_SEND;
          if (status == ST_OK) begin
            fw_commit <= 1'b1; new_fv <= trailer.fv;
          end else if (status != ST_LOCKED) begin
            fail <= 1'b1;
            fw_discard <= 1'b1;
          end
        end
        // byte movers
        S_SEND: if (bcnt == 0) begin
          state <= ret;
          if (ret == S_IDLE) busy <= 1'b0;
        end else if (tx_ready) begin
          txbuf <= txbuf << 8; bcnt <= bcnt - 1'b1;
        end
        S_RECV: if (bcnt == 0) state <= ret;
          else if (rx_valid) begin
            rxbuf <= {rxbuf[RXB*8-9:0], rx_data}; bcnt <= bcnt - 1'b1;
          end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The transmitter sees a stable byte until it takes it.
  a_tx_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              (tx_valid && !tx_ready) |=> (tx_valid && $stable(tx_data)));
endmodule
