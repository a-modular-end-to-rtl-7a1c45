// challenge_search: recovers the session key I from a PUF response by exhaustive
// search of the public set S = {S0 + k : 0 <= k < n}.
//
// For k = 0, 1, ... the module forms I = S0 + k (128-bit), hashes the 16 bytes of I
// with SHA-256 in a single padded block, applies the digest H(I) as a challenge to
// the device's own PUF and compares the response with target (the received O2).
// The first match ends the search with found = 1 and key = I; running through all n
// candidates without a match ends it with found = 0. done pulses once per search.
// Each candidate costs 69 clocks (one to launch the hash, 65 of hashing, one to
// launch the PUF, one for its response and one to compare), so the 10^6-element set
// of the published prototype needs at most 69 million clocks (0.69 s at 100 MHz).
// Only the PUF owner can run this loop quickly; the linear order and the one-at-a-
// time schedule are this design's choices.
module challenge_search (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [127:0] s0,
  input  logic [19:0]  n,
  input  logic [255:0] target,
  output logic         ppuf_valid,
  output logic [255:0] ppuf_challenge,
  input  logic         ppuf_resp_valid,
  input  logic [255:0] ppuf_response,
  output logic         busy,
  output logic         done,
  output logic         found,
  output logic [127:0] key,
  output logic [19:0]  tries
);
  typedef enum logic [1:0] {IDLE, HWAIT, PWAIT} state_e;
  state_e state;
  logic [19:0]  k;
  logic [127:0] cand;
  logic         h_start, h_busy, h_done;
  logic [255:0] h_digest;
  logic [511:0] h_block;

  // 16-byte message: I, then the 1 pad bit, zeros and the length 128.
  assign h_block = {cand, 1'b1, 319'b0, 64'd128};
  assign cand    = s0 + {108'b0, k};
  assign ppuf_challenge = h_digest;
  assign busy = (state != IDLE);

  sha256_core u_hash (
    .clk, .rst_n, .start(h_start), .first(1'b1), .block(h_block),
    .busy(h_busy), .done(h_done), .digest(h_digest)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; k <= '0; h_start <= 1'b0; ppuf_valid <= 1'b0;
      done <= 1'b0; found <= 1'b0; key <= '0; tries <= '0;
    end else begin
      h_start <= 1'b0; ppuf_valid <= 1'b0; done <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          k <= '0; tries <= '0; found <= 1'b0;
          if (n == 0) done <= 1'b1;
          else begin h_start <= 1'b1; state <= HWAIT; end
        end
        HWAIT: if (h_done) begin ppuf_valid <= 1'b1; state <= PWAIT; end
        PWAIT: if (ppuf_resp_valid) begin
          tries <= tries + 1'b1;
          if (ppuf_response == target) begin
            found <= 1'b1; key <= cand; done <= 1'b1; state <= IDLE;
          end else if (k == n - 1'b1) begin
            done <= 1'b1; state <= IDLE;
          end else begin
            k <= k + 1'b1; h_start <= 1'b1; state <= HWAIT;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
