// fwu_host_pkg: behavioural model of the host side of the update protocol, the
// firmware distribution server (FDS) together with the public PUF model repository
// (PPMR), as used by the end-to-end testbenches.
//
// ppmr_answer   : O1 = model of the server's PUF applied to the device's H(I1).
// fds_request   : checks the request digest, recovers I1 by searching the set S
//                 with the server's PUF model, decrypts the Timestamp.
// fds_package   : builds the package for a chosen I2 = S0 + k2: header {O2, block
//                 count, SHA-256 of FI||FV} and the ciphertext, FI||FV encrypted
//                 block by block under SK = I1 xor Timestamp and then under I2.
// Byte order is most significant byte first, as the device sends and expects.
package fwu_host_pkg;
  import fwu_ref_pkg::*;

  function automatic logic [63:0] make_trailer(input logic [9:0] fv, input logic [7:0] vendor,
                                               input logic [7:0] devtype, input logic [31:0] best_before);
    return {6'b0, best_before, vendor, devtype, fv};
  endfunction

  function automatic logic [255:0] take(ref bytes_t q, input int nbytes);
    logic [255:0] v = '0;
    for (int i = 0; i < nbytes; i++) v = {v[247:0], q.pop_front()};
    return v;
  endfunction

  function automatic logic [255:0] ppmr_answer(input int unsigned fds_seed, input logic [255:0] h1);
    return ppuf(fds_seed, h1);
  endfunction

  // Returns 1 when the request is intact and I1 was found.
  function automatic bit fds_request(input bytes_t req, input logic [127:0] s0,
                                     input int unsigned fds_seed,
                                     output logic [127:0] i1, output logic [127:0] ts,
                                     output int unsigned n);
    bytes_t q = req, m;
    logic [63:0]  e0, e1;
    logic [255:0] o1, dig;
    n   = 32'(take(q, 3));
    e0  = 64'(take(q, 8));
    e1  = 64'(take(q, 8));
    o1  = take(q, 32);
    dig = take(q, 32);
    put(m, 1024'(n), 8); put(m, 1024'(e0), 8); put(m, 1024'(e1), 8); put(m, 1024'(o1), 32);
    if (sha256(m) != dig) return 0;
    for (int unsigned k = 0; k < n; k++) begin
      if (ppuf(fds_seed, sha256_key(s0 + 128'(k))) == o1) begin
        i1 = s0 + 128'(k);
        ts = {simon_dec(i1, e0), simon_dec(i1, e1)};
        return 1;
      end
    end
    return 0;
  endfunction

  function automatic void fds_package(input logic [127:0] i1, input logic [127:0] ts,
                                      input logic [127:0] i2, input int unsigned ed_seed,
                                      input logic [63:0] words[$],
                                      output bytes_t hdr, output bytes_t ct);
    bytes_t m;
    logic [127:0] sk = i1 ^ ts;
    hdr.delete(); ct.delete();
    foreach (words[i]) put(m, 1024'(words[i]), 8);
    put(hdr, 1024'(ppuf(ed_seed, sha256_key(i2))), 32);
    put(hdr, 1024'(words.size()), 4);
    put(hdr, 1024'(sha256(m)), 32);
    foreach (words[i]) put(ct, 1024'(simon_enc(i2, simon_enc(sk, words[i]))), 8);
  endfunction

endpackage
