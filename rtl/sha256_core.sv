// sha256_core: SHA-256 compression of one 512-bit block, one round per clock.
//
// On a start pulse (accepted while busy is low) the core loads the block into a
// 16-word rolling message schedule and the working variables a..h from the chaining
// value: the standard initial value when first is high, otherwise the digest left by
// the previous block. It then runs the 64 rounds, one per clock, computing the next
// schedule word alongside, and adds the working variables into the chaining value.
// done pulses for one cycle 65 clocks after start, and digest holds the new chaining
// value until the next start. block[511:480] is message word W0.
// The algorithm is FIPS 180-4 SHA-256, the hash of the published Lightweight and
// Midweight configurations; the one-round-per-cycle structure is this design's choice.
module sha256_core
  import sha256_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         first,
  input  logic [511:0] block,
  output logic         busy,
  output logic         done,
  output logic [255:0] digest
);
  logic [31:0] w [16];
  logic [31:0] a, b, c, d, e, f, g, h;
  logic [6:0]  round;
  logic [31:0] t1, t2, wnext;

  always_comb begin
    t1 = h + bsig1(e) + ch(e, f, g) + K[round[5:0]] + w[0];
    t2 = bsig0(a) + maj(a, b, c);
    wnext = ssig1(w[14]) + w[9] + ssig0(w[1]) + w[0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; round <= '0; digest <= IV;
      {a, b, c, d, e, f, g, h} <= '0;
      for (int i = 0; i < 16; i++) w[i] <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          logic [255:0] hv;
          hv = first ? IV : digest;
          if (first) digest <= IV;
          {a, b, c, d, e, f, g, h} <= hv;
          for (int i = 0; i < 16; i++) w[i] <= block[511 - 32*i -: 32];
          round <= '0;
          busy <= 1'b1;
        end
      end else if (round == 7'd64) begin
        digest <= {digest[255:224] + a, digest[223:192] + b, digest[191:160] + c,
                   digest[159:128] + d, digest[127:96] + e, digest[95:64] + f,
                   digest[63:32] + g, digest[31:0] + h};
        busy <= 1'b0;
        done <= 1'b1;
      end else begin
        h <= g; g <= f; f <= e; e <= d + t1;
        d <= c; c <= b; b <= a; a <= t1 + t2;
        for (int i = 0; i < 15; i++) w[i] <= w[i+1];
        w[15] <= wnext;
        round <= round + 1'b1;
      end
    end
  end
endmodule
