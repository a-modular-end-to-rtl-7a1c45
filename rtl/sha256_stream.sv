// sha256_stream: SHA-256 of a message delivered as a stream of 64-bit words.
//
// start clears the word count and marks the next block as the first of a message.
// Words are taken on in_valid && in_ready, packed eight to a 512-bit block and handed
// to sha256_core; in_ready is low while a block is being compressed. After the word
// flagged in_last the module appends the FIPS 180-4 padding, a 1 bit followed by
// zeros, then the 64-bit message length in bits, in one extra block or two, and
// pulses digest_valid with the final digest. Messages are whole 64-bit words (a byte
// length that is a multiple of 8); every message the update protocol hashes is built
// that way. The first word is the most significant 8 bytes of the byte stream.
// Throughput: 65 clocks per 8 words plus one block (two if the last block is full or
// holds 7 words) for padding.
module sha256_stream (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [63:0]  in_data,
  input  logic         in_last,
  output logic         digest_valid,
  output logic [255:0] digest
);
  typedef enum logic [2:0] {S_FILL, S_RUN, S_PAD, S_PADRUN, S_LEN, S_LENRUN} state_e;
  state_e state;
  logic [63:0]  buf_w [8];
  logic [3:0]   fill;
  logic [63:0]  nbits;
  logic         first_blk, last_seen;
  logic         core_start, core_busy, core_done;
  logic [511:0] block;

  always_comb for (int i = 0; i < 8; i++) block[511 - 64*i -: 64] = buf_w[i];

  sha256_core u_core (
    .clk, .rst_n, .start(core_start), .first(first_blk), .block,
    .busy(core_busy), .done(core_done), .digest
  );

  assign in_ready = (state == S_FILL) && !last_seen;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_FILL; fill <= '0; nbits <= '0; first_blk <= 1'b1; last_seen <= 1'b0;
      core_start <= 1'b0; digest_valid <= 1'b0;
      for (int i = 0; i < 8; i++) buf_w[i] <= '0;
    end else begin
      core_start <= 1'b0;
      digest_valid <= 1'b0;
      if (start) begin
        state <= S_FILL; fill <= '0; nbits <= '0; first_blk <= 1'b1; last_seen <= 1'b0;
      end else begin
        unique case (state)
          S_FILL: if (in_valid && in_ready) begin
            buf_w[fill[2:0]] <= in_data;
            nbits <= nbits + 64'd64;
            last_seen <= in_last;
            if (fill == 4'd7) begin
              fill <= '0; core_start <= 1'b1; state <= S_RUN;
            end else begin
              fill <= fill + 1'b1;
              if (in_last) state <= S_PAD;
            end
          end
          S_RUN: if (core_done) begin
            first_blk <= 1'b0;
            state <= last_seen ? S_PAD : S_FILL;
          end
          // Pad word goes at position fill (0..7). With room for the length word
          // (fill <= 6) one block ends the message, otherwise a second block follows.
          S_PAD: if (!core_start && !core_busy) begin
            for (int i = 0; i < 8; i++) begin
              if (i == int'(fill))     buf_w[i] <= 64'h8000_0000_0000_0000;
              else if (i > int'(fill)) buf_w[i] <= '0;
            end
            if (fill <= 4'd6) buf_w[7] <= nbits;
            core_start <= 1'b1;
            state <= (fill <= 4'd6) ? S_LENRUN : S_PADRUN;
          end
          S_PADRUN: if (core_done) begin
            first_blk <= 1'b0;
            state <= S_LEN;
          end
          S_LEN: begin
            for (int i = 0; i < 7; i++) buf_w[i] <= '0;
            buf_w[7] <= nbits;
            core_start <= 1'b1;
            state <= S_LENRUN;
          end
          S_LENRUN: if (core_done) begin
            first_blk <= 1'b1;
            digest_valid <= 1'b1;
            fill <= '0; last_seen <= 1'b0;
            state <= S_FILL;
          end
          default: state <= S_FILL;
        endcase
      end
    end
  end
endmodule
