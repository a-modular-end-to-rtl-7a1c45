// simon64_128: SIMON 64/128 block cipher (64-bit block, 128-bit key, 44 rounds),
// encryption and decryption, one round per clock.
//
// key_load starts the key schedule: the four key words are stored as round keys
// 0..3 (key[31:0] is k0) and round keys 4..43 are derived one per clock into a
// 44-word register file; key_ready rises 40 clocks after key_load. A start pulse with
// key_ready high then takes din = {x, y} (x in bits 63:32) and runs the 44 Feistel
// rounds, forwards for encryption (round keys 0..43) or with the inverse round for
// decryption (round keys 43..0); done pulses and dout is valid 45 clocks after start.
// busy is high from start to done. Keeping the round keys lets one key serve many
// blocks in either direction without re-expanding.
// Cipher choice and sizes follow the published Lightweight configuration; the
// serial one-round-per-cycle structure and the stored key schedule are this design's.
module simon64_128 (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         key_load,
  input  logic [127:0] key,
  output logic         key_ready,
  input  logic         start,
  input  logic         decrypt,
  input  logic [63:0]  din,
  output logic         busy,
  output logic         done,
  output logic [63:0]  dout
);
  localparam int unsigned ROUNDS = 44;
  localparam logic [63:0] Z3 = 64'hfc2c_e512_07a6_35db;   // z3 sequence, LSB first
  localparam logic [31:0] C  = 32'hffff_fffc;

  logic [31:0] rk [ROUNDS];
  logic [5:0]  kidx;            // next round key to derive
  logic        kbusy;
  logic [5:0]  rnd;
  logic        dec;
  logic [31:0] x, y;

  function automatic logic [31:0] rol(input logic [31:0] v, input int unsigned n);
    return (v << n) | (v >> (32 - n));
  endfunction
  function automatic logic [31:0] ror(input logic [31:0] v, input int unsigned n);
    return (v >> n) | (v << (32 - n));
  endfunction
  function automatic logic [31:0] f(input logic [31:0] v);
    return (rol(v, 1) & rol(v, 8)) ^ rol(v, 2);
  endfunction

  logic [31:0] ktmp, knew;
  always_comb begin
    ktmp = ror(rk[kidx - 6'd1], 3) ^ rk[kidx - 6'd3];
    ktmp = ktmp ^ ror(ktmp, 1);
    knew = C ^ {31'b0, Z3[kidx - 6'd4]} ^ rk[kidx - 6'd4] ^ ktmp;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      key_ready <= 1'b0; kbusy <= 1'b0; kidx <= '0;
      for (int i = 0; i < ROUNDS; i++) rk[i] <= '0;
    end else if (key_load) begin
      key_ready <= 1'b0; kbusy <= 1'b1; kidx <= 6'd4;
      for (int i = 0; i < 4; i++) rk[i] <= key[32*i +: 32];
    end else if (kbusy) begin
      rk[kidx] <= knew;
      if (kidx == 6'(ROUNDS-1)) begin kbusy <= 1'b0; key_ready <= 1'b1; end
      kidx <= kidx + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; rnd <= '0; dec <= 1'b0; x <= '0; y <= '0; dout <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start && key_ready) begin
          busy <= 1'b1; dec <= decrypt; rnd <= '0;
          {x, y} <= din;
        end
      end else if (rnd == 6'(ROUNDS)) begin
        busy <= 1'b0; done <= 1'b1; dout <= {x, y};
      end else begin
        if (!dec) begin
          x <= y ^ f(x) ^ rk[rnd];
          y <= x;
        end else begin
          y <= x ^ f(y) ^ rk[6'(ROUNDS-1) - rnd];
          x <= y;
        end
        rnd <= rnd + 1'b1;
      end
    end
  end

  // A block may only be started once the key schedule is complete.
  a_start_keyed: assert property (@(posedge clk) disable iff (!rst_n)
                                  (start && !busy) |-> key_ready);
endmodule
