// rand_sel: draws a uniformly distributed offset k in [0, n) for I1 = S0 + k.
//
// A 32-bit xorshift generator steps every clock from reset. On req the module takes
// the low 20 bits of the generator each clock until a value below n appears
// (rejection sampling, so no modulo bias) and returns it on k with an ack pulse;
// with n = 10^6 about 95 % of draws succeed at once. If n is 0 the module returns
// k = 0. A pseudo-random generator only stands in for the random source the update
// protocol calls for: a device needs a true entropy source here, since I1 is a key.
module rand_sel #(
  parameter logic [31:0] SEED = 32'hace1_2468
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req,
  input  logic [19:0] n,
  output logic        ack,
  output logic [19:0] k
);
  logic [31:0] s, nx;
  logic [19:0] mask, cand;
  logic        pending;

  // Smallest all-ones mask covering n-1, so each draw is accepted with p > 1/2.
  always_comb begin
    mask = n - 1'b1;
    mask = mask | (mask >> 1);
    mask = mask | (mask >> 2);
    mask = mask | (mask >> 4);
    mask = mask | (mask >> 8);
    mask = mask | (mask >> 16);
    cand = s[19:0] & mask;
  end

  always_comb begin
    nx = s ^ (s << 13);
    nx = nx ^ (nx >> 17);
    nx = nx ^ (nx << 5);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s <= (SEED == 0) ? 32'h1 : SEED; pending <= 1'b0; ack <= 1'b0; k <= '0;
    end else begin
      s <= nx;
      ack <= 1'b0;
      if (req) pending <= 1'b1;
      if (pending || req) begin
        if (n == 0) begin
          k <= '0; ack <= 1'b1; pending <= 1'b0;
        end else if (cand < n) begin
          k <= cand; ack <= 1'b1; pending <= 1'b0;
        end
      end
    end
  end
endmodule
