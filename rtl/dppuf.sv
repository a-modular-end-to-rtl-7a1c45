// dppuf: behavioural model of the 256-bit differential public PUF (dPPUF).
//
// The real circuit is two structurally identical gate stacks, a left and a right
// one, fed with the same challenge, made of alternating booster layers (2-input XOR)
// and represser layers (NAND). Manufacturing variation gives every gate its own delay,
// and a final row of arbiters records, for each bit, which side's output settled
// first. That behaviour rests on analog delays, so this file is a behavioural model:
// each gate gets a fixed integer delay (8..23 units) from a hash of SEED, side, layer
// and index, and arrival times are propagated arithmetically, which is also what a
// public software model of a characterised chip computes.
//   booster  : out = a ^ b,     arrives at max(ta, tb) + d
//   represser: out = ~(a & b),  arrives at the earliest controlling 0 input + d,
//              or at max(ta, tb) + d when both inputs are 1
// Layer l (0 = first, a booster) wires gate i to nodes i and (i + 2^l) mod W. Input
// bit i arrives at time challenge[i]. Response bit i is 1 when the left side arrives
// first, 0 when the right side does, and the left side's logic value on a tie.
// Interface: a challenge presented with valid gives response with resp_valid one
// clock later. SEED stands for one chip; two SEEDs model two different chips.
// The width (256) and the booster/represser alternation follow the published design;
// the layer count, wiring, delay range, delay generation and tie rule are this
// design's own choices, as the gate-level structure is not given.
module dppuf #(
  parameter int unsigned W      = 256,
  parameter int unsigned LAYERS = 6,
  parameter logic [31:0] SEED   = 32'h1234_5678
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         valid,
  input  logic [W-1:0] challenge,
  output logic         resp_valid,
  output logic [W-1:0] response
);
  localparam int unsigned LW = $clog2(W);

  // Gate delay of (side, layer, index): 8 + 4 bits of a 32-bit integer hash.
  function automatic logic [7:0] gate_delay(input logic [31:0] seed, input int unsigned side,
                                           input int unsigned layer, input int unsigned idx);
    logic [31:0] h;
    h = seed ^ (32'(side) * 32'h9e37_79b9) ^ (32'(layer) * 32'h85eb_ca6b) ^ (32'(idx) * 32'hc2b2_ae35);
    h = h ^ (h >> 15);
    h = h * 32'h2c1b_3c6d;
    h = h ^ (h >> 12);
    h = h * 32'h297a_2d39;
    h = h ^ (h >> 15);
    return 8'd8 + {4'b0, h[3:0]};
  endfunction

  localparam int unsigned NG = 2 * LAYERS * W;   // gates in both stacks

  function automatic logic [NG*8-1:0] all_delays();
    logic [NG*8-1:0] d;
    d = '0;
    for (int s = 0; s < 2; s++)
      for (int l = 0; l < LAYERS; l++)
        for (int i = 0; i < W; i++) d[((s*LAYERS + l)*W + i)*8 +: 8] = gate_delay(SEED, s, l, i);
    return d;
  endfunction

  // The chip's fixed gate delays, computed once at elaboration.
  localparam logic [NG*8-1:0] DLY = all_delays();

  // One evaluation of both stacks and the arbiter row.
  function automatic logic [W-1:0] race(input logic [W-1:0] ch);
    logic [W-1:0] val  [2][LAYERS+1];
    logic [7:0]   tarr [2][LAYERS+1][W];
    logic [W-1:0] resp_c;
    for (int s = 0; s < 2; s++) begin
      val[s][0] = ch;
      for (int i = 0; i < W; i++) tarr[s][0][i] = {7'b0, ch[i]};
      for (int l = 0; l < LAYERS; l++) begin
        for (int i = 0; i < W; i++) begin
          int unsigned j;
          logic va, vb;
          logic [7:0] ta, tb, d;
          j  = (i + (1 << (l % LW))) % W;
          va = val[s][l][i];           vb = val[s][l][j];
          ta = tarr[s][l][i];          tb = tarr[s][l][j];
          d  = DLY[((s*LAYERS + l)*W + i)*8 +: 8];
          if ((l % 2) == 0) begin
            val[s][l+1][i]  = va ^ vb;
            tarr[s][l+1][i] = ((ta > tb) ? ta : tb) + d;
          end else begin
            val[s][l+1][i] = ~(va & vb);
            if (!va && !vb)  tarr[s][l+1][i] = ((ta < tb) ? ta : tb) + d;
            else if (!va)    tarr[s][l+1][i] = ta + d;
            else if (!vb)    tarr[s][l+1][i] = tb + d;
            else             tarr[s][l+1][i] = ((ta > tb) ? ta : tb) + d;
          end
        end
      end
    end
    for (int i = 0; i < W; i++) begin
      if (tarr[0][LAYERS][i] < tarr[1][LAYERS][i])      resp_c[i] = 1'b1;
      else if (tarr[0][LAYERS][i] > tarr[1][LAYERS][i]) resp_c[i] = 1'b0;
      else                                              resp_c[i] = val[0][LAYERS][i];
    end
    return resp_c;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resp_valid <= 1'b0; response <= '0;
    end else begin
      resp_valid <= valid;
      if (valid) response <= race(challenge);
    end
  end
endmodule
