// uart_tx: serial transmitter, 8 data bits, no parity, 1 stop bit (8N1).
//
// A byte is taken when tx_valid and tx_ready are both high; the line then carries a
// start bit (0), the eight data bits LSB first and a stop bit (1), each held for
// CLKS_PER_BIT clocks, and tx_ready rises again after the stop bit. The line idles
// high. CLKS_PER_BIT defaults to 868 = 100 MHz / 115200 baud as in the prototype;
// the valid/ready byte handshake is this design's choice.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 868
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       tx_valid,
  input  logic [7:0] tx_data,
  output logic       tx_ready,
  output logic       tx
);
  logic [9:0] frame;
  logic [3:0] nbits;    // bits still to send
  logic [$clog2(CLKS_PER_BIT+1)-1:0] cnt;

  assign tx_ready = (nbits == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      frame <= '1; nbits <= '0; cnt <= '0; tx <= 1'b1;
    end else if (nbits == 0) begin
      tx <= 1'b1;
      if (tx_valid) begin
        frame <= {1'b1, tx_data, 1'b0};
        nbits <= 4'd10; cnt <= '0;
        tx <= 1'b0;
      end
    end else if (cnt == $bits(cnt)'(CLKS_PER_BIT-1)) begin
      cnt <= '0;
      frame <= {1'b1, frame[9:1]};
      nbits <= nbits - 1'b1;
      tx <= (nbits == 1) ? 1'b1 : frame[1];
    end else begin
      cnt <= cnt + 1'b1;
    end
  end
endmodule
