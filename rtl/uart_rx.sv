// uart_rx: serial receiver, 8 data bits, no parity, 1 stop bit (8N1).
//
// The line is brought in through a two-flop synchronizer. A falling edge starts a
// frame; the start bit is checked again half a bit later, and from there each data
// bit (LSB first) and the stop bit are sampled once per bit period at mid-bit. A byte
// whose stop bit reads high is presented on rx_data with a one-cycle rx_valid pulse;
// a byte with a bad stop bit is dropped. CLKS_PER_BIT defaults to 868, which is
// 100 MHz / 115200 baud, the clock and line rate of the published prototype.
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 868
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rx,
  output logic       rx_valid,
  output logic [7:0] rx_data
);
  typedef enum logic [1:0] {IDLE, START, DATA, STOP} state_e;
  state_e state;
  logic [1:0]  sync;
  logic [$clog2(CLKS_PER_BIT+1)-1:0] cnt;
  logic [2:0]  bitn;
  logic [7:0]  shreg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync <= 2'b11; state <= IDLE; cnt <= '0; bitn <= '0; shreg <= '0;
      rx_valid <= 1'b0; rx_data <= '0;
    end else begin
      sync <= {sync[0], rx};
      rx_valid <= 1'b0;
      unique case (state)
        IDLE: if (!sync[1]) begin state <= START; cnt <= '0; end
        START: if (cnt == $bits(cnt)'((CLKS_PER_BIT-1)/2)) begin
                 cnt <= '0;
                 state <= sync[1] ? IDLE : DATA;
                 bitn <= '0;
               end else cnt <= cnt + 1'b1;
        DATA: if (cnt == $bits(cnt)'(CLKS_PER_BIT-1)) begin
                cnt <= '0;
                shreg <= {sync[1], shreg[7:1]};
                bitn <= bitn + 1'b1;
                if (bitn == 3'd7) state <= STOP;
              end else cnt <= cnt + 1'b1;
        STOP: if (cnt == $bits(cnt)'(CLKS_PER_BIT-1)) begin
                cnt <= '0;
                state <= IDLE;
                if (sync[1]) begin rx_valid <= 1'b1; rx_data <= shreg; end
              end else cnt <= cnt + 1'b1;
      endcase
    end
  end
endmodule
