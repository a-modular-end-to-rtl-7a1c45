// timekeeper: UNIX time and cycle count that form the 128-bit session Timestamp.
//
// cycles counts clocks from reset and never stops. unix_sec is loaded by set with
// set_sec (the host, or a real-time clock, provides wall time) and advances by one
// every CLK_HZ clocks. timestamp = {unix_sec, cycles} is strictly increasing, so it
// serves as the monotonic sequence number of an update request, is encrypted into the
// request, and is mixed into the session key. Deadlines are measured on cycles;
// best-before dates are compared with unix_sec.
// The 128-bit width and the use of UNIX time follow the published design; the split
// into seconds and cycles is this design's own.
module timekeeper #(
  parameter int unsigned CLK_HZ = 100_000_000
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          set,
  input  logic [63:0]   set_sec,
  output logic [63:0]   unix_sec,
  output logic [63:0]   cycles,
  output logic [127:0]  timestamp
);
  logic [$clog2(CLK_HZ+1)-1:0] pre;

  assign timestamp = {unix_sec, cycles};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      unix_sec <= '0; cycles <= '0; pre <= '0;
    end else begin
      cycles <= cycles + 64'd1;
      if (set) begin
        unix_sec <= set_sec; pre <= '0;
      end else if (pre == $bits(pre)'(CLK_HZ - 1)) begin
        pre <= '0; unix_sec <= unix_sec + 64'd1;
      end else begin
        pre <= pre + 1'b1;
      end
    end
  end
endmodule
