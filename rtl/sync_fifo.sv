// sync_fifo: single-clock FIFO (default 16 x 8 bit) with valid/ready on both sides.
//
// Sits between the serial receiver, which delivers a byte as a one-cycle pulse, and
// the update controller, which may be busy hashing or deciphering when a byte lands.
// wr_ready is low when full; rd_valid is high while the FIFO holds data and rd_data
// shows the oldest entry, which is removed on a cycle with rd_valid && rd_ready.
// This buffer is this design's own addition; the published text does not describe
// how the serial stream is buffered.
module sync_fifo #(
  parameter int unsigned W = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_valid,
  output logic         wr_ready,
  input  logic [W-1:0] wr_data,
  output logic         rd_valid,
  input  logic         rd_ready,
  output logic [W-1:0] rd_data
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0] count;
  wire do_wr = wr_valid && wr_ready;
  wire do_rd = rd_valid && rd_ready;

  assign wr_ready = (count != DEPTH[AW:0]);
  assign rd_valid = (count != 0);
  assign rd_data  = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_wr) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  always_ff @(posedge clk) if (do_wr) mem[wp] <= wr_data;
endmodule
