// fw_update_ed: top level of the PPUF-enabled embedded device, Lightweight
// configuration (dPPUF, SIMON 64/128, SHA-256), with its serial link to the host that
// plays the firmware distribution server and the public PUF model repository.
//
// Blocks and connections:
//   uart_rx -> sync_fifo -> fw_update_ctrl -> uart_tx     serial bytes, 8N1
//   fw_update_ctrl <-> dppuf                              challenge search on O2
//   fw_update_ctrl <-  timekeeper                         Timestamp, UNIX time, clocks
//   fw_update_ctrl <-> rand_sel                           random offset for I1
//   fw_update_ctrl  -> fail_guard -> locked               lock-out after failures
// The controller holds the SHA-256 hasher, the two SIMON cores and the key search.
// A pulse on update_req starts one update attempt; the decrypted image leaves on the
// fw_wr_* staging port and is confirmed by fw_commit (with new_fv) or dropped by
// fw_discard. The non-volatile store behind that port, and the installed version it
// holds (installed_fv), are outside this design. time_set/time_sec load the UNIX
// clock; admin_clear lifts a lock-out. Defaults are the prototype's: 100 MHz clock,
// 115200 baud (868 clocks per bit), 256-bit PUF, a set S of 10^6 elements.
module fw_update_ed
  import fwu_pkg::*;
#(
  parameter int unsigned  CLKS_PER_BIT    = 868,
  parameter int unsigned  CLK_HZ          = 100_000_000,
  parameter logic [127:0] S0              = 128'h0123_4567_89ab_cdef_0000_0000_0000_0000,
  parameter logic [19:0]  SET_N           = 20'd1_000_000,
  parameter logic [63:0]  DEADLINE_CYCLES = 64'd500_000_000,
  parameter logic [7:0]   VENDOR_ID       = 8'h5a,
  parameter logic [7:0]   DEVTYPE_ID      = 8'h3c,
  parameter logic [31:0]  PUF_SEED        = 32'h1234_5678,
  parameter int unsigned  PUF_LAYERS      = 6,
  parameter logic [31:0]  RNG_SEED        = 32'hace1_2468,
  parameter int unsigned  MAX_FAILS       = 3,
  parameter logic [63:0]  WINDOW_CYCLES   = 64'd6_000_000_000
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          uart_rx,
  output logic          uart_tx,
  input  logic          update_req,
  input  logic          admin_clear,
  input  logic          time_set,
  input  logic [63:0]   time_sec,
  input  logic [FV_W-1:0] installed_fv,
  output logic          busy,
  output logic          locked,
  output status_e       status,
  output logic [31:0]   elapsed,
  output logic          fw_wr_valid,
  output logic [31:0]   fw_wr_addr,
  output logic [63:0]   fw_wr_data,
  output logic          fw_commit,
  output logic          fw_discard,
  output logic [FV_W-1:0] new_fv
);
  logic         rxb_valid;
  logic [7:0]   rxb_data;
  logic         fifo_wr_ready, fifo_valid, fifo_ready;
  logic [7:0]   fifo_data;
  logic         tx_valid, tx_ready;
  logic [7:0]   tx_data;
  logic         pv, prv;
  logic [255:0] pch, presp;
  logic [63:0]  unix_sec, cycles;
  logic [127:0] timestamp;
  logic         rs_req, rs_ack;
  logic [19:0]  rs_k;
  logic         fail;
  logic [7:0]   fail_count;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (
    .clk, .rst_n, .rx(uart_rx), .rx_valid(rxb_valid), .rx_data(rxb_data));

  sync_fifo #(.W(8), .DEPTH(16)) u_fifo (
    .clk, .rst_n, .wr_valid(rxb_valid), .wr_ready(fifo_wr_ready), .wr_data(rxb_data),
    .rd_valid(fifo_valid), .rd_ready(fifo_ready), .rd_data(fifo_data));

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk, .rst_n, .tx_valid, .tx_data, .tx_ready, .tx(uart_tx));

  dppuf #(.W(256), .LAYERS(PUF_LAYERS), .SEED(PUF_SEED)) u_ppuf (
    .clk, .rst_n, .valid(pv), .challenge(pch), .resp_valid(prv), .response(presp));

  timekeeper #(.CLK_HZ(CLK_HZ)) u_time (
    .clk, .rst_n, .set(time_set), .set_sec(time_sec), .unix_sec, .cycles, .timestamp);

  rand_sel #(.SEED(RNG_SEED)) u_rand (
    .clk, .rst_n, .req(rs_req), .n(SET_N), .ack(rs_ack), .k(rs_k));

  fail_guard #(.MAX_FAILS(MAX_FAILS), .WINDOW_CYCLES(WINDOW_CYCLES)) u_guard (
    .clk, .rst_n, .fail, .admin_clear, .locked, .fail_count);

  fw_update_ctrl #(
    .S0(S0), .SET_N(SET_N), .DEADLINE_CYCLES(DEADLINE_CYCLES),
    .VENDOR_ID(VENDOR_ID), .DEVTYPE_ID(DEVTYPE_ID)
  ) u_ctrl (
    .clk, .rst_n, .update_req, .locked, .busy, .fail, .status, .elapsed,
    .unix_sec, .cycles, .timestamp,
    .rs_req, .rs_ack, .rs_k,
    .rx_valid(fifo_valid), .rx_ready(fifo_ready), .rx_data(fifo_data),
    .tx_valid, .tx_ready, .tx_data,
    .ppuf_valid(pv), .ppuf_challenge(pch), .ppuf_resp_valid(prv), .ppuf_response(presp),
    .installed_fv, .fw_wr_valid, .fw_wr_addr, .fw_wr_data, .fw_commit, .fw_discard, .new_fv);

  // A byte arriving at a full FIFO would be lost; the protocol's go-ahead byte keeps
  // the host from sending ciphertext while the device is busy searching.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  rxb_valid |-> fifo_wr_ready);
endmodule
