// fwu_pkg: types and constants shared by the device-side firmware-update engine.
//
// Holds the sizes of the protocol fields (256-bit PUF challenges and responses,
// 128-bit keys and timestamps, 64-bit cipher blocks, 20-bit set size, 10-bit version
// code), the layout of the encrypted trailer block that carries the version metadata,
// and the status codes the device reports at the end of an update attempt.
// The field widths follow the published message sizes; the trailer layout and the
// status encoding are this design's own.
package fwu_pkg;

  localparam int unsigned PUF_W = 256;   // dPPUF challenge/response width
  localparam int unsigned KEY_W = 128;   // SIMON 64/128 key, I1, I2, SK, Timestamp
  localparam int unsigned BLK_W = 64;    // SIMON 64/128 block
  localparam int unsigned N_W   = 20;    // compact representation of the set S
  localparam int unsigned FV_W  = 10;    // firmware version code

  // Decrypted trailer block (last 64-bit word of FI||FV).
  typedef struct packed {
    logic [5:0]  rsvd;
    logic [31:0] best_before;   // UNIX seconds
    logic [7:0]  vendor;
    logic [7:0]  devtype;
    logic [FV_W-1:0] fv;
  } fv_trailer_t;

  // Result of one update attempt, sent to the host as the first byte of the report.
  typedef enum logic [7:0] {
    ST_OK       = 8'h00,
    ST_LATE     = 8'h01,  // package arrived after the deadline
    ST_NOKEY    = 8'h02,  // no element of S reproduces O2
    ST_DIGEST   = 8'h03,  // SHA-256 of FI||FV does not match
    ST_MISMATCH = 8'h04,  // vendor or device type differs
    ST_ROLLBACK = 8'h05,  // version not newer than installed
    ST_EXPIRED  = 8'h06,  // best-before time passed
    ST_BADLEN   = 8'h07,  // zero-length package
    ST_LOCKED   = 8'h08   // updates disabled after repeated failures
  } status_e;

endpackage
