// care_pkg: types and constants shared by the CARE secure-boot design.
//
// Frame format (one flash frame, 1 KB): bytes 0..31 hold the Hash field
// (HMAC-SHA256 of the frame digest under the derived key), bytes 32..35 the
// frame number and 36..39 the frame offset (both little-endian), 40..55 are
// reserved (zero) and 56..1023 the 968-byte payload. The 1 KB frame, the
// 968-byte payload and the three header fields follow the paper; the split of
// the 56 header bytes is this design's choice.
//
// Secure ROM map (bytes): 0..12287 boot-code area, then the CARE area:
// chip information (vendor ID, UUID, firmware revision, key K), the golden
// digests (32 bytes per frame) and the recovery payloads (968 bytes per
// frame). The 12 KB + 6 KB split follows the paper's memory-overhead chart;
// the order inside the CARE area is this design's choice.
//
// The host bus is a reduced TileLink-UL style channel pair (A: request,
// D: response), Get and PutFullData of 32-bit words only.
package care_pkg;

  // ---------------- frame format ----------------
  localparam int unsigned FRAME_BYTES   = 1024;
  localparam int unsigned HASH_BYTES    = 32;
  localparam int unsigned HDR_BYTES     = 56;
  localparam int unsigned PAYLOAD_BYTES = FRAME_BYTES - HDR_BYTES;   // 968
  localparam int unsigned NUM_OFS       = 32;   // frame number field
  localparam int unsigned OFF_OFS       = 36;   // frame offset field
  localparam int unsigned NUM_FRAMES    = 6;    // 5.6 KB test application

  // ---------------- secure ROM map (byte addresses) ----------------
  localparam int unsigned ROM_BYTES       = 18432;          // 12 KB + 6 KB
  localparam int unsigned ROM_CARE_BASE   = 12288;
  localparam int unsigned ROM_VENDOR      = ROM_CARE_BASE + 0;   // 4 bytes
  localparam int unsigned ROM_UUID        = ROM_CARE_BASE + 4;   // 16 bytes
  localparam int unsigned ROM_FWREV       = ROM_CARE_BASE + 20;  // 4 bytes
  localparam int unsigned ROM_KEY         = ROM_CARE_BASE + 24;  // 32 bytes
  localparam int unsigned ROM_DIGEST_BASE = ROM_CARE_BASE + 64;  // 32 B/frame
  localparam int unsigned ROM_RECOV_BASE  = ROM_CARE_BASE + 256; // 968 B/frame

  // ---------------- SPI NOR flash commands ----------------
  localparam logic [7:0] SPI_CMD_READ  = 8'h03;
  localparam logic [7:0] SPI_CMD_WREN  = 8'h06;
  localparam logic [7:0] SPI_CMD_PP    = 8'h02;
  localparam logic [7:0] SPI_CMD_SE    = 8'h20;
  localparam logic [7:0] SPI_CMD_RDSR  = 8'h05;
  localparam int unsigned FLASH_PAGE_BYTES   = 256;
  localparam int unsigned FLASH_SECTOR_BYTES = 1024;

  typedef enum logic [1:0] {
    FC_READ  = 2'd0,
    FC_PROG  = 2'd1,
    FC_ERASE = 2'd2
  } fc_op_e;

  // ---------------- CA unit commands ----------------
  typedef enum logic [1:0] {
    CA_VERIFY = 2'd0,   // check one frame streamed in
    CA_SIGN   = 2'd1,   // HMAC(derived key, 32-byte digest)
    CA_DERIVE = 2'd2    // derived key = HMAC(K, UUID)
  } ca_cmd_e;

  // ---------------- access control ----------------
  typedef enum logic [1:0] {
    ACC_READ  = 2'd0,
    ACC_WRITE = 2'd1,
    ACC_EXEC  = 2'd2
  } acc_e;

  typedef struct packed {
    logic [31:0] base;   // first byte address of the region
    logic [31:0] top;    // first byte address past the region
    logic        r;
    logic        w;
    logic        x;
    logic        lock;   // entry can no longer be rewritten
  } pmp_entry_t;

  localparam int unsigned PMP_ENTRIES = 4;

  // ---------------- host bus address map ----------------
  localparam logic [31:0] ADDR_ROM   = 32'h0000_8000;
  localparam logic [31:0] ADDR_FLASH = 32'h2000_0000;
  localparam logic [31:0] ADDR_REGS  = 32'h4000_0000;
  localparam int unsigned FLASH_WINDOW_BYTES = 8192;
  localparam int unsigned REGS_BYTES = 20;   // five status words

  typedef struct packed {
    logic        a_valid;
    logic        a_write;    // PutFullData when 1, Get when 0
    logic        a_instr;    // instruction fetch
    logic [31:0] a_address;
    logic [31:0] a_data;
    logic        d_ready;
  } tl_h2d_t;

  typedef struct packed {
    logic        a_ready;
    logic        d_valid;
    logic [31:0] d_data;
    logic        d_error;
  } tl_d2h_t;

endpackage
