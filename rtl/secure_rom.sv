// secure_rom: the secure storage of the design. It holds the first-stage boot
// code area, the chip information (vendor ID, UUID, firmware revision, shared
// key K), one golden digest per frame and the 968-byte golden payload of each
// frame used for recovery (byte map in care_pkg).
//
// The paper calls this store both a ROM and a secure EEPROM and notes that
// an EEPROM lets the recovery image be updated. It is therefore modelled as a
// word array with two synchronous read ports (port A for the CARE module,
// port B for the host bus; data one clock after en) and a provisioning write
// port. Writes are accepted only until lock_set has been seen; the lock is
// sticky until the next power-on reset, and the CARE module sets it before
// it reads anything. Word organisation, two read ports and the lock are this
// design's choices. BYTES defaults to 12 KB of boot-code area plus the 6 KB
// CARE area shown in the paper's memory-overhead chart.
module secure_rom #(
  parameter int unsigned BYTES = care_pkg::ROM_BYTES,
  localparam int unsigned WORDS = BYTES / 4,
  localparam int unsigned AW = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          rst_n,
  // port A (CARE)
  input  logic          a_en,
  input  logic [AW-1:0] a_addr,
  output logic [31:0]   a_rdata,
  // port B (host bus)
  input  logic          b_en,
  input  logic [AW-1:0] b_addr,
  output logic [31:0]   b_rdata,
  // provisioning
  input  logic          prog_en,
  input  logic [AW-1:0] prog_addr,
  input  logic [31:0]   prog_wdata,
  input  logic          lock_set,
  output logic          locked
);

  logic [31:0] mem [WORDS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        locked <= 1'b0;
    else if (lock_set) locked <= 1'b1;
  end

  always_ff @(posedge clk) begin
    if (prog_en && !locked && !lock_set && 32'(prog_addr) < WORDS) mem[prog_addr] <= prog_wdata;
    if (a_en) a_rdata <= mem[a_addr];
    if (b_en) b_rdata <= mem[b_addr];
  end

endmodule
