// care_soc: top level of the secure-boot subsystem. It wires the CARE module
// (CA unit with the shared HMAC-SHA256 core, resilience engine, boot
// sequencer) to the secure ROM, the flash controller and its dedicated SPI
// master, the access-control checker, the host bus interconnect and the GPIO
// block.
//
// Ports:
//   prov_mode, prov_we/addr/wdata  manufacturing strap and secure-ROM write
//                                  port; while prov_mode is high after reset
//                                  the CARE module waits and the ROM is open.
//   gpio_i                         inputs; a rising edge on pin 7 re-runs
//                                  the bootstrap.
//   tl_i / tl_o                    host bus (core or DMA), see bus_xbar.
//   spi_*                          SPI bus to the external boot flash.
//   core_fetch_en                  release of the processor core: high only
//                                  after every frame of the flash image has
//                                  passed the integrity and authenticity
//                                  checks (possibly after recovery).
//   boot_done, boot_fail           end of a bootstrap, good or stopped.
// Status words at ADDR_REGS: 0 {access policy locked, ROM locked,
// last authenticity result, last integrity result, boot_fail, boot_done,
// chain_v, core_fetch_en}, 1 {last_bad_frame, recover_count, detect_count,
// frames_checked}, 2 vendor ID, 3 GPIO inputs, 4 firmware revision.
//
// The processor core, SRAM, UART, debug module and interrupt controller of
// the paper's SoC are outside this design; the core attaches at tl_i/tl_o
// and core_fetch_en. The flash controller is shared: the CARE module owns it
// during a bootstrap and the host bus otherwise; a bus access already in
// flight when a bootstrap starts is finished first.
module care_soc
  import care_pkg::*;
#(
  parameter int unsigned SPI_CLK_DIV = 2,
  localparam int unsigned ROM_AW = $clog2(care_pkg::ROM_BYTES / 4)
) (
  input  logic              clk,
  input  logic              rst_n,
  // provisioning
  input  logic              prov_mode,
  input  logic              prov_we,
  input  logic [ROM_AW-1:0] prov_addr,
  input  logic [31:0]       prov_wdata,
  // GPIO
  input  logic [31:0]       gpio_i,
  // host bus
  input  tl_h2d_t           tl_i,
  output tl_d2h_t           tl_o,
  // SPI flash
  output logic              spi_sclk,
  output logic              spi_mosi,
  input  logic              spi_miso,
  output logic              spi_cs_n,
  // core release and status
  output logic              core_fetch_en,
  output logic              boot_done,
  output logic              boot_fail
);

  // ---------------- GPIO ----------------
  logic [31:0] gpio_q;
  logic        boot_trig;
  gpio #(.WIDTH(32), .BOOT_PIN(7)) u_gpio (.clk, .rst_n, .gpio_i, .gpio_q, .boot_trig);

  // ---------------- secure ROM ----------------
  logic              rom_a_en, rom_b_en, rom_lock_set, rom_locked;
  logic [ROM_AW-1:0] rom_a_addr, rom_b_addr;
  logic [31:0]       rom_a_rdata, rom_b_rdata;
  secure_rom u_rom (
    .clk, .rst_n,
    .a_en (rom_a_en), .a_addr (rom_a_addr), .a_rdata (rom_a_rdata),
    .b_en (rom_b_en), .b_addr (rom_b_addr), .b_rdata (rom_b_rdata),
    .prog_en (prov_we), .prog_addr (prov_addr), .prog_wdata (prov_wdata),
    .lock_set (rom_lock_set), .locked (rom_locked)
  );

  // ---------------- flash controller and SPI ----------------
  logic        fc_req, fc_busy, fc_done, fc_rd_valid, fc_rd_ready, fc_wr_valid, fc_wr_ready;
  fc_op_e      fc_op;
  logic [23:0] fc_addr;
  logic [10:0] fc_len;
  logic [7:0]  fc_rd_data, fc_wr_data;
  logic        spi_start, spi_done, spi_busy;
  logic [7:0]  spi_tx, spi_rx;

  flash_ctrl u_fc (
    .clk, .rst_n,
    .req (fc_req), .op (fc_op), .addr (fc_addr), .len (fc_len), .busy (fc_busy), .done (fc_done),
    .rd_valid (fc_rd_valid), .rd_data (fc_rd_data), .rd_ready (fc_rd_ready),
    .wr_valid (fc_wr_valid), .wr_data (fc_wr_data), .wr_ready (fc_wr_ready),
    .spi_start, .spi_tx, .spi_done, .spi_rx, .cs_n (spi_cs_n)
  );

  spi_master #(.CLK_DIV(SPI_CLK_DIV)) u_spi (
    .clk, .rst_n, .start (spi_start), .tx_data (spi_tx), .busy (spi_busy), .done (spi_done),
    .rx_data (spi_rx), .sclk (spi_sclk), .mosi (spi_mosi), .miso (spi_miso)
  );

  // ---------------- CARE module ----------------
  logic        c_fc_own, c_fc_req, c_rd_ready, c_wr_valid;
  fc_op_e      c_fc_op;
  logic [23:0] c_fc_addr;
  logic [10:0] c_fc_len;
  logic [7:0]  c_wr_data;
  logic        pmp_we, chain_v, integ_ok, auth_ok;
  logic [1:0]  pmp_idx;
  pmp_entry_t  pmp_entry;
  logic [31:0] vendor_id, fw_rev;
  logic [7:0]  frames_checked, detect_count, recover_count, last_bad_frame;

  care u_care (
    .clk, .rst_n, .prov_mode, .boot_trig,
    .rom_en (rom_a_en), .rom_addr (rom_a_addr), .rom_rdata (rom_a_rdata), .rom_lock_set,
    .fc_own (c_fc_own), .fc_req (c_fc_req), .fc_op (c_fc_op), .fc_addr (c_fc_addr),
    .fc_len (c_fc_len), .fc_busy, .fc_done, .fc_rd_valid, .fc_rd_data,
    .fc_rd_ready (c_rd_ready), .fc_wr_valid (c_wr_valid), .fc_wr_data (c_wr_data), .fc_wr_ready,
    .pmp_we, .pmp_idx, .pmp_entry,
    .core_fetch_en, .boot_done, .boot_fail, .chain_v, .integ_ok, .auth_ok, .vendor_id, .fw_rev,
    .frames_checked, .detect_count, .recover_count, .last_bad_frame
  );

  // ---------------- access control ----------------
  logic [31:0] chk_addr;
  acc_e        chk_acc;
  logic        chk_allow, pmp_all_locked;
  pmp_checker #(.N(PMP_ENTRIES)) u_pmp (
    .clk, .rst_n, .cfg_we (pmp_we), .cfg_idx (pmp_idx), .cfg_entry (pmp_entry),
    .chk_addr, .chk_acc, .chk_allow, .all_locked (pmp_all_locked)
  );

  // ---------------- host bus ----------------
  logic        b_fl_gnt, b_fl_req, b_rd_ready, b_wr_valid;
  fc_op_e      b_fl_op;
  logic [23:0] b_fl_addr;
  logic [10:0] b_fl_len;
  logic [7:0]  b_wr_data;
  logic [31:0] regs [REGS_BYTES / 4];

  assign regs[0] = {24'h0, pmp_all_locked, rom_locked, auth_ok, integ_ok,
                    boot_fail, boot_done, chain_v, core_fetch_en};
  assign regs[1] = {last_bad_frame, recover_count, detect_count, frames_checked};
  assign regs[2] = vendor_id;
  assign regs[3] = gpio_q;
  assign regs[4] = fw_rev;

  bus_xbar #(.ROM_AW(ROM_AW)) u_xbar (
    .clk, .rst_n, .tl_i, .tl_o,
    .chk_addr, .chk_acc, .chk_allow,
    .rom_en (rom_b_en), .rom_addr (rom_b_addr), .rom_rdata (rom_b_rdata),
    .fl_gnt (b_fl_gnt), .fl_req (b_fl_req), .fl_op (b_fl_op), .fl_addr (b_fl_addr),
    .fl_len (b_fl_len), .fl_done (fc_done), .fl_rd_valid (fc_rd_valid), .fl_rd_data (fc_rd_data),
    .fl_rd_ready (b_rd_ready), .fl_wr_valid (b_wr_valid), .fl_wr_data (b_wr_data),
    .fl_wr_ready (fc_wr_ready),
    .regs_i (regs)
  );

  // flash controller sharing: the CARE module has priority
  assign b_fl_gnt    = !c_fc_own && !fc_busy;
  assign fc_req      = c_fc_own ? c_fc_req  : b_fl_req;
  assign fc_op       = c_fc_own ? c_fc_op   : b_fl_op;
  assign fc_addr     = c_fc_own ? c_fc_addr : b_fl_addr;
  assign fc_len      = c_fc_own ? c_fc_len  : b_fl_len;
  assign fc_rd_ready = c_rd_ready | b_rd_ready;
  assign fc_wr_valid = c_wr_valid | b_wr_valid;
  assign fc_wr_data  = c_wr_valid ? c_wr_data : b_wr_data;

endmodule
