// bus_xbar: host-side interconnect of the secure-boot subsystem. One host
// (the core's data/instruction port or a DMA engine, outside this design)
// reaches three targets through a reduced TileLink-UL style channel pair:
//   ADDR_ROM   secure ROM (read port B), reads only
//   ADDR_FLASH boot flash window, word reads and word programs, carried out
//              by the flash controller when the CARE module does not need it
//   ADDR_REGS  CARE status words (regs_i), reads only
// Every access is first put to the access-control checker (chk_*); a refused
// access, an unmapped address or a write to a read-only target completes at
// once with d_error set and touches nothing.
//
// Handshake: a request is taken when a_valid and a_ready are both high; one
// access is outstanding at a time; the response is held on d_valid until
// d_ready. ROM and register reads answer in three clocks; flash accesses take
// the SPI command time (about 40 SCLK periods for a word).
// The paper shows a TL-UL interconnect between the core and the peripherals;
// this reduced single-host form, the map and the word-wide flash window are
// this design's choices.
module bus_xbar
  import care_pkg::*;
#(
  parameter int unsigned ROM_AW = $clog2(care_pkg::ROM_BYTES / 4),
  parameter int unsigned NREGS  = care_pkg::REGS_BYTES / 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  tl_h2d_t           tl_i,
  output tl_d2h_t           tl_o,
  // access-control check
  output logic [31:0]       chk_addr,
  output acc_e              chk_acc,
  input  logic              chk_allow,
  // secure ROM port B
  output logic              rom_en,
  output logic [ROM_AW-1:0] rom_addr,
  input  logic [31:0]       rom_rdata,
  // flash controller
  input  logic              fl_gnt,
  output logic              fl_req,
  output fc_op_e            fl_op,
  output logic [23:0]       fl_addr,
  output logic [10:0]       fl_len,
  input  logic              fl_done,
  input  logic              fl_rd_valid,
  input  logic [7:0]        fl_rd_data,
  output logic              fl_rd_ready,
  output logic              fl_wr_valid,
  output logic [7:0]        fl_wr_data,
  input  logic              fl_wr_ready,
  // status registers
  input  logic [31:0]       regs_i [NREGS]
);

  typedef enum logic [2:0] {X_IDLE, X_ROM, X_ROMW, X_FLREQ, X_FLDATA, X_RESP} st_e;
  st_e st;

  logic        we_q;
  logic [31:0] addr_q, wdata_q, rdata_q;
  logic        err_q;
  logic [1:0]  bcnt;

  logic in_rom, in_flash, in_regs;
  assign in_rom   = tl_i.a_address >= ADDR_ROM   && tl_i.a_address < ADDR_ROM + 32'(ROM_BYTES);
  assign in_flash = tl_i.a_address >= ADDR_FLASH && tl_i.a_address < ADDR_FLASH + 32'(FLASH_WINDOW_BYTES);
  assign in_regs  = tl_i.a_address >= ADDR_REGS  && tl_i.a_address < ADDR_REGS + 32'(REGS_BYTES);

  assign chk_addr = tl_i.a_address;
  assign chk_acc  = tl_i.a_instr ? ACC_EXEC : (tl_i.a_write ? ACC_WRITE : ACC_READ);

  assign tl_o.a_ready = (st == X_IDLE);
  assign tl_o.d_valid = (st == X_RESP);
  assign tl_o.d_data  = rdata_q;
  assign tl_o.d_error = err_q;

  assign fl_req      = (st == X_FLREQ) && fl_gnt;
  assign fl_op       = we_q ? FC_PROG : FC_READ;
  assign fl_addr     = 24'(addr_q - ADDR_FLASH) & 24'hFF_FFFC;
  assign fl_len      = 11'd4;
  assign fl_rd_ready = (st == X_FLDATA) && !we_q;
  assign fl_wr_valid = (st == X_FLDATA) && we_q;
  assign fl_wr_data  = wdata_q[8*bcnt +: 8];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= X_IDLE; we_q <= 1'b0; addr_q <= '0; wdata_q <= '0; rdata_q <= '0;
      err_q <= 1'b0; bcnt <= '0; rom_en <= 1'b0; rom_addr <= '0;
    end else begin
      rom_en <= 1'b0;
      unique case (st)
        X_IDLE: if (tl_i.a_valid) begin
          we_q    <= tl_i.a_write;
          addr_q  <= tl_i.a_address;
          wdata_q <= tl_i.a_data;
          rdata_q <= '0;
          err_q   <= 1'b0;
          bcnt    <= '0;
          if (!chk_allow || !(in_rom || in_flash || in_regs) ||
              (tl_i.a_write && !in_flash)) begin
            err_q <= 1'b1;
            st    <= X_RESP;
          end else if (in_rom) begin
            rom_en   <= 1'b1;
            rom_addr <= ROM_AW'((tl_i.a_address - ADDR_ROM) >> 2);
            st       <= X_ROM;
          end else if (in_regs) begin
            rdata_q <= regs_i[(tl_i.a_address - ADDR_REGS) >> 2];
            st      <= X_RESP;
          end else begin
            st <= X_FLREQ;
          end
        end
        X_ROM:  st <= X_ROMW;
        X_ROMW: begin
          rdata_q <= rom_rdata;
          st      <= X_RESP;
        end
        X_FLREQ: if (fl_gnt) st <= X_FLDATA;
        X_FLDATA: begin
          if (fl_rd_valid && fl_rd_ready) begin
            rdata_q[8*bcnt +: 8] <= fl_rd_data;
            bcnt <= bcnt + 2'd1;
          end
          if (fl_wr_valid && fl_wr_ready) bcnt <= bcnt + 2'd1;
          if (fl_done) st <= X_RESP;
        end
        X_RESP: if (tl_i.d_ready) st <= X_IDLE;
        default: st <= X_IDLE;
      endcase
    end
  end

endmodule
