// flash_ctrl: turns read, erase and program requests into SPI NOR flash
// command sequences on the spi_master byte engine, and drives chip select.
//
//   FC_READ : CS low, 0x03 + 24-bit address, then len data bytes, CS high.
//             Each byte is offered on rd_valid/rd_data; the next SPI byte is
//             only started once rd_ready took the current one, so a slow
//             consumer just stretches SCLK.
//   FC_PROG : write enable (0x06), then 0x02 + address + len bytes pulled
//             from wr_valid/wr_data (wr_ready asks for the next byte), then
//             status polling (0x05) until the write-in-progress bit clears.
//   FC_ERASE: write enable, sector erase 0x20 + address, status polling.
// A request is taken when req is high and busy is low; done pulses once at
// the end. Programs must stay inside one 256-byte page. Chip select is held
// high for CS_GAP clocks between commands.
// The paper only says the flash controller translates read, erase and
// program requests to low-level signalling and timing; the standard SPI NOR
// command set and the polling scheme are this design's choice.
module flash_ctrl
  import care_pkg::*;
#(
  parameter int unsigned CS_GAP = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  // request
  input  logic        req,
  input  fc_op_e      op,
  input  logic [23:0] addr,
  input  logic [10:0] len,
  output logic        busy,
  output logic        done,
  // read data stream
  output logic        rd_valid,
  output logic [7:0]  rd_data,
  input  logic        rd_ready,
  // program data stream
  input  logic        wr_valid,
  input  logic [7:0]  wr_data,
  output logic        wr_ready,
  // SPI byte engine
  output logic        spi_start,
  output logic [7:0]  spi_tx,
  input  logic        spi_done,
  input  logic [7:0]  spi_rx,
  output logic        cs_n
);

  typedef enum logic [3:0] {
    F_IDLE, F_WREN, F_WREN_GAP, F_HDR, F_DATA, F_RDOUT, F_END_GAP,
    F_POLL, F_POLL_CHK, F_DONE
  } st_e;
  st_e st;

  fc_op_e      op_q;
  logic [23:0] addr_q;
  logic [10:0] left;
  logic [1:0]  hidx;       // header byte index (0 = command)
  logic        xfer;       // a byte transfer is in flight
  logic [7:0]  gap;
  logic        pbyte;      // poll: 0 = command byte, 1 = status byte

  logic [7:0] hdr_byte;
  always_comb begin
    unique case (hidx)
      2'd0:    hdr_byte = (op_q == FC_READ)  ? SPI_CMD_READ :
                          (op_q == FC_PROG)  ? SPI_CMD_PP   : SPI_CMD_SE;
      2'd1:    hdr_byte = addr_q[23:16];
      2'd2:    hdr_byte = addr_q[15:8];
      default: hdr_byte = addr_q[7:0];
    endcase
  end

  assign busy     = (st != F_IDLE);
  assign wr_ready = (st == F_DATA) && (op_q == FC_PROG) && !xfer && (left != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= F_IDLE; op_q <= FC_READ; addr_q <= '0; left <= '0; hidx <= '0;
      xfer <= 1'b0; gap <= '0; pbyte <= 1'b0; cs_n <= 1'b1;
      spi_start <= 1'b0; spi_tx <= '0; done <= 1'b0; rd_valid <= 1'b0; rd_data <= '0;
    end else begin
      spi_start <= 1'b0;
      done      <= 1'b0;
      unique case (st)
        F_IDLE: if (req) begin
          op_q   <= op;
          addr_q <= addr;
          left   <= len;
          hidx   <= '0;
          xfer   <= 1'b0;
          cs_n   <= 1'b0;
          if (op == FC_READ) st <= F_HDR;
          else begin
            spi_start <= 1'b1;
            spi_tx    <= SPI_CMD_WREN;
            xfer      <= 1'b1;
            st        <= F_WREN;
          end
        end
        F_WREN: if (spi_done) begin
          xfer <= 1'b0;
          cs_n <= 1'b1;
          gap  <= 8'(CS_GAP);
          st   <= F_WREN_GAP;
        end
        F_WREN_GAP: begin
          if (gap != 0) gap <= gap - 8'd1;
          else begin
            cs_n <= 1'b0;
            st   <= F_HDR;
          end
        end
        F_HDR: begin
          if (!xfer) begin
            spi_start <= 1'b1;
            spi_tx    <= hdr_byte;
            xfer      <= 1'b1;
          end else if (spi_done) begin
            xfer <= 1'b0;
            hidx <= hidx + 2'd1;
            if (hidx == 2'd3) st <= (op_q == FC_ERASE) ? F_END_GAP : F_DATA;
            if (hidx == 2'd3 && op_q == FC_ERASE) begin
              cs_n <= 1'b1;
              gap  <= 8'(CS_GAP);
            end
          end
        end
        F_DATA: begin
          if (left == 0) begin
            cs_n <= 1'b1;
            gap  <= 8'(CS_GAP);
            st   <= F_END_GAP;
          end else if (!xfer) begin
            if (op_q == FC_READ) begin
              spi_start <= 1'b1;
              spi_tx    <= 8'h00;
              xfer      <= 1'b1;
            end else if (wr_valid) begin
              spi_start <= 1'b1;
              spi_tx    <= wr_data;
              xfer      <= 1'b1;
            end
          end else if (spi_done) begin
            xfer <= 1'b0;
            left <= left - 11'd1;
            if (op_q == FC_READ) begin
              rd_valid <= 1'b1;
              rd_data  <= spi_rx;
              st       <= F_RDOUT;
            end
          end
        end
        F_RDOUT: if (rd_ready) begin
          rd_valid <= 1'b0;
          st       <= F_DATA;
        end
        F_END_GAP: begin
          if (gap != 0) gap <= gap - 8'd1;
          else if (op_q == FC_READ) begin
            done <= 1'b1;
            st   <= F_IDLE;
          end else begin
            cs_n  <= 1'b0;
            pbyte <= 1'b0;
            spi_start <= 1'b1;
            spi_tx    <= SPI_CMD_RDSR;
            st    <= F_POLL;
          end
        end
        F_POLL: if (spi_done) begin
          if (!pbyte) begin
            pbyte     <= 1'b1;
            spi_start <= 1'b1;
            spi_tx    <= 8'h00;
          end else begin
            cs_n <= 1'b1;
            gap  <= 8'(CS_GAP);
            st   <= F_POLL_CHK;
          end
        end
        F_POLL_CHK: begin
          if (spi_rx[0]) begin
            // still busy: poll again after the gap
            st <= F_END_GAP;
          end else if (gap != 0) begin
            gap <= gap - 8'd1;
          end else begin
            done <= 1'b1;
            st   <= F_IDLE;
          end
        end
        default: st <= F_IDLE;
      endcase
    end
  end

endmodule
