// spi_flash_model: behavioural model of a small SPI NOR flash (not
// synthesizable logic; it stands in for the external boot flash device).
//
// Mode 0, MSB first. Commands: 0x03 read, 0x06 write enable, 0x02 page
// program (256-byte pages, wraps inside the page, can only clear bits),
// 0x20 sector erase (SECTOR bytes set to 0xFF), 0x05 read status (bit 0 =
// write in progress, bit 1 = write enable latch). A program or erase keeps
// the busy bit set for a number of status reads (PROG_POLLS, ERASE_POLLS)
// instead of a wall-clock time, so the model needs no time scale.
// The array mem[] is public so that testbenches can load an image, tamper
// with it (the attacker of the threat model) and inspect it.
module spi_flash_model #(
  parameter int unsigned BYTES       = 8192,
  parameter int unsigned SECTOR      = 1024,
  parameter int unsigned PROG_POLLS  = 3,
  parameter int unsigned ERASE_POLLS = 6
) (
  input  logic sclk,
  input  logic cs_n,
  input  logic mosi,
  output logic miso
);

  localparam logic [7:0] SPI_READ = 8'h03, SPI_WREN = 8'h06, SPI_PP = 8'h02,
                         SPI_SE = 8'h20, SPI_RDSR = 8'h05;

  logic [7:0] mem [BYTES];
  logic [7:0] cmd, in_sr, out_byte;
  logic [2:0] bitcnt, out_bit;
  int         bytecnt;
  logic [23:0] a;
  logic       wel = 1'b0;
  int         busy_polls = 0;
  int         erase_count = 0, prog_bytes = 0, read_bytes = 0;
  bit         pend_erase = 0, pend_prog = 0;

  initial begin
    miso = 1'b0;
    bitcnt = '0; out_bit = '0; bytecnt = 0; out_byte = '0; in_sr = '0; cmd = '0; a = '0;
  end

  function automatic logic [7:0] status();
    return {6'b0, wel, busy_polls != 0};
  endfunction

  always @(negedge cs_n) begin
    bitcnt = '0; bytecnt = 0; out_bit = '0; out_byte = '0;
    pend_erase = 0; pend_prog = 0;
  end

  always @(posedge cs_n) begin
    if (pend_erase && wel) begin
      for (int i = 0; i < int'(SECTOR); i++) mem[(int'(a) & ~(int'(SECTOR) - 1)) + i] = 8'hFF;
      erase_count++;
      busy_polls = ERASE_POLLS;
      wel = 1'b0;
    end
    if (pend_prog) begin
      busy_polls = PROG_POLLS;
      wel = 1'b0;
    end
  end

  always @(posedge sclk) if (!cs_n) begin
    logic [7:0] b;
    b = {in_sr[6:0], mosi};
    in_sr = b;
    bitcnt = bitcnt + 3'd1;
    if (bitcnt == 3'd0) begin
      // a whole byte arrived
      out_bit = '0;
      if (bytecnt == 0) begin
        cmd = b;
        if (busy_polls != 0 && b != SPI_RDSR) cmd = 8'hFF;   // ignored while busy
        if (cmd == SPI_WREN) wel = 1'b1;
        if (cmd == SPI_RDSR) begin
          out_byte = status();
          if (busy_polls != 0) busy_polls--;
        end
      end else if (bytecnt <= 3) begin
        a = {a[15:0], b};
        if (bytecnt == 3 && cmd == SPI_READ) begin
          out_byte = mem[int'(a) % BYTES];
          read_bytes++;
        end
        if (bytecnt == 3 && cmd == SPI_SE) pend_erase = 1;
      end else begin
        if (cmd == SPI_READ) begin
          a = a + 24'd1;
          out_byte = mem[int'(a) % BYTES];
          read_bytes++;
        end else if (cmd == SPI_PP && wel) begin
          mem[int'({a[23:8], 8'(a[7:0] + 8'(bytecnt - 4))}) % BYTES] &= b;
          prog_bytes++;
          pend_prog = 1;
        end
      end
      if (cmd == SPI_RDSR && bytecnt > 0) begin
        out_byte = status();
        if (busy_polls != 0) busy_polls--;
      end
      bytecnt++;
    end
  end

  always @(negedge sclk) if (!cs_n) begin
    miso = out_byte[7 - out_bit];
    out_bit = out_bit + 3'd1;
  end

endmodule
