// tb_bus_xbar: the interconnect with the access-control checker, a secure
// ROM, the flash controller with SPI master and flash model, and constant
// status words. The testbench sets its own access policy and checks:
// ROM and register reads return the stored words, flash word reads return
// the flash bytes, an allowed flash write programs the flash, and refused,
// unmapped, read-only-target and non-executable accesses end with d_error
// and change nothing. The flash grant is withheld at random times.
module tb_bus_xbar;
  import care_pkg::*;
  localparam int AW = $clog2(ROM_BYTES / 4);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  tl_h2d_t tl_i;
  tl_d2h_t tl_o;
  logic [31:0] chk_addr;
  acc_e chk_acc;
  logic chk_allow, all_locked, cfg_we;
  logic [1:0] cfg_idx;
  pmp_entry_t cfg_entry;
  logic rom_en;
  logic [AW-1:0] rom_addr;
  logic [31:0] rom_rdata, regs [REGS_BYTES / 4];
  logic fl_gnt, fl_req, fl_done, fl_rd_valid, fl_rd_ready, fl_wr_valid, fl_wr_ready;
  fc_op_e fl_op;
  logic [23:0] fl_addr;
  logic [10:0] fl_len;
  logic [7:0] fl_rd_data, fl_wr_data;
  int checks = 0, failures = 0;

  bus_xbar dut (.clk, .rst_n, .tl_i, .tl_o, .chk_addr, .chk_acc, .chk_allow,
    .rom_en, .rom_addr, .rom_rdata, .fl_gnt, .fl_req, .fl_op, .fl_addr, .fl_len, .fl_done,
    .fl_rd_valid, .fl_rd_data, .fl_rd_ready, .fl_wr_valid, .fl_wr_data, .fl_wr_ready, .regs_i(regs));
  pmp_checker u_pmp (.clk, .rst_n, .cfg_we, .cfg_idx, .cfg_entry, .chk_addr, .chk_acc, .chk_allow, .all_locked);

  logic prog_en, locked;
  logic [AW-1:0] prog_addr;
  logic [31:0] prog_wdata, a_rdata;
  secure_rom u_rom (.clk, .rst_n, .a_en(1'b0), .a_addr('0), .a_rdata, .b_en(rom_en), .b_addr(rom_addr),
    .b_rdata(rom_rdata), .prog_en, .prog_addr, .prog_wdata, .lock_set(1'b0), .locked);

  logic fc_busy, spi_start, spi_done, spi_busy, sclk, mosi, miso, cs_n;
  logic [7:0] spi_tx, spi_rx;
  flash_ctrl u_fc (.clk, .rst_n, .req(fl_req), .op(fl_op), .addr(fl_addr), .len(fl_len),
    .busy(fc_busy), .done(fl_done), .rd_valid(fl_rd_valid), .rd_data(fl_rd_data), .rd_ready(fl_rd_ready),
    .wr_valid(fl_wr_valid), .wr_data(fl_wr_data), .wr_ready(fl_wr_ready),
    .spi_start, .spi_tx, .spi_done, .spi_rx, .cs_n);
  spi_master #(.CLK_DIV(1)) u_spi (.clk, .rst_n, .start(spi_start), .tx_data(spi_tx),
    .busy(spi_busy), .done(spi_done), .rx_data(spi_rx), .sclk, .mosi, .miso);
  spi_flash_model u_fl (.sclk, .cs_n, .mosi, .miso);

  logic hold;
  always @(negedge clk) hold = ($urandom_range(0, 3) == 0);
  assign fl_gnt = !fc_busy && !hold;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic access(bit wr, bit instr, logic [31:0] a, logic [31:0] d,
                        output logic [31:0] rd, output logic err);
    @(negedge clk);
    tl_i.a_valid = 1; tl_i.a_write = wr; tl_i.a_instr = instr; tl_i.a_address = a; tl_i.a_data = d;
    @(posedge clk); while (!tl_o.a_ready) @(posedge clk);
    @(negedge clk); tl_i.a_valid = 0;
    while (!tl_o.d_valid) @(negedge clk);
    rd = tl_o.d_data; err = tl_o.d_error;
    repeat ($urandom_range(0, 2)) @(negedge clk);
    tl_i.d_ready = 1; @(negedge clk); tl_i.d_ready = 0;
  endtask

  task automatic chk(string w, logic [31:0] g, logic [31:0] e);
    checks++;
    if (g !== e) begin failures++; $display("FAIL %s got %h exp %h", w, g, e); end
  endtask

  task automatic set_entry(int i, logic [31:0] b, logic [31:0] t, logic [2:0] rwx);
    @(negedge clk); cfg_we = 1; cfg_idx = 2'(i);
    cfg_entry.base = b; cfg_entry.top = t; {cfg_entry.r, cfg_entry.w, cfg_entry.x} = rwx; cfg_entry.lock = 0;
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    logic [31:0] romw [ROM_BYTES / 4];
    logic [31:0] rd;
    logic err;
    tl_i = '0; cfg_we = 0; cfg_idx = 0; cfg_entry = '0; prog_en = 0; prog_addr = 0; prog_wdata = 0;
    foreach (regs[i]) regs[i] = $urandom;
    foreach (romw[i]) romw[i] = $urandom;
    for (int i = 0; i < 8192; i++) u_fl.mem[i] = (i >= 4096) ? 8'hFF : 8'($urandom);
    repeat (2) @(posedge clk); rst_n = 1;
    foreach (romw[i]) begin @(negedge clk); prog_en = 1; prog_addr = AW'(i); prog_wdata = romw[i]; end
    @(negedge clk); prog_en = 0;
    set_entry(0, ADDR_ROM + 32'(ROM_CARE_BASE), ADDR_ROM + 32'(ROM_BYTES), 3'b000);
    set_entry(1, ADDR_ROM, ADDR_ROM + 32'(ROM_CARE_BASE), 3'b101);
    set_entry(2, ADDR_FLASH, ADDR_FLASH + 32'h1000, 3'b101);               // lower half r-x
    set_entry(3, ADDR_FLASH + 32'h1000, ADDR_FLASH + 32'h2000, 3'b110);    // upper half rw-
    // ROM reads and fetches
    for (int t = 0; t < 20; t++) begin
      int wd = $urandom_range(0, ROM_CARE_BASE / 4 - 1);
      access(0, t[0], ADDR_ROM + 32'(4*wd), 0, rd, err);
      chk("rom err", 32'(err), 0); chk("rom data", rd, romw[wd]);
    end
    // protected ROM area
    access(0, 0, ADDR_ROM + 32'(ROM_KEY), 0, rd, err);
    chk("key read refused", 32'(err), 1); chk("no data leaked", rd, 0);
    // write to ROM (even where readable) refused
    access(1, 0, ADDR_ROM + 32'h10, 32'h1234, rd, err); chk("rom write refused", 32'(err), 1);
    // registers are not covered by the policy here: refused
    access(0, 0, ADDR_REGS, 0, rd, err); chk("regs uncovered refused", 32'(err), 1);
    set_entry(3, ADDR_REGS, ADDR_REGS + 32'(REGS_BYTES), 3'b100);
    for (int i = 0; i < REGS_BYTES / 4; i++) begin
      access(0, 0, ADDR_REGS + 32'(4*i), 0, rd, err);
      chk("reg err", 32'(err), 0); chk("reg data", rd, regs[i]);
    end
    // flash reads
    for (int t = 0; t < 10; t++) begin
      int a = 4 * $urandom_range(0, 1023);
      access(0, t[0], ADDR_FLASH + 32'(a), 0, rd, err);
      chk("flash err", 32'(err), 0);
      chk("flash data", rd, {u_fl.mem[a+3], u_fl.mem[a+2], u_fl.mem[a+1], u_fl.mem[a]});
    end
    // flash write refused (lower half is r-x)
    begin
      logic [7:0] prev_b [4];
      for (int i = 0; i < 4; i++) prev_b[i] = u_fl.mem[64 + i];
      access(1, 0, ADDR_FLASH + 32'd64, 32'h0, rd, err);
      chk("flash write refused", 32'(err), 1);
      for (int i = 0; i < 4; i++) chk("flash unchanged", 32'(u_fl.mem[64 + i]), 32'(prev_b[i]));
    end
    // flash write allowed in a region granting w
    set_entry(3, ADDR_FLASH + 32'h1000, ADDR_FLASH + 32'h2000, 3'b110);
    access(1, 0, ADDR_FLASH + 32'h1008, 32'hA5C3_0F12, rd, err);
    chk("flash write ok", 32'(err), 0);
    chk("flash programmed", {u_fl.mem[32'h100b], u_fl.mem[32'h100a], u_fl.mem[32'h1009], u_fl.mem[32'h1008]}, 32'hA5C3_0F12);
    // execute from a region without x
    access(0, 1, ADDR_FLASH + 32'h1008, 0, rd, err); chk("no-exec refused", 32'(err), 1);
    // unmapped address covered by no entry
    access(0, 0, 32'h7000_0000, 0, rd, err); chk("unmapped refused", 32'(err), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
