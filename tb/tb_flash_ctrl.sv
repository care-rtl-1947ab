// tb_flash_ctrl: drives the flash controller (with spi_master and the SPI
// NOR model) through reads with a stalling consumer, a sector erase and
// page programs, and compares the model's array and the bytes read back
// with what the testbench itself wrote and expects.
module tb_flash_ctrl;
  import care_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req, busy, done, rd_valid, rd_ready, wr_valid, wr_ready;
  fc_op_e op;
  logic [23:0] addr;
  logic [10:0] len;
  logic [7:0] rd_data, wr_data;
  logic spi_start, spi_done, cs_n, sclk, mosi, miso, spi_busy;
  logic [7:0] spi_tx, spi_rx;
  int checks = 0, failures = 0;

  flash_ctrl dut (.*);
  spi_master #(.CLK_DIV(1)) u_spi (.clk, .rst_n, .start(spi_start), .tx_data(spi_tx),
    .busy(spi_busy), .done(spi_done), .rx_data(spi_rx), .sclk, .mosi, .miso);
  spi_flash_model #(.BYTES(4096)) u_fl (.sclk, .cs_n, .mosi, .miso);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] got [$];
  logic [7:0] src [$];
  // consumer with random stalls
  always @(posedge clk) if (rd_valid && rd_ready) got.push_back(rd_data);
  always @(negedge clk) rd_ready = ($urandom_range(0, 2) == 0);
  // producer
  int wi;
  always @(negedge clk) begin
    wr_valid = (wi < src.size()) && ($urandom_range(0, 1) == 0);
    wr_data  = (wi < src.size()) ? src[wi] : 8'h00;
  end
  always @(posedge clk) if (wr_valid && wr_ready) wi++;

  task automatic do_op(fc_op_e o, int a, int n);
    @(negedge clk); req = 1; op = o; addr = 24'(a); len = 11'(n);
    @(negedge clk); req = 0;
    while (!done) @(negedge clk);
  endtask

  task automatic chk(string what, logic [7:0] g, logic [7:0] e);
    checks++;
    if (g !== e) begin failures++; $display("FAIL %s got %h exp %h", what, g, e); end
  endtask

  initial begin
    logic [7:0] img [4096];
    req = 0; op = FC_READ; addr = 0; len = 0; wi = 0;
    for (int i = 0; i < 4096; i++) begin img[i] = 8'($urandom); u_fl.mem[i] = img[i]; end
    repeat (3) @(posedge clk); rst_n = 1;
    // read 100 bytes from 1000
    got = {};
    do_op(FC_READ, 1000, 100);
    chk("read count", 8'(got.size()), 8'd100);
    for (int i = 0; i < 100 && i < got.size(); i++) chk($sformatf("read %0d", i), got[i], img[1000+i]);
    // erase sector 1 (1024..2047)
    do_op(FC_ERASE, 1024, 0);
    for (int i = 0; i < 4096; i += 97) chk($sformatf("erase %0d", i), u_fl.mem[i], (i >= 1024 && i < 2048) ? 8'hFF : img[i]);
    // program two pages in the erased sector
    for (int p = 0; p < 2; p++) begin
      src = {}; wi = 0;
      for (int i = 0; i < 256; i++) src.push_back(8'($urandom));
      do_op(FC_PROG, 1024 + 256*p, 256);
      for (int i = 0; i < 256; i++) chk($sformatf("prog p%0d %0d", p, i), u_fl.mem[1024+256*p+i], src[i]);
    end
    checks++;
    if (u_fl.erase_count != 1 || u_fl.prog_bytes != 512) begin
      failures++; $display("FAIL erase_count %0d prog_bytes %0d", u_fl.erase_count, u_fl.prog_bytes);
    end
    // read back over a sector boundary
    got = {};
    do_op(FC_READ, 2040, 16);
    for (int i = 0; i < 16; i++) chk("readback", got[i], u_fl.mem[2040+i]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
