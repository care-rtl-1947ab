// tb_spi_master: checks the SPI master against a small mode-0 slave written
// in the testbench: the bits seen on MOSI at each rising SCLK edge must be
// the transmitted byte MSB first, the byte returned must be the one the
// slave shifted out, and each transfer must take 16 * CLK_DIV + 1 clocks.
module tb_spi_master;
  localparam int DIV = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, sclk, mosi, miso;
  logic [7:0] tx_data, rx_data;
  int checks = 0, failures = 0;

  spi_master #(.CLK_DIV(DIV)) dut (.*);

  // testbench slave
  logic [7:0] slave_out, seen;
  int nrise = 0;
  always @(posedge sclk) begin seen = {seen[6:0], mosi}; nrise++; end
  always @(negedge sclk) begin slave_out = {slave_out[6:0], 1'b0}; end
  assign miso = slave_out[7];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    logic [7:0] t, s;
    start = 0; tx_data = 0; slave_out = 0; seen = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      t = 8'($urandom); s = 8'($urandom);
      slave_out = s; nrise = 0;
      @(negedge clk); start = 1; tx_data = t;
      @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks += 4;
      if (seen !== t)     begin failures++; $display("FAIL mosi %h exp %h", seen, t); end
      if (rx_data !== s)  begin failures++; $display("FAIL miso %h exp %h", rx_data, s); end
      if (nrise != 8)     begin failures++; $display("FAIL %0d rising edges", nrise); end
      if (cyc != 16*DIV+1) begin failures++; $display("FAIL %0d cycles", cyc); end
      if (sclk !== 1'b0)  begin failures++; checks++; end
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
