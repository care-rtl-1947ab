// tb_resilience_engine: provisions the secure ROM with golden digests and
// recovery payloads, loads a signed six-frame image into the flash model,
// corrupts one frame and runs the resilience engine on it. The testbench
// answers the engine's signature request itself with the reference HMAC.
// Checks: the rewritten frame equals the reference frame byte for byte, no
// other frame changed, exactly one sector erase, 968 payload bytes
// restored, and four 256-byte pages programmed.
module tb_resilience_engine;
  import care_pkg::*;
  import sha_ref_pkg::*;
  import care_tb_pkg::*;
  localparam int AW = $clog2(ROM_BYTES / 4);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, rom_en, sig_req, sig_done, fc_req, fc_done, fc_wr_valid, fc_wr_ready;
  logic [7:0] frame_idx, fc_wr_data;
  logic [AW-1:0] rom_addr;
  logic [31:0] rom_rdata;
  logic [255:0] sig_msg, sig_value;
  fc_op_e fc_op;
  logic [23:0] fc_addr;
  logic [10:0] fc_len;
  logic [15:0] bytes_restored;
  int checks = 0, failures = 0;

  resilience_engine dut (.*);

  // secure ROM
  logic prog_en, locked;
  logic [AW-1:0] prog_addr;
  logic [31:0] prog_wdata, b_rdata;
  secure_rom u_rom (.clk, .rst_n, .a_en(rom_en), .a_addr(rom_addr), .a_rdata(rom_rdata),
    .b_en(1'b0), .b_addr('0), .b_rdata, .prog_en, .prog_addr, .prog_wdata, .lock_set(1'b0), .locked);

  // flash path
  logic fc_busy, rd_valid, spi_start, spi_done, spi_busy, sclk, mosi, miso, cs_n;
  logic [7:0] rd_data, spi_tx, spi_rx;
  flash_ctrl u_fc (.clk, .rst_n, .req(fc_req), .op(fc_op), .addr(fc_addr), .len(fc_len),
    .busy(fc_busy), .done(fc_done), .rd_valid, .rd_data, .rd_ready(1'b1),
    .wr_valid(fc_wr_valid), .wr_data(fc_wr_data), .wr_ready(fc_wr_ready),
    .spi_start, .spi_tx, .spi_done, .spi_rx, .cs_n);
  spi_master #(.CLK_DIV(1)) u_spi (.clk, .rst_n, .start(spi_start), .tx_data(spi_tx),
    .busy(spi_busy), .done(spi_done), .rx_data(spi_rx), .sclk, .mosi, .miso);
  spi_flash_model u_fl (.sclk, .cs_n, .mosi, .miso);

  logic [255:0] dk;
  // signature service
  always @(posedge clk) begin
    sig_done <= 1'b0;
    if (sig_req) begin
      sig_value <= hmac(dk, to_bytes256(sig_msg));
      sig_done  <= 1'b1;
    end
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] rom_img [ROM_BYTES];
  bytes_t frames [NUM_FRAMES];
  int pages = 0;
  always @(posedge clk) if (fc_req && fc_op == FC_PROG) pages++;

  task automatic chk(string w, logic [31:0] g, logic [31:0] e);
    checks++;
    if (g !== e) begin failures++; $display("FAIL %s got %h exp %h", w, g, e); end
  endtask

  initial begin
    bytes_t pl;
    int victim;
    start = 0; frame_idx = 0; prog_en = 0; prog_addr = 0; prog_wdata = 0;
    dk = {8{$urandom}};
    foreach (rom_img[i]) rom_img[i] = 8'($urandom);
    for (int f = 0; f < NUM_FRAMES; f++) begin
      logic [255:0] g;
      pl = rand_bytes(PAYLOAD_BYTES);
      frames[f] = build_frame(f, pl, dk);
      g = sha256(frame_body(f, pl));
      for (int j = 0; j < 32; j++) rom_img[ROM_DIGEST_BASE + 32*f + j] = g[255 - 8*j -: 8];
      for (int j = 0; j < PAYLOAD_BYTES; j++) rom_img[ROM_RECOV_BASE + PAYLOAD_BYTES*f + j] = pl[j];
      for (int j = 0; j < FRAME_BYTES; j++) u_fl.mem[FRAME_BYTES*f + j] = frames[f][j];
    end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int wd = 0; wd < ROM_BYTES / 4; wd++) begin
      @(negedge clk); prog_en = 1; prog_addr = AW'(wd);
      prog_wdata = {rom_img[4*wd+3], rom_img[4*wd+2], rom_img[4*wd+1], rom_img[4*wd]};
    end
    @(negedge clk); prog_en = 0;
    for (int round = 0; round < 2; round++) begin
      int e0;
      victim = (round == 0) ? 3 : 0;
      // attacker: overwrite part of the frame, header included in round 1
      for (int j = (round == 0 ? 500 : 0); j < (round == 0 ? 540 : 64); j++) u_fl.mem[FRAME_BYTES*victim + j] = 8'($urandom);
      e0 = u_fl.erase_count; pages = 0;
      @(negedge clk); start = 1; frame_idx = 8'(victim);
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      for (int f = 0; f < NUM_FRAMES; f++) begin
        int bad = 0;
        for (int j = 0; j < FRAME_BYTES; j++) if (u_fl.mem[FRAME_BYTES*f + j] !== frames[f][j]) bad++;
        chk($sformatf("frame %0d bytes differing", f), bad, 0);
      end
      chk("erases", u_fl.erase_count - e0, 1);
      chk("payload bytes restored", 32'(bytes_restored), PAYLOAD_BYTES);
      chk("pages programmed", pages, FRAME_BYTES / 256);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
