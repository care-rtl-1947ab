// tb_care: the CARE module with the secure ROM, flash controller, SPI master
// and the flash model. Scenarios: provisioning then a clean boot (all six
// frames verified, core released, chain bit set); a boot triggered after an
// attacker changed a payload byte of frame 2 (detected, re-flashed, boot
// completes with an image identical to the reference); a boot after the
// Hash field of frame 5 was changed; a boot with a corrupted recovery copy
// in secure storage (recovery cannot help: the boot must stop with the core
// held); and the access-control entries the module programs and locks.
module tb_care;
  import care_pkg::*;
  import sha_ref_pkg::*;
  import care_tb_pkg::*;
  import care_tb_env::*;
  localparam int AW = $clog2(ROM_BYTES / 4);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic prov_mode, boot_trig, rom_en, rom_lock_set, fc_own, fc_req, fc_busy, fc_done;
  logic fc_rd_valid, fc_rd_ready, fc_wr_valid, fc_wr_ready, pmp_we;
  logic core_fetch_en, boot_done, boot_fail, chain_v, integ_ok, auth_ok;
  logic [AW-1:0] rom_addr;
  logic [31:0] rom_rdata, vendor_id, fw_rev;
  fc_op_e fc_op;
  logic [23:0] fc_addr;
  logic [10:0] fc_len;
  logic [7:0] fc_rd_data, fc_wr_data, frames_checked, detect_count, recover_count, last_bad_frame;
  logic [1:0] pmp_idx;
  pmp_entry_t pmp_entry;
  int checks = 0, failures = 0;

  care dut (.*);

  logic prog_en, locked;
  logic [AW-1:0] prog_addr;
  logic [31:0] prog_wdata, b_rdata;
  secure_rom u_rom (.clk, .rst_n, .a_en(rom_en), .a_addr(rom_addr), .a_rdata(rom_rdata),
    .b_en(1'b0), .b_addr('0), .b_rdata, .prog_en, .prog_addr, .prog_wdata,
    .lock_set(rom_lock_set), .locked);

  logic spi_start, spi_done, spi_busy, sclk, mosi, miso, cs_n;
  logic [7:0] spi_tx, spi_rx;
  flash_ctrl u_fc (.clk, .rst_n, .req(fc_req), .op(fc_op), .addr(fc_addr), .len(fc_len),
    .busy(fc_busy), .done(fc_done), .rd_valid(fc_rd_valid), .rd_data(fc_rd_data),
    .rd_ready(fc_rd_ready), .wr_valid(fc_wr_valid), .wr_data(fc_wr_data), .wr_ready(fc_wr_ready),
    .spi_start, .spi_tx, .spi_done, .spi_rx, .cs_n);
  spi_master #(.CLK_DIV(1)) u_spi (.clk, .rst_n, .start(spi_start), .tx_data(spi_tx),
    .busy(spi_busy), .done(spi_done), .rx_data(spi_rx), .sclk, .mosi, .miso);
  spi_flash_model u_fl (.sclk, .cs_n, .mosi, .miso);

  pmp_entry_t pmp_seen [4];
  always @(posedge clk) if (pmp_we) pmp_seen[pmp_idx] <= pmp_entry;

  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string w, logic [31:0] g, logic [31:0] e);
    checks++;
    if (g !== e) begin failures++; $display("FAIL %s got %h exp %h", w, g, e); end
  endtask

  task automatic wait_boot();
    while (!(boot_done || boot_fail)) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  task automatic trigger();
    @(negedge clk); boot_trig = 1; @(negedge clk); boot_trig = 0;
    repeat (3) @(negedge clk);
    chk("core held during boot", 32'(core_fetch_en), 0);
    wait_boot();
  endtask

  image_c img;

  function automatic int flash_diff();
    int bad = 0;
    for (int f = 0; f < NUM_FRAMES; f++)
      for (int j = 0; j < FRAME_BYTES; j++)
        if (u_fl.mem[FRAME_BYTES*f + j] !== img.frame[f][j]) bad++;
    return bad;
  endfunction

  initial begin
    img = new();
    prov_mode = 1; boot_trig = 0; prog_en = 0; prog_addr = 0; prog_wdata = 0;
    for (int f = 0; f < NUM_FRAMES; f++)
      for (int j = 0; j < FRAME_BYTES; j++) u_fl.mem[FRAME_BYTES*f + j] = img.frame[f][j];
    repeat (3) @(posedge clk); rst_n = 1;
    for (int wd = 0; wd < ROM_BYTES / 4; wd++) begin
      @(negedge clk); prog_en = 1; prog_addr = AW'(wd); prog_wdata = img.rom_word(wd);
    end
    @(negedge clk); prog_en = 0;
    repeat (10) @(negedge clk);
    chk("held in provisioning", 32'(fc_own | core_fetch_en), 0);
    prov_mode = 0;
    // 1: clean boot
    wait_boot();
    chk("clean: boot_done", 32'(boot_done), 1);
    chk("clean: core released", 32'(core_fetch_en), 1);
    chk("clean: chain", 32'(chain_v), 1);
    chk("clean: frames", 32'(frames_checked), NUM_FRAMES);
    chk("clean: detections", 32'(detect_count), 0);
    chk("rom locked", 32'(locked), 1);
    chk("vendor", vendor_id, img.vendor);
    chk("fwrev", fw_rev, img.fwrev);
    for (int i = 0; i < 4; i++) begin
      chk($sformatf("pmp %0d locked", i), 32'(pmp_seen[i].lock), 1);
      chk($sformatf("pmp %0d no write", i), 32'(pmp_seen[i].w), 0);
    end
    chk("pmp key area no read", 32'(pmp_seen[0].r), 0);
    // 2: payload tamper in frame 2
    u_fl.mem[2*FRAME_BYTES + 700] = ~u_fl.mem[2*FRAME_BYTES + 700];
    trigger();
    chk("tamper: detected", 32'(detect_count), 1);
    chk("tamper: bad frame", 32'(last_bad_frame), 2);
    chk("tamper: recovered", 32'(recover_count), 1);
    chk("tamper: boot ok", 32'(core_fetch_en & chain_v), 1);
    chk("tamper: frames", 32'(frames_checked), NUM_FRAMES);
    chk("tamper: flash restored", flash_diff(), 0);
    // 3: Hash field tamper in frame 5
    u_fl.mem[5*FRAME_BYTES + 3] = 8'h00;
    trigger();
    chk("sig: detected", 32'(detect_count), 2);
    chk("sig: bad frame", 32'(last_bad_frame), 5);
    chk("sig: boot ok", 32'(core_fetch_en & chain_v), 1);
    chk("sig: flash restored", flash_diff(), 0);
    // 4: recovery data itself damaged (fault in secure storage): boot must stop
    u_fl.mem[1*FRAME_BYTES + 100] = ~u_fl.mem[1*FRAME_BYTES + 100];
    u_rom.mem[(ROM_RECOV_BASE + PAYLOAD_BYTES*1 + 10) / 4] = ~u_rom.mem[(ROM_RECOV_BASE + PAYLOAD_BYTES*1 + 10) / 4];
    trigger();
    chk("fail: boot_fail", 32'(boot_fail), 1);
    chk("fail: core held", 32'(core_fetch_en), 0);
    chk("fail: chain", 32'(chain_v), 0);
    chk("fail: frame", 32'(last_bad_frame), 1);
    chk("fail: frames before it", 32'(frames_checked), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
