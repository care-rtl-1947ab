// tb_care_soc: end-to-end run of the whole secure-boot subsystem at its
// default sizes (1 KB frames, six frames, 18 KB secure ROM, SPI at clk/4),
// with the flash model on the SPI pins and a bus master standing in for the
// core/DMA. It runs one complete operation after another:
//   provisioning of the secure ROM, then the power-on boot;
//   host reads of boot code, status and flash once the core is released;
//   refused host accesses: key area read, flash write, write to ROM;
//   an attack on a frame payload, a bootstrap from GPIO pin 7, detection
//   and re-flash; an attack on a Hash field (authenticity-only failure);
//   a valid frame copied into the wrong slot, which the per-slot golden
//   digest must catch; a bootstrap requested while a host flash access is
//   in flight;
//   a corrupted recovery copy, which must stop the boot with the core held.
// Each of these mechanisms is counted and a mechanism that never happened
// counts as a failure. Expected values come from the reference image.
module tb_care_soc;
  import care_pkg::*;
  import sha_ref_pkg::*;
  import care_tb_pkg::*;
  import care_tb_env::*;
  localparam int AW = $clog2(ROM_BYTES / 4);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic prov_mode, prov_we;
  logic [AW-1:0] prov_addr;
  logic [31:0] prov_wdata, gpio_i;
  tl_h2d_t tl_i;
  tl_d2h_t tl_o;
  logic spi_sclk, spi_mosi, spi_miso, spi_cs_n, core_fetch_en, boot_done, boot_fail;
  int checks = 0, failures = 0;

  care_soc dut (.*);
  spi_flash_model u_fl (.sclk(spi_sclk), .cs_n(spi_cs_n), .mosi(spi_mosi), .miso(spi_miso));

  // mechanism counters
  int n_prov_hold = 0, n_clean_boot = 0, n_detect_integ = 0, n_detect_auth = 0,
      n_recover = 0, n_boot_stop = 0, n_gpio_trig = 0, n_refused = 0, n_bus_flash = 0,
      n_shared_wait = 0, n_bus_rom = 0, n_detect_swap = 0;
  int cycles = 0;
  always @(posedge clk) cycles++;

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string w, logic [31:0] g, logic [31:0] e);
    checks++;
    if (g !== e) begin failures++; $display("FAIL %s got %h exp %h", w, g, e); end
  endtask

  task automatic bus(bit wr, bit instr, logic [31:0] a, logic [31:0] d,
                     output logic [31:0] rd, output logic err);
    @(negedge clk);
    tl_i.a_valid = 1; tl_i.a_write = wr; tl_i.a_instr = instr; tl_i.a_address = a; tl_i.a_data = d;
    @(posedge clk); while (!tl_o.a_ready) @(posedge clk);
    @(negedge clk); tl_i.a_valid = 0;
    while (!tl_o.d_valid) @(negedge clk);
    rd = tl_o.d_data; err = tl_o.d_error;
    tl_i.d_ready = 1; @(negedge clk); tl_i.d_ready = 0;
  endtask

  task automatic wait_boot(output int took);
    int c0 = cycles;
    while (!(boot_done || boot_fail)) @(negedge clk);
    took = cycles - c0;
    repeat (2) @(negedge clk);
  endtask

  task automatic pin7();
    @(negedge clk); gpio_i[7] = 1;
    repeat (4) @(negedge clk); gpio_i[7] = 0;
    repeat (2) @(negedge clk);
    n_gpio_trig++;
  endtask

  image_c img;
  logic [31:0] st0, st1;

  function automatic int flash_diff();
    int bad = 0;
    for (int f = 0; f < NUM_FRAMES; f++)
      for (int j = 0; j < FRAME_BYTES; j++)
        if (u_fl.mem[FRAME_BYTES*f + j] !== img.frame[f][j]) bad++;
    return bad;
  endfunction

  task automatic status();
    logic [31:0] rd; logic err;
    bus(0, 0, ADDR_REGS, 0, st0, err); chk("status0 err", 32'(err), 0);
    bus(0, 0, ADDR_REGS + 4, 0, st1, err); chk("status1 err", 32'(err), 0);
  endtask

  initial begin
    logic [31:0] rd;
    logic err;
    int took;
    img = new();
    prov_mode = 1; prov_we = 0; prov_addr = 0; prov_wdata = 0; gpio_i = 0; tl_i = '0;
    for (int i = 0; i < 8192; i++) u_fl.mem[i] = 8'hFF;
    for (int f = 0; f < NUM_FRAMES; f++)
      for (int j = 0; j < FRAME_BYTES; j++) u_fl.mem[FRAME_BYTES*f + j] = img.frame[f][j];
    repeat (3) @(posedge clk); rst_n = 1;

    // ---- provisioning ----
    for (int wd = 0; wd < ROM_BYTES / 4; wd++) begin
      @(negedge clk); prov_we = 1; prov_addr = AW'(wd); prov_wdata = img.rom_word(wd);
    end
    @(negedge clk); prov_we = 0;
    repeat (20) @(negedge clk);
    chk("no boot while provisioning", 32'(core_fetch_en | boot_done | !spi_cs_n), 0);
    n_prov_hold++;
    prov_mode = 0;

    // ---- power-on boot ----
    wait_boot(took);
    $display("power-on boot (init + 6 frames): %0d cycles", took);
    chk("clean boot done", 32'(boot_done & core_fetch_en), 1);
    if (boot_done && core_fetch_en) n_clean_boot++;
    status();
    chk("status0 after clean boot", st0[7:0], 8'b1111_0111);
    chk("frames checked", 32'(st1[7:0]), NUM_FRAMES);
    bus(0, 0, ADDR_REGS + 8, 0, rd, err);  chk("vendor id", rd, img.vendor);
    bus(0, 0, ADDR_REGS + 16, 0, rd, err); chk("fw rev", rd, img.fwrev);

    // ---- host accesses after release ----
    for (int t = 0; t < 8; t++) begin
      int wd = $urandom_range(0, ROM_CARE_BASE / 4 - 1);
      bus(0, t[0], ADDR_ROM + 32'(4*wd), 0, rd, err);
      chk("boot code read", rd, img.rom_word(wd)); chk("boot code err", 32'(err), 0);
      if (!err) n_bus_rom++;
    end
    for (int t = 0; t < 4; t++) begin
      int a = 4 * $urandom_range(0, NUM_FRAMES * FRAME_BYTES / 4 - 1);
      bus(0, 1, ADDR_FLASH + 32'(a), 0, rd, err);
      chk("flash fetch", rd, {img.frame[(a+3)/1024][(a+3)%1024], img.frame[(a+2)/1024][(a+2)%1024],
                              img.frame[(a+1)/1024][(a+1)%1024], img.frame[a/1024][a%1024]});
      if (!err) n_bus_flash++;
    end
    bus(0, 0, ADDR_ROM + 32'(ROM_KEY), 0, rd, err);
    chk("key read refused", 32'(err), 1); chk("key not leaked", rd, 0); n_refused += err;
    bus(0, 0, ADDR_ROM + 32'(ROM_RECOV_BASE + 40), 0, rd, err);
    chk("recovery read refused", 32'(err), 1); n_refused += err;
    bus(1, 0, ADDR_FLASH + 32'd2048, 32'h0, rd, err);
    chk("flash write refused", 32'(err), 1); n_refused += err;
    chk("flash unchanged", flash_diff(), 0);
    bus(1, 0, ADDR_ROM + 32'd16, 32'h0, rd, err);
    chk("rom write refused", 32'(err), 1); n_refused += err;

    // ---- attack 1: payload of frame 2, bootstrap from GPIO 7 ----
    u_fl.mem[2*FRAME_BYTES + 600] ^= 8'h10;
    pin7();
    wait_boot(took);
    $display("bootstrap with one frame re-flashed: %0d cycles", took);
    status();
    chk("attack1 boot ok", 32'(core_fetch_en & boot_done), 1);
    chk("attack1 detections", 32'(st1[15:8]), 1);
    chk("attack1 recoveries", 32'(st1[23:16]), 1);
    chk("attack1 frame", 32'(st1[31:24]), 2);
    chk("attack1 flash restored", flash_diff(), 0);
    if (st1[15:8] == 1) n_detect_integ++;
    if (st1[23:16] == 1) n_recover++;

    // ---- attack 2: Hash field of frame 4 (integrity holds, authenticity fails) ----
    u_fl.mem[4*FRAME_BYTES + 7] ^= 8'h01;
    pin7();
    // watch the CA verdict of the first check of frame 4
    begin
      bit seen = 0;
      while (!(boot_done || boot_fail)) begin
        @(negedge clk);
        if (dut.u_care.u_ca.done && dut.u_care.st == dut.u_care.S_VERW && dut.u_care.idx == 4 &&
            dut.u_care.u_ca.integ_ok && !dut.u_care.u_ca.auth_ok && !seen) begin
          seen = 1; n_detect_auth++;
        end
      end
    end
    repeat (2) @(negedge clk);
    status();
    chk("attack2 boot ok", 32'(core_fetch_en), 1);
    chk("attack2 detections", 32'(st1[15:8]), 2);
    chk("attack2 frame", 32'(st1[31:24]), 4);
    chk("attack2 flash restored", flash_diff(), 0);
    if (st1[23:16] == 2) n_recover++;

    // ---- attack 3: a valid, correctly signed frame copied into another slot ----
    for (int b = 0; b < int'(FRAME_BYTES); b++)
      u_fl.mem[1*FRAME_BYTES + b] = u_fl.mem[5*FRAME_BYTES + b];
    pin7();
    wait_boot(took);
    status();
    chk("swap boot ok", 32'(core_fetch_en), 1);
    chk("swap detections", 32'(st1[15:8]), 3);
    chk("swap recoveries", 32'(st1[23:16]), 3);
    chk("swap frame", 32'(st1[31:24]), 1);
    chk("swap flash restored", flash_diff(), 0);
    if (st1[31:24] == 1 && st1[15:8] == 3) n_detect_swap++;

    // ---- bootstrap requested while a host flash read is in flight ----
    fork
      begin
        bus(0, 0, ADDR_FLASH + 32'd1024, 0, rd, err);
        chk("in-flight read ok", 32'(err), 0);
        chk("in-flight read data", rd, {img.frame[1][3], img.frame[1][2], img.frame[1][1], img.frame[1][0]});
      end
      begin
        while (!dut.fc_busy) @(negedge clk);
        pin7();
        if (dut.u_care.st == dut.u_care.S_TAKE && dut.fc_busy) n_shared_wait++;
      end
    join
    wait_boot(took);
    chk("shared boot ok", 32'(core_fetch_en), 1);

    // ---- attack 4: frame 3 and its recovery copy both damaged ----
    u_fl.mem[3*FRAME_BYTES + 900] ^= 8'h80;
    dut.u_rom.mem[(ROM_RECOV_BASE + PAYLOAD_BYTES*3 + 100) / 4] ^= 32'h1;
    pin7();
    wait_boot(took);
    status();
    chk("stop: boot_fail", 32'(boot_fail), 1);
    chk("stop: core held", 32'(core_fetch_en), 0);
    chk("stop: chain bit", 32'(st0[1]), 0);
    chk("stop: frame", 32'(st1[31:24]), 3);
    if (boot_fail && !core_fetch_en) n_boot_stop++;

    // ---- mechanism coverage ----
    $display("provisioning hold %0d, clean boots %0d, integrity detections %0d, authenticity-only detections %0d",
             n_prov_hold, n_clean_boot, n_detect_integ, n_detect_auth);
    $display("recoveries %0d, boot stops %0d, GPIO-7 bootstraps %0d, refused accesses %0d",
             n_recover, n_boot_stop, n_gpio_trig, n_refused);
    $display("host ROM reads %0d, host flash reads %0d, bootstraps waiting for a host flash access %0d",
             n_bus_rom, n_bus_flash, n_shared_wait);
    $display("moved-frame detections %0d", n_detect_swap);
    checks += 12;
    if (n_detect_swap == 0)  failures++;
    if (n_prov_hold == 0)    failures++;
    if (n_clean_boot == 0)   failures++;
    if (n_detect_integ == 0) failures++;
    if (n_detect_auth == 0)  failures++;
    if (n_recover == 0)      failures++;
    if (n_boot_stop == 0)    failures++;
    if (n_gpio_trig == 0)    failures++;
    if (n_refused == 0)      failures++;
    if (n_bus_rom == 0)      failures++;
    if (n_bus_flash == 0)    failures++;
    if (n_shared_wait == 0)  failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
