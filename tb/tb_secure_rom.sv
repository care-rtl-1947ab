// tb_secure_rom: provisions random words, reads them back on both ports
// (one clock of latency), then sets the lock and checks that later
// provisioning writes are ignored until a power-on reset clears the lock.
module tb_secure_rom;
  localparam int BYTES = 2048, WORDS = BYTES / 4, AW = $clog2(WORDS);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic a_en, b_en, prog_en, lock_set, locked;
  logic [AW-1:0] a_addr, b_addr, prog_addr;
  logic [31:0] a_rdata, b_rdata, prog_wdata;
  int checks = 0, failures = 0;
  logic [31:0] ref_mem [WORDS];

  secure_rom #(.BYTES(BYTES)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string w, logic [31:0] g, logic [31:0] e);
    checks++;
    if (g !== e) begin failures++; $display("FAIL %s got %h exp %h", w, g, e); end
  endtask

  task automatic write_all();
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk); prog_en = 1; prog_addr = AW'(i); prog_wdata = $urandom;
      if (!locked) ref_mem[i] = prog_wdata;
    end
    @(negedge clk); prog_en = 0;
  endtask

  task automatic read_all();
    for (int i = 0; i < WORDS; i++) begin
      int j = $urandom_range(0, WORDS - 1);
      @(negedge clk); a_en = 1; a_addr = AW'(i); b_en = 1; b_addr = AW'(j);
      @(negedge clk); a_en = 0; b_en = 0;
      chk("port A", a_rdata, ref_mem[i]);
      chk("port B", b_rdata, ref_mem[j]);
    end
  endtask

  initial begin
    a_en = 0; b_en = 0; prog_en = 0; lock_set = 0; a_addr = 0; b_addr = 0; prog_addr = 0; prog_wdata = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    write_all();
    read_all();
    @(negedge clk); lock_set = 1; @(negedge clk); lock_set = 0;
    chk("locked", 32'(locked), 1);
    write_all();            // must be ignored
    read_all();
    rst_n = 0; @(negedge clk); rst_n = 1;
    chk("unlocked after reset", 32'(locked), 0);
    write_all();
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
