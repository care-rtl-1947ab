// tb_pmp_checker: programs random range entries, compares the allow result
// of thousands of random accesses (addresses drawn near the range edges)
// with a priority model written in the testbench, then locks the entries
// and checks that rewrites are ignored until reset.
module tb_pmp_checker;
  import care_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we, chk_allow, all_locked;
  logic [1:0] cfg_idx;
  pmp_entry_t cfg_entry;
  logic [31:0] chk_addr;
  acc_e chk_acc;
  int checks = 0, failures = 0;
  pmp_entry_t model [N];

  pmp_checker #(.N(N)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic expect_allow(logic [31:0] a, acc_e k);
    for (int i = 0; i < N; i++)
      if (a >= model[i].base && a < model[i].top)
        return (k == ACC_READ) ? model[i].r : (k == ACC_WRITE) ? model[i].w : model[i].x;
    return 1'b0;
  endfunction

  task automatic write_entry(int i, pmp_entry_t e);
    @(negedge clk); cfg_we = 1; cfg_idx = 2'(i); cfg_entry = e;
    if (!model[i].lock) model[i] = e;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic random_accesses(int n);
    for (int t = 0; t < n; t++) begin
      int i = $urandom_range(0, N - 1);
      @(negedge clk);
      chk_addr = ($urandom_range(0, 1) ? model[i].base : model[i].top) + 32'($signed($urandom_range(0, 8)) - 4);
      if ($urandom_range(0, 5) == 0) chk_addr = $urandom;
      chk_acc = acc_e'($urandom_range(0, 2));
      #1;
      checks++;
      if (chk_allow !== expect_allow(chk_addr, chk_acc)) begin
        failures++; $display("FAIL addr %h acc %0d got %0d", chk_addr, chk_acc, chk_allow);
      end
    end
  endtask

  function automatic pmp_entry_t rand_entry(bit lk);
    pmp_entry_t e;
    e.base = 32'h1000 * $urandom_range(0, 15);
    e.top  = e.base + 32'h100 * $urandom_range(1, 40);
    {e.r, e.w, e.x} = 3'($urandom);
    e.lock = lk;
    return e;
  endfunction

  initial begin
    cfg_we = 0; cfg_idx = 0; cfg_entry = '0; chk_addr = 0; chk_acc = ACC_READ;
    foreach (model[i]) model[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    random_accesses(50);                  // nothing configured: all refused
    for (int r = 0; r < 5; r++) begin
      for (int i = 0; i < N; i++) write_entry(i, rand_entry(0));
      random_accesses(1000);
    end
    for (int i = 0; i < N; i++) write_entry(i, rand_entry(1));
    checks++; if (all_locked !== 1'b1) failures++;
    for (int i = 0; i < N; i++) write_entry(i, rand_entry(0));   // ignored
    random_accesses(2000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
