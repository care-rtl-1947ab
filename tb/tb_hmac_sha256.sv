// tb_hmac_sha256: checks the shared crypto core against the FIPS 180-4
// "abc" vector and against the reference functions of sha_ref_pkg for
// messages that exercise every padding case, in SHA and HMAC mode, with
// random gaps on the message stream. It also checks that a 256-byte
// message (the block size of the paper's crypto-core measurement) finishes
// within the 2926 cycles the paper reports for its hardware core.
module tb_hmac_sha256;
  import sha_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, hmac_en, msg_valid, msg_last, msg_ready, busy, done;
  logic [255:0] key, digest;
  logic [7:0] msg_data;
  int checks = 0, failures = 0;

  hmac_sha256 dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input bit hm, input logic [255:0] k, input bytes_t m,
                     input bit gaps, output logic [255:0] res, output int cyc);
    int i = 0;
    cyc = 0;
    @(negedge clk);
    start = 1; hmac_en = hm; key = k;
    @(negedge clk);
    start = 0;
    while (!done) begin
      msg_valid = (i < m.size()) && (!gaps || ($urandom_range(0, 3) != 0));
      msg_data  = msg_valid ? m[i] : 8'h00;
      msg_last  = msg_valid && (i == m.size() - 1);
      @(posedge clk);
      if (msg_valid && msg_ready) i++;
      cyc++;
      #1;
    end
    msg_valid = 0;
    res = digest;
  endtask

  task automatic check(input string what, input logic [255:0] got, input logic [255:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    bytes_t m;
    logic [255:0] r, k;
    int cyc;
    int lens[] = '{1, 3, 55, 56, 63, 64, 65, 119, 120, 128, 256, 968};
    start = 0; hmac_en = 0; key = '0; msg_valid = 0; msg_last = 0; msg_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // known-answer vector
    m = '{8'h61, 8'h62, 8'h63};
    run(0, '0, m, 0, r, cyc);
    check("sha abc", r, 256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad);
    foreach (lens[j]) begin
      m = {};
      for (int i = 0; i < lens[j]; i++) m.push_back(8'($urandom));
      run(0, '0, m, j[0], r, cyc);
      check($sformatf("sha len %0d", lens[j]), r, sha256(m));
      k = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      run(1, k, m, !j[0], r, cyc);
      check($sformatf("hmac len %0d", lens[j]), r, hmac(k, m));
      if (lens[j] == 256) begin
        checks++;
        if (cyc > 2926) begin
          failures++;
          $display("FAIL 256-byte HMAC took %0d cycles", cyc);
        end
        $display("256-byte HMAC with random stream gaps: %0d cycles", cyc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
