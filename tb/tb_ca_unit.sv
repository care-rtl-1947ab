// tb_ca_unit: runs key derivation, signing and frame verification on the CA
// unit and compares every result with the reference model: a genuine frame
// must pass both checks, a frame with a changed payload byte must fail
// integrity (and authenticity), a frame with a changed Hash field must fail
// only authenticity, and a wrong golden digest must fail integrity.
module tb_ca_unit;
  import care_pkg::*;
  import sha_ref_pkg::*;
  import care_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, fin_valid, fin_ready, dkey_valid, integ_ok, auth_ok, frame_ok;
  ca_cmd_e cmd;
  logic [7:0] fin_data;
  logic [255:0] golden, sign_msg, sig, key_k, digest;
  logic [127:0] uuid;
  logic [31:0] hdr_num, hdr_off;
  int checks = 0, failures = 0;

  ca_unit dut (.*);

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string w, logic [255:0] g, logic [255:0] e);
    checks++;
    if (g !== e) begin failures++; $display("FAIL %s got %h exp %h", w, g, e); end
  endtask

  task automatic command(ca_cmd_e c, bytes_t frame);
    int i = 0;
    @(negedge clk); start = 1; cmd = c;
    @(negedge clk); start = 0;
    while (!done) begin
      fin_valid = (i < frame.size()) && ($urandom_range(0, 3) != 0);
      fin_data  = fin_valid ? frame[i] : 8'h00;
      @(posedge clk);
      if (fin_valid && fin_ready) i++;
      #1;
    end
    fin_valid = 0;
    if (c == CA_VERIFY) chk("bytes consumed", 256'(i), 256'(frame.size()));
  endtask

  initial begin
    logic [255:0] dk, m;
    bytes_t pl, f, none;
    start = 0; cmd = CA_VERIFY; fin_valid = 0; fin_data = 0; golden = 0; sign_msg = 0;
    key_k = {8{$urandom}}; uuid = {$urandom, $urandom, $urandom, $urandom};
    repeat (3) @(posedge clk); rst_n = 1;
    dk = derive_key(key_k, uuid);
    command(CA_DERIVE, none);
    chk("dkey valid", 256'(dkey_valid), 1);
    m = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    sign_msg = m;
    command(CA_SIGN, none);
    chk("sign", sig, hmac(dk, to_bytes256(m)));
    for (int fr = 0; fr < 4; fr++) begin
      pl = rand_bytes(PAYLOAD_BYTES);
      f  = build_frame(fr + 2, pl, dk);
      golden = sha256(frame_body(fr + 2, pl));
      // genuine frame
      command(CA_VERIFY, f);
      chk("good integ", 256'(integ_ok), 1); chk("good auth", 256'(auth_ok), 1);
      chk("good ok", 256'(frame_ok), 1);
      chk("digest", digest, golden);
      chk("num", 256'(hdr_num), 256'(fr + 2)); chk("off", 256'(hdr_off), 256'((fr + 2) * 1024));
      // payload tampered
      begin
        bytes_t t;
        int p;
        t = f; p = $urandom_range(HDR_BYTES, FRAME_BYTES - 1);
        t[p] = t[p] ^ 8'(1 << $urandom_range(0, 7));
        command(CA_VERIFY, t);
        chk("tamper integ", 256'(integ_ok), 0); chk("tamper auth", 256'(auth_ok), 0);
        chk("tamper ok", 256'(frame_ok), 0);
      end
      // Hash field tampered
      begin
        bytes_t t;
        int p;
        t = f; p = $urandom_range(0, HASH_BYTES - 1);
        t[p] = ~t[p];
        command(CA_VERIFY, t);
        chk("sig integ", 256'(integ_ok), 1); chk("sig auth", 256'(auth_ok), 0);
        chk("sig ok", 256'(frame_ok), 0);
      end
      // wrong golden digest
      golden = ~golden;
      command(CA_VERIFY, f);
      chk("golden integ", 256'(integ_ok), 0); chk("golden auth", 256'(auth_ok), 1);
      chk("golden ok", 256'(frame_ok), 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
