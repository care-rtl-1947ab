// care_tb_pkg: helpers the testbenches use to build a signed, framed flash
// image and its secure-ROM contents, computed with the reference functions
// of sha_ref_pkg (not with the RTL).
//   frame i  = Hash(32) | number i (4, LE) | offset i*1024 (4, LE) |
//              16 zero bytes | 968 payload bytes
//   golden_i = SHA-256(frame bytes 32..1023)
//   Hash_i   = HMAC-SHA256(dkey, golden_i),  dkey = HMAC-SHA256(K, UUID)
package care_tb_pkg;
  import sha_ref_pkg::*;
  import care_pkg::*;

  function automatic logic [255:0] derive_key(logic [255:0] k, logic [127:0] uuid);
    bytes_t u;
    for (int i = 0; i < 16; i++) u.push_back(uuid[127 - 8*i -: 8]);
    return hmac(k, u);
  endfunction

  // frame body = bytes 32..FRAME-1
  function automatic bytes_t frame_body(int idx, bytes_t payload);
    bytes_t b;
    logic [31:0] num, off;
    num = 32'(idx); off = 32'(idx * FRAME_BYTES);
    for (int i = 0; i < 4; i++) b.push_back(num[8*i +: 8]);
    for (int i = 0; i < 4; i++) b.push_back(off[8*i +: 8]);
    for (int i = 0; i < HDR_BYTES - 40; i++) b.push_back(8'h00);
    foreach (payload[i]) b.push_back(payload[i]);
    return b;
  endfunction

  function automatic bytes_t build_frame(int idx, bytes_t payload, logic [255:0] dkey);
    bytes_t b, f;
    logic [255:0] g, h;
    b = frame_body(idx, payload);
    g = sha256(b);
    h = hmac(dkey, to_bytes256(g));
    f = to_bytes256(h);
    foreach (b[i]) f.push_back(b[i]);
    return f;
  endfunction

  function automatic bytes_t rand_bytes(int n);
    bytes_t q;
    for (int i = 0; i < n; i++) q.push_back(8'($urandom));
    return q;
  endfunction
endpackage
