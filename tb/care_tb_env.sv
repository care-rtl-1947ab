// care_tb_env: reference image and provisioning data shared by the
// system-level testbenches: a random key K, UUID, vendor ID and firmware
// revision, NUM random 968-byte payloads, the signed frames built from them
// and the secure-ROM byte image (chip info, golden digests, recovery data).
// Everything is computed with the reference functions in sha_ref_pkg.
package care_tb_env;
  import care_pkg::*;
  import sha_ref_pkg::*;
  import care_tb_pkg::*;

  class image_c;
    logic [255:0] key_k, dkey;
    logic [127:0] uuid;
    logic [31:0]  vendor, fwrev;
    bytes_t       payload [NUM_FRAMES];
    bytes_t       frame   [NUM_FRAMES];
    logic [255:0] golden  [NUM_FRAMES];
    logic [7:0]   rom     [ROM_BYTES];

    function new();
      key_k  = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      uuid   = {$urandom, $urandom, $urandom, $urandom};
      vendor = $urandom;
      fwrev  = $urandom;
      dkey   = derive_key(key_k, uuid);
      foreach (rom[i]) rom[i] = 8'($urandom);
      for (int i = 0; i < 4; i++) begin
        rom[ROM_VENDOR + i] = vendor[8*i +: 8];
        rom[ROM_FWREV + i]  = fwrev[8*i +: 8];
      end
      for (int i = 0; i < 16; i++) rom[ROM_UUID + i] = uuid[127 - 8*i -: 8];
      for (int i = 0; i < 32; i++) rom[ROM_KEY + i]  = key_k[255 - 8*i -: 8];
      for (int f = 0; f < NUM_FRAMES; f++) begin
        payload[f] = rand_bytes(PAYLOAD_BYTES);
        frame[f]   = build_frame(f, payload[f], dkey);
        golden[f]  = sha256(frame_body(f, payload[f]));
        for (int j = 0; j < 32; j++) rom[ROM_DIGEST_BASE + 32*f + j] = golden[f][255 - 8*j -: 8];
        for (int j = 0; j < PAYLOAD_BYTES; j++) rom[ROM_RECOV_BASE + PAYLOAD_BYTES*f + j] = payload[f][j];
      end
    endfunction

    function logic [31:0] rom_word(int wd);
      return {rom[4*wd+3], rom[4*wd+2], rom[4*wd+1], rom[4*wd]};
    endfunction
  endclass
endpackage
