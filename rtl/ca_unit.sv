// ca_unit: Code integrity and Authentication unit. It owns the one shared
// HMAC-SHA256 core and runs three commands on it:
//
//   CA_DERIVE: dkey = HMAC-SHA256(K, UUID). Run once at system
//              initialisation; the derived key is kept inside the unit.
//   CA_VERIFY: takes one frame (FRAME_BYTES bytes) on fin_valid/fin_ready.
//              Bytes 0..31 are the frame's Hash field and are set aside;
//              bytes 32..FRAME_BYTES-1 (frame number, frame offset, reserved
//              bytes and payload) are hashed with SHA-256.
//              integ_ok = (digest == golden), the golden digest of this frame
//              from secure storage; then the digest is signed,
//              auth_ok = (HMAC-SHA256(dkey, digest) == Hash field), and
//              frame_ok = integ_ok & auth_ok, the I and S terms of the
//              chain-of-trust equation V(i+1) = V(i) & S(f) & I(f).
//   CA_SIGN:   sig = HMAC-SHA256(dkey, sign_msg); used by the resilience
//              engine to rebuild the Hash field of a frame it re-flashes.
//
// Interface: pulse start with cmd while busy is low; keep golden, sign_msg,
// key_k and uuid stable until done, which pulses once. hdr_num and hdr_off
// return the frame number and offset fields of the last verified frame.
// Timing of a 1 KB VERIFY: 32 clocks for the Hash field, then the 992 hashed
// bytes at the rate the source delivers them (at most one per clock) plus
// 65 clocks per 64-byte block, then about 450 clocks for the signature.
// What follows the paper: one crypto core reused for integrity (SHA-256
// digest against a pre-computed hash) and authenticity (HMAC of the digest
// against the header's Hash field), a derived key, the frame layout. What
// is this design's choice: the key derivation formula, which bytes are
// hashed (everything after the Hash field), where golden digests live.
module ca_unit
  import care_pkg::*;
#(
  parameter int unsigned FRAME = care_pkg::FRAME_BYTES
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  ca_cmd_e      cmd,
  output logic         busy,
  output logic         done,
  // frame stream (CA_VERIFY)
  input  logic         fin_valid,
  input  logic [7:0]   fin_data,
  output logic         fin_ready,
  input  logic [255:0] golden,
  // CA_SIGN
  input  logic [255:0] sign_msg,
  output logic [255:0] sig,
  // CA_DERIVE
  input  logic [255:0] key_k,
  input  logic [127:0] uuid,
  output logic         dkey_valid,
  // results
  output logic         integ_ok,
  output logic         auth_ok,
  output logic         frame_ok,
  output logic [255:0] digest,
  output logic [31:0]  hdr_num,
  output logic [31:0]  hdr_off
);

  typedef enum logic [2:0] {C_IDLE, C_HDR, C_BODY, C_DIG, C_FEED, C_WAIT} st_e;
  st_e     st;
  ca_cmd_e cmd_q;

  logic [255:0] dkey, hash_field, feed_sr;
  logic [5:0]   feed_n;
  logic [10:0]  cnt;

  logic         h_start, h_hmac, h_valid, h_last, h_ready, h_busy, h_done;
  logic [7:0]   h_data;
  logic [255:0] h_key, h_digest;

  hmac_sha256 u_hmac (
    .clk, .rst_n,
    .start     (h_start),
    .hmac_en   (h_hmac),
    .key       (h_key),
    .msg_valid (h_valid),
    .msg_data  (h_data),
    .msg_last  (h_last),
    .msg_ready (h_ready),
    .busy      (h_busy),
    .done      (h_done),
    .digest    (h_digest)
  );

  assign h_key = (cmd_q == CA_DERIVE) ? key_k : dkey;

  always_comb begin
    h_valid   = 1'b0;
    h_data    = 8'h00;
    h_last    = 1'b0;
    fin_ready = 1'b0;
    unique case (st)
      C_HDR:  fin_ready = 1'b1;
      C_BODY: begin
        h_valid   = fin_valid;
        h_data    = fin_data;
        h_last    = (cnt == 11'(FRAME - 1));
        fin_ready = h_ready;
      end
      C_FEED: begin
        h_valid = 1'b1;
        h_data  = feed_sr[255:248];
        h_last  = (feed_n == 6'd1);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; cmd_q <= CA_VERIFY; dkey <= '0; dkey_valid <= 1'b0;
      hash_field <= '0; feed_sr <= '0; feed_n <= '0; cnt <= '0;
      h_start <= 1'b0; h_hmac <= 1'b0; done <= 1'b0; sig <= '0;
      integ_ok <= 1'b0; auth_ok <= 1'b0; frame_ok <= 1'b0; digest <= '0;
      hdr_num <= '0; hdr_off <= '0;
    end else begin
      h_start <= 1'b0;
      done    <= 1'b0;
      unique case (st)
        C_IDLE: if (start) begin
          cmd_q <= cmd;
          cnt   <= '0;
          unique case (cmd)
            CA_VERIFY: begin
              st <= C_HDR;
              integ_ok <= 1'b0; auth_ok <= 1'b0; frame_ok <= 1'b0;
            end
            CA_SIGN: begin
              feed_sr <= sign_msg; feed_n <= 6'd32;
              h_start <= 1'b1; h_hmac <= 1'b1;
              st <= C_FEED;
            end
            default: begin  // CA_DERIVE
              feed_sr <= {uuid, 128'h0}; feed_n <= 6'd16;
              h_start <= 1'b1; h_hmac <= 1'b1;
              st <= C_FEED;
            end
          endcase
        end
        C_HDR: if (fin_valid) begin
          hash_field[255 - 8*cnt[4:0] -: 8] <= fin_data;
          cnt <= cnt + 11'd1;
          if (cnt == 11'(HASH_BYTES - 1)) begin
            h_start <= 1'b1; h_hmac <= 1'b0;
            st <= C_BODY;
          end
        end
        C_BODY: if (fin_valid && fin_ready) begin
          if (cnt >= 11'(NUM_OFS) && cnt < 11'(NUM_OFS + 4))
            hdr_num[8*(cnt - 11'(NUM_OFS)) +: 8] <= fin_data;
          if (cnt >= 11'(OFF_OFS) && cnt < 11'(OFF_OFS + 4))
            hdr_off[8*(cnt - 11'(OFF_OFS)) +: 8] <= fin_data;
          cnt <= cnt + 11'd1;
          if (cnt == 11'(FRAME - 1)) st <= C_DIG;
        end
        C_DIG: if (h_done) begin
          digest   <= h_digest;
          integ_ok <= (h_digest == golden);
          feed_sr  <= h_digest; feed_n <= 6'd32;
          h_start  <= 1'b1; h_hmac <= 1'b1;
          st <= C_FEED;
        end
        C_FEED: if (h_ready) begin
          feed_sr <= {feed_sr[247:0], 8'h00};
          feed_n  <= feed_n - 6'd1;
          if (feed_n == 6'd1) st <= C_WAIT;
        end
        C_WAIT: if (h_done) begin
          st   <= C_IDLE;
          done <= 1'b1;
          unique case (cmd_q)
            CA_VERIFY: begin
              sig      <= h_digest;
              auth_ok  <= (h_digest == hash_field);
              frame_ok <= integ_ok && (h_digest == hash_field);
            end
            CA_SIGN: sig <= h_digest;
            default: begin dkey <= h_digest; dkey_valid <= 1'b1; end
          endcase
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  assign busy = (st != C_IDLE);

endmodule
