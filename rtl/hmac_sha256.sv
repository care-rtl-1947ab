// hmac_sha256: the shared cryptographic core of the CA unit.
//
// One SHA-256 engine serves two modes, chosen by hmac_en at start:
//   hmac_en = 0: digest = SHA-256(message)                 (integrity)
//   hmac_en = 1: digest = HMAC-SHA256(key, message)         (authenticity)
// In HMAC mode the core first hashes the 64-byte inner pad (key XOR 0x36,
// the 256-bit key zero-extended to the 64-byte block), then the message,
// then starts a second hash over the outer pad (key XOR 0x5c) followed by
// the 32-byte inner digest (RFC 2104). Reusing one engine for both checks
// is the paper's point; the byte-serial sequencing is this design's choice.
//
// Interface: pulse start with hmac_en and key held stable until done; then
// send the message on msg_valid/msg_ready/msg_data with msg_last on the
// final byte (at least one byte). done pulses for one clock; digest stays
// valid until the next start. busy is high from start to done.
// Timing: one clock per byte plus 65 clocks per 64-byte block; an HMAC adds
// 64 pad bytes before the message and 96 bytes (two blocks) after it.
module hmac_sha256 (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         hmac_en,
  input  logic [255:0] key,
  input  logic         msg_valid,
  input  logic [7:0]   msg_data,
  input  logic         msg_last,
  output logic         msg_ready,
  output logic         busy,
  output logic         done,
  output logic [255:0] digest
);

  typedef enum logic [2:0] {H_IDLE, H_IPAD, H_MSG, H_WAIT_IN, H_OPAD, H_INNER, H_WAIT_OUT} st_e;
  st_e st;

  logic         mode_hmac;
  logic [6:0]   cnt;
  logic [255:0] inner;

  logic         e_init, e_valid, e_last, e_ready, e_done;
  logic [7:0]   e_data;
  logic [255:0] e_digest;

  sha256_engine u_eng (
    .clk, .rst_n,
    .init     (e_init),
    .in_valid (e_valid),
    .in_data  (e_data),
    .in_last  (e_last),
    .in_ready (e_ready),
    .done     (e_done),
    .digest   (e_digest)
  );

  // key byte i (0..63) of the zero-extended key
  logic [7:0] key_byte;
  assign key_byte = (cnt < 7'd32) ? key[255 - 8*cnt[4:0] -: 8] : 8'h00;

  always_comb begin
    e_valid   = 1'b0;
    e_data    = 8'h00;
    e_last    = 1'b0;
    msg_ready = 1'b0;
    unique case (st)
      H_IPAD:  begin e_valid = 1'b1; e_data = key_byte ^ 8'h36; end
      H_OPAD:  begin e_valid = 1'b1; e_data = key_byte ^ 8'h5c; end
      H_INNER: begin
        e_valid = 1'b1;
        e_data  = inner[255 - 8*cnt[4:0] -: 8];
        e_last  = (cnt == 7'd31);
      end
      H_MSG: begin
        e_valid   = msg_valid && !e_init;
        e_data    = msg_data;
        e_last    = msg_last;
        msg_ready = e_ready && !e_init;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= H_IDLE; mode_hmac <= 1'b0; cnt <= '0; inner <= '0;
      e_init <= 1'b0; done <= 1'b0; digest <= '0;
    end else begin
      e_init <= 1'b0;
      done   <= 1'b0;
      unique case (st)
        H_IDLE: if (start) begin
          mode_hmac <= hmac_en;
          cnt       <= '0;
          e_init    <= 1'b1;
          st        <= hmac_en ? H_IPAD : H_MSG;
        end
        H_IPAD: if (e_ready && !e_init) begin
          cnt <= cnt + 7'd1;
          if (cnt == 7'd63) st <= H_MSG;
        end
        H_MSG: if (msg_valid && msg_ready && msg_last) st <= H_WAIT_IN;
        H_WAIT_IN: if (e_done) begin
          if (mode_hmac) begin
            inner  <= e_digest;
            cnt    <= '0;
            e_init <= 1'b1;
            st     <= H_OPAD;
          end else begin
            digest <= e_digest;
            done   <= 1'b1;
            st     <= H_IDLE;
          end
        end
        H_OPAD: if (e_ready && !e_init) begin
          cnt <= cnt + 7'd1;
          if (cnt == 7'd63) begin
            cnt <= '0;
            st  <= H_INNER;
          end
        end
        H_INNER: if (e_ready) begin
          cnt <= cnt + 7'd1;
          if (cnt == 7'd31) st <= H_WAIT_OUT;
        end
        H_WAIT_OUT: if (e_done) begin
          digest <= e_digest;
          done   <= 1'b1;
          st     <= H_IDLE;
        end
        default: st <= H_IDLE;
      endcase
    end
  end

  assign busy = (st != H_IDLE);

endmodule
