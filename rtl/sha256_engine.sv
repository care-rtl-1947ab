// sha256_engine: SHA-256 of a byte stream, with the message padding done in
// hardware.
//
// A pulse on init resets the chaining value to the SHA-256 initial value and
// the length counter. Message bytes then enter one per clock on a
// valid/ready handshake, the last one flagged by in_last. Each full 64-byte
// block is handed to sha256_core (64 clocks, in_ready low meanwhile). After
// the last byte the engine appends 0x80, zeros and the 64-bit bit length,
// one byte per clock, compresses the final block(s) and pulses done with the
// digest (big-endian, first digest byte in bits 255:248). Messages of at
// least one byte are supported. Byte-serial absorption and padding are this
// design's choices.
module sha256_engine (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         init,
  input  logic         in_valid,
  input  logic [7:0]   in_data,
  input  logic         in_last,
  output logic         in_ready,
  output logic         done,
  output logic [255:0] digest
);

  localparam logic [255:0] IV = {32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
                                 32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19};

  typedef enum logic [2:0] {E_IDLE, E_ABSORB, E_PAD, E_COMP, E_DONE} st_e;
  st_e st, ret_st;

  logic [511:0] blk;
  logic [5:0]   pos;
  logic [63:0]  nbytes;
  logic         p80, lenok, final_blk;
  logic         core_start, core_busy, core_done;
  logic [255:0] core_h;
  logic [63:0]  bitlen;

  assign bitlen = {nbytes[60:0], 3'b000};

  sha256_core u_core (
    .clk, .rst_n,
    .start (core_start),
    .block (blk),
    .h_in  (digest),
    .busy  (core_busy),
    .done  (core_done),
    .h_out (core_h)
  );

  assign in_ready = (st == E_ABSORB);

  // byte written in the padding state
  logic [7:0] pad_byte;
  always_comb begin
    if (!p80)                        pad_byte = 8'h80;
    else if (lenok && pos >= 6'd56)  pad_byte = bitlen[63 - 8*(pos - 6'd56) -: 8];
    else                             pad_byte = 8'h00;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= E_IDLE; ret_st <= E_IDLE;
      blk <= '0; pos <= '0; nbytes <= '0;
      p80 <= 1'b0; lenok <= 1'b0; final_blk <= 1'b0;
      core_start <= 1'b0; done <= 1'b0; digest <= IV;
    end else begin
      core_start <= 1'b0;
      done       <= 1'b0;
      if (init) begin
        st <= E_ABSORB; pos <= '0; nbytes <= '0; p80 <= 1'b0;
        lenok <= 1'b0; final_blk <= 1'b0; digest <= IV;
      end else begin
        unique case (st)
          E_IDLE: ;
          E_ABSORB: if (in_valid) begin
            blk[511 - 8*pos -: 8] <= in_data;
            pos    <= pos + 6'd1;
            nbytes <= nbytes + 64'd1;
            if (pos == 6'd63) begin
              core_start <= 1'b1;
              st         <= E_COMP;
              ret_st     <= in_last ? E_PAD : E_ABSORB;
            end else if (in_last) begin
              st <= E_PAD;
            end
          end
          E_PAD: begin
            blk[511 - 8*pos -: 8] <= pad_byte;
            pos <= pos + 6'd1;
            if (!p80) begin
              p80   <= 1'b1;
              lenok <= (pos <= 6'd55);
            end
            if (pos == 6'd63) begin
              core_start <= 1'b1;
              st         <= E_COMP;
              ret_st     <= E_PAD;
              final_blk  <= p80 && lenok;
            end
          end
          E_COMP: if (core_done) begin
            digest <= core_h;
            if (final_blk) begin
              st   <= E_DONE;
              done <= 1'b1;
            end else begin
              st <= ret_st;
              if (ret_st == E_PAD && p80) lenok <= 1'b1;
            end
          end
          E_DONE: ;
          default: st <= E_IDLE;
        endcase
      end
    end
  end

endmodule
