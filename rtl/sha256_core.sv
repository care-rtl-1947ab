// sha256_core: SHA-256 compression function, one round per clock.
//
// A pulse on start loads the 512-bit block (byte 0 in bits 511:504) and the
// chaining value h_in; 64 clocks later done pulses for one clock and h_out
// holds h_in plus the compressed working variables (FIPS 180-4). The
// message schedule is a 16-word sliding window, so only one round's logic
// exists. The paper uses an area-optimised hardware SHA-256 inside its
// HMAC core; the one-round-per-clock structure here is this design's choice.
module sha256_core (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [511:0] block,
  input  logic [255:0] h_in,
  output logic         busy,
  output logic         done,
  output logic [255:0] h_out
);

  function automatic logic [31:0] k_const(input logic [5:0] i);
    logic [31:0] k;
    unique case (i)
      6'd0: k=32'h428a2f98; 6'd1: k=32'h71374491; 6'd2: k=32'hb5c0fbcf; 6'd3: k=32'he9b5dba5;
      6'd4: k=32'h3956c25b; 6'd5: k=32'h59f111f1; 6'd6: k=32'h923f82a4; 6'd7: k=32'hab1c5ed5;
      6'd8: k=32'hd807aa98; 6'd9: k=32'h12835b01; 6'd10: k=32'h243185be; 6'd11: k=32'h550c7dc3;
      6'd12: k=32'h72be5d74; 6'd13: k=32'h80deb1fe; 6'd14: k=32'h9bdc06a7; 6'd15: k=32'hc19bf174;
      6'd16: k=32'he49b69c1; 6'd17: k=32'hefbe4786; 6'd18: k=32'h0fc19dc6; 6'd19: k=32'h240ca1cc;
      6'd20: k=32'h2de92c6f; 6'd21: k=32'h4a7484aa; 6'd22: k=32'h5cb0a9dc; 6'd23: k=32'h76f988da;
      6'd24: k=32'h983e5152; 6'd25: k=32'ha831c66d; 6'd26: k=32'hb00327c8; 6'd27: k=32'hbf597fc7;
      6'd28: k=32'hc6e00bf3; 6'd29: k=32'hd5a79147; 6'd30: k=32'h06ca6351; 6'd31: k=32'h14292967;
      6'd32: k=32'h27b70a85; 6'd33: k=32'h2e1b2138; 6'd34: k=32'h4d2c6dfc; 6'd35: k=32'h53380d13;
      6'd36: k=32'h650a7354; 6'd37: k=32'h766a0abb; 6'd38: k=32'h81c2c92e; 6'd39: k=32'h92722c85;
      6'd40: k=32'ha2bfe8a1; 6'd41: k=32'ha81a664b; 6'd42: k=32'hc24b8b70; 6'd43: k=32'hc76c51a3;
      6'd44: k=32'hd192e819; 6'd45: k=32'hd6990624; 6'd46: k=32'hf40e3585; 6'd47: k=32'h106aa070;
      6'd48: k=32'h19a4c116; 6'd49: k=32'h1e376c08; 6'd50: k=32'h2748774c; 6'd51: k=32'h34b0bcb5;
      6'd52: k=32'h391c0cb3; 6'd53: k=32'h4ed8aa4a; 6'd54: k=32'h5b9cca4f; 6'd55: k=32'h682e6ff3;
      6'd56: k=32'h748f82ee; 6'd57: k=32'h78a5636f; 6'd58: k=32'h84c87814; 6'd59: k=32'h8cc70208;
      6'd60: k=32'h90befffa; 6'd61: k=32'ha4506ceb; 6'd62: k=32'hbef9a3f7; default: k=32'hc67178f2;
    endcase
    return k;
  endfunction

  function automatic logic [31:0] rotr(input logic [31:0] x, input int n);
    return (x >> n) | (x << (32 - n));
  endfunction

  logic [31:0] w [16];
  logic [31:0] a, b, c, d, e, f, g, h;
  logic [5:0]  round;
  logic        running;

  // round logic
  logic [31:0] s0, s1, ch, maj, t1, t2, ws0, ws1, w_new;
  always_comb begin
    s1    = rotr(e, 6) ^ rotr(e, 11) ^ rotr(e, 25);
    ch    = (e & f) ^ (~e & g);
    t1    = h + s1 + ch + k_const(round) + w[0];
    s0    = rotr(a, 2) ^ rotr(a, 13) ^ rotr(a, 22);
    maj   = (a & b) ^ (a & c) ^ (b & c);
    t2    = s0 + maj;
    ws0   = rotr(w[1], 7) ^ rotr(w[1], 18) ^ (w[1] >> 3);
    ws1   = rotr(w[14], 17) ^ rotr(w[14], 19) ^ (w[14] >> 10);
    w_new = w[0] + ws0 + w[9] + ws1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      done    <= 1'b0;
      round   <= '0;
      h_out   <= '0;
      {a, b, c, d, e, f, g, h} <= '0;
      for (int i = 0; i < 16; i++) w[i] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !running) begin
        running <= 1'b1;
        round   <= '0;
        h_out   <= h_in;
        {a, b, c, d, e, f, g, h} <= h_in;
        for (int i = 0; i < 16; i++) w[i] <= block[511 - 32*i -: 32];
      end else if (running) begin
        h <= g; g <= f; f <= e; e <= d + t1;
        d <= c; c <= b; b <= a; a <= t1 + t2;
        for (int i = 0; i < 15; i++) w[i] <= w[i+1];
        w[15] <= w_new;
        round <= round + 6'd1;
        if (round == 6'd63) begin
          running <= 1'b0;
          done    <= 1'b1;
          h_out   <= {h_out[255:224] + t1 + t2, h_out[223:192] + a,
                      h_out[191:160] + b,       h_out[159:128] + c,
                      h_out[127:96]  + d + t1,  h_out[95:64]   + e,
                      h_out[63:32]   + f,       h_out[31:0]    + g};
        end
      end
    end
  end

  assign busy = running;

endmodule
