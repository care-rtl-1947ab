// resilience_engine: onboard recovery of one corrupted flash frame.
//
// Given the index i of a frame that failed verification, the engine
//   1. reads the golden digest of frame i from secure storage,
//   2. has the CA unit sign it (sig_req/sig_done) to rebuild the frame's
//      Hash field, since only the 968-byte payload is kept as recovery data,
//   3. erases the flash sector that holds frame i (offset i * FRAME),
//   4. programs the frame back page by page: the rebuilt header (Hash field,
//      frame number i, frame offset, zero reserved bytes) followed by the
//      968 golden payload bytes read from secure storage.
// Only the corrupted frame is touched. Locking the memory afterwards (the
// paper's third step) is done by the CARE sequencer, which owns the
// access-control configuration.
//
// Interface: pulse start with frame_idx while busy is low; done pulses once
// when the frame has been rewritten. The ROM port returns data one clock
// after rom_en. The flash port is the flash_ctrl request interface.
// Timing is set by the flash: one erase, FRAME/256 page programs and their
// status polling; the crypto work (one HMAC) is a few hundred clocks.
// The paper implements this engine in software on the core; here the same
// steps are a hardware state machine so that the design recovers without a
// processor. Rebuilding the Hash field with the shared crypto core, instead
// of storing it, is this design's choice that keeps the recovery data at
// the paper's 968 bytes per frame.
module resilience_engine
  import care_pkg::*;
#(
  parameter int unsigned FRAME      = care_pkg::FRAME_BYTES,
  parameter int unsigned ROM_AW     = $clog2(care_pkg::ROM_BYTES / 4),
  parameter int unsigned DIG_BASE   = care_pkg::ROM_DIGEST_BASE,
  parameter int unsigned RECOV_BASE = care_pkg::ROM_RECOV_BASE,
  localparam int unsigned PAYLOAD   = FRAME - care_pkg::HDR_BYTES,
  localparam int unsigned PAGES     = FRAME / care_pkg::FLASH_PAGE_BYTES
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [7:0]        frame_idx,
  output logic              busy,
  output logic              done,
  // secure ROM read port
  output logic              rom_en,
  output logic [ROM_AW-1:0] rom_addr,
  input  logic [31:0]       rom_rdata,
  // signature request to the CA unit
  output logic              sig_req,
  output logic [255:0]      sig_msg,
  input  logic              sig_done,
  input  logic [255:0]      sig_value,
  // flash controller
  output logic              fc_req,
  output fc_op_e            fc_op,
  output logic [23:0]       fc_addr,
  output logic [10:0]       fc_len,
  input  logic              fc_done,
  output logic              fc_wr_valid,
  output logic [7:0]        fc_wr_data,
  input  logic              fc_wr_ready,
  output logic [15:0]       bytes_restored
);

  typedef enum logic [3:0] {R_IDLE, R_DIG, R_DIGW, R_SIGN, R_SIGNW, R_ERASE, R_ERASEW,
                            R_PROG, R_PROGD} st_e;
  st_e st;

  logic [7:0]   idx;
  logic [2:0]   w;
  logic [255:0] gold, hash_q;
  logic [$clog2(PAGES+1)-1:0] page;
  logic [8:0]   k;            // bytes given in the current page
  logic [7:0]   nb;
  logic         nb_valid, fetching;
  logic [1:0]   lane;
  logic [31:0]  fbase;        // flash offset of the frame
  logic [31:0]  b;            // frame byte being supplied
  logic [31:0]  rbyte;        // its ROM byte address when in the payload

  assign fbase = 32'(idx) * 32'(FRAME);
  assign b     = 32'(page) * 32'(FLASH_PAGE_BYTES) + 32'(k);
  assign rbyte = 32'(RECOV_BASE) + 32'(idx) * 32'(PAYLOAD) + (b - 32'(HDR_BYTES));
  assign sig_msg = gold;

  function automatic logic [7:0] hdr_byte(input logic [31:0] bi, input logic [255:0] h,
                                          input logic [31:0] num, input logic [31:0] off);
    if (bi < 32'(HASH_BYTES))       return h[255 - 8*bi[4:0] -: 8];
    else if (bi < 32'(NUM_OFS + 4)) return num[8*bi[1:0] +: 8];
    else if (bi < 32'(OFF_OFS + 4)) return off[8*bi[1:0] +: 8];
    else                            return 8'h00;
  endfunction

  assign fc_wr_valid = (st == R_PROGD) && nb_valid;
  assign fc_wr_data  = nb;
  assign busy        = (st != R_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= R_IDLE; idx <= '0; w <= '0; gold <= '0; hash_q <= '0; page <= '0; k <= '0;
      nb <= '0; nb_valid <= 1'b0; fetching <= 1'b0; lane <= '0;
      rom_en <= 1'b0; rom_addr <= '0; sig_req <= 1'b0; done <= 1'b0;
      fc_req <= 1'b0; fc_op <= FC_READ; fc_addr <= '0; fc_len <= '0; bytes_restored <= '0;
    end else begin
      rom_en  <= 1'b0;
      sig_req <= 1'b0;
      fc_req  <= 1'b0;
      done    <= 1'b0;
      unique case (st)
        R_IDLE: if (start) begin
          idx <= frame_idx;
          w   <= '0;
          bytes_restored <= '0;
          st  <= R_DIG;
        end
        R_DIG: begin
          rom_en   <= 1'b1;
          rom_addr <= ROM_AW'((32'(DIG_BASE) + 32'(idx) * 32'd32) / 32'd4 + 32'(w));
          st       <= R_DIGW;
        end
        R_DIGW: if (!rom_en) begin
          gold[255 - 32*w -: 32] <= {rom_rdata[7:0], rom_rdata[15:8], rom_rdata[23:16], rom_rdata[31:24]};
          w <= w + 3'd1;
          st <= (w == 3'd7) ? R_SIGN : R_DIG;
        end
        R_SIGN: begin
          sig_req <= 1'b1;
          st      <= R_SIGNW;
        end
        R_SIGNW: if (sig_done) begin
          hash_q <= sig_value;
          st     <= R_ERASE;
        end
        R_ERASE: begin
          fc_req  <= 1'b1;
          fc_op   <= FC_ERASE;
          fc_addr <= fbase[23:0];
          fc_len  <= '0;
          st      <= R_ERASEW;
        end
        R_ERASEW: if (fc_done) begin
          page <= '0;
          st   <= R_PROG;
        end
        R_PROG: begin
          fc_req   <= 1'b1;
          fc_op    <= FC_PROG;
          fc_addr  <= 24'(fbase + 32'(page) * 32'(FLASH_PAGE_BYTES));
          fc_len   <= 11'(FLASH_PAGE_BYTES);
          k        <= '0;
          nb_valid <= 1'b0;
          fetching <= 1'b0;
          st       <= R_PROGD;
        end
        R_PROGD: begin
          if (fc_done) begin
            if (32'(page) == 32'(PAGES - 1)) begin
              st   <= R_IDLE;
              done <= 1'b1;
            end else begin
              page <= page + 1'b1;
              st   <= R_PROG;
            end
          end else if (fc_wr_valid && fc_wr_ready) begin
            nb_valid <= 1'b0;
            k        <= k + 9'd1;
            if (b >= 32'(HDR_BYTES)) bytes_restored <= bytes_restored + 16'd1;
          end else if (!nb_valid && !fetching && k < 9'(FLASH_PAGE_BYTES)) begin
            if (b < 32'(HDR_BYTES)) begin
              nb       <= hdr_byte(b, hash_q, 32'(idx), fbase);
              nb_valid <= 1'b1;
            end else begin
              rom_en   <= 1'b1;
              rom_addr <= ROM_AW'(rbyte >> 2);
              lane     <= rbyte[1:0];
              fetching <= 1'b1;
            end
          end else if (fetching && !rom_en) begin
            nb       <= rom_rdata[8*lane +: 8];
            nb_valid <= 1'b1;
            fetching <= 1'b0;
          end
        end
        default: st <= R_IDLE;
      endcase
    end
  end

endmodule
