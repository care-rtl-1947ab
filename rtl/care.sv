// care: the CARE module (Code Authentication and Resilience Engine). It
// holds the CA unit and the resilience engine and runs the secure boot:
//
//   System initialisation (after power-on reset, once the provisioning strap
//   prov_mode is low): lock the secure storage against writes, program and
//   lock the access-control entries (no host access to the key and recovery
//   area, boot code and flash read/execute only, no flash writes), read the
//   chip information (vendor ID, UUID, firmware revision, key K) and derive
//   the frame-signing key dkey = HMAC(K, UUID) on the CA unit.
//   Bootstrap (after initialisation, and again on every boot_trig pulse,
//   which the GPIO block raises from pin 7): for each frame i = 0..N-1 read
//   its golden digest from secure storage and stream the frame from flash
//   through the CA unit. The chain-of-trust bit follows
//   V(0) = 1, V(i+1) = V(i) & S(f) & I(f).
//   Resilience: when frame i fails, the resilience engine re-flashes it from
//   the recovery data, the access-control entries are locked again and
//   frame i is checked once more; a second failure stops the boot.
//   The core is released (core_fetch_en) only when all frames verified.
//
// The flash controller and ROM port A are shared: the sequencer drives them
// itself except while the resilience engine runs. fc_own tells the top when
// the CARE module needs the flash controller (the host bus gets it
// otherwise). In the paper the initialisation and bootstrap steps are boot
// code running on the core (first- and second-stage boot loaders); here they
// are a state machine, so that the flow can be checked without a processor.
// The retry-once policy and the access-control map are this design's choices.
module care
  import care_pkg::*;
#(
  parameter int unsigned N_FRAMES = care_pkg::NUM_FRAMES,
  parameter int unsigned FRAME    = care_pkg::FRAME_BYTES,
  parameter int unsigned ROM_AW   = $clog2(care_pkg::ROM_BYTES / 4)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              prov_mode,
  input  logic              boot_trig,
  // secure ROM port A
  output logic              rom_en,
  output logic [ROM_AW-1:0] rom_addr,
  input  logic [31:0]       rom_rdata,
  output logic              rom_lock_set,
  // flash controller
  output logic              fc_own,
  output logic              fc_req,
  output fc_op_e            fc_op,
  output logic [23:0]       fc_addr,
  output logic [10:0]       fc_len,
  input  logic              fc_busy,
  input  logic              fc_done,
  input  logic              fc_rd_valid,
  input  logic [7:0]        fc_rd_data,
  output logic              fc_rd_ready,
  output logic              fc_wr_valid,
  output logic [7:0]        fc_wr_data,
  input  logic              fc_wr_ready,
  // access-control configuration
  output logic              pmp_we,
  output logic [1:0]        pmp_idx,
  output pmp_entry_t        pmp_entry,
  // status
  output logic              core_fetch_en,
  output logic              boot_done,
  output logic              boot_fail,
  output logic              chain_v,
  output logic              integ_ok,
  output logic              auth_ok,
  output logic [31:0]       vendor_id,
  output logic [31:0]       fw_rev,
  output logic [7:0]        frames_checked,
  output logic [7:0]        detect_count,
  output logic [7:0]        recover_count,
  output logic [7:0]        last_bad_frame
);

  typedef enum logic [4:0] {
    S_START, S_PROV, S_LOCK, S_INFO, S_INFOW, S_DERIVE, S_DERIVEW, S_BOOT,
    S_DIG, S_DIGW, S_VER, S_VERW, S_RE, S_REW, S_RUN, S_FAIL, S_TAKE
  } st_e;
  st_e st;

  logic [7:0]   idx;
  logic [3:0]   w;
  logic [2:0]   pcnt;
  logic         retry, relock;
  logic [255:0] key_k, golden;
  logic [127:0] uuid;
  logic [31:0]  rw;          // byte-swapped ROM word (first byte in 31:24)

  // ---------------- CA unit ----------------
  logic         ca_start, ca_busy, ca_done, ca_fin_ready, dkey_valid;
  logic         frame_ok;
  ca_cmd_e      ca_cmd;
  logic [255:0] ca_sig, ca_digest;
  logic [31:0]  hdr_num, hdr_off;

  // ---------------- resilience engine ----------------
  logic              re_start, re_busy, re_done, re_rom_en, re_sig_req;
  logic [ROM_AW-1:0] re_rom_addr;
  logic [255:0]      re_sig_msg;
  logic              re_fc_req, re_wr_valid;
  fc_op_e            re_fc_op;
  logic [23:0]       re_fc_addr;
  logic [10:0]       re_fc_len;
  logic [7:0]        re_wr_data;
  logic [15:0]       re_bytes;
  logic              sig_pending;

  ca_unit #(.FRAME(FRAME)) u_ca (
    .clk, .rst_n,
    .start (ca_start), .cmd (ca_cmd), .busy (ca_busy), .done (ca_done),
    .fin_valid (fc_rd_valid && st == S_VERW), .fin_data (fc_rd_data), .fin_ready (ca_fin_ready),
    .golden, .sign_msg (re_sig_msg), .sig (ca_sig),
    .key_k, .uuid, .dkey_valid,
    .integ_ok, .auth_ok, .frame_ok, .digest (ca_digest), .hdr_num, .hdr_off
  );

  resilience_engine #(.FRAME(FRAME), .ROM_AW(ROM_AW)) u_re (
    .clk, .rst_n,
    .start (re_start), .frame_idx (idx), .busy (re_busy), .done (re_done),
    .rom_en (re_rom_en), .rom_addr (re_rom_addr), .rom_rdata,
    .sig_req (re_sig_req), .sig_msg (re_sig_msg),
    .sig_done (ca_done && sig_pending), .sig_value (ca_sig),
    .fc_req (re_fc_req), .fc_op (re_fc_op), .fc_addr (re_fc_addr), .fc_len (re_fc_len),
    .fc_done, .fc_wr_valid (re_wr_valid), .fc_wr_data (re_wr_data), .fc_wr_ready,
    .bytes_restored (re_bytes)
  );

  // ---------------- shared port muxes ----------------
  logic              sq_rom_en, sq_fc_req;
  logic [ROM_AW-1:0] sq_rom_addr;
  logic [23:0]       sq_fc_addr;
  logic              re_phase;

  assign re_phase    = (st == S_REW);
  assign rom_en      = re_phase ? re_rom_en   : sq_rom_en;
  assign rom_addr    = re_phase ? re_rom_addr : sq_rom_addr;
  assign fc_req      = re_phase ? re_fc_req   : sq_fc_req;
  assign fc_op       = re_phase ? re_fc_op    : FC_READ;
  assign fc_addr     = re_phase ? re_fc_addr  : sq_fc_addr;
  assign fc_len      = re_phase ? re_fc_len   : 11'(FRAME);
  assign fc_wr_valid = re_phase && re_wr_valid;
  assign fc_wr_data  = re_wr_data;
  assign fc_rd_ready = (st == S_VERW) && ca_fin_ready;
  assign fc_own      = !(st == S_RUN || st == S_FAIL || st == S_PROV || st == S_START);

  assign rw = {rom_rdata[7:0], rom_rdata[15:8], rom_rdata[23:16], rom_rdata[31:24]};

  // access-control policy, entry n
  function automatic pmp_entry_t policy(input logic [1:0] n);
    pmp_entry_t e;
    e.lock = 1'b1;
    unique case (n)
      2'd0: begin  // chip info, key, digests, recovery data: no host access
        e.base = ADDR_ROM + 32'(ROM_CARE_BASE); e.top = ADDR_ROM + 32'(ROM_BYTES);
        {e.r, e.w, e.x} = 3'b000;
      end
      2'd1: begin  // boot code area: read and execute
        e.base = ADDR_ROM; e.top = ADDR_ROM + 32'(ROM_CARE_BASE);
        {e.r, e.w, e.x} = 3'b101;
      end
      2'd2: begin  // flash: read and execute, never written by the host
        e.base = ADDR_FLASH; e.top = ADDR_FLASH + 32'(FLASH_WINDOW_BYTES);
        {e.r, e.w, e.x} = 3'b101;
      end
      default: begin  // CARE status registers: read only
        e.base = ADDR_REGS; e.top = ADDR_REGS + 32'(REGS_BYTES);
        {e.r, e.w, e.x} = 3'b100;
      end
    endcase
    return e;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_START; idx <= '0; w <= '0; pcnt <= '0; retry <= 1'b0; relock <= 1'b0;
      key_k <= '0; golden <= '0; uuid <= '0; vendor_id <= '0; fw_rev <= '0;
      sq_rom_en <= 1'b0; sq_rom_addr <= '0; sq_fc_req <= 1'b0; sq_fc_addr <= '0;
      rom_lock_set <= 1'b0; pmp_we <= 1'b0; pmp_idx <= '0; pmp_entry <= '0;
      ca_start <= 1'b0; ca_cmd <= CA_VERIFY; re_start <= 1'b0; sig_pending <= 1'b0;
      core_fetch_en <= 1'b0; boot_done <= 1'b0; boot_fail <= 1'b0; chain_v <= 1'b0;
      frames_checked <= '0; detect_count <= '0; recover_count <= '0; last_bad_frame <= '0;
    end else begin
      sq_rom_en    <= 1'b0;
      sq_fc_req    <= 1'b0;
      rom_lock_set <= 1'b0;
      pmp_we       <= 1'b0;
      ca_start     <= 1'b0;
      re_start     <= 1'b0;
      unique case (st)
        S_START: st <= prov_mode ? S_PROV : S_LOCK;
        S_PROV:  if (!prov_mode) st <= S_LOCK;
        S_LOCK: begin
          rom_lock_set <= !relock;
          pmp_we    <= 1'b1;
          pmp_idx   <= pcnt[1:0];
          pmp_entry <= policy(pcnt[1:0]);
          pcnt      <= pcnt + 3'd1;
          if (pcnt == 3'd3) begin
            pcnt <= '0;
            w    <= '0;
            st   <= relock ? S_DIG : S_INFO;
            relock <= 1'b0;
          end
        end
        // chip information: 14 words from ROM_VENDOR
        S_INFO: begin
          sq_rom_en   <= 1'b1;
          sq_rom_addr <= ROM_AW'(ROM_VENDOR / 4 + 32'(w));
          st          <= S_INFOW;
        end
        S_INFOW: if (!sq_rom_en) begin
          if (w == 4'd0)                   vendor_id <= rom_rdata;
          else if (w <= 4'd4)              uuid[127 - 32*(32'(w) - 1) -: 32] <= rw;
          else if (w == 4'd5)              fw_rev <= rom_rdata;
          else                             key_k[255 - 32*(32'(w) - 6) -: 32] <= rw;
          w  <= w + 4'd1;
          st <= (w == 4'd13) ? S_DERIVE : S_INFO;
        end
        S_DERIVE: begin
          ca_start <= 1'b1;
          ca_cmd   <= CA_DERIVE;
          st       <= S_DERIVEW;
        end
        S_DERIVEW: if (ca_done) st <= S_BOOT;
        S_BOOT: begin
          chain_v        <= 1'b1;          // V(0) = true
          idx            <= '0;
          w              <= '0;
          retry          <= 1'b0;
          frames_checked <= '0;
          boot_done      <= 1'b0;
          boot_fail      <= 1'b0;
          core_fetch_en  <= 1'b0;
          st             <= S_DIG;
        end
        S_DIG: begin
          sq_rom_en   <= 1'b1;
          sq_rom_addr <= ROM_AW'((ROM_DIGEST_BASE + 32'(idx) * 32) / 4 + 32'(w));
          st          <= S_DIGW;
        end
        S_DIGW: if (!sq_rom_en) begin
          golden[255 - 32*w[2:0] -: 32] <= rw;
          w  <= w + 4'd1;
          st <= (w == 4'd7) ? S_VER : S_DIG;
        end
        S_VER: if (!fc_busy) begin
          ca_start   <= 1'b1;
          ca_cmd     <= CA_VERIFY;
          sq_fc_req  <= 1'b1;
          sq_fc_addr <= 24'(32'(idx) * 32'(FRAME));
          st         <= S_VERW;
        end
        S_VERW: if (ca_done) begin
          w <= '0;
          if (frame_ok) begin
            chain_v        <= chain_v & frame_ok;
            frames_checked <= frames_checked + 8'd1;
            retry          <= 1'b0;
            if (32'(idx) == 32'(N_FRAMES - 1)) begin
              st <= S_RUN;
            end else begin
              idx <= idx + 8'd1;
              st  <= S_DIG;
            end
          end else if (!retry) begin
            detect_count   <= detect_count + 8'd1;
            last_bad_frame <= idx;
            retry          <= 1'b1;
            st             <= S_RE;
          end else begin
            chain_v <= 1'b0;
            st      <= S_FAIL;
          end
        end
        S_RE: if (!fc_busy) begin
          re_start <= 1'b1;
          st       <= S_REW;
        end
        S_REW: begin
          if (re_sig_req) begin
            ca_start    <= 1'b1;
            ca_cmd      <= CA_SIGN;
            sig_pending <= 1'b1;
          end
          if (ca_done) sig_pending <= 1'b0;
          if (re_done) begin
            recover_count <= recover_count + 8'd1;
            relock        <= 1'b1;
            pcnt          <= '0;
            st            <= S_LOCK;
          end
        end
        S_RUN: begin
          boot_done     <= 1'b1;
          core_fetch_en <= chain_v;
          if (boot_trig) begin
            boot_done     <= 1'b0;
            core_fetch_en <= 1'b0;
            st            <= S_TAKE;
          end
        end
        S_FAIL: begin
          boot_fail <= 1'b1;
          if (boot_trig) begin
            boot_fail <= 1'b0;
            st        <= S_TAKE;
          end
        end
        S_TAKE: if (!fc_busy) st <= S_BOOT;
        default: st <= S_START;
      endcase
    end
  end

endmodule
