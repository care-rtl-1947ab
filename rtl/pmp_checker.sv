// pmp_checker: physical-memory-protection style access check for the host
// bus, which carries both core and DMA accesses.
//
// N entries, each a byte range [base, top) with read, write and execute
// permissions and a lock bit. An entry is written through cfg_we/cfg_idx/
// cfg_entry; once its lock bit is set, writes to it are ignored until reset.
// An access (chk_addr, chk_acc) is allowed when the lowest-numbered entry
// whose range holds the address grants that kind of access; an address that
// no entry covers is refused. The check is combinational.
// The paper relies on the RISC-V PMP unit of the Ibex core to block
// unauthorised read, write and execution; it does not give the entry format.
// Range (top-of-range) entries, the lock behaviour modelled on PMP and the
// refusal of unmatched addresses are this design's choices.
module pmp_checker
  import care_pkg::*;
#(
  parameter int unsigned N = care_pkg::PMP_ENTRIES
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cfg_we,
  input  logic [$clog2(N)-1:0] cfg_idx,
  input  pmp_entry_t         cfg_entry,
  input  logic [31:0]        chk_addr,
  input  acc_e               chk_acc,
  output logic               chk_allow,
  output logic               all_locked
);

  pmp_entry_t ent [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(N); i++) ent[i] <= '0;
    end else if (cfg_we && !ent[cfg_idx].lock) begin
      ent[cfg_idx] <= cfg_entry;
    end
  end

  always_comb begin
    logic found;
    found      = 1'b0;
    chk_allow  = 1'b0;
    all_locked = 1'b1;
    for (int i = 0; i < int'(N); i++) begin
      all_locked = all_locked & ent[i].lock;
      if (!found && chk_addr >= ent[i].base && chk_addr < ent[i].top) begin
        found = 1'b1;
        unique case (chk_acc)
          ACC_READ:  chk_allow = ent[i].r;
          ACC_WRITE: chk_allow = ent[i].w;
          default:   chk_allow = ent[i].x;
        endcase
      end
    end
  end

endmodule
