// host_pmp: physical memory protection for the host core (a 64-bit
// application-class RISC-V core with an MMU).
//
// The core had no PMP; this block adds it. It holds the PMP registers, which
// the security monitor programs from machine mode, and three checking units
// that apply them: one checks data loads and stores, one checks instruction
// fetches (both sit in the memory management unit) and one checks the reads
// of the hardware page table walker, so that a page table cannot reach into
// protected memory either. Up to 16 entries (NR_ENTRIES, default 16) can be
// built; the three checking units and their placement follow the paper, the
// register layout and lock rules are the RISC-V privileged specification's
// RV64 layout as this design reads it.
//
// Registers, reached through the standard CSR numbers:
//   pmpcfg0      0x3A0  entries 0..7, one configuration byte each
//   pmpcfg2      0x3A2  entries 8..15 (pmpcfg1 and pmpcfg3 do not exist on
//                       a 64-bit core and are refused)
//   pmpaddr0..15 0x3B0..0x3BF  address bits PLEN-1:2 of each entry
// A configuration byte is (L, 0, 0, A[1:0], X, W, R). Entries beyond
// NR_ENTRIES read as zero and ignore writes. A locked entry ignores writes to
// its configuration and address, a locked TOR entry also protects the
// address register below it, and a locked entry binds machine mode too.
// Locks clear only at reset, which turns every entry OFF.
//
// Interface and timing: the CSR port answers in the same cycle and a write
// takes effect at the next clock edge; an access below machine mode or to
// another CSR number returns err=1 and changes nothing (the core raises an
// illegal-instruction exception for it). The three checks are combinational:
// *_allow_o answers the address and privilege presented in the same cycle,
// and the core raises an access fault where it is low. The walker's reads
// are checked as reads with the privilege given on ptw_priv_i (the walk is
// done on behalf of S or U mode). Bits 6:5 of every configuration byte are
// constant zero, so synthesis finds those register bits idle by design.
module host_pmp #(
  parameter int unsigned NR_ENTRIES = 16,
  parameter int unsigned PLEN       = 56
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  // CSR port of the core
  input  logic             csr_valid_i,
  input  logic             csr_we_i,
  input  logic [11:0]      csr_addr_i,
  input  logic [63:0]      csr_wdata_i,
  input  pmp_pkg::priv_t   csr_priv_i,
  output logic [63:0]      csr_rdata_o,
  output logic             csr_err_o,
  // data access check (load or store)
  input  logic [PLEN-1:0]  data_addr_i,
  input  logic             data_we_i,
  input  pmp_pkg::priv_t   data_priv_i,
  output logic             data_allow_o,
  // instruction fetch check
  input  logic [PLEN-1:0]  fetch_addr_i,
  input  pmp_pkg::priv_t   fetch_priv_i,
  output logic             fetch_allow_o,
  // page table walker read check
  input  logic [PLEN-1:0]  ptw_addr_i,
  input  pmp_pkg::priv_t   ptw_priv_i,
  output logic             ptw_allow_o
);
  import pmp_pkg::*;

  pmp_cfg_t [NR_ENTRIES-1:0]       cfg_q;
  logic [NR_ENTRIES-1:0][PLEN-3:0] addr_q;

  logic       is_cfg, is_addr, legal;
  logic [3:0] idx;
  logic [63:0] rdata;

  // pmpcfg0 and pmpcfg2 only: 0x3A0 and 0x3A2.
  assign is_cfg  = (csr_addr_i[11:2] == CSR_PMPCFG0[11:2]) && !csr_addr_i[0];
  assign is_addr = (csr_addr_i[11:4] == CSR_PMPADDR0[11:4]);
  assign idx     = csr_addr_i[3:0];
  assign legal   = csr_valid_i && (csr_priv_i == PRIV_M) && (is_cfg || is_addr);

  // Entry e is byte e%8 of pmpcfg(2*(e/8)).
  always_comb begin
    rdata = '0;
    if (is_cfg) begin
      for (int unsigned e = 0; e < NR_ENTRIES; e++)
        if (e / 8 == 32'(idx[1])) rdata[8*(e%8) +: 8] = cfg_q[e];
    end else if (is_addr) begin
      for (int unsigned e = 0; e < NR_ENTRIES; e++)
        if (e == 32'(idx)) rdata = 64'(addr_q[e]);
    end
  end

  assign csr_rdata_o = legal ? rdata : '0;
  assign csr_err_o   = csr_valid_i && !legal;

  function automatic logic addr_locked(pmp_cfg_t [NR_ENTRIES-1:0] cfg, int unsigned i);
    logic next_tor_locked;
    next_tor_locked = 1'b0;
    for (int unsigned j = 0; j < NR_ENTRIES; j++)
      if (j == i + 1)
        next_tor_locked = cfg[j].locked && (cfg[j].mode == A_TOR);
    return cfg[i].locked || next_tor_locked;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cfg_q  <= '0;
      addr_q <= '0;
    end else if (legal && csr_we_i) begin
      if (is_cfg) begin
        for (int unsigned e = 0; e < NR_ENTRIES; e++) begin
          if (e / 8 == 32'(idx[1]) && !cfg_q[e].locked) begin
            cfg_q[e]          <= pmp_cfg_t'(csr_wdata_i[8*(e%8) +: 8]);
            cfg_q[e].reserved <= 2'b00;
          end
        end
      end else begin
        for (int unsigned e = 0; e < NR_ENTRIES; e++)
          if (e == 32'(idx) && !addr_locked(cfg_q, e))
            addr_q[e] <= csr_wdata_i[PLEN-3:0];
      end
    end
  end

  // The three checking units.
  pmp #(.PLEN(PLEN), .NR_ENTRIES(NR_ENTRIES)) i_pmp_data (
    .addr_i     (data_addr_i),
    .access_i   (data_we_i ? ACC_WRITE : ACC_READ),
    .priv_i     (data_priv_i),
    .cfg_i      (cfg_q),
    .addr_cfg_i (addr_q),
    .allow_o    (data_allow_o),
    .match_o    (),
    .match_idx_o()
  );

  pmp #(.PLEN(PLEN), .NR_ENTRIES(NR_ENTRIES)) i_pmp_fetch (
    .addr_i     (fetch_addr_i),
    .access_i   (ACC_EXEC),
    .priv_i     (fetch_priv_i),
    .cfg_i      (cfg_q),
    .addr_cfg_i (addr_q),
    .allow_o    (fetch_allow_o),
    .match_o    (),
    .match_idx_o()
  );

  pmp #(.PLEN(PLEN), .NR_ENTRIES(NR_ENTRIES)) i_pmp_ptw (
    .addr_i     (ptw_addr_i),
    .access_i   (ACC_READ),
    .priv_i     (ptw_priv_i),
    .cfg_i      (cfg_q),
    .addr_cfg_i (addr_q),
    .allow_o    (ptw_allow_o),
    .match_o    (),
    .match_idx_o()
  );

  initial begin
    assert (PLEN <= 66 && PLEN > 2) else $error("pmpaddr holds PLEN-2 <= 64 bits");
    assert (NR_ENTRIES <= MAX_ENTRIES) else $error("at most 16 entries");
  end
endmodule
