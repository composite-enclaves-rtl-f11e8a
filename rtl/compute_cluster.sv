// compute_cluster: one compute cluster of the accelerator, modified so that
// several tenants can share the accelerator in isolation.
//
// Structure (core ports at the top level, since the cores themselves are an
// existing design):
//
//   core c data port -> pmp_enforce[c] --\
//                                         log_interconnect -> tcdm_bank x NR_BANKS
//   core c CSR port  -> pmp_ctrl          |                 -> external port (L2)
//                         | cfg/addr     /
//                         +--> all pmp_enforce units
//
// The shared PMP control unit (4 entries) can be written only by core
// CFG_CORE in machine mode; its entries are enforced by every core's own
// enforcement unit on every scratchpad and external access. The firmware on
// the configuring core sets the regions of a task, runs the task on the
// worker cores in user mode, and on a context switch clears the scratchpad
// region of the previous task before rewriting the entries. One PMP control
// unit per cluster, one enforcement unit per core, 8 cores and 4 entries
// follow the paper; the placement of the scratchpad banks behind the
// interconnect, their size (32 x 512 x 64 bit = 128 KiB), the address map
// and all handshakes are this design's own choices.
//
// Timing: a permitted scratchpad access that wins its bank is granted in
// the cycle it is presented and answered one cycle later; a refused access
// is granted at once and answered one cycle later with err=1, together with
// a pulse on core_fault_o. CSR accesses are answered in the same cycle.
module compute_cluster #(
  parameter int unsigned NR_CORES   = 8,
  parameter int unsigned NR_ENTRIES = 4,
  parameter int unsigned CFG_CORE   = 0,
  parameter int unsigned NR_BANKS   = 32,
  parameter int unsigned BANK_WORDS = 512,
  parameter logic [31:0] TCDM_BASE  = 32'h1000_0000
) (
  input  logic                                  clk_i,
  input  logic                                  rst_ni,
  input  pmp_pkg::priv_t        [NR_CORES-1:0]  core_priv_i,
  input  cluster_pkg::mem_req_t [NR_CORES-1:0]  core_req_i,
  output logic                  [NR_CORES-1:0]  core_gnt_o,
  output cluster_pkg::mem_rsp_t [NR_CORES-1:0]  core_rsp_o,
  output logic                  [NR_CORES-1:0]  core_fault_o,
  input  cluster_pkg::csr_req_t [NR_CORES-1:0]  csr_req_i,
  output cluster_pkg::csr_rsp_t [NR_CORES-1:0]  csr_rsp_o,
  output cluster_pkg::ext_req_t                 ext_req_o,
  input  logic                                  ext_gnt_i,
  input  cluster_pkg::ext_rsp_t                 ext_rsp_i
);
  import cluster_pkg::*;

  localparam int unsigned PLEN = AW;

  pmp_pkg::pmp_cfg_t [NR_ENTRIES-1:0] pmp_cfg;
  logic [NR_ENTRIES-1:0][PLEN-3:0]    pmp_addr;

  mem_req_t  [NR_CORES-1:0] icn_req;
  logic      [NR_CORES-1:0] icn_gnt;
  mem_rsp_t  [NR_CORES-1:0] icn_rsp;

  bank_req_t [NR_BANKS-1:0]         bank_req;
  logic [NR_BANKS-1:0][DW-1:0]      bank_rdata;

  pmp_ctrl #(
    .NR_CORES   (NR_CORES),
    .NR_ENTRIES (NR_ENTRIES),
    .CFG_CORE   (CFG_CORE),
    .PLEN       (PLEN)
  ) u_pmp_ctrl (
    .clk_i     (clk_i),
    .rst_ni    (rst_ni),
    .csr_req_i (csr_req_i),
    .csr_rsp_o (csr_rsp_o),
    .cfg_o     (pmp_cfg),
    .addr_o    (pmp_addr)
  );

  for (genvar c = 0; c < NR_CORES; c++) begin : g_core
    pmp_enforce #(
      .NR_ENTRIES (NR_ENTRIES),
      .PLEN       (PLEN)
    ) u_pmp_enforce (
      .clk_i      (clk_i),
      .rst_ni     (rst_ni),
      .priv_i     (core_priv_i[c]),
      .cfg_i      (pmp_cfg),
      .addr_i     (pmp_addr),
      .core_req_i (core_req_i[c]),
      .core_gnt_o (core_gnt_o[c]),
      .core_rsp_o (core_rsp_o[c]),
      .icn_req_o  (icn_req[c]),
      .icn_gnt_i  (icn_gnt[c]),
      .icn_rsp_i  (icn_rsp[c]),
      .fault_o    (core_fault_o[c])
    );
  end

  log_interconnect #(
    .NR_MASTERS (NR_CORES),
    .NR_BANKS   (NR_BANKS),
    .BANK_WORDS (BANK_WORDS),
    .TCDM_BASE  (TCDM_BASE)
  ) u_icn (
    .clk_i        (clk_i),
    .rst_ni       (rst_ni),
    .mst_req_i    (icn_req),
    .mst_gnt_o    (icn_gnt),
    .mst_rsp_o    (icn_rsp),
    .bank_req_o   (bank_req),
    .bank_rdata_i (bank_rdata),
    .ext_req_o    (ext_req_o),
    .ext_gnt_i    (ext_gnt_i),
    .ext_rsp_i    (ext_rsp_i)
  );

  for (genvar b = 0; b < NR_BANKS; b++) begin : g_bank
    tcdm_bank #(
      .WORDS      (BANK_WORDS),
      .DATA_WIDTH (DW)
    ) u_bank (
      .clk_i   (clk_i),
      .req_i   (bank_req[b]),
      .rdata_o (bank_rdata[b])
    );
  end
endmodule
