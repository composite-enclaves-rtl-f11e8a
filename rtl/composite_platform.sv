// composite_platform: the hardware of a system that runs composite enclaves,
// i.e. enclaves built from a part on the host CPU and parts on specialized
// hardware that exchange data through shared memory.
//
// Two places enforce memory isolation, and both are here:
//   * host_pmp - the PMP registers of the 64-bit host core and its three
//     checking units (data access, instruction fetch, page table walker).
//     The security monitor in machine mode programs it so that the OS cannot
//     reach enclave memory, and on every context switch it reprograms it to
//     open the running enclave's private and shared regions and close the
//     rest.
//   * compute_cluster - one cluster of the many-core accelerator, with its
//     shared PMP control unit and one enforcement unit per core, so that
//     tasks of different tenants run on the accelerator in isolation.
// The host core itself, the accelerator cores, the L2 memory and the
// system interconnect are existing designs and are not part of this RTL:
// their connections are the ports below. The host core presents the
// address and privilege of each data access, fetch and page-table read to
// the host_* check ports and takes an access fault where *_allow_o is low;
// the accelerator cores connect to acc_core_* and acc_csr_*, and the
// cluster's acc_ext_* port goes to the L2. The two halves share only the
// system memory behind those ports (the shared regions in DRAM that a host
// enclave and an accelerator task exchange data through), so there is no
// wire between them here. Timing is that of the two blocks: the host checks
// are combinational, host CSR accesses answer in the same cycle, and the
// cluster's timing is described in compute_cluster. Outputs that are
// constant by design (the CSR read data returned to cluster cores that may
// not configure, reserved configuration bits) are explained in the blocks.
module composite_platform #(
  parameter int unsigned HOST_PMP_ENTRIES = 16,
  parameter int unsigned HOST_PLEN        = 56,
  parameter int unsigned NR_CORES         = 8,
  parameter int unsigned NR_ENTRIES       = 4,
  parameter int unsigned CFG_CORE         = 0,
  parameter int unsigned NR_BANKS         = 32,
  parameter int unsigned BANK_WORDS       = 512,
  parameter logic [31:0] TCDM_BASE        = 32'h1000_0000
) (
  input  logic                                  clk_i,
  input  logic                                  rst_ni,
  // host core: PMP CSR port
  input  logic                                  host_csr_valid_i,
  input  logic                                  host_csr_we_i,
  input  logic [11:0]                           host_csr_addr_i,
  input  logic [63:0]                           host_csr_wdata_i,
  input  pmp_pkg::priv_t                        host_csr_priv_i,
  output logic [63:0]                           host_csr_rdata_o,
  output logic                                  host_csr_err_o,
  // host core: access checks
  input  logic [HOST_PLEN-1:0]                  host_data_addr_i,
  input  logic                                  host_data_we_i,
  input  pmp_pkg::priv_t                        host_data_priv_i,
  output logic                                  host_data_allow_o,
  input  logic [HOST_PLEN-1:0]                  host_fetch_addr_i,
  input  pmp_pkg::priv_t                        host_fetch_priv_i,
  output logic                                  host_fetch_allow_o,
  input  logic [HOST_PLEN-1:0]                  host_ptw_addr_i,
  input  pmp_pkg::priv_t                        host_ptw_priv_i,
  output logic                                  host_ptw_allow_o,
  // accelerator cluster: cores
  input  pmp_pkg::priv_t        [NR_CORES-1:0]  acc_core_priv_i,
  input  cluster_pkg::mem_req_t [NR_CORES-1:0]  acc_core_req_i,
  output logic                  [NR_CORES-1:0]  acc_core_gnt_o,
  output cluster_pkg::mem_rsp_t [NR_CORES-1:0]  acc_core_rsp_o,
  output logic                  [NR_CORES-1:0]  acc_core_fault_o,
  input  cluster_pkg::csr_req_t [NR_CORES-1:0]  acc_csr_req_i,
  output cluster_pkg::csr_rsp_t [NR_CORES-1:0]  acc_csr_rsp_o,
  // accelerator cluster: L2 port
  output cluster_pkg::ext_req_t                 acc_ext_req_o,
  input  logic                                  acc_ext_gnt_i,
  input  cluster_pkg::ext_rsp_t                 acc_ext_rsp_i
);

  host_pmp #(
    .NR_ENTRIES (HOST_PMP_ENTRIES),
    .PLEN       (HOST_PLEN)
  ) i_host_pmp (
    .clk_i         (clk_i),
    .rst_ni        (rst_ni),
    .csr_valid_i   (host_csr_valid_i),
    .csr_we_i      (host_csr_we_i),
    .csr_addr_i    (host_csr_addr_i),
    .csr_wdata_i   (host_csr_wdata_i),
    .csr_priv_i    (host_csr_priv_i),
    .csr_rdata_o   (host_csr_rdata_o),
    .csr_err_o     (host_csr_err_o),
    .data_addr_i   (host_data_addr_i),
    .data_we_i     (host_data_we_i),
    .data_priv_i   (host_data_priv_i),
    .data_allow_o  (host_data_allow_o),
    .fetch_addr_i  (host_fetch_addr_i),
    .fetch_priv_i  (host_fetch_priv_i),
    .fetch_allow_o (host_fetch_allow_o),
    .ptw_addr_i    (host_ptw_addr_i),
    .ptw_priv_i    (host_ptw_priv_i),
    .ptw_allow_o   (host_ptw_allow_o)
  );

  compute_cluster #(
    .NR_CORES   (NR_CORES),
    .NR_ENTRIES (NR_ENTRIES),
    .CFG_CORE   (CFG_CORE),
    .NR_BANKS   (NR_BANKS),
    .BANK_WORDS (BANK_WORDS),
    .TCDM_BASE  (TCDM_BASE)
  ) i_cluster (
    .clk_i        (clk_i),
    .rst_ni       (rst_ni),
    .core_priv_i  (acc_core_priv_i),
    .core_req_i   (acc_core_req_i),
    .core_gnt_o   (acc_core_gnt_o),
    .core_rsp_o   (acc_core_rsp_o),
    .core_fault_o (acc_core_fault_o),
    .csr_req_i    (acc_csr_req_i),
    .csr_rsp_o    (acc_csr_rsp_o),
    .ext_req_o    (acc_ext_req_o),
    .ext_gnt_i    (acc_ext_gnt_i),
    .ext_rsp_i    (acc_ext_rsp_i)
  );
endmodule
