// cluster_pkg: bus types and sizes of the accelerator compute cluster.
//
// A core's data request (mem_req_t) carries a 32-bit byte address, a write
// flag, byte enables and 64-bit write data; a response (mem_rsp_t) carries
// read data and an error flag that signals a PMP access fault. The cluster
// port towards the L2 memory adds the index of the requesting core so that
// responses may come back after any latency. A CSR request reaches the PMP
// control unit. Widths are this design's own choice: the cores are RV32
// with a double-precision FPU, hence 32-bit addresses and 64-bit data.
package cluster_pkg;

  localparam int unsigned AW      = 32;
  localparam int unsigned DW      = 64;
  localparam int unsigned BEW     = DW / 8;
  localparam int unsigned IDW     = 4;    // up to 16 cores per cluster
  localparam int unsigned BANK_AW = 16;   // word address width at a bank

  typedef struct packed {
    logic             valid;
    logic [AW-1:0]    addr;
    logic             we;
    logic [BEW-1:0]   be;
    logic [DW-1:0]    wdata;
  } mem_req_t;

  typedef struct packed {
    logic             valid;
    logic [DW-1:0]    rdata;
    logic             err;
  } mem_rsp_t;

  typedef struct packed {
    logic               valid;
    logic               we;
    logic [BANK_AW-1:0] waddr;
    logic [BEW-1:0]     be;
    logic [DW-1:0]      wdata;
  } bank_req_t;

  typedef struct packed {
    logic             valid;
    logic [IDW-1:0]   id;
    logic [AW-1:0]    addr;
    logic             we;
    logic [BEW-1:0]   be;
    logic [DW-1:0]    wdata;
  } ext_req_t;

  typedef struct packed {
    logic             valid;
    logic [IDW-1:0]   id;
    logic [DW-1:0]    rdata;
    logic             err;
  } ext_rsp_t;

  typedef struct packed {
    logic             valid;
    logic             we;
    logic [11:0]      addr;
    logic [31:0]      wdata;
    pmp_pkg::priv_t   priv;
  } csr_req_t;

  typedef struct packed {
    logic [31:0]      rdata;
    logic             err;
  } csr_rsp_t;

endpackage
