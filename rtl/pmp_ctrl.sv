// pmp_ctrl: shared PMP control unit of one compute cluster.
//
// The cluster holds one set of PMP registers (NR_ENTRIES = 4 entries) that
// every core's enforcement unit applies, while only one core may change
// them. That core (CFG_CORE) runs the cluster firmware in machine mode: it
// writes the regions given by the host, drops the worker cores into user
// mode and, on a context switch, flushes the scratchpad and rewrites the
// entries. Splitting configuration (here) from enforcement (pmp_enforce, one
// per core) is what the modified cluster is built around; the register
// layout, lock rules and CSR numbers below follow the RISC-V privileged
// specification (RV32 layout) and are this design's reading of it.
//
// Registers, reached through the standard CSR numbers:
//   pmpcfg0..3   0x3A0..0x3A3  four 8-bit entry configurations per word
//                               (L, 0, 0, A[1:0], X, W, R), byte i%4 of
//                               pmpcfg(i/4) belongs to entry i
//   pmpaddr0..15 0x3B0..0x3BF  address bits PLEN-1:2 of each entry
// Entries beyond NR_ENTRIES read as zero and ignore writes. A locked entry
// (L=1) ignores writes to its configuration and address; a locked TOR
// entry also protects the address register below it. Locks clear only at
// reset, which turns every entry OFF.
//
// Interface: each core has a CSR port (csr_req_i[c]) answered in the same
// cycle (csr_rsp_o[c]); a write takes effect at the next clock edge. Any
// access from another core than CFG_CORE, below machine mode, or to a CSR
// number that is not a PMP register returns err=1 and changes nothing.
// cfg_o / addr_o carry the registers to all enforcement units. The read
// data returned to the other cores is constant zero and bits 6:5 of every
// configuration byte are constant zero, so synthesis finds those outputs
// idle by design.
module pmp_ctrl #(
  parameter int unsigned NR_CORES   = 8,
  parameter int unsigned NR_ENTRIES = 4,
  parameter int unsigned CFG_CORE   = 0,
  parameter int unsigned PLEN       = 32
) (
  input  logic                                   clk_i,
  input  logic                                   rst_ni,
  input  cluster_pkg::csr_req_t [NR_CORES-1:0]   csr_req_i,
  output cluster_pkg::csr_rsp_t [NR_CORES-1:0]   csr_rsp_o,
  output pmp_pkg::pmp_cfg_t [NR_ENTRIES-1:0]     cfg_o,
  output logic [NR_ENTRIES-1:0][PLEN-3:0]        addr_o
);
  import pmp_pkg::*;

  pmp_cfg_t [NR_ENTRIES-1:0]       cfg_q;
  logic [NR_ENTRIES-1:0][PLEN-3:0] addr_q;

  cluster_pkg::csr_req_t req;
  logic                  is_cfg, is_addr, legal;
  logic [3:0]            idx;
  logic [31:0]           rdata;

  assign req     = csr_req_i[CFG_CORE];
  assign is_cfg  = (req.addr[11:2] == CSR_PMPCFG0[11:2]);
  assign is_addr = (req.addr[11:4] == CSR_PMPADDR0[11:4]);
  assign idx     = req.addr[3:0];
  assign legal   = req.valid && (req.priv == PRIV_M) && (is_cfg || is_addr);

  // Read data of the configuring core's access.
  always_comb begin
    rdata = '0;
    if (is_cfg) begin
      for (int b = 0; b < 4; b++)
        if (4 * int'(idx[1:0]) + b < NR_ENTRIES)
          rdata[8*b +: 8] = cfg_q[4 * int'(idx[1:0]) + b];
    end else if (is_addr) begin
      if (int'(idx) < NR_ENTRIES)
        rdata = 32'(addr_q[idx]);
    end
  end

  always_comb begin
    for (int c = 0; c < NR_CORES; c++) begin
      csr_rsp_o[c].rdata = '0;
      csr_rsp_o[c].err   = csr_req_i[c].valid;   // other cores: always refused
    end
    csr_rsp_o[CFG_CORE].rdata = legal ? rdata : '0;
    csr_rsp_o[CFG_CORE].err   = req.valid && !legal;
  end

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
    end else if (legal && req.we) begin
      if (is_cfg) begin
        // Entry e is byte e%4 of pmpcfg(e/4).
        for (int unsigned e = 0; e < NR_ENTRIES; e++) begin
          if (e / 4 == int'(idx[1:0]) && !cfg_q[e].locked) begin
            cfg_q[e]          <= pmp_cfg_t'(req.wdata[8*(e%4) +: 8]);
            cfg_q[e].reserved <= 2'b00;
          end
        end
      end else begin
        for (int unsigned e = 0; e < NR_ENTRIES; e++)
          if (e == int'(idx) && !addr_locked(cfg_q, e))
            addr_q[e] <= req.wdata[PLEN-3:0];
      end
    end
  end

  assign cfg_o  = cfg_q;
  assign addr_o = addr_q;

  // Only the configuring core ever sees an accepted access.
  for (genvar c = 0; c < NR_CORES; c++) begin : g_chk
    if (c != CFG_CORE) begin : g_other
      a_only_cfg_core : assert property (@(posedge clk_i) disable iff (!rst_ni)
        csr_req_i[c].valid |-> csr_rsp_o[c].err);
    end
  end

  initial begin
    assert (PLEN <= 34 && PLEN > 2) else $error("pmpaddr holds PLEN-2 <= 32 bits");
    assert (NR_ENTRIES <= MAX_ENTRIES && CFG_CORE < NR_CORES) else $error("bad parameters");
  end
endmodule
