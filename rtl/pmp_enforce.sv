// pmp_enforce: PMP enforcement unit of one accelerator core.
//
// Each core of the compute cluster has its own unit between its data port
// and the logarithmic interconnect; all units apply the same shared
// configuration held by pmp_ctrl. That per-core check against one shared
// register set is the structure the modified cluster uses; how a refused
// access is answered is this design's own choice.
//
// Operation: every request is checked by a pmp instance (write -> W bit,
// read -> R bit, the core's current privilege mode). An allowed request is
// passed to the interconnect unchanged and its grant and response are
// passed back. A refused request is granted at once, never reaches the
// interconnect (so a write cannot change memory and a read returns
// nothing), and is answered one cycle later with err=1 and rdata=0;
// fault_o pulses in that response cycle so that the core can raise an
// access-fault exception.
//
// Handshake: a request is held until core_gnt_o; its response (rsp.valid)
// follows one or more cycles later. At most one request is outstanding: a
// new one is granted only when no response is pending or the pending one
// arrives in the same cycle. The check itself adds no cycle. Address, data
// and byte enables pass straight through to icn_req_o; only its valid bit
// is gated.
module pmp_enforce #(
  parameter int unsigned NR_ENTRIES = 4,
  parameter int unsigned PLEN       = 32
) (
  input  logic                               clk_i,
  input  logic                               rst_ni,
  input  pmp_pkg::priv_t                     priv_i,
  input  pmp_pkg::pmp_cfg_t [NR_ENTRIES-1:0] cfg_i,
  input  logic [NR_ENTRIES-1:0][PLEN-3:0]    addr_i,
  // core side
  input  cluster_pkg::mem_req_t              core_req_i,
  output logic                               core_gnt_o,
  output cluster_pkg::mem_rsp_t              core_rsp_o,
  // interconnect side
  output cluster_pkg::mem_req_t              icn_req_o,
  input  logic                               icn_gnt_i,
  input  cluster_pkg::mem_rsp_t              icn_rsp_i,
  output logic                               fault_o
);
  import pmp_pkg::*;

  localparam int unsigned IDXW = (NR_ENTRIES > 1) ? $clog2(NR_ENTRIES) : 1;

  logic            allow, can_accept, deny;
  logic            pending_q, deny_q;
  logic            unused_match;
  logic [IDXW-1:0] unused_idx;

  pmp #(.PLEN(PLEN), .NR_ENTRIES(NR_ENTRIES)) u_pmp (
    .addr_i      (core_req_i.addr[PLEN-1:0]),
    .access_i    (core_req_i.we ? ACC_WRITE : ACC_READ),
    .priv_i      (priv_i),
    .cfg_i       (cfg_i),
    .addr_cfg_i  (addr_i),
    .allow_o     (allow),
    .match_o     (unused_match),
    .match_idx_o (unused_idx)
  );

  assign can_accept = !pending_q || icn_rsp_i.valid;
  assign deny       = core_req_i.valid && can_accept && !allow;

  always_comb begin
    icn_req_o       = core_req_i;
    icn_req_o.valid = core_req_i.valid && can_accept && allow;
  end

  assign core_gnt_o = core_req_i.valid && can_accept && (allow ? icn_gnt_i : 1'b1);

  always_comb begin
    if (deny_q) begin
      core_rsp_o.valid = 1'b1;
      core_rsp_o.rdata = '0;
      core_rsp_o.err   = 1'b1;
    end else begin
      core_rsp_o       = icn_rsp_i;
      core_rsp_o.valid = icn_rsp_i.valid && pending_q;
    end
  end

  assign fault_o = deny_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pending_q <= 1'b0;
      deny_q    <= 1'b0;
    end else begin
      deny_q <= deny;
      if (icn_req_o.valid && icn_gnt_i) pending_q <= 1'b1;
      else if (icn_rsp_i.valid)         pending_q <= 1'b0;
    end
  end

  a_rsp_expected : assert property (@(posedge clk_i) disable iff (!rst_ni)
    icn_rsp_i.valid |-> pending_q);
  a_no_forward_denied : assert property (@(posedge clk_i) disable iff (!rst_ni)
    icn_req_o.valid |-> allow);

  initial assert (PLEN <= cluster_pkg::AW) else $error("PLEN wider than the bus address");
endmodule
