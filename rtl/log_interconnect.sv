// log_interconnect: the cluster's logarithmic interconnect.
//
// Connects NR_MASTERS core ports (each behind its PMP enforcement unit) to
// NR_BANKS scratchpad banks and to the cluster's external port. It is built
// here as the simplest full crossbar that does the job; the internal
// structure is this design's own choice.
//
// Address map: [TCDM_BASE, TCDM_BASE + NR_BANKS*BANK_WORDS*8) is the
// scratchpad, word-interleaved on 64-bit words (address bits [3 +: log2
// NR_BANKS] select the bank, the bits above them the word in the bank);
// every other address goes to the external port (L2 and global memory).
//
// Arbitration: each bank and the external port have a round-robin arbiter.
// A master that loses is not granted and keeps its request (a bank-conflict
// stall); the pointer moves past the winner after each grant. Once the
// external port shows a request, that request is held until ext_gnt_i.
//
// Timing: a bank access is granted in the cycle it is requested (if it
// wins) and answered in the next cycle. An external access is answered when
// ext_rsp_i returns with the master's index in id, after any latency.
// Masters must keep at most one request outstanding (pmp_enforce does).
// The bank word-address field and the external id field are wider than
// the default sizes need; their upper bits are constant zero.
module log_interconnect #(
  parameter int unsigned NR_MASTERS = 8,
  parameter int unsigned NR_BANKS   = 32,
  parameter int unsigned BANK_WORDS = 512,
  parameter logic [31:0] TCDM_BASE  = 32'h1000_0000
) (
  input  logic                                   clk_i,
  input  logic                                   rst_ni,
  input  cluster_pkg::mem_req_t  [NR_MASTERS-1:0] mst_req_i,
  output logic                   [NR_MASTERS-1:0] mst_gnt_o,
  output cluster_pkg::mem_rsp_t  [NR_MASTERS-1:0] mst_rsp_o,
  output cluster_pkg::bank_req_t [NR_BANKS-1:0]   bank_req_o,
  input  logic [NR_BANKS-1:0][cluster_pkg::DW-1:0] bank_rdata_i,
  output cluster_pkg::ext_req_t                  ext_req_o,
  input  logic                                   ext_gnt_i,
  input  cluster_pkg::ext_rsp_t                  ext_rsp_i
);
  import cluster_pkg::*;

  localparam int unsigned BSW  = (NR_BANKS > 1) ? $clog2(NR_BANKS) : 1;
  localparam int unsigned WAW  = (BANK_WORDS > 1) ? $clog2(BANK_WORDS) : 1;
  localparam int unsigned MW   = (NR_MASTERS > 1) ? $clog2(NR_MASTERS) : 1;
  localparam logic [AW:0] TCDM_BYTES = (AW+1)'(NR_BANKS) * (AW+1)'(BANK_WORDS) * (AW+1)'(BEW);

  logic [NR_MASTERS-1:0]          in_tcdm;
  logic [NR_MASTERS-1:0][AW-1:0]  offs;
  logic [NR_MASTERS-1:0][BSW-1:0] bank_sel;

  for (genvar m = 0; m < NR_MASTERS; m++) begin : g_dec
    assign offs[m]     = mst_req_i[m].addr - TCDM_BASE;
    assign in_tcdm[m]  = (mst_req_i[m].addr >= TCDM_BASE) && ({1'b0, offs[m]} < TCDM_BYTES);
    assign bank_sel[m] = (NR_BANKS > 1) ? offs[m][3 +: BSW] : '0;
  end

  // ---------------------------------------------------------------- banks
  logic [NR_BANKS-1:0][MW-1:0]         rr_q, owner_q;
  logic [NR_BANKS-1:0]                 rvalid_q;
  logic [NR_BANKS-1:0][MW-1:0]         win;
  logic [NR_BANKS-1:0]                 win_vld;
  logic [NR_MASTERS-1:0]               bank_gnt;

  always_comb begin
    bank_gnt = '0;
    for (int b = 0; b < NR_BANKS; b++) begin
      win[b]     = '0;
      win_vld[b] = 1'b0;
      // Round robin: first requester at or after the pointer.
      for (int k = NR_MASTERS - 1; k >= 0; k--) begin
        int unsigned m;
        m = (int'(rr_q[b]) + k) % NR_MASTERS;
        if (mst_req_i[m].valid && in_tcdm[m] && int'(bank_sel[m]) == b) begin
          win[b]     = MW'(m);
          win_vld[b] = 1'b1;
        end
      end
      bank_req_o[b].valid = win_vld[b];
      bank_req_o[b].we    = mst_req_i[win[b]].we;
      bank_req_o[b].waddr = BANK_AW'(offs[win[b]][3 + BSW +: WAW]);
      bank_req_o[b].be    = mst_req_i[win[b]].be;
      bank_req_o[b].wdata = mst_req_i[win[b]].wdata;
      if (win_vld[b]) bank_gnt[win[b]] = 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rr_q     <= '0;
      owner_q  <= '0;
      rvalid_q <= '0;
    end else begin
      for (int b = 0; b < NR_BANKS; b++) begin
        rvalid_q[b] <= win_vld[b];
        if (win_vld[b]) begin
          owner_q[b] <= win[b];
          rr_q[b]    <= MW'((int'(win[b]) + 1) % NR_MASTERS);
        end
      end
    end
  end

  // ------------------------------------------------------- external port
  logic [MW-1:0] ext_rr_q, ext_win, ext_lock_idx_q;
  logic          ext_win_vld, ext_lock_q;

  always_comb begin
    ext_win     = '0;
    ext_win_vld = 1'b0;
    for (int k = NR_MASTERS - 1; k >= 0; k--) begin
      int unsigned m;
      m = (int'(ext_rr_q) + k) % NR_MASTERS;
      if (mst_req_i[m].valid && !in_tcdm[m]) begin
        ext_win     = MW'(m);
        ext_win_vld = 1'b1;
      end
    end
    if (ext_lock_q) begin
      ext_win     = ext_lock_idx_q;
      ext_win_vld = 1'b1;
    end
    ext_req_o.valid = ext_win_vld;
    ext_req_o.id    = IDW'(ext_win);
    ext_req_o.addr  = mst_req_i[ext_win].addr;
    ext_req_o.we    = mst_req_i[ext_win].we;
    ext_req_o.be    = mst_req_i[ext_win].be;
    ext_req_o.wdata = mst_req_i[ext_win].wdata;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ext_rr_q       <= '0;
      ext_lock_q     <= 1'b0;
      ext_lock_idx_q <= '0;
    end else begin
      if (ext_win_vld && ext_gnt_i) begin
        ext_rr_q   <= MW'((int'(ext_win) + 1) % NR_MASTERS);
        ext_lock_q <= 1'b0;
      end else if (ext_win_vld) begin
        ext_lock_q     <= 1'b1;
        ext_lock_idx_q <= ext_win;
      end
    end
  end

  // ------------------------------------------------- grants and responses
  always_comb begin
    for (int m = 0; m < NR_MASTERS; m++) begin
      mst_gnt_o[m]       = bank_gnt[m] || (ext_win_vld && ext_gnt_i && int'(ext_win) == m);
      mst_rsp_o[m].valid = 1'b0;
      mst_rsp_o[m].rdata = '0;
      mst_rsp_o[m].err   = 1'b0;
    end
    for (int b = 0; b < NR_BANKS; b++) begin
      if (rvalid_q[b]) begin
        mst_rsp_o[owner_q[b]].valid = 1'b1;
        mst_rsp_o[owner_q[b]].rdata = bank_rdata_i[b];
      end
    end
    if (ext_rsp_i.valid && int'(ext_rsp_i.id) < NR_MASTERS) begin
      mst_rsp_o[ext_rsp_i.id[MW-1:0]].valid = 1'b1;
      mst_rsp_o[ext_rsp_i.id[MW-1:0]].rdata = ext_rsp_i.rdata;
      mst_rsp_o[ext_rsp_i.id[MW-1:0]].err   = ext_rsp_i.err;
    end
  end

  a_ext_hold : assert property (@(posedge clk_i) disable iff (!rst_ni)
    (ext_req_o.valid && !ext_gnt_i) |=> (ext_req_o.valid && ext_req_o.id == $past(ext_req_o.id)));

  initial assert (NR_MASTERS <= (1 << IDW) && WAW <= BANK_AW && (1 << BSW) == NR_BANKS)
    else $error("log_interconnect: unsupported parameters");
endmodule
