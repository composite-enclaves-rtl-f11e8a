// pmp: RISC-V physical memory protection check.
//
// Decides whether one access (address, read/write/execute, privilege mode)
// is allowed by up to NR_ENTRIES configured regions. Every entry is matched
// in parallel by a pmp_entry instance; the lowest-numbered matching entry
// decides, as the RISC-V privileged specification prescribes:
//   - machine mode passes an unlocked matching entry and is checked against
//     the R/W/X bits of a locked one;
//   - supervisor and user mode are checked against the R/W/X bits;
//   - with no matching entry machine mode passes and S/U mode fails, unless
//     no entry is implemented at all (NR_ENTRIES = 0).
// The same unit serves the host core, where the design allows up to 16
// entries (three instances: instruction fetch, data access, page-table walk)
// and each core of the accelerator cluster, where it is used with 4 entries
// inside pmp_enforce. The default of 16 entries is the maximum that the
// specification allows and that the design supports; the 56-bit physical
// address width is this design's choice for a 64-bit host core.
//
// Interface: cfg_i and addr_cfg_i are the pmpcfg bytes and pmpaddr
// registers (address bits PLEN-1:2) of all entries. allow_o, match_o and
// match_idx_o are combinational functions of the inputs, no clock.
module pmp #(
  parameter int unsigned PLEN       = 56,
  parameter int unsigned NR_ENTRIES = 16,
  localparam int unsigned IDXW      = (NR_ENTRIES > 1) ? $clog2(NR_ENTRIES) : 1
) (
  input  logic [PLEN-1:0]          addr_i,
  input  pmp_pkg::access_t         access_i,
  input  pmp_pkg::priv_t           priv_i,
  input  pmp_pkg::pmp_cfg_t [NR_ENTRIES-1:0] cfg_i,
  input  logic [NR_ENTRIES-1:0][PLEN-3:0]    addr_cfg_i,
  output logic                     allow_o,
  output logic                     match_o,
  output logic [IDXW-1:0]          match_idx_o
);
  import pmp_pkg::*;

  if (NR_ENTRIES == 0) begin : g_no_pmp
    assign allow_o     = 1'b1;
    assign match_o     = 1'b0;
    assign match_idx_o = '0;
  end else begin : g_pmp
    logic [NR_ENTRIES-1:0] hit;

    for (genvar i = 0; i < NR_ENTRIES; i++) begin : g_entry
      pmp_entry #(.PLEN(PLEN)) u_entry (
        .addr_i         (addr_i),
        .mode_i         (cfg_i[i].mode),
        .pmpaddr_i      (addr_cfg_i[i]),
        .pmpaddr_prev_i ((i == 0) ? '0 : addr_cfg_i[(i == 0) ? 0 : i-1]),
        .match_o        (hit[i])
      );
    end

    always_comb begin
      pmp_cfg_t sel;
      logic     perm;
      match_o     = 1'b0;
      match_idx_o = '0;
      sel         = '0;
      // Priority: the lowest-numbered matching entry wins.
      for (int i = NR_ENTRIES - 1; i >= 0; i--) begin
        if (hit[i]) begin
          match_o     = 1'b1;
          match_idx_o = IDXW'(i);
          sel         = cfg_i[i];
        end
      end
      unique case (access_i)
        ACC_READ:  perm = sel.r;
        ACC_WRITE: perm = sel.w;
        ACC_EXEC:  perm = sel.x;
        default:   perm = 1'b0;
      endcase
      if (!match_o)
        allow_o = (priv_i == PRIV_M);
      else if (priv_i == PRIV_M && !sel.locked)
        allow_o = 1'b1;
      else
        allow_o = perm;
    end
  end
endmodule
