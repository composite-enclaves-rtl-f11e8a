// pmp_entry: address match of one PMP entry.
//
// Compares a physical address with one entry's pmpaddr register in the mode
// given by the entry's A field, as the RISC-V privileged specification
// defines it:
//   TOR   - match when pmpaddr[i-1] <= addr[PLEN-1:2] < pmpaddr[i]
//           (pmpaddr[-1] is taken as zero for entry 0),
//   NA4   - match when addr[PLEN-1:2] equals pmpaddr,
//   NAPOT - the trailing ones of pmpaddr encode the size: with k trailing
//           ones the region is 2^(k+3) bytes. The mask y ^ (y+1) has a one
//           in each of the k+1 low word-address bits that are free inside the
//           region, so the address matches when it agrees with pmpaddr on all
//           other bits.
// Only the first byte address of an access is compared (accesses are taken
// to be naturally aligned). Purely combinational.
module pmp_entry #(
  parameter int unsigned PLEN = 32
) (
  input  logic [PLEN-1:0]  addr_i,
  input  pmp_pkg::pmp_mode_t mode_i,
  input  logic [PLEN-3:0]  pmpaddr_i,
  input  logic [PLEN-3:0]  pmpaddr_prev_i,
  output logic             match_o
);
  logic [PLEN-3:0] word_addr;
  logic [PLEN-3:0] napot_free;

  assign word_addr  = addr_i[PLEN-1:2];
  assign napot_free = pmpaddr_i ^ (pmpaddr_i + 1'b1);

  always_comb begin
    unique case (mode_i)
      pmp_pkg::A_TOR:   match_o = (word_addr >= pmpaddr_prev_i) && (word_addr < pmpaddr_i);
      pmp_pkg::A_NA4:   match_o = (word_addr == pmpaddr_i);
      pmp_pkg::A_NAPOT: match_o = ((word_addr ^ pmpaddr_i) & ~napot_free) == '0;
      default:          match_o = 1'b0;
    endcase
  end
endmodule
