// pmp_pkg: types and constants shared by the physical memory protection
// (PMP) logic.
//
// The PMP configuration byte follows the RISC-V privileged specification:
// bit 7 L (lock), bits 6:5 reserved (read as zero), bits 4:3 A (address
// matching mode), bit 2 X, bit 1 W, bit 0 R. The CSR numbers are the
// standard ones (pmpcfg0 at 0x3A0, pmpaddr0 at 0x3B0). Privilege and access
// encodings are this design's own choice except for the privilege values,
// which are the standard U=0, S=1, M=3.
package pmp_pkg;

  // Address matching mode of one entry.
  typedef enum logic [1:0] {
    A_OFF   = 2'd0,   // entry disabled
    A_TOR   = 2'd1,   // top of range: pmpaddr[i-1] <= a < pmpaddr[i]
    A_NA4   = 2'd2,   // naturally aligned 4-byte region
    A_NAPOT = 2'd3    // naturally aligned power-of-two region, >= 8 bytes
  } pmp_mode_t;

  typedef struct packed {
    logic       locked;
    logic [1:0] reserved;
    pmp_mode_t  mode;
    logic       x;
    logic       w;
    logic       r;
  } pmp_cfg_t;

  typedef enum logic [1:0] {
    PRIV_U = 2'd0,
    PRIV_S = 2'd1,
    PRIV_M = 2'd3
  } priv_t;

  typedef enum logic [1:0] {
    ACC_READ  = 2'd0,
    ACC_WRITE = 2'd1,
    ACC_EXEC  = 2'd2
  } access_t;

  // Standard CSR numbers.
  localparam logic [11:0] CSR_PMPCFG0  = 12'h3A0;
  localparam logic [11:0] CSR_PMPADDR0 = 12'h3B0;

  // Most entries the specification allows (pmpaddr0..15).
  localparam int unsigned MAX_ENTRIES = 16;

endpackage
