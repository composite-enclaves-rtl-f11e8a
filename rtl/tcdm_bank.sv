// tcdm_bank: one bank of the cluster's scratchpad memory.
//
// A single-port memory of WORDS words of DATA_WIDTH bits with byte-enable
// writes. A request (req_i.valid) reads or writes the word at req_i.waddr;
// read data appears on rdata_o in the next cycle and holds until the next
// read. The scratchpad is cut into banks so that the logarithmic
// interconnect can serve several cores in the same cycle. Size, width and
// banking are this design's own choice (32 banks of 512 x 64 bit, 128 KiB
// per cluster); the contents are not reset, firmware clears them when
// switching tasks. Written as an array so that synthesis maps it to a
// memory; on a chip it would be an SRAM macro.
module tcdm_bank #(
  parameter int unsigned WORDS      = 512,
  parameter int unsigned DATA_WIDTH = 64
) (
  input  logic                   clk_i,
  input  cluster_pkg::bank_req_t req_i,
  output logic [DATA_WIDTH-1:0]  rdata_o
);
  localparam int unsigned WAW = (WORDS > 1) ? $clog2(WORDS) : 1;

  logic [DATA_WIDTH-1:0] mem [WORDS];
  logic [WAW-1:0]        waddr;

  assign waddr = req_i.waddr[WAW-1:0];

  always_ff @(posedge clk_i) begin
    if (req_i.valid) begin
      if (req_i.we) begin
        for (int b = 0; b < DATA_WIDTH / 8; b++)
          if (req_i.be[b]) mem[waddr][8*b +: 8] <= req_i.wdata[8*b +: 8];
      end else begin
        rdata_o <= mem[waddr];
      end
    end
  end

  initial assert (DATA_WIDTH == cluster_pkg::DW && WAW <= cluster_pkg::BANK_AW)
    else $error("bank size does not fit the bank request type");
endmodule
