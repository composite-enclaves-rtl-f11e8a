// tb_tcdm_bank: self-checking testbench of one scratchpad bank (512 x 64).
//
// Random reads and byte-masked writes are compared with a word array kept
// by the testbench. Checks that read data appears exactly one cycle after
// the read request and stays unchanged through following writes and idle
// cycles.
module tb_tcdm_bank;
  import cluster_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  bank_req_t   req;
  logic [63:0] rdata;
  logic [63:0] ref_mem [512];
  int checks = 0, failures = 0;

  tcdm_bank dut (.clk_i(clk), .req_i(req), .rdata_o(rdata));

  initial begin
    logic [63:0] last;
    logic        have_last;
    req = '0;
    have_last = 1'b0;
    last = '0;
    // Fill the bank so every word has a known value.
    for (int w = 0; w < 512; w++) begin
      @(negedge clk);
      req = '0; req.valid = 1; req.we = 1; req.waddr = 16'(w); req.be = '1;
      req.wdata = {32'(w), ~32'(w)};
      ref_mem[w] = req.wdata;
    end
    for (int t = 0; t < 5000; t++) begin
      int op;
      @(negedge clk);
      op = $urandom % 3;
      req = '0;
      req.waddr = 16'($urandom % 512);
      if (op == 0) begin
        req.valid = 1; req.we = 1; req.be = 8'($urandom); req.wdata = {$urandom, $urandom};
        for (int b = 0; b < 8; b++)
          if (req.be[b]) ref_mem[req.waddr][8*b +: 8] = req.wdata[8*b +: 8];
      end else if (op == 1) begin
        req.valid = 1; req.we = 0;
        last = ref_mem[req.waddr];
        have_last = 1'b1;
        @(posedge clk); #1;
        checks++;
        if (rdata !== last) begin
          failures++;
          if (failures < 10) $display("FAIL read %0d: %h exp %h", req.waddr, rdata, last);
        end
        continue;
      end
      @(posedge clk); #1;
      if (have_last) begin
        checks++;
        if (rdata !== last) begin
          failures++;
          if (failures < 10) $display("FAIL read data not held: %h exp %h", rdata, last);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
