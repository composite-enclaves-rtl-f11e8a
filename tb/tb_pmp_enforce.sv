// tb_pmp_enforce: self-checking testbench of one per-core PMP enforcement
// unit (4 entries).
//
// The testbench plays the core on one side and the interconnect on the
// other. The interconnect model grants after a random delay, answers after
// a random latency of one to three cycles and keeps a word memory. Regions
// (user mode): entry 0 NAPOT 4 KiB at 0x1000_0000 read/write, entry 1 TOR
// [0x1000_1000, 0x1000_2000) read-only, entry 2 locked NA4 at 0x1000_3000
// with no permission (binds machine mode too). Expected permission is
// worked out from these ranges directly. Checks: allowed requests reach the
// interconnect unchanged and their read data comes back; refused ones never
// reach it, are granted in the cycle they are presented and answered
// exactly one cycle later with err=1, rdata=0 and a fault_o pulse; never
// more than one request outstanding.
module tb_pmp_enforce;
  import pmp_pkg::*;
  import cluster_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  priv_t               priv;
  pmp_cfg_t [3:0]      cfg;
  logic [3:0][29:0]    pa;
  mem_req_t            core_req, icn_req;
  mem_rsp_t            core_rsp, icn_rsp;
  logic                core_gnt, icn_gnt, fault;

  pmp_enforce dut (
    .clk_i(clk), .rst_ni(rst_n), .priv_i(priv), .cfg_i(cfg), .addr_i(pa),
    .core_req_i(core_req), .core_gnt_o(core_gnt), .core_rsp_o(core_rsp),
    .icn_req_o(icn_req), .icn_gnt_i(icn_gnt), .icn_rsp_i(icn_rsp), .fault_o(fault)
  );

  int checks = 0, failures = 0;
  int n_allowed = 0, n_denied = 0;
  logic [63:0] mem [logic [31:0]];

  task automatic fail(string s);
    failures++;
    if (failures < 10) $display("FAIL @%0t %s", $time, s);
  endtask

  function automatic logic exp_allow(logic [31:0] a, logic we, priv_t p);
    if (a >= 32'h1000_3000 && a < 32'h1000_3004) return 1'b0;          // locked, no perm
    if (p == PRIV_M) return 1'b1;
    if (a >= 32'h1000_0000 && a < 32'h1000_1000) return 1'b1;          // RW
    if (a >= 32'h1000_1000 && a < 32'h1000_2000) return !we;           // RO
    return 1'b0;
  endfunction

  function automatic logic [63:0] rd(logic [31:0] a);
    return mem.exists(a) ? mem[a] : {32'hC0DE_0000, a};
  endfunction

  // ---------------------------------------------------- interconnect model
  int unsigned lat_cnt;
  logic        busy;
  logic [63:0] rsp_data;
  always @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; lat_cnt <= 0;
    end else begin
      if (icn_req.valid) begin
        if (busy && !icn_rsp.valid) fail("second request while one is outstanding");
        if (!exp_allow(icn_req.addr, icn_req.we, priv)) fail($sformatf("refused request %h reached interconnect", icn_req.addr));
      end
      if (icn_req.valid && icn_gnt) begin
        busy     <= 1'b1;
        lat_cnt  <= $urandom % 3;
        rsp_data <= icn_req.we ? 64'h0 : rd(icn_req.addr);
        if (icn_req.we) mem[icn_req.addr] = icn_req.wdata;
      end else if (icn_rsp.valid) begin
        busy <= 1'b0;
      end else if (busy && lat_cnt != 0) begin
        lat_cnt <= lat_cnt - 1;
      end
    end
  end
  always_comb begin
    icn_rsp       = '0;
    icn_rsp.valid = busy && lat_cnt == 0;
    icn_rsp.rdata = rsp_data;
  end
  logic gnt_rand;
  always_ff @(posedge clk) gnt_rand <= ($urandom % 3) != 0;
  assign icn_gnt = gnt_rand;

  // --------------------------------------------------------------- core
  task automatic do_req(logic [31:0] a, logic we, logic [63:0] d);
    logic        ea;
    logic [63:0] ed;
    int          wait_rsp;
    ea = exp_allow(a, we, priv);
    ed = we ? 64'h0 : rd(a);
    core_req.valid = 1'b1; core_req.addr = a; core_req.we = we; core_req.be = '1; core_req.wdata = d;
    #1;
    if (!ea) begin
      checks++;
      if (!core_gnt) fail("refused request not granted at once");
    end
    while (!core_gnt) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    core_req = '0;
    wait_rsp = 0;
    while (!core_rsp.valid) begin
      @(posedge clk); #1;
      wait_rsp++;
      if (wait_rsp > 20) begin fail("no response"); return; end
    end
    checks++;
    if (ea) begin
      n_allowed++;
      if (core_rsp.err || fault || (!we && core_rsp.rdata !== ed))
        fail($sformatf("allowed %s %h: err=%b rdata=%h exp %h", we ? "write" : "read", a, core_rsp.err, core_rsp.rdata, ed));
    end else begin
      n_denied++;
      if (!core_rsp.err || core_rsp.rdata !== '0 || !fault || wait_rsp != 0)
        fail($sformatf("refused %h: err=%b fault=%b after %0d extra cycles", a, core_rsp.err, fault, wait_rsp));
    end
    @(posedge clk); #1;
  endtask

  initial begin
    core_req = '0; priv = PRIV_U;
    cfg = '0; pa = '0;
    cfg[0].mode = A_NAPOT; cfg[0].r = 1; cfg[0].w = 1; pa[0] = 30'((32'h1000_0000 >> 2) | 32'h1FF);
    pa[1] = 30'(32'h1000_2000 >> 2); cfg[1].mode = A_TOR; cfg[1].r = 1;
    // entry 1 TOR takes its lower bound from pa[0]; entry 0 NAPOT matches first
    // below 0x1000_1000, so entry 1 effectively covers [0x1000_1000, 0x1000_2000).
    cfg[2].mode = A_NA4; cfg[2].locked = 1; pa[2] = 30'(32'h1000_3000 >> 2);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    do_req(32'h1000_0010, 1'b1, 64'h1111_2222_3333_4444);
    do_req(32'h1000_0010, 1'b0, '0);
    do_req(32'h1000_1008, 1'b1, 64'hBAD);          // read-only: refused
    do_req(32'h1000_1008, 1'b0, '0);
    do_req(32'h2000_0000, 1'b0, '0);               // outside every region
    priv = PRIV_M;
    do_req(32'h2000_0000, 1'b1, 64'h55);           // machine mode passes
    do_req(32'h1000_3000, 1'b0, '0);               // locked: binds M
    for (int t = 0; t < 3000; t++) begin
      logic [31:0] a;
      priv = ($urandom % 4 == 0) ? PRIV_M : PRIV_U;
      a = 32'h1000_0000 + (($urandom % 32'h4000) & ~32'h7);
      do_req(a, $urandom % 2, {$urandom, $urandom});
    end
    checks++;
    if (n_allowed < 100 || n_denied < 100) fail("too few allowed or refused accesses");
    $display("allowed=%0d refused=%0d", n_allowed, n_denied);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
