// tb_pmp_ctrl: self-checking testbench of the cluster's shared PMP control
// unit at its default size (8 cores, 4 entries, configuring core 0).
//
// A reference model in the testbench keeps its own copy of the registers and
// applies the rules independently: only core 0 in machine mode may access,
// bits 6:5 of a configuration byte read as zero, entries 4..15 do not exist,
// a locked entry keeps its configuration and address and a locked TOR
// entry also keeps the address below it. Directed cases exercise each rule,
// then random CSR traffic from all cores is compared cycle by cycle: the
// same-cycle response (rdata, err) before the clock edge and the broadcast
// registers after it.
module tb_pmp_ctrl;
  import pmp_pkg::*;
  import cluster_pkg::*;

  localparam int unsigned NC = 8;
  localparam int unsigned NE = 4;
  localparam int unsigned PLEN = 32;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  csr_req_t [NC-1:0]        req;
  csr_rsp_t [NC-1:0]        rsp;
  pmp_cfg_t [NE-1:0]        cfg;
  logic [NE-1:0][PLEN-3:0]  addr;

  pmp_ctrl dut (
    .clk_i(clk), .rst_ni(rst_n), .csr_req_i(req), .csr_rsp_o(rsp), .cfg_o(cfg), .addr_o(addr)
  );

  logic [7:0]  m_cfg  [NE];
  logic [31:0] m_addr [NE];
  int checks = 0, failures = 0;

  task automatic fail(string s);
    failures++;
    if (failures < 10) $display("FAIL %s", s);
  endtask

  // Model: response of core c to the current request, and register update.
  function automatic void model(int c, output logic [31:0] rd, output logic err);
    logic legal, iscfg, isaddr;
    int i;
    rd = '0;
    iscfg  = req[c].addr inside {[12'h3A0:12'h3A3]};
    isaddr = req[c].addr inside {[12'h3B0:12'h3BF]};
    legal  = req[c].valid && c == 0 && req[c].priv == PRIV_M && (iscfg || isaddr);
    err    = req[c].valid && !legal;
    if (!legal) return;
    i = int'(req[c].addr[3:0]);
    if (iscfg) begin
      for (int b = 0; b < 4; b++) if (4*i + b < NE) rd[8*b +: 8] = m_cfg[4*i + b];
    end else if (i < NE) rd = m_addr[i];
  endfunction

  function automatic void model_write();
    int i;
    logic prot;
    if (!(req[0].valid && req[0].we && req[0].priv == PRIV_M)) return;
    i = int'(req[0].addr[3:0]);
    if (req[0].addr inside {[12'h3A0:12'h3A3]}) begin
      for (int b = 0; b < 4; b++)
        if (4*i + b < NE && !m_cfg[4*i + b][7]) m_cfg[4*i + b] = req[0].wdata[8*b +: 8] & 8'h9F;
    end else if (req[0].addr inside {[12'h3B0:12'h3BF]} && i < NE) begin
      prot = m_cfg[i][7];
      if (i + 1 < NE && m_cfg[i+1][7] && m_cfg[i+1][4:3] == 2'b01) prot = 1'b1;
      if (!prot) m_addr[i] = {2'b00, req[0].wdata[29:0]};
    end
  endfunction

  // One cycle of traffic: compare responses, clock, compare registers.
  task automatic cycle();
    logic [31:0] rd;
    logic err;
    #1;
    for (int c = 0; c < NC; c++) begin
      model(c, rd, err);
      if (req[c].valid) begin
        checks++;
        if (rsp[c].err !== err || (!err && rsp[c].rdata !== rd))
          fail($sformatf("core %0d csr %h: err=%b/%b rdata=%h/%h", c, req[c].addr, rsp[c].err, err, rsp[c].rdata, rd));
      end
    end
    model_write();
    @(posedge clk);
    #1;
    req = '0;
    for (int e = 0; e < NE; e++) begin
      checks++;
      if (cfg[e] !== pmp_cfg_t'(m_cfg[e]) || 32'(addr[e]) !== m_addr[e])
        fail($sformatf("entry %0d: cfg=%h/%h addr=%h/%h", e, cfg[e], m_cfg[e], addr[e], m_addr[e]));
    end
  endtask

  task automatic access(int c, priv_t p, logic we, logic [11:0] a, logic [31:0] d);
    req = '0;
    req[c].valid = 1'b1; req[c].we = we; req[c].addr = a; req[c].wdata = d; req[c].priv = p;
    cycle();
  endtask

  initial begin
    req = '0;
    for (int e = 0; e < NE; e++) begin m_cfg[e] = '0; m_addr[e] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    #1;
    // Configuring core sets four regions.
    for (int e = 0; e < NE; e++) access(0, PRIV_M, 1'b1, 12'h3B0 + 12'(e), 32'h0400_0000 + 32'(e) * 32'h100);
    access(0, PRIV_M, 1'b1, 12'h3A0, 32'hFF_1B_0F_6B);   // reserved bits set in byte 0
    access(0, PRIV_M, 1'b0, 12'h3A0, '0);
    // Other cores and lower privilege are refused.
    access(3, PRIV_M, 1'b1, 12'h3B1, 32'hDEAD_BEEF);
    if (m_addr[1] == 32'hDEAD_BEEF || 32'(addr[1]) == 32'hDEAD_BEEF) fail("core 3 wrote pmpaddr1");
    access(0, PRIV_U, 1'b1, 12'h3B1, 32'hDEAD_BEEF);
    access(0, PRIV_S, 1'b0, 12'h3A0, '0);
    access(0, PRIV_M, 1'b0, 12'h300, '0);                // not a PMP CSR
    // Entries that do not exist.
    access(0, PRIV_M, 1'b1, 12'h3A1, 32'hFFFF_FFFF);
    access(0, PRIV_M, 1'b0, 12'h3B7, '0);
    // Lock entry 2 as TOR: entry 2 and pmpaddr1 become read-only.
    access(0, PRIV_M, 1'b1, 12'h3A0, 32'h00_89_0B_03);
    access(0, PRIV_M, 1'b1, 12'h3B2, 32'h1111_1111);
    access(0, PRIV_M, 1'b1, 12'h3B1, 32'h2222_2222);
    access(0, PRIV_M, 1'b1, 12'h3B0, 32'h3333_3333);
    access(0, PRIV_M, 1'b1, 12'h3A0, 32'h00_00_00_00);
    checks++;
    if (!cfg[2].locked || cfg[2].mode != A_TOR || 32'(addr[1]) != 32'h0400_0100 || 32'(addr[0]) != 32'h3333_3333)
      fail("lock rules");
    // Reset clears locks; then random traffic.
    @(negedge clk); rst_n = 1'b0;
    for (int e = 0; e < NE; e++) begin m_cfg[e] = '0; m_addr[e] = '0; end
    @(negedge clk); rst_n = 1'b1;
    @(posedge clk);
    #1;
    @(posedge clk);
    for (int t = 0; t < 3000; t++) begin
      req = '0;
      for (int c = 0; c < NC; c++) begin
        req[c].valid = ($urandom % 4) == 0 || (c == 0 && ($urandom % 2));
        req[c].we    = $urandom % 2;
        req[c].priv  = ($urandom % 5 == 0) ? PRIV_U : PRIV_M;
        case ($urandom % 4)
          0:       req[c].addr = 12'h3A0 + 12'($urandom % 4);
          1, 2:    req[c].addr = 12'h3B0 + 12'($urandom % 16);
          default: req[c].addr = 12'($urandom);
        endcase
        req[c].wdata = $urandom;
        // Set lock bits rarely so that writes keep landing.
        if (req[c].addr[11:4] == 8'h3A && ($urandom % 16) != 0) req[c].wdata &= 32'h7F7F_7F7F;
      end
      cycle();
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
