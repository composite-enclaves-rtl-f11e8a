// tb_log_interconnect: self-checking testbench of the logarithmic
// interconnect at its default size (8 masters, 32 banks of 512 words).
//
// Eight master processes issue random reads and writes, one outstanding
// each, to a small window of the scratchpad (so that bank conflicts are
// frequent) and to external memory. The banks are modelled by plain word
// arrays with one-cycle read latency; the external port by a memory that
// grants at random and answers in order after a random delay. A reference
// memory is updated at the moment each master sees its grant, so each read
// must return exactly the reference value at its grant. Also checked: bank
// reads answer exactly one cycle after the grant, an external request is
// held until granted, every master is eventually served (no starvation
// beyond a bound), and conflicts and external accesses both occur.
module tb_log_interconnect;
  import cluster_pkg::*;

  localparam int unsigned NM = 8, NB = 32, BW = 512;
  localparam logic [31:0] BASE = 32'h1000_0000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  mem_req_t  [NM-1:0]        mreq;
  logic      [NM-1:0]        mgnt;
  mem_rsp_t  [NM-1:0]        mrsp;
  bank_req_t [NB-1:0]        breq;
  logic [NB-1:0][63:0]       brdata;
  ext_req_t                  ereq;
  logic                      egnt;
  ext_rsp_t                  ersp;

  log_interconnect dut (
    .clk_i(clk), .rst_ni(rst_n), .mst_req_i(mreq), .mst_gnt_o(mgnt), .mst_rsp_o(mrsp),
    .bank_req_o(breq), .bank_rdata_i(brdata), .ext_req_o(ereq), .ext_gnt_i(egnt), .ext_rsp_i(ersp)
  );

  int checks = 0, failures = 0;
  int conflicts = 0, ext_accesses = 0, tcdm_accesses = 0, max_wait = 0;

  task automatic fail(string s);
    failures++;
    if (failures < 10) $display("FAIL @%0t %s", $time, s);
  endtask

  // Bank models.
  logic [63:0] bmem [NB][BW];
  always @(posedge clk) begin
    for (int b = 0; b < NB; b++) begin
      if (breq[b].valid) begin
        if (breq[b].we) begin
          for (int k = 0; k < 8; k++) if (breq[b].be[k]) bmem[b][breq[b].waddr][8*k +: 8] = breq[b].wdata[8*k +: 8];
        end else brdata[b] <= bmem[b][breq[b].waddr];
      end
    end
  end

  // External memory model: in-order, random grant and delay.
  logic [63:0] emem [logic [31:0]];
  typedef struct { int unsigned id; logic [63:0] d; int due; } ext_pend_t;
  ext_pend_t eq[$];
  int cyc = 0;
  logic      ext_hold_v;
  ext_req_t  ext_hold;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (ext_hold_v && (!ereq.valid || ereq != ext_hold)) fail("external request changed before grant");
      ext_hold_v = ereq.valid && !egnt;
      ext_hold   = ereq;
      if (ereq.valid && egnt) begin
        ext_pend_t p;
        p.id  = ereq.id;
        p.d   = ereq.we ? 64'h0 : (emem.exists(ereq.addr) ? emem[ereq.addr] : {32'hE0E0_0000, ereq.addr});
        p.due = cyc + 1 + ($urandom % 4);
        if (ereq.we) emem[ereq.addr] = ereq.wdata;
        eq.push_back(p);
      end
      ersp <= '0;
      if (eq.size() > 0 && eq[0].due <= cyc) begin
        ersp.valid <= 1'b1;
        ersp.id    <= IDW'(eq[0].id);
        ersp.rdata <= eq[0].d;
        void'(eq.pop_front());
      end
      egnt <= ($urandom % 2) == 0;
    end
  end

  // Reference memory, updated at grant.
  logic [63:0] refm [logic [31:0]];
  function automatic logic [63:0] init_val(logic [31:0] a);
    if (a >= BASE && a < BASE + NB * BW * 8) return {32'hB0B0_0000, a};
    return {32'hE0E0_0000, a};
  endfunction

  task automatic master(int m, int n);
    for (int i = 0; i < n; i++) begin
      logic [31:0] a;
      logic        we, ext;
      logic [63:0] d, exp_d;
      int          w, lat;
      ext = ($urandom % 5) == 0;
      a   = ext ? 32'h8000_0000 + 32'(($urandom % 16) * 8) : BASE + 32'(($urandom % 48) * 8);
      we  = $urandom % 2;
      d   = {$urandom, $urandom};
      @(negedge clk);
      mreq[m].valid = 1; mreq[m].addr = a; mreq[m].we = we; mreq[m].be = '1; mreq[m].wdata = d;
      w = 0;
      #1;
      while (!mgnt[m]) begin
        @(negedge clk); #1;
        w++;
        if (!ext) conflicts++;
      end
      if (w > max_wait) max_wait = w;
      exp_d = refm.exists(a) ? refm[a] : init_val(a);
      if (we) refm[a] = d;
      if (ext) ext_accesses++; else tcdm_accesses++;
      @(posedge clk); #1;
      mreq[m] = '0;
      lat = 1;
      while (!mrsp[m].valid) begin
        @(posedge clk); #1;
        lat++;
        if (lat > 50) begin fail($sformatf("master %0d: no response", m)); return; end
      end
      checks++;
      if (!we && mrsp[m].rdata !== exp_d)
        fail($sformatf("master %0d read %h = %h, expected %h", m, a, mrsp[m].rdata, exp_d));
      if (!ext) begin
        checks++;
        if (lat != 1) fail($sformatf("bank latency %0d", lat));
      end
    end
  endtask

  initial begin
    mreq = '0; ersp = '0; egnt = 0;
    for (int b = 0; b < NB; b++)
      for (int w = 0; w < BW; w++) bmem[b][w] = {32'hB0B0_0000, BASE + 32'((w * NB + b) * 8)};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    fork
      master(0, 400); master(1, 400); master(2, 400); master(3, 400);
      master(4, 400); master(5, 400); master(6, 400); master(7, 400);
    join
    checks++;
    if (conflicts == 0) fail("no bank conflict happened");
    checks++;
    if (ext_accesses == 0 || tcdm_accesses == 0) fail("no external or no scratchpad access");
    checks++;
    if (max_wait > 4 * NM) fail($sformatf("a master waited %0d cycles", max_wait));
    $display("scratchpad=%0d external=%0d conflict-stall cycles=%0d max wait=%0d",
             tcdm_accesses, ext_accesses, conflicts, max_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
