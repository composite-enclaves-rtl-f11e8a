// tb_composite_platform: end-to-end testbench of the whole platform at its
// default parameters (host PMP with 16 entries and 56-bit addresses; cluster
// with 8 cores, 4 PMP entries and a 32 x 512 x 64-bit scratchpad).
//
// Host side: the testbench plays the security monitor and the host core. It
// sets up one CPU enclave with a private region (1 MiB at 0x8100_0000) and a
// shared region (4 KiB at 0x8000_0000, the buffer the accelerator task also
// reads), fences the monitor's memory (256 KiB at 0x8040_0000) and gives the
// OS the rest (entry 15). It then switches OS -> enclave -> OS and checks the
// data, fetch and page-table-walker ports in each context, a CSR write from
// supervisor mode (refused) and machine-mode accesses (passing).
//
// Accelerator side: the testbench plays the cluster firmware on core 0 (machine mode) and two
// tenant tasks on cores 1..7 (user mode), and models the L2 memory at the
// external port (random grant, in-order responses after 1-4 cycles):
//   1. core 0 programs the regions of task A: scratchpad window A
//      (NAPOT 4 KiB at 0x1000_0000, read/write), its input buffer in L2
//      (NAPOT 256 B at 0x8000_0000, read-only) and a locked entry that
//      denies everything at 0x1000_3000, even to machine mode;
//   2. cores 1..7 run task A concurrently: write, read back, read the input,
//      and probe addresses they must not reach (the window of task B, L2
//      outside the input buffer, writes to the input buffer);
//   3. a worker core tries to rewrite the PMP registers and is refused;
//   4. context switch: core 0 flushes window A, moves entry 0 to window B
//      (0x1000_1000) and tries to unlock the locked entry (ignored);
//   5. task B runs: window B allowed, window A now refused; core 0 checks
//      that window A reads back as zeros.
// A reference memory (updated when a grant is seen) and the region table
// give the expected data and the expected allow/refuse of every access.
// Each mechanism is counted and must occur at least once: permitted access,
// refused access (fault), refused CSR write, machine-mode pass, lock binding
// machine mode, locked entry keeping its value, bank-conflict stall,
// external access, and the context switch with flush; on the host side,
// permitted and machine-mode accesses, refused data accesses, fetches and
// page-table reads, a refused CSR write and the context switches.
module tb_composite_platform;
  import pmp_pkg::*;
  import cluster_pkg::*;

  localparam int unsigned NC = 8;
  localparam logic [31:0] WIN_A = 32'h1000_0000, WIN_B = 32'h1000_1000, LOCKED = 32'h1000_3000;
  localparam logic [31:0] INBUF = 32'h8000_0000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  priv_t     [NC-1:0] priv;
  mem_req_t  [NC-1:0] creq;
  logic      [NC-1:0] cgnt, cfault;
  mem_rsp_t  [NC-1:0] crsp;
  csr_req_t  [NC-1:0] csr_req;
  csr_rsp_t  [NC-1:0] csr_rsp;
  ext_req_t           ereq;
  logic               egnt;
  ext_rsp_t           ersp;

  localparam int unsigned HPLEN = 56;
  logic             h_csr_valid, h_csr_we, h_csr_err;
  logic [11:0]      h_csr_addr;
  logic [63:0]      h_csr_wdata, h_csr_rdata;
  priv_t            h_csr_priv, h_d_priv, h_f_priv, h_p_priv;
  logic [HPLEN-1:0] h_d_addr, h_f_addr, h_p_addr;
  logic             h_d_we, h_d_allow, h_f_allow, h_p_allow;

  composite_platform dut (
    .clk_i(clk), .rst_ni(rst_n),
    .host_csr_valid_i(h_csr_valid), .host_csr_we_i(h_csr_we), .host_csr_addr_i(h_csr_addr),
    .host_csr_wdata_i(h_csr_wdata), .host_csr_priv_i(h_csr_priv),
    .host_csr_rdata_o(h_csr_rdata), .host_csr_err_o(h_csr_err),
    .host_data_addr_i(h_d_addr), .host_data_we_i(h_d_we), .host_data_priv_i(h_d_priv),
    .host_data_allow_o(h_d_allow),
    .host_fetch_addr_i(h_f_addr), .host_fetch_priv_i(h_f_priv), .host_fetch_allow_o(h_f_allow),
    .host_ptw_addr_i(h_p_addr), .host_ptw_priv_i(h_p_priv), .host_ptw_allow_o(h_p_allow),
    .acc_core_priv_i(priv), .acc_core_req_i(creq), .acc_core_gnt_o(cgnt),
    .acc_core_rsp_o(crsp), .acc_core_fault_o(cfault), .acc_csr_req_i(csr_req),
    .acc_csr_rsp_o(csr_rsp), .acc_ext_req_o(ereq), .acc_ext_gnt_i(egnt), .acc_ext_rsp_i(ersp)
  );

  int checks = 0, failures = 0;
  int n_allow = 0, n_fault = 0, n_csr_refused = 0, n_m_pass = 0, n_lock_m = 0;
  int n_lock_kept = 0, n_conflict = 0, n_ext = 0, n_ctx_switch = 0;
  int n_h_allow = 0, n_h_data_ref = 0, n_h_fetch_ref = 0, n_h_ptw_ref = 0;
  int n_h_csr_ref = 0, n_h_m_pass = 0, n_h_ctx = 0;

  task automatic fail(string s);
    failures++;
    if (failures < 15) $display("FAIL @%0t %s", $time, s);
  endtask

  task automatic check(logic ok, string s);
    checks++;
    if (!ok) fail(s);
  endtask

  // ------------------------------------------------------- L2 memory model
  logic [63:0] emem [logic [31:0]];
  typedef struct { int unsigned id; logic [63:0] d; int due; } pend_t;
  pend_t eq[$];
  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (ereq.valid && egnt) begin
        pend_t p;
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
      egnt <= ($urandom % 3) != 0;
    end
  end

  // ------------------------------------------------ expected permissions
  logic [31:0] win_cur;   // scratchpad window of the running task
  logic        pmp_on;    // entries programmed
  function automatic logic exp_allow(logic [31:0] a, logic we, priv_t p);
    if (!pmp_on) return (p == PRIV_M);
    if (a >= LOCKED && a < LOCKED + 4) return 1'b0;
    if (p == PRIV_M) return 1'b1;
    if (a >= win_cur && a < win_cur + 32'h1000) return 1'b1;
    if (a >= INBUF && a < INBUF + 32'h100) return !we;
    return 1'b0;
  endfunction

  logic [63:0] refm [logic [31:0]];
  function automatic logic [63:0] init_val(logic [31:0] a);
    return (a >= 32'h8000_0000) ? {32'hE0E0_0000, a} : 64'h0;
  endfunction

  // Scratchpad contents are random after power-up; the firmware clears the
  // windows it hands out before use, which the testbench does in step 1.
  task automatic access(int c, logic [31:0] a, logic we, logic [63:0] d, output logic [63:0] rd, output logic err);
    logic        ea, is_ext;
    logic [63:0] exp_d;
    int          w, lat;
    ea     = exp_allow(a, we, priv[c]);
    is_ext = !(a >= 32'h1000_0000 && a < 32'h1002_0000);
    @(negedge clk);
    creq[c].valid = 1; creq[c].addr = a; creq[c].we = we; creq[c].be = '1; creq[c].wdata = d;
    #1;
    w = 0;
    while (!cgnt[c]) begin
      @(negedge clk); #1;
      w++;
      if (!is_ext) n_conflict++;
      if (w > 200) begin fail("no grant"); creq[c] = '0; return; end
    end
    exp_d = refm.exists(a) ? refm[a] : init_val(a);
    if (ea && we) refm[a] = d;
    @(posedge clk); #1;
    creq[c] = '0;
    lat = 1;
    while (!crsp[c].valid) begin
      @(posedge clk); #1;
      lat++;
      if (lat > 50) begin fail($sformatf("core %0d: no response", c)); return; end
    end
    rd  = crsp[c].rdata;
    err = crsp[c].err;
    checks++;
    if (ea) begin
      n_allow++;
      if (is_ext) n_ext++;
      if (priv[c] == PRIV_M && !(a >= win_cur && a < win_cur + 32'h1000)) n_m_pass++;
      if (err || (!we && rd !== exp_d))
        fail($sformatf("core %0d %s %h allowed: err=%b rdata=%h exp %h", c, we ? "wr" : "rd", a, err, rd, exp_d));
      if (!is_ext && lat != 1) fail($sformatf("scratchpad latency %0d", lat));
    end else begin
      n_fault++;
      if (priv[c] == PRIV_M) n_lock_m++;
      if (!err || rd !== '0 || !cfault[c] || lat != 1)
        fail($sformatf("core %0d %s %h must be refused: err=%b fault=%b", c, we ? "wr" : "rd", a, err, cfault[c]));
    end
  endtask

  task automatic csr(int c, logic we, logic [11:0] a, logic [31:0] d, output logic [31:0] rd, output logic err);
    @(negedge clk);
    csr_req[c].valid = 1; csr_req[c].we = we; csr_req[c].addr = a; csr_req[c].wdata = d;
    csr_req[c].priv = priv[c];
    #1;
    rd = csr_rsp[c].rdata; err = csr_rsp[c].err;
    @(posedge clk); #1;
    csr_req[c] = '0;
  endtask

  function automatic logic [31:0] napot(logic [31:0] base, int unsigned bytes);
    return (base >> 2) | ((bytes >> 3) - 1);
  endfunction

  task automatic program_task(logic [31:0] win);
    logic [31:0] rd;
    logic        err;
    csr(0, 1, 12'h3B0, napot(win, 4096), rd, err);   check(!err, "pmpaddr0 write");
    csr(0, 1, 12'h3B1, napot(INBUF, 256), rd, err);  check(!err, "pmpaddr1 write");
    csr(0, 1, 12'h3B3, LOCKED >> 2, rd, err);        check(!err, "pmpaddr3 write");
    // entry0 NAPOT RW, entry1 NAPOT R, entry2 off, entry3 NA4 locked no perm
    csr(0, 1, 12'h3A0, {8'h90, 8'h00, 8'h19, 8'h1B}, rd, err); check(!err, "pmpcfg0 write");
    csr(0, 0, 12'h3A0, 32'h0, rd, err);
    check(rd[7:0] == 8'h1B && rd[15:8] == 8'h19 && rd[31:24] == 8'h90, "pmpcfg0 read back");
  endtask

  task automatic worker(int c, logic [31:0] win, int n);
    logic [63:0] rd;
    logic        err;
    for (int i = 0; i < n; i++) begin
      logic [31:0] a;
      case ($urandom % 8)
        0, 1, 2: a = win + 32'(($urandom % 64) * 8);                   // own window, conflicts
        3:       a = INBUF + 32'(($urandom % 32) * 8);                  // input buffer
        4:       a = ((win == WIN_A) ? WIN_B : WIN_A) + 32'(($urandom % 64) * 8);  // other tenant
        5:       a = INBUF + 32'h1000 + 32'(($urandom % 32) * 8);       // L2 outside buffer
        6:       a = LOCKED;
        default: a = win + 32'(c * 64 + ($urandom % 8) * 8);
      endcase
      access(c, a, $urandom % 2, {$urandom, $urandom}, rd, err);
    end
  endtask

  // ---- host side -------------------------------------------------------
  localparam logic [63:0] H_SM = 64'h8040_0000, H_PRV = 64'h8100_0000, H_SHR = 64'h8000_0000;

  task automatic hcsr(logic we, logic [11:0] a, logic [63:0] wd, priv_t pv,
                      output logic [63:0] rd, output logic err);
    @(negedge clk);
    h_csr_valid = 1'b1; h_csr_we = we; h_csr_addr = a; h_csr_wdata = wd; h_csr_priv = pv;
    #1;
    rd = h_csr_rdata; err = h_csr_err;
    @(posedge clk);
    #1 h_csr_valid = 1'b0; h_csr_we = 1'b0;
  endtask

  // port: 0 data read, 1 data write, 2 fetch, 3 page table walker read
  task automatic hprobe(int port, logic [63:0] a, priv_t pv, logic exp, string what);
    logic got;
    h_d_addr = HPLEN'(a); h_f_addr = HPLEN'(a); h_p_addr = HPLEN'(a);
    h_d_we = (port == 1); h_d_priv = pv; h_f_priv = pv; h_p_priv = pv;
    #1;
    got = (port < 2) ? h_d_allow : (port == 2) ? h_f_allow : h_p_allow;
    check(got == exp, $sformatf("host %s: port %0d addr %h priv %0d allow %b", what, port, a, pv, got));
    if (got && pv == PRIV_M) n_h_m_pass++;
    else if (got) n_h_allow++;
    else if (port < 2) n_h_data_ref++;
    else if (port == 2) n_h_fetch_ref++;
    else n_h_ptw_ref++;
  endtask

  function automatic logic [63:0] hnapot(logic [63:0] base, logic [63:0] bytes);
    return (base >> 2) | ((bytes >> 3) - 1);
  endfunction

  // Security monitor: program the host PMP for the OS (enclave = 0) or for
  // the enclave (enclave = 1).
  task automatic host_context(logic enclave);
    logic [63:0] rd;
    logic        err;
    logic [7:0]  e_cfg, os_cfg;
    e_cfg  = enclave ? 8'h1F : 8'h18;    // NAPOT, RWX or nothing
    os_cfg = enclave ? 8'h18 : 8'h1F;
    hcsr(1, 12'h3B0, hnapot(H_SM, 64'h4_0000), PRIV_M, rd, err);
    hcsr(1, 12'h3B1, hnapot(H_PRV, 64'h10_0000), PRIV_M, rd, err);
    hcsr(1, 12'h3B2, hnapot(H_SHR, 64'h1000), PRIV_M, rd, err);
    hcsr(1, 12'h3BF, 64'h003F_FFFF_FFFF_FFFF, PRIV_M, rd, err);
    hcsr(1, 12'h3A0, {40'h0, e_cfg, e_cfg, 8'h18}, PRIV_M, rd, err);
    hcsr(1, 12'h3A2, {os_cfg, 56'h0}, PRIV_M, rd, err);
    check(!err, "security monitor CSR write refused");
    hcsr(0, 12'h3A0, 0, PRIV_M, rd, err);
    check(rd == {40'h0, e_cfg, e_cfg, 8'h18}, "host pmpcfg0 read back");
    n_h_ctx++;
  endtask

  task automatic host_phase();
    logic [63:0] rd;
    logic        err;
    // OS context
    host_context(1'b0);
    hprobe(0, H_PRV + 64'h40,   PRIV_S, 1'b0, "OS reads enclave memory");
    hprobe(1, H_SHR + 64'h10,   PRIV_S, 1'b0, "OS writes the enclave's shared region");
    hprobe(2, H_SM,             PRIV_S, 1'b0, "OS fetches from the monitor");
    hprobe(3, H_PRV + 64'h1000, PRIV_S, 1'b0, "page walk of the OS into enclave memory");
    hprobe(1, 64'h9000_0000,    PRIV_S, 1'b1, "OS writes its own memory");
    hprobe(2, 64'h8200_0000,    PRIV_U, 1'b1, "user fetch in OS memory");
    hprobe(3, 64'h8300_0000,    PRIV_S, 1'b1, "page walk in OS memory");
    hprobe(1, H_PRV,            PRIV_M, 1'b1, "monitor writes enclave memory");
    hcsr(1, 12'h3A0, 64'h1F1F, PRIV_S, rd, err);
    check(err, "host CSR write from supervisor mode accepted");
    if (err) n_h_csr_ref++;
    // switch to the enclave
    host_context(1'b1);
    hprobe(0, H_PRV + 64'h40,   PRIV_U, 1'b1, "enclave reads its private memory");
    hprobe(1, H_SHR + 64'hFF8,  PRIV_S, 1'b1, "enclave writes its shared region");
    hprobe(2, H_PRV + 64'h2000, PRIV_U, 1'b1, "enclave fetches its code");
    hprobe(3, H_PRV + 64'h3000, PRIV_S, 1'b1, "page walk in enclave memory");
    hprobe(1, H_SHR + 64'h1000, PRIV_S, 1'b0, "enclave writes past its shared region");
    hprobe(0, 64'h9000_0000,    PRIV_U, 1'b0, "enclave reads OS memory");
    hprobe(2, H_SM + 64'h100,   PRIV_S, 1'b0, "enclave fetches from the monitor");
    hprobe(3, 64'h8300_0000,    PRIV_S, 1'b0, "page walk of the enclave into OS memory");
    // and back to the OS
    host_context(1'b0);
    hprobe(0, H_PRV + 64'hFFFF8, PRIV_S, 1'b0, "OS reads enclave memory after the switch");
    hprobe(0, 64'h9000_0000,     PRIV_S, 1'b1, "OS reads its memory after the switch");
  endtask

  initial begin
    logic [31:0] r32;
    logic [63:0] rd;
    logic        err;
    creq = '0; csr_req = '0; ersp = '0; egnt = 0;
    h_csr_valid = 0; h_csr_we = 0; h_csr_addr = '0; h_csr_wdata = '0; h_csr_priv = PRIV_M;
    h_d_addr = '0; h_f_addr = '0; h_p_addr = '0; h_d_we = 0;
    h_d_priv = PRIV_U; h_f_priv = PRIV_U; h_p_priv = PRIV_U;
    for (int c = 0; c < NC; c++) priv[c] = (c == 0) ? PRIV_M : PRIV_U;
    win_cur = WIN_A;
    pmp_on  = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // Before any entry is set, user mode reaches nothing, machine mode all.
    access(1, WIN_A, 0, 0, rd, err);
    // Firmware clears both windows (scratchpad starts with random contents).
    for (int w = 0; w < 512; w++) begin
      access(0, WIN_A + 32'(w * 8), 1, 64'h0, rd, err);
      access(0, WIN_B + 32'(w * 8), 1, 64'h0, rd, err);
    end
    // 1. task A
    program_task(WIN_A);
    pmp_on = 1'b1;
    access(0, LOCKED, 1, 64'hBAD, rd, err);   // locked entry binds machine mode
    check(err, "machine-mode write to the locked word must be refused");
    // 2. run task A on cores 1..7
    fork
      worker(1, WIN_A, 150); worker(2, WIN_A, 150); worker(3, WIN_A, 150); worker(4, WIN_A, 150);
      worker(5, WIN_A, 150); worker(6, WIN_A, 150); worker(7, WIN_A, 150);
    join
    // 3. a worker core cannot touch the PMP registers, not even in M-mode
    priv[5] = PRIV_M;
    csr(5, 1, 12'h3B0, 32'hFFFF_FFFF, r32, err);
    check(err, "worker CSR write must be refused");
    if (err) n_csr_refused++;
    priv[5] = PRIV_U;
    csr(0, 0, 12'h3B0, 0, r32, err);
    check(r32 == napot(WIN_A, 4096), "pmpaddr0 unchanged by worker");
    // 4. context switch: flush window A, move entry 0 to window B
    for (int w = 0; w < 512; w++) access(0, WIN_A + 32'(w * 8), 1, 64'h0, rd, err);
    program_task(WIN_B);
    win_cur = WIN_B;
    csr(0, 1, 12'h3B3, 32'h0, r32, err);                       // locked: ignored
    csr(0, 0, 12'h3B3, 0, r32, err);
    check(r32 == LOCKED >> 2 && !err, "locked pmpaddr3 keeps its value");
    csr(0, 1, 12'h3A0, 32'h0000_191B, r32, err);               // try to clear lock
    csr(0, 0, 12'h3A0, 0, r32, err);
    check(r32[31:24] == 8'h90, "locked entry keeps its configuration");
    if (r32[31:24] == 8'h90) n_lock_kept++;
    n_ctx_switch++;
    // 5. task B; window A must now be refused and flushed
    fork
      worker(1, WIN_B, 100); worker(2, WIN_B, 100); worker(3, WIN_B, 100); worker(4, WIN_B, 100);
      worker(5, WIN_B, 100); worker(6, WIN_B, 100); worker(7, WIN_B, 100);
    join
    access(3, WIN_A + 32'h40, 0, 0, rd, err);
    check(err, "task B reads window A");
    for (int w = 0; w < 512; w += 7) begin
      access(0, WIN_A + 32'(w * 8), 0, 0, rd, err);
      check(rd == 64'h0, "window A flushed");
    end

    host_phase();

    check(n_allow > 0, "no permitted access");
    check(n_fault > 0, "no refused access");
    check(n_csr_refused > 0, "no refused CSR write");
    check(n_m_pass > 0, "no machine-mode pass");
    check(n_lock_m > 0, "lock never bound machine mode");
    check(n_lock_kept > 0, "locked entry never tested");
    check(n_conflict > 0, "no bank conflict");
    check(n_ext > 0, "no external access");
    check(n_ctx_switch > 0, "no context switch");
    check(n_h_allow > 0 && n_h_m_pass > 0, "no permitted host access");
    check(n_h_data_ref > 0, "no refused host data access");
    check(n_h_fetch_ref > 0, "no refused host fetch");
    check(n_h_ptw_ref > 0, "no refused page table walk");
    check(n_h_csr_ref > 0, "no refused host CSR write");
    check(n_h_ctx > 1, "no host context switch");
    $display("host: permitted=%0d m_pass=%0d data_refused=%0d fetch_refused=%0d ptw_refused=%0d csr_refused=%0d context_switches=%0d",
             n_h_allow, n_h_m_pass, n_h_data_ref, n_h_fetch_ref, n_h_ptw_ref, n_h_csr_ref, n_h_ctx);
    $display("permitted=%0d refused=%0d csr_refused=%0d m_pass=%0d lock_binds_m=%0d lock_kept=%0d conflict_stalls=%0d external=%0d context_switches=%0d",
             n_allow, n_fault, n_csr_refused, n_m_pass, n_lock_m, n_lock_kept, n_conflict, n_ext, n_ctx_switch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
