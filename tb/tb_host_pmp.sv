// tb_host_pmp: self-checking testbench of the host core's PMP block at its
// default size (16 entries, 56-bit physical addresses).
//
// The testbench programs the registers only through the CSR port, as the
// security monitor would, and keeps its own copy of what each register
// should hold. It checks:
//   * CSR legality: accesses below machine mode, to pmpcfg1/pmpcfg3 (absent
//     on a 64-bit core) and to other CSR numbers return err and change
//     nothing; legal accesses read back what was written, with bits 6:5 of
//     each configuration byte cleared;
//   * the three checking units: for random configurations, random
//     addresses and random privilege modes, the data port (read or write),
//     the fetch port (execute) and the page-table-walker port (read) each
//     match a model that turns every entry into an explicit byte range and
//     takes the first entry that contains the address;
//   * locks: a locked entry keeps its configuration and address, a locked
//     TOR entry also keeps the address below it, and a locked entry binds
//     machine mode.
// Writes take effect at the clock edge, the checks answer in the same cycle.
module tb_host_pmp;
  import pmp_pkg::*;

  localparam int unsigned N    = 16;
  localparam int unsigned PLEN = 56;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             csr_valid, csr_we;
  logic [11:0]      csr_addr;
  logic [63:0]      csr_wdata, csr_rdata;
  priv_t            csr_priv;
  logic             csr_err;
  logic [PLEN-1:0]  d_addr, f_addr, p_addr;
  logic             d_we;
  priv_t            d_priv, f_priv, p_priv;
  logic             d_allow, f_allow, p_allow;

  host_pmp dut (
    .clk_i(clk), .rst_ni(rst_n),
    .csr_valid_i(csr_valid), .csr_we_i(csr_we), .csr_addr_i(csr_addr),
    .csr_wdata_i(csr_wdata), .csr_priv_i(csr_priv), .csr_rdata_o(csr_rdata),
    .csr_err_o(csr_err),
    .data_addr_i(d_addr), .data_we_i(d_we), .data_priv_i(d_priv), .data_allow_o(d_allow),
    .fetch_addr_i(f_addr), .fetch_priv_i(f_priv), .fetch_allow_o(f_allow),
    .ptw_addr_i(p_addr), .ptw_priv_i(p_priv), .ptw_allow_o(p_allow)
  );

  int checks = 0, failures = 0;
  int n_lock_kept = 0, n_lock_binds_m = 0, n_refused = 0;

  // Register model.
  logic [7:0]       m_cfg [N];
  logic [PLEN-3:0]  m_addr[N];

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 12) $display("FAIL %s", what);
    end
  endtask

  // One CSR access: drive after the falling edge, sample, then let the
  // rising edge commit a write.
  task automatic csr(logic we, logic [11:0] a, logic [63:0] wd, priv_t pv,
                     output logic [63:0] rd, output logic err);
    @(negedge clk);
    csr_valid = 1'b1; csr_we = we; csr_addr = a; csr_wdata = wd; csr_priv = pv;
    #1;
    rd = csr_rdata; err = csr_err;
    @(posedge clk);
    #1 csr_valid = 1'b0; csr_we = 1'b0;
  endtask

  function automatic logic locked_addr(int i);
    return m_cfg[i][7] || (i + 1 < N && m_cfg[i+1][7] && m_cfg[i+1][4:3] == 2'b01);
  endfunction

  // Model of a legal write.
  task automatic model_write(logic [11:0] a, logic [63:0] wd);
    if (a == 12'h3A0 || a == 12'h3A2) begin
      for (int b = 0; b < 8; b++) begin
        int e;
        e = (a == 12'h3A2) ? 8 + b : b;
        if (!m_cfg[e][7]) m_cfg[e] = wd[8*b +: 8] & 8'h9F;
      end
    end else begin
      int e;
      e = int'(a - 12'h3B0);
      if (!locked_addr(e)) m_addr[e] = wd[PLEN-3:0];
    end
  endtask

  function automatic logic [63:0] model_read(logic [11:0] a);
    logic [63:0] r;
    r = '0;
    if (a == 12'h3A0 || a == 12'h3A2)
      for (int b = 0; b < 8; b++) r[8*b +: 8] = m_cfg[(a == 12'h3A2) ? 8 + b : b];
    else
      r = 64'(m_addr[int'(a - 12'h3B0)]);
    return r;
  endfunction

  // Byte range [lo, hi) of entry i; empty when the entry is OFF.
  function automatic void range(int i, output longint unsigned lo, output longint unsigned hi);
    longint unsigned a, prev;
    int t;
    a    = longint'(m_addr[i]);
    prev = (i == 0) ? 0 : longint'(m_addr[i-1]);
    lo = 0; hi = 0;
    case (m_cfg[i][4:3])
      2'b01: begin lo = prev << 2; hi = a << 2; end
      2'b10: begin lo = a << 2; hi = lo + 4; end
      2'b11: begin
        t = 0;
        while (t < PLEN - 2 && a[t]) t++;
        lo = ((a >> t) << t) << 2;
        hi = lo + (64'd8 << t);
        if (t >= PLEN - 2) begin lo = 0; hi = 64'd1 << PLEN; end
      end
      default: ;
    endcase
  endfunction

  function automatic logic model_allow(longint unsigned x, int acc, priv_t pv);
    longint unsigned lo, hi;
    for (int i = 0; i < N; i++) begin
      range(i, lo, hi);
      if (x >= lo && x < hi) begin
        if (pv == PRIV_M && !m_cfg[i][7]) return 1'b1;
        return m_cfg[i][acc];   // bit 0 R, bit 1 W, bit 2 X
      end
    end
    return pv == PRIV_M;
  endfunction

  function automatic priv_t rand_priv();
    case ($urandom % 3)
      0:       return PRIV_U;
      1:       return PRIV_S;
      default: return PRIV_M;
    endcase
  endfunction

  // Probe all three ports at once with random addresses near configured
  // region edges or anywhere.
  task automatic probe_ports();
    longint unsigned xd, xf, xp, lo, hi;
    logic e;
    longint unsigned pick[3];
    for (int k = 0; k < 3; k++) begin
      int i;
      i = $urandom % N;
      range(i, lo, hi);
      case ($urandom % 4)
        0: pick[k] = lo;
        1: pick[k] = hi - 1;
        2: pick[k] = hi;
        default: pick[k] = {$urandom, $urandom};
      endcase
      pick[k] &= (64'd1 << PLEN) - 1;
    end
    xd = pick[0]; xf = pick[1]; xp = pick[2];
    d_addr = PLEN'(xd); f_addr = PLEN'(xf); p_addr = PLEN'(xp);
    d_we = $urandom % 2; d_priv = rand_priv(); f_priv = rand_priv(); p_priv = rand_priv();
    #1;
    e = model_allow(xd, d_we ? 1 : 0, d_priv);
    if (!e) n_refused++;
    check(d_allow == e, $sformatf("data addr %h we %b priv %0d: %b", xd, d_we, d_priv, d_allow));
    e = model_allow(xf, 2, f_priv);
    check(f_allow == e, $sformatf("fetch addr %h priv %0d: %b", xf, f_priv, f_allow));
    e = model_allow(xp, 0, p_priv);
    check(p_allow == e, $sformatf("ptw addr %h priv %0d: %b", xp, p_priv, p_allow));
  endtask

  function automatic logic [63:0] rand_cfg_word(logic allow_lock);
    logic [63:0] w;
    w = {$urandom, $urandom};
    for (int b = 0; b < 8; b++) begin
      if (!allow_lock || ($urandom % 8) != 0) w[8*b + 7] = 1'b0;
      if (w[8*b +: 2] == 2'b10) w[8*b + 1] = 1'b0;   // W without R is reserved
    end
    return w;
  endfunction

  function automatic logic [63:0] rand_addr_word();
    logic [63:0] w;
    w = {$urandom, $urandom} & ((64'd1 << (PLEN - 2)) - 1);
    // keep many regions small and near each other
    if ($urandom % 2) w = (64'h2000_0000 + ($urandom % 64'h4000)) | ((64'd1 << ($urandom % 12)) - 1);
    return w;
  endfunction

  logic [63:0] rd;
  logic        err;

  initial begin
    csr_valid = 0; csr_we = 0; csr_addr = '0; csr_wdata = '0; csr_priv = PRIV_M;
    d_addr = '0; f_addr = '0; p_addr = '0; d_we = 0;
    d_priv = PRIV_U; f_priv = PRIV_U; p_priv = PRIV_U;
    for (int i = 0; i < N; i++) begin m_cfg[i] = '0; m_addr[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // Reset state: every entry OFF, S/U refused, M passes.
    for (int k = 0; k < 50; k++) probe_ports();

    // CSR legality.
    csr(1'b1, 12'h3A0, 64'h1F1F_1F1F_1F1F_1F1F, PRIV_S, rd, err);
    check(err, "pmpcfg0 write from S accepted");
    csr(1'b1, 12'h3B0, 64'hFFFF, PRIV_U, rd, err);
    check(err, "pmpaddr0 write from U accepted");
    csr(1'b1, 12'h3A1, 64'h1F, PRIV_M, rd, err);
    check(err, "pmpcfg1 accepted on a 64-bit core");
    csr(1'b0, 12'h3A3, 64'h0, PRIV_M, rd, err);
    check(err, "pmpcfg3 accepted on a 64-bit core");
    csr(1'b1, 12'h300, 64'h1F, PRIV_M, rd, err);
    check(err, "non-PMP CSR accepted");
    for (int a = 0; a < N; a++) begin
      csr(1'b0, 12'h3B0 + 12'(a), '0, PRIV_M, rd, err);
      check(!err && rd == 0, $sformatf("pmpaddr%0d after refused writes: %h err %b", a, rd, err));
    end
    csr(1'b0, 12'h3A0, '0, PRIV_M, rd, err);
    check(!err && rd == 0, "pmpcfg0 after refused writes");

    // Random unlocked configurations.
    for (int round = 0; round < 200; round++) begin
      logic [11:0] a;
      for (int k = 0; k < 6; k++) begin
        if ($urandom % 3 == 0) begin
          a = ($urandom % 2) ? 12'h3A2 : 12'h3A0;
          csr(1'b1, a, rand_cfg_word(1'b0), PRIV_M, rd, err);
        end else begin
          a = 12'h3B0 + 12'($urandom % N);
          csr(1'b1, a, rand_addr_word(), PRIV_M, rd, err);
        end
        check(!err, "legal write refused");
        model_write(a, csr_wdata);
      end
      for (int k = 0; k < 2; k++) begin
        a = ($urandom % 2) ? (($urandom % 2) ? 12'h3A2 : 12'h3A0) : 12'h3B0 + 12'($urandom % N);
        csr(1'b0, a, '0, PRIV_M, rd, err);
        check(!err && rd == model_read(a), $sformatf("read %h: %h expected %h", a, rd, model_read(a)));
      end
      for (int k = 0; k < 20; k++) probe_ports();
    end

    // Locks. Entry 5: TOR over [0x1000, 0x2000), locked, read-only.
    csr(1'b1, 12'h3B4, 64'h400, PRIV_M, rd, err); model_write(12'h3B4, 64'h400);
    csr(1'b1, 12'h3B5, 64'h800, PRIV_M, rd, err); model_write(12'h3B5, 64'h800);
    begin
      logic [63:0] w;
      w = model_read(12'h3A0);
      w[8*4 +: 8] = 8'h00;      // entry 4 OFF
      w[8*5 +: 8] = 8'h89;      // L, TOR, R
      csr(1'b1, 12'h3A0, w, PRIV_M, rd, err); model_write(12'h3A0, w);
    end
    csr(1'b1, 12'h3A0, 64'h0, PRIV_M, rd, err); model_write(12'h3A0, 64'h0);
    csr(1'b0, 12'h3A0, '0, PRIV_M, rd, err);
    check(rd[8*5 +: 8] == 8'h89, "locked configuration changed");
    if (rd[8*5 +: 8] == 8'h89) n_lock_kept++;
    csr(1'b1, 12'h3B5, 64'hFFFF, PRIV_M, rd, err); model_write(12'h3B5, 64'hFFFF);
    csr(1'b1, 12'h3B4, 64'h0,    PRIV_M, rd, err); model_write(12'h3B4, 64'h0);
    csr(1'b0, 12'h3B5, '0, PRIV_M, rd, err);
    check(rd == 64'h800, "locked pmpaddr5 changed");
    csr(1'b0, 12'h3B4, '0, PRIV_M, rd, err);
    check(rd == 64'h400, "pmpaddr4 below a locked TOR entry changed");
    if (rd == 64'h400) n_lock_kept++;
    // Machine mode is bound by the locked entry: reads pass, writes and
    // fetches fail, in [0x1000, 0x2000).
    d_addr = PLEN'(56'h1800); d_we = 1'b1; d_priv = PRIV_M;
    f_addr = PLEN'(56'h1000); f_priv = PRIV_M;
    p_addr = PLEN'(56'h1FF8); p_priv = PRIV_M;
    #1;
    check(!d_allow && !f_allow && p_allow, "locked entry does not bind machine mode");
    if (!d_allow && !f_allow) n_lock_binds_m++;
    for (int k = 0; k < 500; k++) probe_ports();

    check(n_lock_kept == 2 && n_lock_binds_m == 1 && n_refused > 0, "mechanism not exercised");
    $display("refused=%0d lock_kept=%0d lock_binds_m=%0d", n_refused, n_lock_kept, n_lock_binds_m);
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
