// tb_pmp_enclaves: workload testbench of the host core's PMP (host_pmp,
// 16 entries) as a security monitor programs it through the PMP CSRs.
//
// Entry layout: entry 0 fences the monitor's own memory (NAPOT 256 KiB, no
// permission, unlocked so that machine mode passes); entries 2k+1 and 2k+2
// hold the private region (1 MiB) and the shared region of unit enclave k,
// k = 0..6; entry 15 covers all memory for the OS. This is (16-2)/2 = 7
// unit enclaves, the most 16 entries hold with one shared region each. The
// shared regions take the sizes 4, 8, 16, ... 1024 KiB in two rounds so that
// every size of the context-switch measurement is programmed once.
//
// Each context switch rewrites all 16 pmpaddr registers and both
// configuration registers (18 CSR writes); its length in cycles is measured
// and must be the same for every shared-region size, since a region of any
// power-of-two size is one NAPOT entry.
//
// For each round the testbench switches context: the OS first (enclave
// entries without permission, entry 15 RWX), then each enclave in turn (its
// two entries RWX, all others without permission). In every context it
// probes the first and last byte of each region, the byte after it and
// random bytes inside, in user, supervisor and machine mode, through the
// data port (reads and writes) and the fetch port (execute), and compares
// the unit's answer with the region table: an enclave reaches its private
// and shared memory and nothing else, the OS reaches everything except the
// monitor and the enclaves, and the monitor's memory is closed to S and U.
module tb_pmp_enclaves;
  import pmp_pkg::*;

  localparam int unsigned PLEN = 56;
  localparam int unsigned N    = 16;
  localparam int          NE   = 7;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n = 1'b0;

  logic [PLEN-1:0]        addr;
  access_t                acc;
  priv_t                  priv;
  pmp_cfg_t [N-1:0]       cfg;
  logic [N-1:0][PLEN-3:0] pa;
  logic                   allow, d_allow, f_allow, p_allow;
  logic                   csr_valid, csr_err;
  logic [11:0]            csr_addr;
  logic [63:0]            csr_wdata, csr_rdata;

  host_pmp dut (
    .clk_i(clk), .rst_ni(rst_n),
    .csr_valid_i(csr_valid), .csr_we_i(1'b1), .csr_addr_i(csr_addr), .csr_wdata_i(csr_wdata),
    .csr_priv_i(PRIV_M), .csr_rdata_o(csr_rdata), .csr_err_o(csr_err),
    .data_addr_i(addr), .data_we_i(acc == ACC_WRITE), .data_priv_i(priv), .data_allow_o(d_allow),
    .fetch_addr_i(addr), .fetch_priv_i(priv), .fetch_allow_o(f_allow),
    .ptw_addr_i(addr), .ptw_priv_i(priv), .ptw_allow_o(p_allow)
  );
  assign allow = (acc == ACC_EXEC) ? f_allow : d_allow;

  int checks = 0, failures = 0;
  int n_allowed = 0, n_refused = 0, n_switches = 0;
  int sizes_done[int];
  longint switch_cycles[$];

  longint unsigned sm_base = 64'h8000_0000, sm_size = 64'h4_0000;
  longint unsigned prv_base[NE], prv_size[NE], shr_base[NE], shr_size[NE];

  function automatic logic [PLEN-3:0] napot(longint unsigned base, longint unsigned size);
    return (PLEN-2)'((base >> 2) | ((size >> 3) - 1));
  endfunction

  function automatic pmp_cfg_t mk(pmp_mode_t m, logic rwx);
    pmp_cfg_t c;
    c = '0;
    c.mode = m; c.r = rwx; c.w = rwx; c.x = rwx;
    return c;
  endfunction

  // One CSR write by the monitor, one cycle.
  task automatic csr_write(logic [11:0] a, logic [63:0] d);
    @(negedge clk);
    csr_valid = 1'b1; csr_addr = a; csr_wdata = d;
    #1;
    checks++;
    if (csr_err) begin failures++; $display("FAIL CSR write %h refused", a); end
    @(posedge clk);
    #1 csr_valid = 1'b0;
  endtask

  // ctx = -1: OS runs; ctx = k: enclave k runs. The table is built in
  // cfg/pa, then written to the unit register by register.
  task automatic set_context(int ctx);
    longint t0;
    cfg[0] = mk(A_NAPOT, 1'b0);
    pa[0]  = napot(sm_base, sm_size);
    for (int k = 0; k < NE; k++) begin
      cfg[2*k+1] = mk(A_NAPOT, ctx == k);
      pa[2*k+1]  = napot(prv_base[k], prv_size[k]);
      cfg[2*k+2] = mk(A_NAPOT, ctx == k);
      pa[2*k+2]  = napot(shr_base[k], shr_size[k]);
    end
    cfg[15] = mk(A_NAPOT, ctx < 0);
    pa[15]  = '1;
    @(negedge clk);
    t0 = $time;
    for (int i = 0; i < N; i++) csr_write(12'h3B0 + 12'(i), 64'(pa[i]));
    csr_write(12'h3A0, 64'(cfg[7:0]));
    csr_write(12'h3A2, 64'(cfg[15:8]));
    switch_cycles.push_back(($time - t0) / 10);
    n_switches++;
  endtask

  function automatic logic expect_allow(longint unsigned a, int ctx);
    if (priv == PRIV_M) return 1'b1;
    if (a >= sm_base && a < sm_base + sm_size) return 1'b0;
    for (int k = 0; k < NE; k++) begin
      if ((a >= prv_base[k] && a < prv_base[k] + prv_size[k]) ||
          (a >= shr_base[k] && a < shr_base[k] + shr_size[k]))
        return ctx == k;
    end
    return ctx < 0;
  endfunction

  task automatic probe(longint unsigned a, int ctx);
    logic e;
    addr = PLEN'(a);
    acc  = access_t'($urandom % 3);
    case ($urandom % 3)
      0:       priv = PRIV_U;
      1:       priv = PRIV_S;
      default: priv = PRIV_M;
    endcase
    @(negedge clk);
    e = expect_allow(a, ctx);
    checks++;
    if (e) n_allowed++; else n_refused++;
    if (allow !== e) begin
      failures++;
      if (failures < 10) $display("FAIL ctx %0d addr %h priv %0d: allow=%b expected %b", ctx, addr, priv, allow, e);
    end
  endtask

  task automatic probe_region(longint unsigned b, longint unsigned s, int ctx);
    probe(b, ctx);
    probe(b + s - 1, ctx);
    probe(b + s, ctx);
    if (b > 0) probe(b - 1, ctx);
    for (int i = 0; i < 8; i++) probe(b + ({$urandom, $urandom} % s), ctx);
  endtask

  initial begin
    cfg = '0; pa = '0; addr = '0; acc = ACC_READ; priv = PRIV_U;
    csr_valid = 1'b0; csr_addr = '0; csr_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 2; round++) begin
      for (int k = 0; k < NE; k++) begin
        int kb;
        kb = 4 << ((round * NE + k) % 9);     // 4 KiB .. 1024 KiB
        prv_base[k] = 64'h8100_0000 + 64'(k) * 64'h10_0000;
        prv_size[k] = 64'h10_0000;
        shr_size[k] = 64'(kb) * 1024;
        shr_base[k] = 64'h9000_0000 + 64'(k) * 64'h20_0000;
        sizes_done[kb] = 1;
      end
      for (int ctx = -1; ctx < NE; ctx++) begin
        set_context(ctx);
        probe_region(sm_base, sm_size, ctx);
        for (int k = 0; k < NE; k++) begin
          probe_region(prv_base[k], prv_size[k], ctx);
          probe_region(shr_base[k], shr_size[k], ctx);
        end
        for (int i = 0; i < 20; i++) probe({$urandom, $urandom} & 64'h00FF_FFFF_FFFF_FFFF, ctx);
      end
    end
    checks++;
    if (sizes_done.num() != 9 || n_allowed == 0 || n_refused == 0) begin
      failures++;
      $display("FAIL coverage: %0d sizes, %0d allowed, %0d refused", sizes_done.num(), n_allowed, n_refused);
    end
    checks++;
    foreach (switch_cycles[i])
      if (switch_cycles[i] != switch_cycles[0]) begin
        failures++;
        $display("FAIL context switch %0d took %0d cycles, the first %0d", i, switch_cycles[i], switch_cycles[0]);
        break;
      end
    $display("context switches=%0d cycles each=%0d shared sizes=%0d allowed=%0d refused=%0d",
             n_switches, switch_cycles[0], sizes_done.num(), n_allowed, n_refused);
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
