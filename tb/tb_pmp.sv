// tb_pmp: self-checking testbench of the PMP check unit at its default size
// (16 entries, 56-bit physical addresses).
//
// A reference model computes every region as an explicit byte range
// [base, base+size) - TOR from the two address registers, NA4 as four bytes,
// NAPOT by counting trailing ones - and applies the priority and privilege
// rules of the RISC-V privileged specification. Directed cases cover each
// rule once; then random configurations with addresses drawn near the
// configured regions are compared. The unit is combinational: inputs are
// applied on one clock edge and sampled before the next.
module tb_pmp;
  import pmp_pkg::*;

  localparam int unsigned PLEN = 56;
  localparam int unsigned N    = 16;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [PLEN-1:0]          addr;
  access_t                  acc;
  priv_t                    priv;
  pmp_cfg_t [N-1:0]         cfg;
  logic [N-1:0][PLEN-3:0]   pa;
  logic                     allow, match;
  logic [3:0]               idx;

  int checks = 0, failures = 0;

  pmp dut (
    .addr_i(addr), .access_i(acc), .priv_i(priv), .cfg_i(cfg), .addr_cfg_i(pa),
    .allow_o(allow), .match_o(match), .match_idx_o(idx)
  );

  function automatic logic ref_allow(output logic m, output int mi);
    longint unsigned lo, hi, a, size;
    int k;
    logic hit, perm;
    a  = 64'(addr);
    m  = 1'b0;
    mi = 0;
    for (int i = 0; i < N; i++) begin
      hit = 1'b0;
      case (cfg[i].mode)
        A_TOR: begin
          lo  = (i == 0) ? 64'd0 : (64'(pa[i-1]) << 2);
          hi  = 64'(pa[i]) << 2;
          hit = (a >= lo) && (a < hi);
        end
        A_NA4: begin
          lo  = 64'(pa[i]) << 2;
          hit = (a >= lo) && (a < lo + 4);
        end
        A_NAPOT: begin
          k = 0;
          while (k < PLEN - 2 && pa[i][k]) k++;
          size = 64'd8 << k;
          lo   = (64'(pa[i]) << 2) & ~(size - 1);
          hit  = (a >= lo) && (a - lo < size);
        end
        default: hit = 1'b0;
      endcase
      if (hit) begin
        m  = 1'b1;
        mi = i;
        perm = (acc == ACC_READ) ? cfg[i].r : (acc == ACC_WRITE) ? cfg[i].w : cfg[i].x;
        if (priv == PRIV_M && !cfg[i].locked) return 1'b1;
        return perm;
      end
    end
    return (priv == PRIV_M);
  endfunction

  task automatic check(string what);
    logic em, ea;
    int ei;
    @(negedge clk);
    ea = ref_allow(em, ei);
    checks++;
    if (allow !== ea || match !== em || (em && int'(idx) != ei)) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: addr=%h acc=%0d priv=%0d allow=%b/%b match=%b/%b idx=%0d/%0d",
                 what, addr, acc, priv, allow, ea, match, em, idx, ei);
    end
  endtask

  function automatic pmp_cfg_t mk(logic l, pmp_mode_t m, logic x, logic w, logic r);
    pmp_cfg_t c;
    c = '0;
    c.locked = l; c.mode = m; c.x = x; c.w = w; c.r = r;
    return c;
  endfunction

  initial begin
    cfg = '0; pa = '0; addr = '0; acc = ACC_READ; priv = PRIV_U;
    // No entry on: M passes, U fails.
    priv = PRIV_M; check("M, no entry");
    priv = PRIV_U; check("U, no entry");
    if (allow !== 1'b0) begin failures++; $display("FAIL U-mode must fail with no match"); end
    checks++;
    // NAPOT 4 KiB at 0x8000_0000, read-only.
    cfg[3] = mk(0, A_NAPOT, 0, 0, 1);
    pa[3]  = (PLEN-2)'((64'h8000_0000 >> 2) | 64'h1FF);
    addr = 56'h8000_0ff8; acc = ACC_READ;  priv = PRIV_U; check("napot read");
    if (allow !== 1'b1) begin failures++; $display("FAIL napot read in range"); end
    checks++;
    acc = ACC_WRITE; check("napot write");
    addr = 56'h8000_1000; acc = ACC_READ; check("napot above");
    if (allow !== 1'b0) begin failures++; $display("FAIL napot end"); end
    checks++;
    // Priority: entry 1 TOR over [0x8000_0000, 0x8000_0800) allows write.
    cfg[0] = mk(0, A_OFF, 0, 0, 0); pa[0] = (PLEN-2)'(64'h8000_0000 >> 2);
    cfg[1] = mk(0, A_TOR, 0, 1, 1); pa[1] = (PLEN-2)'(64'h8000_0800 >> 2);
    addr = 56'h8000_0400; acc = ACC_WRITE; check("tor priority");
    if (allow !== 1'b1 || idx != 4'd1) begin failures++; $display("FAIL TOR priority"); end
    checks++;
    // Locked entry binds M-mode.
    cfg[1].locked = 1'b1; cfg[1].w = 1'b0; priv = PRIV_M; check("locked M write");
    if (allow !== 1'b0) begin failures++; $display("FAIL locked entry must bind M"); end
    checks++;
    // NA4 execute.
    cfg[5] = mk(0, A_NA4, 1, 0, 0); pa[5] = 54'h123; addr = {pa[5], 2'b10};
    priv = PRIV_S; acc = ACC_EXEC; check("na4 exec");
    // NAPOT of all ones covers everything.
    cfg = '0; cfg[15] = mk(0, A_NAPOT, 1, 1, 1); pa[15] = '1; priv = PRIV_U;
    addr = 56'hAB_CDEF_0123_4567; acc = ACC_WRITE; check("napot all");

    // Random configurations.
    for (int t = 0; t < 400; t++) begin
      for (int i = 0; i < N; i++) begin
        cfg[i] = pmp_cfg_t'(8'($urandom) & 8'h9F);
        pa[i]  = (PLEN-2)'({$urandom} % 4096);
        if (cfg[i].mode == A_NAPOT) pa[i] = pa[i] | (PLEN-2)'((1 << ($urandom % 6)) - 1);
      end
      for (int j = 0; j < 20; j++) begin
        int e;
        e = $urandom % N;
        addr = {pa[e], 2'b00} + PLEN'($urandom % 512) - PLEN'(256);
        if (($urandom % 8) == 0) addr = PLEN'({$urandom, $urandom});
        acc  = access_t'($urandom % 3);
        priv = ($urandom % 3 == 0) ? PRIV_M : (($urandom % 2) ? PRIV_S : PRIV_U);
        check("random");
      end
    end
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
