// tb_pulp_unit: end-to-end test of the PULP protection unit at its default
// parameters (64-bit addresses, four SMAR groups).
//
// The program below is the life of one protected call, with the outcome of
// every instruction worked out by hand:
//   * the kernel loads PPCR = [0x10000, 0x12000) (the loader's job) and
//     reads it back;
//   * the primary function grants a 10-byte read/write buffer at 0x20000
//     (group 0) and a 256-byte read-only table at 0x30000 (group 1), then
//     calls a library function at 0x40000;
//   * the secondary function writes inside and past the buffer, reads the
//     table, tries to write it, reads primary data, tries to reconfigure
//     SMAR and PPCR, returns to a wrong address and then to the right one;
//   * the primary function tries to write PPCR, revokes both groups, calls
//     again (no group active: nothing checked) and the kernel accesses
//     memory outside every group;
//   * the kernel shrinks PPCR and the instruction decoded right behind that
//     write must already be treated as secondary (PPCR forwarding).
// The program runs twice: once without pipeline disturbance, where it must
// take exactly one cycle per instruction plus one (the checks add no
// cycle), and once with random stalls, flushes and kills. Every mechanism
// (bypasses, in-bound pass, out-of-bound load and store, call, good and bad
// return, accepted and refused configuration, PPCR forwarding, stall, flush,
// kill) must be
// seen at least once.
module tb_pulp_unit;
  import pulp_pkg::*;
  import pulp_tb_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic go0 = 1'b0, go1 = 1'b0, done0, done1;
  int   checks0, failures0, cycles0, checks1, failures1, cycles1;
  int   ev0 [EV_COUNT];
  int   ev1 [EV_COUNT];

  pulp_tb_runner run_plain (.clk, .random_ctl(1'b0), .go(go0), .done(done0),
                            .checks(checks0), .failures(failures0), .cycles(cycles0),
                            .ev_count(ev0));
  pulp_tb_runner run_noisy (.clk, .random_ctl(1'b1), .go(go1), .done(done1),
                            .checks(checks1), .failures(failures1), .cycles(cycles1),
                            .ev_count(ev1));

  localparam logic [63:0] KPC  = 64'hFFFF_FFC0_0000_1000;   // kernel code
  localparam logic [63:0] PRI  = 64'h1_0000;                 // primary function
  localparam logic [63:0] LIB  = 64'h4_0000;                 // secondary function
  localparam logic [63:0] BUF  = 64'h2_0000;                 // 10-byte buffer
  localparam logic [63:0] TAB  = 64'h3_0000;                 // read-only table

  function automatic void build();
    // kernel loader: PPCR
    cfg_write(KPC,      PRIV_S, SEL_PPCR_LO, 64'h1_0000, CAUSE_NONE);
    cfg_write(KPC + 4,  PRIV_S, SEL_PPCR_HI, 64'h1_2000, CAUSE_NONE);
    cfg_read (KPC + 8,  PRIV_S, SEL_PPCR_HI, 64'h1_2000, CAUSE_NONE);
    // primary: unchecked access, then grant two ranges
    ld(PRI + 16'h10, PRIV_U, 64'h9000, 3, CAUSE_NONE, EV_PRIMARY_BYPASS);
    start_protect(PRI + 16'h14, PRIV_U, BUF, 10, PERM_RW, 0, CAUSE_NONE);
    start_protect(PRI + 16'h18, PRIV_U, TAB, 256, PERM_R, 1, CAUSE_NONE);
    cfg_read(PRI + 16'h1C, PRIV_U, SEL_SMAR + 8'h01, BUF + 10, CAUSE_NONE);
    ld(PRI + 16'h20, PRIV_U, 64'h5_0000, 3, CAUSE_NONE, EV_PRIMARY_BYPASS);
    alu(PRI + 16'h24, PRIV_U);
    jmp(PRI + 16'h28, PRIV_U, LIB, CAUSE_NONE, EV_CALL);     // RAR <= PRI+0x2C
    // secondary function
    st(LIB,          PRIV_U, BUF,          3, CAUSE_NONE,      EV_SEC_INBOUND);
    st(LIB + 4,      PRIV_U, BUF + 8,      1, CAUSE_NONE,      EV_SEC_INBOUND);
    st(LIB + 8,      PRIV_U, BUF + 8,      2, CAUSE_OOB_STORE, EV_OOB_STORE);
    st(LIB + 12,     PRIV_U, BUF + 10,     0, CAUSE_OOB_STORE, EV_OOB_STORE);
    ld(LIB + 16,     PRIV_U, TAB + 248,    3, CAUSE_NONE,      EV_SEC_INBOUND);
    ld(LIB + 20,     PRIV_U, TAB + 252,    3, CAUSE_OOB_LOAD,  EV_OOB_LOAD);
    st(LIB + 24,     PRIV_U, TAB,          0, CAUSE_OOB_STORE, EV_OOB_STORE);
    ld(LIB + 28,     PRIV_U, 64'h1_1800,   3, CAUSE_OOB_LOAD,  EV_OOB_LOAD);
    ld(LIB + 32,     PRIV_U, BUF - 1,      0, CAUSE_OOB_LOAD,  EV_OOB_LOAD);
    start_protect(LIB + 36, PRIV_U, 64'h0, 64'hFFFF_FFFF, PERM_RW, 0, CAUSE_ILLEGAL_CFG);
    end_protect(LIB + 40, PRIV_U, 1, CAUSE_ILLEGAL_CFG);
    cfg_write(LIB + 44, PRIV_U, SEL_PPCR_HI, 64'hFFFF_FFFF, CAUSE_ILLEGAL_CFG);
    cfg_read(LIB + 48, PRIV_U, SEL_RAR, 64'h0, CAUSE_ILLEGAL_CFG);
    br(LIB + 52, PRIV_U, LIB + 8, 1'b1, CAUSE_NONE, EV_NONE);       // inside secondary
    br(LIB + 56, PRIV_U, PRI + 16'h100, 1'b0, CAUSE_NONE, EV_NONE); // not taken
    jmp(LIB + 60, PRIV_U, PRI + 16'h100, CAUSE_RET_ADDR, EV_BAD_RET);
    br(LIB + 64, PRIV_U, PRI, 1'b1, CAUSE_RET_ADDR, EV_BAD_RET);
    st(LIB + 68, PRIV_U, BUF + 9, 0, CAUSE_NONE, EV_SEC_INBOUND);   // group 0 unchanged
    jmp(LIB + 72, PRIV_U, PRI + 16'h2C, CAUSE_NONE, EV_GOOD_RET);
    // primary again
    cfg_read(PRI + 16'h2C, PRIV_U, SEL_RAR, PRI + 16'h2C, CAUSE_NONE);
    cfg_write(PRI + 16'h30, PRIV_U, SEL_PPCR_LO, 64'h0, CAUSE_ILLEGAL_CFG);
    cfg_write(PRI + 16'h34, PRIV_U, SEL_RAR, 64'h0, CAUSE_ILLEGAL_CFG);
    cfg_write(PRI + 16'h38, PRIV_U, SEL_SMAR + 8'h09, 64'h2_1000, CAUSE_NONE); // group 2 hi
    cfg_write(PRI + 16'h3C, PRIV_U, 8'h05, 64'h0, CAUSE_ILLEGAL_CFG);          // no register
    ld(PRI + 16'h40, PRIV_S, 64'h7_0000, 3, CAUSE_NONE, EV_KERNEL_BYPASS);     // kernel
    end_protect(PRI + 16'h44, PRIV_U, 0, CAUSE_NONE);
    end_protect(PRI + 16'h48, PRIV_U, 1, CAUSE_NONE);
    jmp(PRI + 16'h4C, PRIV_U, LIB + 16'h100, CAUSE_NONE, EV_CALL);
    ld(LIB + 16'h100, PRIV_U, 64'h1_1800, 3, CAUSE_NONE, EV_NO_GROUP_BYPASS);
    st(LIB + 16'h104, PRIV_U, 64'h8_0000, 3, CAUSE_NONE, EV_NO_GROUP_BYPASS);
    jmp(LIB + 16'h108, PRIV_U, PRI + 16'h50, CAUSE_NONE, EV_GOOD_RET);
    // kernel code is never checked, even with a group active
    start_protect(PRI + 16'h50, PRIV_U, BUF, 10, PERM_RW, 3, CAUSE_NONE);
    ld(KPC + 12, PRIV_S, 64'h1_1800, 3, CAUSE_NONE, EV_KERNEL_BYPASS);
    st(KPC + 16, PRIV_M, LIB, 3, CAUSE_NONE, EV_KERNEL_BYPASS);
    jmp(KPC + 20, PRIV_S, PRI, CAUSE_NONE, EV_NONE);
    st(PRI + 16'h54, PRIV_U, 64'h9000, 3, CAUSE_NONE, EV_PRIMARY_BYPASS);
    // the kernel shrinks PPCR; the very next instruction, already decoded,
    // is no longer primary and its access is checked (group 3 is active)
    cfg_write(KPC + 24, PRIV_S, SEL_PPCR_HI, PRI + 16'h40, CAUSE_NONE);
    ld(PRI + 16'h58, PRIV_U, 64'h9000, 3, CAUSE_OOB_LOAD, EV_PPCR_FWD);
    ld(PRI + 16'h20, PRIV_U, 64'h9000, 3, CAUSE_NONE, EV_PRIMARY_BYPASS);
  endfunction

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    build();
    go0 = 1'b1;
    repeat (3) @(posedge clk);
    wait (done0);
    go1 = 1'b1;
    repeat (3) @(posedge clk);
    wait (done1);
    checks   = checks0 + checks1;
    failures = failures0 + failures1;
    // no cycle is added by the checks
    checks++;
    if (cycles0 != prog.size() + 1) begin
      failures++;
      $display("FAIL %0d instructions took %0d cycles", prog.size(), cycles0);
    end
    // both runs must see the same architectural outcomes
    for (int e = EV_KERNEL_BYPASS; e <= EV_PPCR_FWD; e++) begin
      checks++;
      if (ev0[e] != ev1[e]) begin
        failures++;
        $display("FAIL %s: %0d plain vs %0d noisy", ev_e'(e), ev0[e], ev1[e]);
      end
    end
    for (int e = EV_KERNEL_BYPASS; e < EV_COUNT; e++) begin
      int seen;
      seen = (e >= EV_STALL) ? ev1[e] : ev0[e];
      $display("  %-20s %0d", ev_e'(e), seen);
      checks++;
      if (seen == 0) begin
        failures++;
        $display("FAIL mechanism %s never happened", ev_e'(e));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
