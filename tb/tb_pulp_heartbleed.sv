// tb_pulp_heartbleed: the Heartbleed over-read stopped by a SMAR group.
//
// The vulnerable heartbeat handler copies as many payload bytes as the
// request claims, not as many as it carries. Here the handler (primary
// code) puts the copy under protection before calling memcpy (secondary
// code): group 0 grants read access to the received record only (ACTUAL
// bytes), group 1 grants write access to the response buffer (CLAIMED bytes,
// allocated from the claimed length as the handler does). memcpy then copies
// CLAIMED bytes in 8-byte words. Every word inside the record must pass;
// the first word that reaches past it, and every one after, must raise the
// out-of-bound load exception with mem_allow = 0, so that no byte beyond the
// record is read. The claimed length is the largest a heartbeat can carry,
// 65535 bytes; the actual record is 16 bytes. The malicious request is
// followed by a well-formed one (claimed = actual), which must copy
// without any exception, and memcpy returns to its caller through RAR.
module tb_pulp_heartbleed;
  import pulp_pkg::*;
  import pulp_tb_pkg::*;

  localparam int          CLAIMED = 65535;
  localparam int          ACTUAL  = 16;
  localparam logic [63:0] KPC     = 64'hFFFF_FFC0_0000_2000;
  localparam logic [63:0] HANDLER = 64'h1_0000;       // tls1_process_heartbeat
  localparam logic [63:0] MEMCPY  = 64'h7_0000;       // library code
  localparam logic [63:0] REC     = 64'h20_0000;      // received record payload
  localparam logic [63:0] RESP    = 64'h30_0000;      // response buffer

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic go = 1'b0, done;
  int   r_checks, r_failures, r_cycles;
  int   ev [EV_COUNT];

  pulp_tb_runner run (.clk, .random_ctl(1'b0), .go, .done, .checks(r_checks),
                      .failures(r_failures), .cycles(r_cycles), .ev_count(ev));

  int checks = 0, failures = 0;
  int exp_oob, exp_ok;

  // memcpy(dst, src, n) in 8-byte words with a byte tail; loads past the
  // end of the record are expected to fault.
  function automatic void memcpy_prog(input int n, input int valid_src);
    logic [63:0] pc = MEMCPY;
    int o = 0;
    while (o < n) begin
      int w = (n - o >= 8) ? 8 : 1;
      logic [1:0] sz = (w == 8) ? 2'd3 : 2'd0;
      logic bad = (o + w > valid_src);
      ld(pc, PRIV_U, REC + 64'(o), sz, bad ? CAUSE_OOB_LOAD : CAUSE_NONE,
         bad ? EV_OOB_LOAD : EV_SEC_INBOUND);
      if (bad) exp_oob++; else exp_ok++;
      st(pc + 4, PRIV_U, RESP + 64'(o), sz, CAUSE_NONE, EV_SEC_INBOUND);
      exp_ok++;
      br(pc + 8, PRIV_U, MEMCPY, 1'b1, CAUSE_NONE, EV_NONE);
      o += w;
    end
  endfunction

  function automatic void heartbeat(input int claimed, input int actual, input logic [63:0] call_pc);
    start_protect(call_pc,      PRIV_U, REC,  64'(actual),  PERM_R, 0, CAUSE_NONE);
    start_protect(call_pc + 4,  PRIV_U, RESP, 64'(claimed), PERM_WR, 1, CAUSE_NONE);
    jmp(call_pc + 8, PRIV_U, MEMCPY, CAUSE_NONE, EV_CALL);
    memcpy_prog(claimed, actual);
    jmp(MEMCPY + 12, PRIV_U, call_pc + 12, CAUSE_NONE, EV_GOOD_RET);
    end_protect(call_pc + 12, PRIV_U, 0, CAUSE_NONE);
    end_protect(call_pc + 16, PRIV_U, 1, CAUSE_NONE);
  endfunction

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int oob_malicious, ok_benign;
    exp_oob = 0; exp_ok = 0;
    cfg_write(KPC,     PRIV_S, SEL_PPCR_LO, HANDLER, CAUSE_NONE);
    cfg_write(KPC + 4, PRIV_S, SEL_PPCR_HI, HANDLER + 64'h4000, CAUSE_NONE);
    heartbeat(CLAIMED, ACTUAL, HANDLER + 64'h100);
    oob_malicious = exp_oob;
    heartbeat(ACTUAL, ACTUAL, HANDLER + 64'h200);
    go = 1'b1;
    repeat (3) @(posedge clk);
    wait (done);
    checks   = r_checks;
    failures = r_failures;

    // exactly the words past the record were refused: (65535-16)/8 words
    // plus the 7-byte tail
    checks++;
    if (ev[EV_OOB_LOAD] != oob_malicious ||
        oob_malicious != (CLAIMED - ACTUAL) / 8 + (CLAIMED - ACTUAL) % 8) begin
      failures++;
      $display("FAIL %0d over-reads refused, expected %0d", ev[EV_OOB_LOAD], oob_malicious);
    end
    checks++;
    if (ev[EV_SEC_INBOUND] != exp_ok) begin
      failures++;
      $display("FAIL %0d accesses passed, expected %0d", ev[EV_SEC_INBOUND], exp_ok);
    end
    // the protection adds no cycle
    checks++;
    if (r_cycles != prog.size() + 1) begin
      failures++;
      $display("FAIL %0d instructions took %0d cycles", prog.size(), r_cycles);
    end
    checks++;
    if (ev[EV_GOOD_RET] != 2 || ev[EV_CALL] != 2) begin
      failures++;
      $display("FAIL calls %0d returns %0d", ev[EV_CALL], ev[EV_GOOD_RET]);
    end
    $display("heartbleed: claimed %0d bytes, record %0d bytes, %0d over-reads refused",
             CLAIMED, ACTUAL, ev[EV_OOB_LOAD]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
