// tb_pulp_overflow: buffer-overflow programs stopped by PULP.
//
// Each case is a secondary function (a library copy routine) writing SIZE
// bytes into a destination of BUF bytes that the primary function granted
// with start_protect(dst, BUF, read/write). Every store inside the buffer
// must pass and the first store past it, and every later one, must raise the
// out-of-bound store exception. The cases:
//   * stack and heap: the two stack-protector test programs, strcpy of the
//     27-character argument "123456789123456789123456789" into char pass[10]
//     placed on the stack and on the heap (28 bytes with the terminator);
//     the hardware check does not care where the buffer lives;
//   * six overflow models named after the server bugs they come from: an
//     off-by-one write, a path overflow, a message buffer, a signature copy,
//     an inverse-query copy and a header copy. The buffer and copy sizes used
//     for them here are illustrative choices, not taken from the programs.
// Byte copies are used for strings and word copies for the memcpy-like
// cases. After each overflow the function returns properly and the groups
// are released.
module tb_pulp_overflow;
  import pulp_pkg::*;
  import pulp_tb_pkg::*;

  localparam logic [63:0] KPC  = 64'hFFFF_FFC0_0000_4000;
  localparam logic [63:0] MAIN = 64'h1_0000;
  localparam logic [63:0] LIB  = 64'h6_0000;
  localparam logic [63:0] SRC  = 64'h40_0000;
  localparam logic [63:0] DST  = 64'h50_0000;
  localparam int          NCASE = 8;

  typedef struct {
    string name;
    int    buf_bytes;
    int    copy_bytes;
    int    word;        // 1: byte copy, 8: word copy
  } case_t;

  case_t cases [NCASE] = '{
    '{"strcpy into pass[10], stack", 10,   28,   1},
    '{"strcpy into pass[10], heap",  10,   28,   1},
    '{"off-by-one",                  64,   65,   1},
    '{"path overflow",               256,  320,  1},
    '{"nslookup complain",           128,  200,  1},
    '{"signature copy",              512,  1024, 8},
    '{"inverse query",               256,  600,  8},
    '{"mail header",                 96,   160,  1}
  };

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic go = 1'b0, done;
  int   r_checks, r_failures, r_cycles;
  int   ev [EV_COUNT];

  pulp_tb_runner run (.clk, .random_ctl(1'b0), .go, .done, .checks(r_checks),
                      .failures(r_failures), .cycles(r_cycles), .ev_count(ev));

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_bad, prev_bad;
    exp_bad = 0;
    cfg_write(KPC,     PRIV_S, SEL_PPCR_LO, MAIN, CAUSE_NONE);
    cfg_write(KPC + 4, PRIV_S, SEL_PPCR_HI, MAIN + 64'h1000, CAUSE_NONE);
    for (int c = 0; c < NCASE; c++) begin
      int o, bad;
      logic [63:0] dst;
      dst = DST + 64'(c) * 64'h1_0000;
      start_protect(MAIN + 64'h40, PRIV_U, SRC, 64'(cases[c].copy_bytes), PERM_R, 0, CAUSE_NONE);
      start_protect(MAIN + 64'h44, PRIV_U, dst, 64'(cases[c].buf_bytes), PERM_RW, 1, CAUSE_NONE);
      jmp(MAIN + 64'h48, PRIV_U, LIB, CAUSE_NONE, EV_CALL);
      o = 0; bad = 0;
      while (o < cases[c].copy_bytes) begin
        int w;
        logic over;
        w = (cases[c].word == 8 && cases[c].copy_bytes - o >= 8) ? 8 : 1;
        over = (o + w > cases[c].buf_bytes);
        ld(LIB, PRIV_U, SRC + 64'(o), (w == 8) ? 2'd3 : 2'd0, CAUSE_NONE, EV_SEC_INBOUND);
        st(LIB + 4, PRIV_U, dst + 64'(o), (w == 8) ? 2'd3 : 2'd0,
           over ? CAUSE_OOB_STORE : CAUSE_NONE, over ? EV_OOB_STORE : EV_SEC_INBOUND);
        if (over) bad++;
        br(LIB + 8, PRIV_U, LIB, 1'b1, CAUSE_NONE, EV_NONE);
        o += w;
      end
      jmp(LIB + 12, PRIV_U, MAIN + 64'h4C, CAUSE_NONE, EV_GOOD_RET);
      end_protect(MAIN + 64'h4C, PRIV_U, 0, CAUSE_NONE);
      end_protect(MAIN + 64'h50, PRIV_U, 1, CAUSE_NONE);
      prev_bad = ev[EV_OOB_STORE];
      go = 1'b1;
      repeat (2) @(posedge clk);
      wait (done);
      go = 1'b0;
      wait (!done);
      prog.delete();
      checks++;
      if (ev[EV_OOB_STORE] - prev_bad != bad || bad == 0) begin
        failures++;
        $display("FAIL %s: %0d overflowing stores refused, expected %0d", cases[c].name,
                 ev[EV_OOB_STORE] - prev_bad, bad);
      end
      $display("%-30s buffer %4d, copy %4d: %0d stores refused", cases[c].name,
               cases[c].buf_bytes, cases[c].copy_bytes, ev[EV_OOB_STORE] - prev_bad);
      exp_bad += bad;
    end
    checks   += r_checks;
    failures += r_failures;
    checks++;
    if (ev[EV_CALL] != NCASE || ev[EV_GOOD_RET] != NCASE || ev[EV_OOB_STORE] != exp_bad) begin
      failures++;
      $display("FAIL totals: calls %0d returns %0d refused %0d", ev[EV_CALL],
               ev[EV_GOOD_RET], ev[EV_OOB_STORE]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
