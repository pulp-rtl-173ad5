// tb_pulp_strcpy_micro: the strcpy micro-benchmark under protection.
//
// The primary function calls strcpy (secondary code) ITER times on a
// LEN-character string (LEN + 1 bytes with the terminator). Around each
// call it runs start_protect for the source (read) and the destination
// (read/write), and end_protect for both afterwards. strcpy copies byte by
// byte: load, store, loop branch. Nothing may fault, every call must go
// through RAR, and since the checks sit in the pipeline each call must take
// exactly one cycle per instruction (plus one to drain): the only cost of
// protection is the four configuration instructions, whose share of the
// instructions is printed and checked against the 15 % bound that the
// benchmark's timing gave for the configuration cost.
// ITER = 10000 and LEN = 100 are the benchmark's sizes.
module tb_pulp_strcpy_micro;
  import pulp_pkg::*;
  import pulp_tb_pkg::*;

  localparam int          ITER   = 10000;
  localparam int          LEN    = 100;
  localparam logic [63:0] KPC    = 64'hFFFF_FFC0_0000_3000;
  localparam logic [63:0] MAIN   = 64'h1_0000;
  localparam logic [63:0] STRCPY = 64'h6_0000;
  localparam logic [63:0] SRC    = 64'h20_0000;
  localparam logic [63:0] DST    = 64'h28_0000;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic go = 1'b0, done;
  int   r_checks, r_failures, r_cycles;
  int   ev [EV_COUNT];

  pulp_tb_runner run (.clk, .random_ctl(1'b0), .go, .done, .checks(r_checks),
                      .failures(r_failures), .cycles(r_cycles), .ev_count(ev));

  int checks = 0, failures = 0;
  longint total_instr = 0, cfg_instr = 0, total_cycles = 0;

  task automatic play();
    go = 1'b1;
    repeat (2) @(posedge clk);
    wait (done);
    go = 1'b0;
    wait (!done);
    total_cycles += r_cycles;
    checks++;
    if (r_cycles != prog.size() + 1) begin
      failures++;
      $display("FAIL %0d instructions took %0d cycles", prog.size(), r_cycles);
    end
    total_instr += prog.size();
    prog.delete();
  endtask

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_write(KPC,     PRIV_S, SEL_PPCR_LO, MAIN, CAUSE_NONE);
    cfg_write(KPC + 4, PRIV_S, SEL_PPCR_HI, MAIN + 64'h1000, CAUSE_NONE);
    play();
    for (int it = 0; it < ITER; it++) begin
      start_protect(MAIN + 64'h40, PRIV_U, SRC, 64'(LEN + 1), PERM_R, 0, CAUSE_NONE);
      start_protect(MAIN + 64'h44, PRIV_U, DST, 64'(LEN + 1), PERM_RW, 1, CAUSE_NONE);
      jmp(MAIN + 64'h48, PRIV_U, STRCPY, CAUSE_NONE, EV_CALL);
      for (int b = 0; b <= LEN; b++) begin
        ld(STRCPY,     PRIV_U, SRC + 64'(b), 0, CAUSE_NONE, EV_SEC_INBOUND);
        st(STRCPY + 4, PRIV_U, DST + 64'(b), 0, CAUSE_NONE, EV_SEC_INBOUND);
        br(STRCPY + 8, PRIV_U, STRCPY, b != LEN, CAUSE_NONE, EV_NONE);
      end
      jmp(STRCPY + 12, PRIV_U, MAIN + 64'h4C, CAUSE_NONE, EV_GOOD_RET);
      end_protect(MAIN + 64'h4C, PRIV_U, 0, CAUSE_NONE);
      end_protect(MAIN + 64'h50, PRIV_U, 1, CAUSE_NONE);
      cfg_instr += 4;
      play();
    end
    checks   += r_checks;
    failures += r_failures;
    checks++;
    if (ev[EV_CALL] != ITER || ev[EV_GOOD_RET] != ITER ||
        ev[EV_SEC_INBOUND] != ITER * 2 * (LEN + 1) || ev[EV_OOB_LOAD] != 0 ||
        ev[EV_OOB_STORE] != 0) begin
      failures++;
      $display("FAIL calls=%0d returns=%0d accesses=%0d oob=%0d/%0d", ev[EV_CALL],
               ev[EV_GOOD_RET], ev[EV_SEC_INBOUND], ev[EV_OOB_LOAD], ev[EV_OOB_STORE]);
    end
    checks++;
    if (cfg_instr * 100 >= total_instr * 15) begin
      failures++;
      $display("FAIL configuration share too high");
    end
    $display("strcpy x%0d, %0d bytes: %0d instructions, %0d cycles, %0d configuration instructions (%0d.%02d %%)",
             ITER, LEN, total_instr, total_cycles, cfg_instr,
             cfg_instr * 100 / total_instr, (cfg_instr * 10000 / total_instr) % 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
