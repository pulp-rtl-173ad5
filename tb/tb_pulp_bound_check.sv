// tb_pulp_bound_check: self-checking test of the EX-stage SMAR bound check.
//
// Drives random SMAR groups (inside a small address window so that hits,
// misses and straddling accesses all occur), random addresses, sizes and
// load/store kinds, and compares hit and fault with a reference computed here
// byte by byte: every byte of the access must lie in [lo, hi) of one active
// group granting the permission. Directed cases cover the last byte of a
// buffer, an access straddling the upper bound, a store to a read-only
// group, no active group (check disabled) and check = 0 (primary code).
module tb_pulp_bound_check;
  import pulp_pkg::*;

  localparam int unsigned XLEN   = 64;
  localparam int unsigned N_SMAR = 4;

  logic                        check, is_load, is_store;
  logic [XLEN-1:0]             addr;
  logic [1:0]                  size;
  logic [N_SMAR-1:0][XLEN-1:0] smar_lo, smar_hi;
  perm_t [N_SMAR-1:0]          smar_perm;
  logic [N_SMAR-1:0]           hit;
  logic                        fault, cause_oob_store;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  pulp_bound_check #(.XLEN(XLEN), .N_SMAR(N_SMAR)) dut (.*);

  // reference model: byte-wise coverage
  function automatic logic [N_SMAR-1:0] ref_hit();
    logic [N_SMAR-1:0] h;
    int nbytes;
    nbytes = 1 << size;
    for (int g = 0; g < N_SMAR; g++) begin
      h[g] = (smar_perm[g] != 2'b00);
      if (is_load  && !smar_perm[g][0]) h[g] = 1'b0;
      if (is_store && !smar_perm[g][1]) h[g] = 1'b0;
      for (int b = 0; b < nbytes; b++) begin
        logic [XLEN:0] a;
        a = {1'b0, addr} + (XLEN+1)'(b);
        if (a < {1'b0, smar_lo[g]} || a >= {1'b0, smar_hi[g]}) h[g] = 1'b0;
      end
    end
    return h;
  endfunction

  task automatic compare(input string what);
    logic [N_SMAR-1:0] eh;
    logic ef, active;
    #1;
    eh = ref_hit();
    active = 1'b0;
    for (int g = 0; g < N_SMAR; g++) if (smar_perm[g] != 2'b00) active = 1'b1;
    ef = check && (is_load || is_store) && active && (eh == '0);
    checks++;
    if (hit !== eh || fault !== ef || cause_oob_store !== is_store) begin
      failures++;
      $display("FAIL %s: addr=%h size=%0d ld=%b st=%b hit=%b/%b fault=%b/%b",
               what, addr, size, is_load, is_store, hit, eh, fault, ef);
    end
  endtask

  task automatic set_group(input int g, input logic [XLEN-1:0] lo,
                           input logic [XLEN-1:0] hi, input perm_t p);
    smar_lo[g] = lo; smar_hi[g] = hi; smar_perm[g] = p;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int g = 0; g < N_SMAR; g++) set_group(g, '0, '0, PERM_NONE);
    check = 1; is_load = 1; is_store = 0; addr = 64'h1000; size = 0;

    // no active group: nothing is checked
    compare("no group");
    if (fault !== 1'b0) begin failures++; $display("FAIL no group faults"); end

    // buffer of 10 bytes at 0x1000, read/write
    set_group(0, 64'h1000, 64'h100A, PERM_RW);
    addr = 64'h1009; size = 0; compare("last byte");
    checks++; if (fault) begin failures++; $display("FAIL last byte faulted"); end
    addr = 64'h100A; size = 0; compare("one past end");
    checks++; if (!fault) begin failures++; $display("FAIL overflow not caught"); end
    addr = 64'h1008; size = 1; compare("halfword at end");
    checks++; if (fault) begin failures++; $display("FAIL halfword at end"); end
    addr = 64'h1008; size = 2; compare("straddling word");
    checks++; if (!fault) begin failures++; $display("FAIL straddle not caught"); end
    addr = 64'h0FFF; size = 0; compare("below");
    checks++; if (!fault) begin failures++; $display("FAIL below not caught"); end

    // read-only group: loads pass, stores fault
    set_group(1, 64'h2000, 64'h2100, PERM_R);
    addr = 64'h2010; size = 3; is_load = 1; is_store = 0; compare("ro load");
    checks++; if (fault) begin failures++; $display("FAIL ro load"); end
    is_load = 0; is_store = 1; compare("ro store");
    checks++; if (!fault || !cause_oob_store) begin failures++; $display("FAIL ro store"); end
    // atomic needs both
    is_load = 1; is_store = 1; compare("ro amo");
    // primary code is not checked
    check = 0; compare("check off");
    check = 1;

    // random
    for (int n = 0; n < 20000; n++) begin
      for (int g = 0; g < N_SMAR; g++) begin
        logic [XLEN-1:0] lo;
        lo = 64'h4000 + XLEN'($urandom_range(0, 255));
        set_group(g, lo, lo + XLEN'($urandom_range(0, 64)), perm_t'($urandom_range(0, 3)));
      end
      addr     = 64'h4000 + XLEN'($urandom_range(0, 340)) - 8;
      size     = 2'($urandom_range(0, 3));
      is_load  = 1'($urandom);
      is_store = ~is_load | 1'($urandom_range(0, 7) == 0);
      check    = ($urandom_range(0, 9) != 0);
      compare("random");
    end
    // top of the address space: the end address must not wrap
    set_group(2, 64'hFFFF_FFFF_FFFF_FF00, 64'hFFFF_FFFF_FFFF_FFFF, PERM_RW);
    addr = 64'hFFFF_FFFF_FFFF_FFFC; size = 3; is_load = 1; is_store = 0; check = 1;
    compare("wrap");
    checks++; if (!fault) begin failures++; $display("FAIL wrap not caught"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
