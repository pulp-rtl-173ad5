// tb_pulp_cfi_check: self-checking test of the RAR call/return logic.
//
// Directed: a call from primary into secondary code must write the link
// address into RAR; a return to exactly RAR passes, a return elsewhere in the
// primary range faults; a branch inside secondary code and a jump inside the
// primary range are neither calls nor returns; check = 0 (kernel) disables
// everything. Then random targets, regions, link values and RAR contents are
// compared with a reference written here.
module tb_pulp_cfi_check;
  import pulp_pkg::*;

  localparam int unsigned XLEN = 64;

  logic            check, is_jump, taken;
  region_e         region;
  logic [XLEN-1:0] target, link, ppcr_lo, ppcr_hi, rar, rar_wdata;
  logic            rar_we, is_call, is_return, fault;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  pulp_cfi_check #(.XLEN(XLEN)) dut (.*);

  task automatic compare();
    logic tp, ec, er, ef;
    #1;
    tp = (target >= ppcr_lo) && (target < ppcr_hi);
    ec = check && taken && is_jump && region == REGION_PRIMARY && !tp;
    er = check && taken && region == REGION_SECONDARY && tp;
    ef = er && (target != rar);
    checks++;
    if (is_call !== ec || is_return !== er || fault !== ef || rar_we !== ec ||
        (ec && rar_wdata !== link)) begin
      failures++;
      $display("FAIL region=%0d jump=%b taken=%b target=%h rar=%h call=%b/%b ret=%b/%b fault=%b/%b",
               region, is_jump, taken, target, rar, is_call, ec, is_return, er, fault, ef);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ppcr_lo = 64'h1_0000; ppcr_hi = 64'h1_1000; rar = 64'h0;
    check = 1; is_jump = 1; taken = 1;

    // call: primary -> secondary
    region = REGION_PRIMARY; target = 64'h4_0000; link = 64'h1_0124; compare();
    checks++; if (!rar_we || rar_wdata != 64'h1_0124) begin failures++; $display("FAIL call"); end
    rar = 64'h1_0124;
    // correct return
    region = REGION_SECONDARY; target = 64'h1_0124; compare();
    checks++; if (!is_return || fault) begin failures++; $display("FAIL good return"); end
    // ROP-like return elsewhere
    target = 64'h1_0200; compare();
    checks++; if (!fault) begin failures++; $display("FAIL bad return"); end
    // a branch back into primary is also checked
    is_jump = 0; taken = 1; compare();
    checks++; if (!fault) begin failures++; $display("FAIL bad branch return"); end
    // not taken branch: nothing
    taken = 0; compare();
    checks++; if (fault) begin failures++; $display("FAIL not taken"); end
    // secondary -> secondary
    is_jump = 1; taken = 1; target = 64'h4_0100; compare();
    checks++; if (fault || rar_we) begin failures++; $display("FAIL sec->sec"); end
    // primary -> primary
    region = REGION_PRIMARY; target = 64'h1_0300; compare();
    checks++; if (rar_we) begin failures++; $display("FAIL pri->pri"); end
    // kernel (check = 0)
    check = 0; region = REGION_KERNEL; target = 64'h1_0000; compare();

    for (int n = 0; n < 20000; n++) begin
      check   = ($urandom_range(0, 7) != 0);
      region  = region_e'($urandom_range(0, 2));
      is_jump = 1'($urandom);
      taken   = is_jump | 1'($urandom);
      target  = 64'h1_0000 + XLEN'($urandom_range(0, 64)) - 32;
      link    = XLEN'($urandom);
      rar     = 64'h1_0000 + XLEN'($urandom_range(0, 8));
      if ($urandom_range(0, 3) == 0) target = rar;
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
