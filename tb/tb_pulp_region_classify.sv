// tb_pulp_region_classify: self-checking test of the ID-stage region decision.
//
// Random PC, privilege, PPCR bounds and instruction class (with PCs chosen
// near the PPCR bounds so both edges are exercised) are compared with a
// reference: kernel for any privilege above U, primary for lo <= pc < hi,
// secondary otherwise; memory check only for secondary loads/stores, control
// check for user branches/jumps. Also checks the empty PPCR of reset.
module tb_pulp_region_classify;
  import pulp_pkg::*;

  localparam int unsigned XLEN = 64;

  logic [XLEN-1:0] pc, ppcr_lo, ppcr_hi;
  priv_e           priv;
  iclass_t         iclass;
  region_e         region;
  logic            need_mem_check, need_cfi_check;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  pulp_region_classify #(.XLEN(XLEN)) dut (.*);

  task automatic compare();
    region_e er;
    logic em, ec;
    #1;
    if (priv != PRIV_U)                       er = REGION_KERNEL;
    else if (pc >= ppcr_lo && pc < ppcr_hi)   er = REGION_PRIMARY;
    else                                      er = REGION_SECONDARY;
    em = (er == REGION_SECONDARY) && (iclass.is_load || iclass.is_store);
    ec = (er != REGION_KERNEL) && (iclass.is_branch || iclass.is_jump);
    checks++;
    if (region !== er || need_mem_check !== em || need_cfi_check !== ec) begin
      failures++;
      $display("FAIL pc=%h priv=%0d lo=%h hi=%h cls=%b region=%0d/%0d mem=%b/%b cfi=%b/%b",
               pc, priv, ppcr_lo, ppcr_hi, iclass, region, er,
               need_mem_check, em, need_cfi_check, ec);
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
    // directed: bounds of the primary range
    ppcr_lo = 64'h1_0000; ppcr_hi = 64'h1_0400; priv = PRIV_U;
    iclass = '{is_load: 1'b1, default: 1'b0};
    pc = 64'h1_0000; compare();
    checks++; if (region != REGION_PRIMARY) begin failures++; $display("FAIL lower bound"); end
    pc = 64'h1_03FC; compare();
    pc = 64'h1_0400; compare();
    checks++; if (region != REGION_SECONDARY || !need_mem_check) begin
      failures++; $display("FAIL upper bound exclusive"); end
    pc = 64'h0_FFFC; compare();
    priv = PRIV_S; compare();
    checks++; if (region != REGION_KERNEL || need_mem_check) begin
      failures++; $display("FAIL kernel"); end
    // empty PPCR: all user code secondary
    ppcr_lo = '0; ppcr_hi = '0; priv = PRIV_U; pc = 64'h0; compare();
    checks++; if (region != REGION_SECONDARY) begin failures++; $display("FAIL empty ppcr"); end

    for (int n = 0; n < 20000; n++) begin
      ppcr_lo = 64'h8000 + XLEN'($urandom_range(0, 64));
      ppcr_hi = ppcr_lo + XLEN'($urandom_range(0, 64)) - 8;
      pc      = 64'h8000 + XLEN'($urandom_range(0, 160)) - 16;
      priv    = priv_e'($urandom_range(0, 3));
      if ($urandom_range(0, 1)) priv = PRIV_U;
      iclass  = iclass_t'($urandom_range(0, 31));
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
