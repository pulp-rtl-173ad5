// tb_pulp_regs: self-checking test of the PULP register block.
//
// Keeps a shadow copy of PPCR, the SMAR groups and RAR and applies random
// configuration operations from random code regions, with and without the
// commit strobe, plus random hardware RAR writes. After every edge all
// register outputs are compared with the shadow; before it, cfg_illegal and
// cfg_rdata are compared with the rules: a secondary function may execute no
// configuration instruction, PPCR and RAR are written by the kernel only,
// SMAR by the kernel or the primary function, selectors and indices must
// exist. start_protect must store addr and addr + len (saturating). The
// forwarded PPCR outputs must show the value a committing write is storing.
module tb_pulp_regs;
  import pulp_pkg::*;

  localparam int unsigned XLEN   = 64;
  localparam int unsigned N_SMAR = 4;
  localparam int unsigned IDXW   = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                  cfg_valid, cfg_commit;
  cfg_op_e               cfg_op;
  region_e               cfg_region;
  logic [7:0]            cfg_sel;
  logic [IDXW-1:0]       cfg_index;
  logic [XLEN-1:0]       cfg_wdata, cfg_len, cfg_rdata;
  perm_t                 cfg_perm;
  logic                  cfg_illegal, rar_we;
  logic [XLEN-1:0]       rar_wdata, ppcr_lo, ppcr_hi, rar, ppcr_lo_next, ppcr_hi_next;
  logic [N_SMAR-1:0][XLEN-1:0] smar_lo, smar_hi;
  perm_t [N_SMAR-1:0]    smar_perm;

  pulp_regs #(.XLEN(XLEN), .N_SMAR(N_SMAR)) dut (.*);

  // shadow registers
  logic [XLEN-1:0] s_ppcr_lo, s_ppcr_hi, s_rar;
  logic [XLEN-1:0] s_lo [N_SMAR], s_hi [N_SMAR];
  perm_t           s_perm [N_SMAR];

  int checks = 0, failures = 0;

  function automatic logic sel_valid(input logic [7:0] sel);
    if (sel <= 8'h02) return 1'b1;
    if (sel >= 8'h10 && sel < 8'h10 + 8'(4 * N_SMAR) && sel[1:0] != 2'd3) return 1'b1;
    return 1'b0;
  endfunction

  function automatic logic [XLEN-1:0] shadow_read(input logic [7:0] sel);
    int g;
    if (sel == 8'h00) return s_ppcr_lo;
    if (sel == 8'h01) return s_ppcr_hi;
    if (sel == 8'h02) return s_rar;
    g = (sel - 8'h10) / 4;
    case (sel[1:0])
      2'd0: return s_lo[g];
      2'd1: return s_hi[g];
      default: return XLEN'(s_perm[g]);
    endcase
  endfunction

  task automatic check_regs();
    checks++;
    if (ppcr_lo !== s_ppcr_lo || ppcr_hi !== s_ppcr_hi || rar !== s_rar) begin
      failures++;
      $display("FAIL ppcr/rar %h %h %h vs %h %h %h", ppcr_lo, ppcr_hi, rar,
               s_ppcr_lo, s_ppcr_hi, s_rar);
    end
    for (int g = 0; g < N_SMAR; g++) begin
      checks++;
      if (smar_lo[g] !== s_lo[g] || smar_hi[g] !== s_hi[g] || smar_perm[g] !== s_perm[g]) begin
        failures++;
        $display("FAIL smar[%0d] %h %h %b vs %h %h %b", g, smar_lo[g], smar_hi[g],
                 smar_perm[g], s_lo[g], s_hi[g], s_perm[g]);
      end
    end
  endtask

  // one operation: compare the combinational outputs, clock, update the shadow
  task automatic op(input cfg_op_e o, input region_e r, input logic [7:0] sel,
                    input int idx, input logic [XLEN-1:0] wd, input logic [XLEN-1:0] ln,
                    input perm_t p, input logic commit, input logic hw_we,
                    input logic [XLEN-1:0] hw_wd);
    logic ill;
    logic [XLEN:0] sum;
    cfg_valid = 1; cfg_commit = commit; cfg_op = o; cfg_region = r; cfg_sel = sel;
    cfg_index = IDXW'(idx); cfg_wdata = wd; cfg_len = ln; cfg_perm = p;
    rar_we = hw_we; rar_wdata = hw_wd;
    #1;
    case (o)
      CFG_START, CFG_END: ill = (r == REGION_SECONDARY) || idx >= N_SMAR;
      CFG_READ:  ill = (r == REGION_SECONDARY) || !sel_valid(sel);
      default:   ill = !sel_valid(sel) ||
                       !(r == REGION_KERNEL || (r == REGION_PRIMARY && sel >= 8'h10));
    endcase
    checks++;
    if (cfg_illegal !== ill) begin
      failures++;
      $display("FAIL illegal op=%0d region=%0d sel=%h: %b expected %b", o, r, sel, cfg_illegal, ill);
    end
    // forwarded PPCR: the value after this edge
    checks++;
    if (ppcr_lo_next !== ((commit && !ill && o == CFG_WRITE && sel == 8'h00) ? wd : s_ppcr_lo) ||
        ppcr_hi_next !== ((commit && !ill && o == CFG_WRITE && sel == 8'h01) ? wd : s_ppcr_hi)) begin
      failures++; $display("FAIL ppcr forwarding %h %h", ppcr_lo_next, ppcr_hi_next);
    end
    if (o == CFG_READ && !ill) begin
      checks++;
      if (cfg_rdata !== shadow_read(sel)) begin
        failures++; $display("FAIL read sel=%h %h vs %h", sel, cfg_rdata, shadow_read(sel));
      end
    end
    @(posedge clk);
    if (hw_we) s_rar = hw_wd;
    if (commit && !ill) begin
      case (o)
        CFG_START: begin
          sum = {1'b0, wd} + {1'b0, ln};
          s_lo[idx] = wd; s_hi[idx] = sum[XLEN] ? '1 : sum[XLEN-1:0]; s_perm[idx] = p;
        end
        CFG_END: begin s_lo[idx] = '0; s_hi[idx] = '0; s_perm[idx] = PERM_NONE; end
        CFG_WRITE: begin
          if (sel == 8'h00) s_ppcr_lo = wd;
          else if (sel == 8'h01) s_ppcr_hi = wd;
          else if (sel == 8'h02) s_rar = wd;
          else begin
            int g;
            g = (sel - 8'h10) / 4;
            case (sel[1:0])
              2'd0: s_lo[g] = wd;
              2'd1: s_hi[g] = wd;
              default: s_perm[g] = wd[1:0];
            endcase
          end
        end
        default: ;
      endcase
    end
    #1;
    check_regs();
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_valid = 0; cfg_commit = 0; cfg_op = CFG_READ; cfg_region = REGION_KERNEL;
    cfg_sel = '0; cfg_index = '0; cfg_wdata = '0; cfg_len = '0; cfg_perm = '0;
    rar_we = 0; rar_wdata = '0;
    s_ppcr_lo = '0; s_ppcr_hi = '0; s_rar = '0;
    for (int g = 0; g < N_SMAR; g++) begin s_lo[g] = '0; s_hi[g] = '0; s_perm[g] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1 check_regs();

    // directed: loader sets PPCR, primary configures, secondary is refused
    op(CFG_WRITE, REGION_KERNEL, 8'h00, 0, 64'h1_0000, 0, 0, 1, 0, 0);
    op(CFG_WRITE, REGION_KERNEL, 8'h01, 0, 64'h1_2000, 0, 0, 1, 0, 0);
    op(CFG_WRITE, REGION_PRIMARY, 8'h01, 0, 64'hFFFF, 0, 0, 1, 0, 0);      // refused
    op(CFG_START, REGION_PRIMARY, 8'h00, 1, 64'h8000, 64'd100, PERM_RW, 1, 0, 0);
    checks++; if (smar_hi[1] != 64'h8064) begin failures++; $display("FAIL start_protect sum"); end
    op(CFG_START, REGION_SECONDARY, 8'h00, 1, 64'h0, 64'hFFFF_FFFF, PERM_RW, 1, 0, 0); // refused
    checks++; if (smar_lo[1] != 64'h8000) begin failures++; $display("FAIL secondary changed SMAR"); end
    op(CFG_START, REGION_PRIMARY, 8'h00, 2, 64'hFFFF_FFFF_FFFF_FF00, 64'h1000, PERM_R, 1, 0, 0);
    checks++; if (smar_hi[2] != '1) begin failures++; $display("FAIL saturation"); end
    op(CFG_END, REGION_PRIMARY, 8'h00, 1, 0, 0, 0, 1, 0, 0);
    checks++; if (smar_perm[1] != PERM_NONE) begin failures++; $display("FAIL end_protect"); end
    op(CFG_START, REGION_PRIMARY, 8'h00, 3, 64'h10, 64'h10, PERM_RW, 0, 1, 64'h1_0040); // no commit

    for (int n = 0; n < 20000; n++) begin
      logic [7:0] sel;
      sel = ($urandom_range(0, 1)) ? 8'($urandom_range(0, 3)) : 8'($urandom_range(16, 16 + 4 * N_SMAR + 3));
      op(cfg_op_e'($urandom_range(0, 3)), region_e'($urandom_range(0, 2)), sel,
         $urandom_range(0, N_SMAR - 1), {32'($urandom), 32'($urandom)},
         ($urandom_range(0, 7) == 0) ? 64'hFFFF_FFFF_FFFF_FFF0 : XLEN'($urandom_range(0, 4096)),
         perm_t'($urandom_range(0, 3)), 1'($urandom_range(0, 3) != 0),
         ($urandom_range(0, 7) == 0), XLEN'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
