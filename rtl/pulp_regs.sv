// pulp_regs: the PULP register block.
//
// Holds the three kinds of registers PULP adds to the core:
//   * one PPCR pair (primary program-counter range, lower and upper bound),
//   * N_SMAR SMAR groups (secondary memory address range: lower bound, upper
//     bound and a permission field),
//   * the RAR (return address register) used by the control-flow check.
//
// Configuration instructions arrive on the cfg_* port in the EX stage
// together with the code region of the issuing instruction; cfg_valid marks
// one in EX (its legality is reported while it waits), cfg_commit the cycle
// in which it completes and its write is applied:
//   CFG_START  start_protect(addr, len, cfg, index): SMAR[index].lo <= addr,
//              SMAR[index].hi <= addr + len, SMAR[index].perm <= cfg.
//   CFG_END    end_protect(index): clears group index (perm <= none), so the
//              group no longer grants anything.
//   CFG_READ / CFG_WRITE: access one register through the map of pulp_pkg,
//              used by the loader (PPCR) and by context-switch code.
// Rule 2 of the paper is enforced here: only the kernel may write PPCR (and,
// in this design, RAR); only the kernel or the primary function may touch
// the SMAR groups; a secondary function may execute no configuration
// instruction at all. A refused or malformed operation raises cfg_illegal in
// the same cycle and changes nothing.
//
// Timing: cfg_illegal and cfg_rdata are combinational from the cfg_* inputs;
// writes take effect at the next rising edge. ppcr_lo_next/ppcr_hi_next give
// the PPCR value after that edge, so that the instruction decoded behind a
// PPCR write is classified with the new range (a bypass). rar_we/rar_wdata is the
// hardware update from pulp_cfi_check; a configuration write to RAR in the
// same cycle wins (the two come from different instructions and cannot
// coincide in a single-issue pipeline).
//
// Design choices not given by the paper: reset clears everything (empty PPCR,
// all groups inactive, RAR = 0); the upper bound is exclusive and saturates at
// the top of the address space if addr + len overflows; the register map and
// the permission encoding (bit 0 read, bit 1 write) are this design's own.
module pulp_regs
  import pulp_pkg::*;
#(
  parameter int unsigned XLEN   = 64,
  parameter int unsigned N_SMAR = 4,
  localparam int unsigned IDXW  = (N_SMAR > 1) ? $clog2(N_SMAR) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,

  // configuration instruction (EX stage)
  input  logic                  cfg_valid,   // a configuration instruction is in EX
  input  logic                  cfg_commit,  // ... and completes this cycle
  input  cfg_op_e               cfg_op,
  input  region_e               cfg_region,
  input  logic [7:0]            cfg_sel,
  input  logic [IDXW-1:0]       cfg_index,
  input  logic [XLEN-1:0]       cfg_wdata,   // addr for CFG_START, data for CFG_WRITE
  input  logic [XLEN-1:0]       cfg_len,
  input  perm_t                 cfg_perm,
  output logic [XLEN-1:0]       cfg_rdata,
  output logic                  cfg_illegal,

  // hardware update of RAR (from the control-flow check)
  input  logic                  rar_we,
  input  logic [XLEN-1:0]       rar_wdata,

  // register contents
  output logic [XLEN-1:0]       ppcr_lo,
  output logic [XLEN-1:0]       ppcr_hi,
  output logic [XLEN-1:0]       ppcr_lo_next,  // PPCR after this edge
  output logic [XLEN-1:0]       ppcr_hi_next,
  output logic [N_SMAR-1:0][XLEN-1:0] smar_lo,
  output logic [N_SMAR-1:0][XLEN-1:0] smar_hi,
  output perm_t [N_SMAR-1:0]    smar_perm,
  output logic [XLEN-1:0]       rar
);

  // ---- decode of the register selector -----------------------------------
  logic            sel_ppcr, sel_rar, sel_smar, sel_ok;
  logic [IDXW-1:0] sel_grp;
  logic [1:0]      sel_fld;
  logic [7:0]      sel_off;

  always_comb begin
    sel_off  = cfg_sel - SEL_SMAR;
    sel_grp  = IDXW'(sel_off >> 2);
    sel_fld  = sel_off[1:0];
    sel_ppcr = (cfg_sel == SEL_PPCR_LO) || (cfg_sel == SEL_PPCR_HI);
    sel_rar  = (cfg_sel == SEL_RAR);
    sel_smar = (cfg_sel >= SEL_SMAR) && ({2'b00, sel_off[7:2]} < 8'(N_SMAR))
               && (sel_fld != 2'd3);
    sel_ok   = sel_ppcr || sel_rar || sel_smar;
  end

  // ---- Rule 2 --------------------------------------------------------------
  logic kernel, primary, idx_ok;
  always_comb begin
    kernel  = (cfg_region == REGION_KERNEL);
    primary = (cfg_region == REGION_PRIMARY);
    idx_ok  = ({{(32-IDXW){1'b0}}, cfg_index} < 32'(N_SMAR));
    cfg_illegal = 1'b0;
    if (cfg_valid) begin
      unique case (cfg_op)
        CFG_START, CFG_END: cfg_illegal = !(kernel || primary) || !idx_ok;
        CFG_READ:           cfg_illegal = !(kernel || primary) || !sel_ok;
        CFG_WRITE:          cfg_illegal = !sel_ok ||
                                          !(kernel || (primary && sel_smar));
        default:            cfg_illegal = 1'b1;
      endcase
    end
  end

  // ---- read data -----------------------------------------------------------
  always_comb begin
    cfg_rdata = '0;
    if (sel_ppcr)      cfg_rdata = cfg_sel[0] ? ppcr_hi : ppcr_lo;
    else if (sel_rar)  cfg_rdata = rar;
    else if (sel_smar) begin
      unique case (sel_fld)
        2'd0:    cfg_rdata = smar_lo[sel_grp];
        2'd1:    cfg_rdata = smar_hi[sel_grp];
        default: cfg_rdata = XLEN'(smar_perm[sel_grp]);
      endcase
    end
  end

  // ---- upper bound of start_protect: addr + len, saturating -----------------
  logic [XLEN:0]   sum;
  logic [XLEN-1:0] upper;
  always_comb begin
    sum   = {1'b0, cfg_wdata} + {1'b0, cfg_len};
    upper = sum[XLEN] ? '1 : sum[XLEN-1:0];
  end

  logic do_op;
  assign do_op = cfg_valid && cfg_commit && !cfg_illegal;

  // ---- PPCR forwarding: the value the registers hold after this edge, for
  // the ID-stage classification of the instruction entering EX with it
  always_comb begin
    ppcr_lo_next = ppcr_lo;
    ppcr_hi_next = ppcr_hi;
    if (do_op && cfg_op == CFG_WRITE && cfg_sel == SEL_PPCR_LO) ppcr_lo_next = cfg_wdata;
    if (do_op && cfg_op == CFG_WRITE && cfg_sel == SEL_PPCR_HI) ppcr_hi_next = cfg_wdata;
  end

  // ---- registers -----------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ppcr_lo   <= '0;
      ppcr_hi   <= '0;
      smar_lo   <= '0;
      smar_hi   <= '0;
      smar_perm <= '0;
      rar       <= '0;
    end else begin
      if (rar_we) rar <= rar_wdata;
      if (do_op) begin
        unique case (cfg_op)
          CFG_START: begin
            smar_lo[cfg_index]   <= cfg_wdata;
            smar_hi[cfg_index]   <= upper;
            smar_perm[cfg_index] <= cfg_perm;
          end
          CFG_END: begin
            smar_lo[cfg_index]   <= '0;
            smar_hi[cfg_index]   <= '0;
            smar_perm[cfg_index] <= PERM_NONE;
          end
          CFG_WRITE: begin
            if (cfg_sel == SEL_PPCR_LO)      ppcr_lo <= cfg_wdata;
            else if (cfg_sel == SEL_PPCR_HI) ppcr_hi <= cfg_wdata;
            else if (sel_rar)                rar     <= cfg_wdata;
            else begin
              unique case (sel_fld)
                2'd0:    smar_lo[sel_grp]   <= cfg_wdata;
                2'd1:    smar_hi[sel_grp]   <= cfg_wdata;
                default: smar_perm[sel_grp] <= cfg_wdata[PERM_W-1:0];
              endcase
            end
          end
          default: ;
        endcase
      end
    end
  end

endmodule
