// pulp_cfi_check: EX-stage return-address check of PULP (the RAR logic).
//
// For a taken branch or jump of user code (check = 1) the target PC is
// classified against the PPCR range the same way as in ID:
//   * a jump from the primary function into secondary code is a call of a
//     secondary function: its return address (link, the PC of the next
//     instruction, supplied by the core) is written into RAR;
//   * a taken branch or jump from secondary code into the primary function is
//     a return: the target must equal RAR, otherwise fault = 1 and the core
//     raises the return-address-error exception instead of redirecting.
// Transfers inside one region are not checked. rar_wdata is the link input
// itself; it is an output so that the RAR write port of pulp_regs is fed
// from one place. Combinational; the RAR write
// is applied by pulp_regs at the next edge when the core lets the
// instruction complete.
//
// Design choices not given by the paper: only jumps (JAL/JALR) write RAR, a
// conditional branch from primary into secondary code does not; the return
// check covers every kind of transfer, so a branch cannot be used to bypass
// it.
module pulp_cfi_check
  import pulp_pkg::*;
#(
  parameter int unsigned XLEN = 64
) (
  input  logic            check,      // user-mode branch/jump in EX
  input  region_e         region,     // region of the branch/jump itself
  input  logic            is_jump,
  input  logic            taken,      // 1 for jumps, branch outcome otherwise
  input  logic [XLEN-1:0] target,
  input  logic [XLEN-1:0] link,       // return address of a call
  input  logic [XLEN-1:0] ppcr_lo,
  input  logic [XLEN-1:0] ppcr_hi,
  input  logic [XLEN-1:0] rar,
  output logic            rar_we,
  output logic [XLEN-1:0] rar_wdata,
  output logic            is_call,
  output logic            is_return,
  output logic            fault
);

  logic tgt_primary;

  always_comb begin
    tgt_primary = (target >= ppcr_lo) && (target < ppcr_hi);
    is_call     = check && taken && is_jump &&
                  (region == REGION_PRIMARY) && !tgt_primary;
    is_return   = check && taken &&
                  (region == REGION_SECONDARY) && tgt_primary;
    fault       = is_return && (target != rar);
    rar_we      = is_call;
    rar_wdata   = link;
  end

endmodule
