// pulp_region_classify: ID-stage region decision of PULP.
//
// For the instruction in decode it decides which code region it belongs to:
// the kernel (any privilege above user mode), the primary function (user
// mode and PPCR lower <= PC < PPCR upper) or a secondary function (every
// other user-mode PC). From that and the instruction class it flags which
// EX-stage checks the instruction needs:
//   need_mem_check  a LOAD/STORE of a secondary function: its address is
//                   checked against the SMAR groups in EX;
//   need_cfi_check  a BRANCH/JUMP in user mode: the EX stage watches for a
//                   call from primary into secondary code (RAR is written)
//                   and for a transfer from secondary back into primary code
//                   (target compared with RAR).
// Kernel instructions and primary-function loads/stores need no check, as in
// the paper. Purely combinational; the result is registered into EX by the
// ID/EX register of pulp_unit.
//
// iclass.is_cfg is not needed here: a configuration instruction only needs
// its region, which is computed for every instruction.
//
// Design choice: the PPCR range is half-open (upper bound exclusive); an
// empty PPCR (lower >= upper, the reset state) makes all user code
// secondary.
module pulp_region_classify
  import pulp_pkg::*;
#(
  parameter int unsigned XLEN = 64
) (
  input  logic [XLEN-1:0] pc,
  input  priv_e           priv,
  input  iclass_t         iclass,
  input  logic [XLEN-1:0] ppcr_lo,
  input  logic [XLEN-1:0] ppcr_hi,
  output region_e         region,
  output logic            need_mem_check,
  output logic            need_cfi_check
);

  always_comb begin
    if (priv != PRIV_U)                       region = REGION_KERNEL;
    else if (pc >= ppcr_lo && pc < ppcr_hi)   region = REGION_PRIMARY;
    else                                      region = REGION_SECONDARY;

    need_mem_check = (region == REGION_SECONDARY) &&
                     (iclass.is_load || iclass.is_store);
    need_cfi_check = (region != REGION_KERNEL) &&
                     (iclass.is_branch || iclass.is_jump);
  end

endmodule
