// pulp_bound_check: EX-stage memory bound check of PULP.
//
// A load or store issued by a secondary function (check = 1) is legal only if
// some active SMAR group covers every byte it touches and grants the needed
// permission: lower <= addr and addr + bytes <= upper, read permission for a
// load, write permission for a store (both for an atomic read-modify-write).
// The groups are compared in parallel, one comparator pair per group.
// Otherwise the access is refused: fault = 1 in the same cycle, and the core
// must not send it to memory but raise the out-of-bound memory exception
// (cause_oob_store tells a store from a load).
//
// Checking is applied only while at least one SMAR group is active. The
// paper says both that "the secondary function could only access ranges the
// SMAR registers indicated" and that end_protect clears a group "so that
// PULP will not check the memory access range anymore"; this design follows
// the second for the case where no group is active at all, and the first
// whenever any group is.
//
// Design choices not given by the paper: the access size input (RISC-V
// encoding, 2^size bytes); the check of the last byte as well as the first;
// a group is active when its permission field is non-zero.
module pulp_bound_check
  import pulp_pkg::*;
#(
  parameter int unsigned XLEN   = 64,
  parameter int unsigned N_SMAR = 4
) (
  input  logic                        check,     // secondary LOAD/STORE in EX
  input  logic                        is_load,
  input  logic                        is_store,
  input  logic [XLEN-1:0]             addr,
  input  logic [1:0]                  size,      // 0:1, 1:2, 2:4, 3:8 bytes
  input  logic [N_SMAR-1:0][XLEN-1:0] smar_lo,
  input  logic [N_SMAR-1:0][XLEN-1:0] smar_hi,
  input  perm_t [N_SMAR-1:0]          smar_perm,
  output logic [N_SMAR-1:0]           hit,       // groups that allow the access
  output logic                        fault,
  output logic                        cause_oob_store
);

  logic [XLEN:0]   end_addr;   // one past the last byte, XLEN+1 bits
  logic            any_active;

  always_comb begin
    end_addr   = {1'b0, addr} + ((XLEN+1)'(1) << size);
    any_active = 1'b0;
    for (int i = 0; i < N_SMAR; i++) begin
      any_active |= (smar_perm[i] != PERM_NONE);
      hit[i] = (addr >= smar_lo[i]) &&
               (end_addr <= {1'b0, smar_hi[i]}) &&
               (!is_load  || smar_perm[i][0]) &&
               (!is_store || smar_perm[i][1]) &&
               (smar_perm[i] != PERM_NONE);
    end
    fault           = check && (is_load || is_store) && any_active && (hit == '0);
    cause_oob_store = is_store;
  end

endmodule
