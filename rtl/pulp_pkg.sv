// pulp_pkg: types and constants shared by the PULP protection blocks.
//
// PULP splits a user process into one trusted "primary" code range (the PPCR
// pair) and untrusted "secondary" code (everything else in user mode). The
// types below describe the instruction classes the checks look at, the code
// region an instruction belongs to, the configuration operations, the
// exception causes and the register map used by kernel context-switch code.
//
// Following the paper: the three register kinds (PPCR, SMAR, RAR), the two
// exceptions (out-of-bound memory, return-address error) and the start/end
// protect operations. Design choices of this RTL: the privilege encoding
// (RISC-V U/S/M), the permission bits, the cause numbers (taken from the
// RISC-V custom cause range) and the register map.
package pulp_pkg;

  // RISC-V privilege levels; anything other than U is "kernel".
  typedef enum logic [1:0] {
    PRIV_U = 2'd0,
    PRIV_S = 2'd1,
    PRIV_H = 2'd2,
    PRIV_M = 2'd3
  } priv_e;

  // Code region of an instruction, decided in ID from its PC.
  typedef enum logic [1:0] {
    REGION_KERNEL    = 2'd0,
    REGION_PRIMARY   = 2'd1,
    REGION_SECONDARY = 2'd2
  } region_e;

  // Instruction class, as decoded by the host core in ID.
  typedef struct packed {
    logic is_load;
    logic is_store;
    logic is_branch;
    logic is_jump;   // JAL / JALR
    logic is_cfg;    // a PULP configuration instruction
  } iclass_t;

  // Configuration operations.
  //   CFG_START : start_protect(addr, len, cfg, index)
  //   CFG_END   : end_protect(index)
  //   CFG_READ / CFG_WRITE : register access through the register map
  typedef enum logic [1:0] {
    CFG_START = 2'd0,
    CFG_END   = 2'd1,
    CFG_READ  = 2'd2,
    CFG_WRITE = 2'd3
  } cfg_op_e;

  // SMAR permission bits (the "cfg" argument of start_protect).
  localparam int PERM_W = 2;
  typedef logic [PERM_W-1:0] perm_t;
  localparam perm_t PERM_NONE = 2'b00;
  localparam perm_t PERM_R    = 2'b01;
  localparam perm_t PERM_WR   = 2'b10;   // write only
  localparam perm_t PERM_RW   = 2'b11;

  // Register map, 8-bit selector for CFG_READ / CFG_WRITE.
  //   0x00 PPCR lower, 0x01 PPCR upper, 0x02 RAR
  //   0x10 + 4*i + {0,1,2} : SMAR group i lower, upper, cfg
  localparam logic [7:0] SEL_PPCR_LO = 8'h00;
  localparam logic [7:0] SEL_PPCR_HI = 8'h01;
  localparam logic [7:0] SEL_RAR     = 8'h02;
  localparam logic [7:0] SEL_SMAR    = 8'h10;

  // Exception causes (RISC-V mcause values; 24..31 are for custom use).
  typedef enum logic [5:0] {
    CAUSE_NONE        = 6'd0,
    CAUSE_ILLEGAL_CFG = 6'd2,    // illegal instruction: Rule 2 violated
    CAUSE_OOB_LOAD    = 6'd24,   // out-of-bound memory exception, load
    CAUSE_OOB_STORE   = 6'd25,   // out-of-bound memory exception, store
    CAUSE_RET_ADDR    = 6'd26    // return-address-error exception
  } cause_e;

endpackage
