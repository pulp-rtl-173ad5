// pulp_unit: the PULP protection logic of a five-stage in-order pipeline.
//
// PULP lets one trusted code range of a user process (the primary function,
// PC inside the PPCR pair) run unchecked while every other user-mode code
// (secondary functions such as library calls) may only load and store inside
// the SMAR ranges that the primary function granted it, and may only return
// into the primary function at the address recorded in RAR when it was
// called. This module is everything PULP adds to the core:
//
//   ID  pulp_region_classify decides kernel / primary / secondary for the
//       decoded instruction and which checks it needs. It sees the PPCR
//       value written by a configuration instruction completing in EX in the
//       same cycle (forwarded), so no flush is needed after a PPCR write.
//   --  an ID/EX register carries that decision into EX. It advances when
//       stall = 0; flush turns the instruction leaving ID into a bubble;
//       ex_kill removes the instruction in EX even during a stall.
//   EX  pulp_bound_check checks the load/store address against the SMAR
//       groups; pulp_cfi_check writes RAR on a primary-to-secondary call and
//       checks a secondary-to-primary return against RAR; pulp_regs executes
//       configuration instructions and enforces who may write what.
//
// Interface to the host core. ID: id_valid, id_pc, id_priv, id_iclass (the
// core's decoder says what kind of instruction it is). EX: the effective
// address and access size of a load/store, the target, taken flag and link
// address of a branch/jump, and the operands of a configuration instruction.
// ex_kill tells that the EX instruction is being squashed by the core (an
// older trap or a redirect); it then has no effect and raises nothing.
//
// Timing: the checks add no cycle. exc_valid, exc_cause and exc_tval are
// combinational in the EX cycle of the offending instruction; mem_allow = 0
// in that cycle tells the core not to send the access to memory. State
// (RAR, SMAR, PPCR) changes at the edge where the EX instruction leaves EX
// (ex_valid && !stall && !ex_kill) and only if it raised no exception.
//
// The decoder's is_branch bit is not used here: ex_taken already says
// whether a branch transfers control. Assertions at the end state the
// interface rules (exceptions only for live instructions, a refused access
// never allowed to memory, a stalled instruction kept in EX).
//
// What follows the paper: the registers, the ID classification, the EX-stage
// checks and the two exceptions. This design's own choices: the exact port
// list, the cause codes, the stall/flush/kill handshake and the rule that a
// stalled instruction keeps its exception visible until it leaves EX.
module pulp_unit
  import pulp_pkg::*;
#(
  parameter int unsigned XLEN   = 64,
  parameter int unsigned N_SMAR = 4,
  localparam int unsigned IDXW  = (N_SMAR > 1) ? $clog2(N_SMAR) : 1
) (
  input  logic              clk,
  input  logic              rst_n,

  // pipeline control from the core
  input  logic              stall,      // hold the instruction in EX
  input  logic              flush,      // drop the instruction in ID

  // ID stage
  input  logic              id_valid,
  input  logic [XLEN-1:0]   id_pc,
  input  priv_e             id_priv,
  input  iclass_t           id_iclass,

  // EX stage operands
  input  logic              ex_kill,
  input  logic [XLEN-1:0]   ex_addr,    // load/store effective address
  input  logic [1:0]        ex_size,    // load/store size, 2^size bytes
  input  logic [XLEN-1:0]   ex_target,  // branch/jump target
  input  logic              ex_taken,   // branch outcome (ignored for jumps)
  input  logic [XLEN-1:0]   ex_link,    // return address of a jump
  input  cfg_op_e           ex_cfg_op,
  input  logic [7:0]        ex_cfg_sel,
  input  logic [IDXW-1:0]   ex_cfg_index,
  input  logic [XLEN-1:0]   ex_cfg_wdata,
  input  logic [XLEN-1:0]   ex_cfg_len,
  input  perm_t             ex_cfg_perm,

  // EX stage results
  output logic              ex_valid,
  output region_e           ex_region,
  output logic              mem_allow,  // the load/store may go to memory
  output logic [XLEN-1:0]   cfg_rdata,
  output logic              exc_valid,
  output cause_e            exc_cause,
  output logic [XLEN-1:0]   exc_tval,
  output logic [XLEN-1:0]   rar_out,
  output logic              ev_call,    // EX: a call into secondary code
  output logic              ev_return,  // EX: a return into primary code
  output logic [N_SMAR-1:0] smar_hit    // EX: SMAR groups covering the access
);

  // ---------------------------------------------------------------- ID ----
  logic [XLEN-1:0] ppcr_lo, ppcr_hi, ppcr_lo_next, ppcr_hi_next, rar;
  logic [N_SMAR-1:0][XLEN-1:0] smar_lo, smar_hi;
  perm_t [N_SMAR-1:0] smar_perm;

  region_e id_region;
  logic    id_need_mem, id_need_cfi;

  pulp_region_classify #(.XLEN(XLEN)) u_classify (
    .pc            (id_pc),
    .priv          (id_priv),
    .iclass        (id_iclass),
    .ppcr_lo       (ppcr_lo_next),
    .ppcr_hi       (ppcr_hi_next),
    .region        (id_region),
    .need_mem_check(id_need_mem),
    .need_cfi_check(id_need_cfi)
  );

  // ------------------------------------------------------------- ID/EX ----
  iclass_t ex_iclass;
  logic    ex_need_mem, ex_need_cfi;

  logic id_enter;   // the instruction in ID moves into EX at this edge
  assign id_enter = id_valid && !flush && !stall;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ex_valid    <= 1'b0;
      ex_region   <= REGION_KERNEL;
      ex_iclass   <= '0;
      ex_need_mem <= 1'b0;
      ex_need_cfi <= 1'b0;
    end else if (!stall || ex_kill) begin
      // a stalled instruction stays in EX unless the core kills it; an
      // instruction flushed in ID, or anything arriving during a stall,
      // enters EX as a bubble
      ex_valid    <= id_enter;
      ex_region   <= id_region;
      ex_iclass   <= id_enter ? id_iclass : '0;
      ex_need_mem <= id_enter && id_need_mem;
      ex_need_cfi <= id_enter && id_need_cfi;
    end
  end

  // ---------------------------------------------------------------- EX ----
  logic live;
  assign live = ex_valid && !ex_kill;

  logic [N_SMAR-1:0] bc_hit;
  logic bc_fault, bc_store;

  pulp_bound_check #(.XLEN(XLEN), .N_SMAR(N_SMAR)) u_bound (
    .check          (live && ex_need_mem),
    .is_load        (ex_iclass.is_load),
    .is_store       (ex_iclass.is_store),
    .addr           (ex_addr),
    .size           (ex_size),
    .smar_lo        (smar_lo),
    .smar_hi        (smar_hi),
    .smar_perm      (smar_perm),
    .hit            (bc_hit),
    .fault          (bc_fault),
    .cause_oob_store(bc_store)
  );

  logic cfi_rar_we, cfi_call, cfi_return, cfi_fault;
  logic [XLEN-1:0] cfi_rar_wdata;

  pulp_cfi_check #(.XLEN(XLEN)) u_cfi (
    .check    (live && ex_need_cfi),
    .region   (ex_region),
    .is_jump  (ex_iclass.is_jump),
    .taken    (ex_iclass.is_jump || ex_taken),
    .target   (ex_target),
    .link     (ex_link),
    .ppcr_lo  (ppcr_lo),
    .ppcr_hi  (ppcr_hi),
    .rar      (rar),
    .rar_we   (cfi_rar_we),
    .rar_wdata(cfi_rar_wdata),
    .is_call  (cfi_call),
    .is_return(cfi_return),
    .fault    (cfi_fault)
  );

  logic commit;   // the EX instruction leaves EX this cycle
  assign commit = live && !stall;

  logic cfg_illegal;

  pulp_regs #(.XLEN(XLEN), .N_SMAR(N_SMAR)) u_regs (
    .clk        (clk),
    .rst_n      (rst_n),
    .cfg_valid  (live && ex_iclass.is_cfg),
    .cfg_commit (commit),
    .cfg_op     (ex_cfg_op),
    .cfg_region (ex_region),
    .cfg_sel    (ex_cfg_sel),
    .cfg_index  (ex_cfg_index),
    .cfg_wdata  (ex_cfg_wdata),
    .cfg_len    (ex_cfg_len),
    .cfg_perm   (ex_cfg_perm),
    .cfg_rdata  (cfg_rdata),
    .cfg_illegal(cfg_illegal),
    .rar_we     (commit && cfi_rar_we),
    .rar_wdata  (cfi_rar_wdata),
    .ppcr_lo    (ppcr_lo),
    .ppcr_hi    (ppcr_hi),
    .ppcr_lo_next(ppcr_lo_next),
    .ppcr_hi_next(ppcr_hi_next),
    .smar_lo    (smar_lo),
    .smar_hi    (smar_hi),
    .smar_perm  (smar_perm),
    .rar        (rar)
  );

  always_comb begin
    exc_valid = 1'b0;
    exc_cause = CAUSE_NONE;
    exc_tval  = '0;
    if (live) begin
      if (cfg_illegal) begin
        exc_valid = 1'b1;
        exc_cause = CAUSE_ILLEGAL_CFG;
      end else if (bc_fault) begin
        exc_valid = 1'b1;
        exc_cause = bc_store ? CAUSE_OOB_STORE : CAUSE_OOB_LOAD;
        exc_tval  = ex_addr;
      end else if (cfi_fault) begin
        exc_valid = 1'b1;
        exc_cause = CAUSE_RET_ADDR;
        exc_tval  = ex_target;
      end
    end
    mem_allow = live && (ex_iclass.is_load || ex_iclass.is_store) && !bc_fault;
  end

  // ---- interface rules ------------------------------------------------------
  // an exception belongs to a live instruction, a refused access never
  // reaches memory, and a stalled instruction keeps its place in EX
  a_exc_live: assert property (@(posedge clk) disable iff (!rst_n)
                               exc_valid |-> live);
  a_oob_blocked: assert property (@(posedge clk) disable iff (!rst_n)
                                  (exc_valid && exc_cause inside {CAUSE_OOB_LOAD, CAUSE_OOB_STORE})
                                  |-> !mem_allow);
  a_stall_holds: assert property (@(posedge clk) disable iff (!rst_n)
                                  (stall && !ex_kill && ex_valid) |=> ex_valid);

  assign rar_out   = rar;
  assign ev_call   = cfi_call;
  assign ev_return = cfi_return;
  assign smar_hit  = bc_hit;

endmodule
