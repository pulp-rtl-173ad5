// pulp_tb_pkg: program description shared by the pulp_unit testbenches.
//
// A test program is a queue of instructions as the host core would present
// them to the protection unit: PC, privilege, instruction class and the EX
// operands, together with the outcome worked out by hand when the program is
// written (the expected exception cause, and for register reads the expected
// value) and a tag naming the mechanism the instruction is meant to exercise.
// The helper functions append one instruction each; pulp_tb_runner plays the
// queue through the pipeline.
package pulp_tb_pkg;
  import pulp_pkg::*;

  typedef enum int {
    EV_NONE,
    EV_KERNEL_BYPASS,     // kernel access outside all groups, not checked
    EV_PRIMARY_BYPASS,    // primary access outside all groups, not checked
    EV_NO_GROUP_BYPASS,   // secondary access while no group is active
    EV_SEC_INBOUND,       // secondary access inside a group
    EV_OOB_LOAD,          // out-of-bound load refused
    EV_OOB_STORE,         // out-of-bound or read-only store refused
    EV_CALL,              // primary -> secondary jump, RAR written
    EV_GOOD_RET,          // secondary -> primary return to RAR
    EV_BAD_RET,           // return elsewhere: return-address error
    EV_CFG_OK,            // configuration instruction accepted
    EV_CFG_ILLEGAL,       // configuration refused by Rule 2
    EV_PPCR_FWD,          // instruction right behind a PPCR write sees the new range
    EV_STALL,             // cycles with stall
    EV_FLUSH,             // ID instructions flushed
    EV_KILL,              // EX instructions killed and replayed
    EV_COUNT
  } ev_e;

  typedef struct {
    logic [63:0] pc;
    priv_e       priv;
    iclass_t     cls;
    logic [63:0] addr;
    logic [1:0]  size;
    logic [63:0] target;
    logic        taken;
    logic [63:0] link;
    cfg_op_e     cfg_op;
    logic [7:0]  sel;
    int          idx;
    logic [63:0] wdata;
    logic [63:0] len;
    perm_t       perm;
    cause_e      exp;
    logic        chk_rdata;
    logic [63:0] exp_rdata;
    ev_e         tag;
  } instr_t;

  instr_t prog[$];

  function automatic instr_t blank(input logic [63:0] pc, input priv_e priv);
    instr_t i;
    i.pc = pc; i.priv = priv; i.cls = '0; i.addr = '0; i.size = '0;
    i.target = '0; i.taken = 1'b0; i.link = '0; i.cfg_op = CFG_READ; i.sel = '0;
    i.idx = 0; i.wdata = '0; i.len = '0; i.perm = PERM_NONE; i.exp = CAUSE_NONE;
    i.chk_rdata = 1'b0; i.exp_rdata = '0; i.tag = EV_NONE;
    return i;
  endfunction

  function automatic void ld(input logic [63:0] pc, input priv_e priv, input logic [63:0] a,
                             input logic [1:0] sz, input cause_e exp, input ev_e tag);
    instr_t i = blank(pc, priv);
    i.cls.is_load = 1'b1; i.addr = a; i.size = sz; i.exp = exp; i.tag = tag;
    prog.push_back(i);
  endfunction

  function automatic void st(input logic [63:0] pc, input priv_e priv, input logic [63:0] a,
                             input logic [1:0] sz, input cause_e exp, input ev_e tag);
    instr_t i = blank(pc, priv);
    i.cls.is_store = 1'b1; i.addr = a; i.size = sz; i.exp = exp; i.tag = tag;
    prog.push_back(i);
  endfunction

  function automatic void jmp(input logic [63:0] pc, input priv_e priv, input logic [63:0] tgt,
                              input cause_e exp, input ev_e tag);
    instr_t i = blank(pc, priv);
    i.cls.is_jump = 1'b1; i.target = tgt; i.taken = 1'b1; i.link = pc + 4;
    i.exp = exp; i.tag = tag;
    prog.push_back(i);
  endfunction

  function automatic void br(input logic [63:0] pc, input priv_e priv, input logic [63:0] tgt,
                             input logic taken, input cause_e exp, input ev_e tag);
    instr_t i = blank(pc, priv);
    i.cls.is_branch = 1'b1; i.target = tgt; i.taken = taken; i.exp = exp; i.tag = tag;
    prog.push_back(i);
  endfunction

  function automatic void alu(input logic [63:0] pc, input priv_e priv);
    prog.push_back(blank(pc, priv));
  endfunction

  function automatic void start_protect(input logic [63:0] pc, input priv_e priv,
                                        input logic [63:0] a, input logic [63:0] len,
                                        input perm_t perm, input int idx, input cause_e exp);
    instr_t i = blank(pc, priv);
    i.cls.is_cfg = 1'b1; i.cfg_op = CFG_START; i.wdata = a; i.len = len; i.perm = perm;
    i.idx = idx; i.exp = exp; i.tag = (exp == CAUSE_NONE) ? EV_CFG_OK : EV_CFG_ILLEGAL;
    prog.push_back(i);
  endfunction

  function automatic void end_protect(input logic [63:0] pc, input priv_e priv, input int idx,
                                      input cause_e exp);
    instr_t i = blank(pc, priv);
    i.cls.is_cfg = 1'b1; i.cfg_op = CFG_END; i.idx = idx; i.exp = exp;
    i.tag = (exp == CAUSE_NONE) ? EV_CFG_OK : EV_CFG_ILLEGAL;
    prog.push_back(i);
  endfunction

  function automatic void cfg_write(input logic [63:0] pc, input priv_e priv, input logic [7:0] sel,
                                    input logic [63:0] d, input cause_e exp);
    instr_t i = blank(pc, priv);
    i.cls.is_cfg = 1'b1; i.cfg_op = CFG_WRITE; i.sel = sel; i.wdata = d; i.exp = exp;
    i.tag = (exp == CAUSE_NONE) ? EV_CFG_OK : EV_CFG_ILLEGAL;
    prog.push_back(i);
  endfunction

  function automatic void cfg_read(input logic [63:0] pc, input priv_e priv, input logic [7:0] sel,
                                   input logic [63:0] expect_value, input cause_e exp);
    instr_t i = blank(pc, priv);
    i.cls.is_cfg = 1'b1; i.cfg_op = CFG_READ; i.sel = sel; i.exp = exp;
    i.chk_rdata = (exp == CAUSE_NONE); i.exp_rdata = expect_value;
    i.tag = (exp == CAUSE_NONE) ? EV_CFG_OK : EV_CFG_ILLEGAL;
    prog.push_back(i);
  endfunction

endpackage
