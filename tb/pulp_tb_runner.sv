// pulp_tb_runner: plays a pulp_tb_pkg program through pulp_unit.
//
// Instantiates pulp_unit with its default parameters and models the host
// pipeline around it: each cycle one instruction is offered to ID and the
// one in EX gets its operands. With random_ctl set it inserts random stalls,
// ID flushes and EX kills; a killed instruction is replayed, as after a
// redirect of the core. In every EX cycle of a live instruction it checks
// exc_valid, exc_cause and exc_tval against the expected outcome, mem_allow
// for loads/stores and cfg_rdata for register reads. When an instruction
// leaves EX its tag is counted in ev_count (EV_STALL, EV_FLUSH and EV_KILL
// count the pipeline events). A faulting instruction is simply retired: the
// kernel's reaction (ending the process) is outside the hardware.
// Handshake: raise go, wait for done, lower go. The unit is reset before the
// first run only, so a long program can be played in pieces (refill the
// queue between runs); checks, failures and ev_count accumulate, cycles
// counts the last run.
module pulp_tb_runner
  import pulp_pkg::*;
  import pulp_tb_pkg::*;
(
  input  logic clk,
  input  logic random_ctl,
  input  logic go,
  output logic done,
  output int   checks,
  output int   failures,
  output int   cycles,
  output int   ev_count [EV_COUNT]
);

  logic        rst_n;
  logic        stall, flush, id_valid, ex_kill, ex_taken;
  logic [63:0] id_pc, ex_addr, ex_target, ex_link, ex_cfg_wdata, ex_cfg_len;
  priv_e       id_priv;
  iclass_t     id_iclass;
  logic [1:0]  ex_size;
  cfg_op_e     ex_cfg_op;
  logic [7:0]  ex_cfg_sel;
  logic [1:0]  ex_cfg_index;
  perm_t       ex_cfg_perm;
  logic        ex_valid, mem_allow, exc_valid, ev_call, ev_return;
  region_e     ex_region;
  logic [63:0] cfg_rdata, exc_tval, rar_out;
  cause_e      exc_cause;
  logic [3:0]  smar_hit;

  pulp_unit dut (.*);

  task automatic drive_ex(input int e);
    instr_t x;
    if (e < 0) begin
      ex_addr = '0; ex_size = '0; ex_target = '0; ex_taken = 1'b0; ex_link = '0;
      ex_cfg_op = CFG_READ; ex_cfg_sel = '0; ex_cfg_index = '0; ex_cfg_wdata = '0;
      ex_cfg_len = '0; ex_cfg_perm = '0;
      return;
    end
    x = prog[e];
    ex_addr = x.addr; ex_size = x.size; ex_target = x.target; ex_taken = x.taken;
    ex_link = x.link; ex_cfg_op = x.cfg_op; ex_cfg_sel = x.sel;
    ex_cfg_index = 2'(x.idx); ex_cfg_wdata = x.wdata; ex_cfg_len = x.len;
    ex_cfg_perm = x.perm;
  endtask

  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("FAIL %s", msg);
  endtask

  initial begin
    int pi, ei, n;
    logic first;
    instr_t x;
    done = 1'b0; checks = 0; failures = 0; cycles = 0;
    foreach (ev_count[k]) ev_count[k] = 0;
    rst_n = 1'b0; stall = 1'b0; flush = 1'b0; id_valid = 1'b0; ex_kill = 1'b0;
    id_pc = '0; id_priv = PRIV_M; id_iclass = '0;
    drive_ex(-1);
    first = 1'b1;
    forever begin
      wait (go);
      if (first) begin
        repeat (2) @(posedge clk);
        #1 rst_n = 1'b1;
        first = 1'b0;
      end
      cycles = 0;
      n = prog.size();
      pi = 0; ei = -1;
      while (pi < n || ei >= 0) begin
        // ---- drive this cycle
        id_valid = (pi < n);
        if (pi < n) begin
          id_pc = prog[pi].pc; id_priv = prog[pi].priv; id_iclass = prog[pi].cls;
        end
        drive_ex(ei);
        // random disturbance, plus a fixed pattern so that each kind occurs
        stall   = random_ctl && ((cycles % 11 == 7) || ($urandom_range(0, 7) == 0));
        ex_kill = random_ctl && (ei >= 0) &&
                  ((cycles % 17 == 5) || ($urandom_range(0, 11) == 0));
        flush   = ex_kill || (random_ctl && id_valid &&
                              ((cycles % 13 == 3) || ($urandom_range(0, 9) == 0)));
        #1;
        // ---- check the instruction in EX
        checks++;
        if (ex_valid !== (ei >= 0)) fail($sformatf("ex_valid=%b, expected instr %0d", ex_valid, ei));
        if (ei >= 0 && !ex_kill) begin
          x = prog[ei];
          checks++;
          if (exc_valid !== (x.exp != CAUSE_NONE) || exc_cause !== x.exp)
            fail($sformatf("instr %0d pc=%h: exc=%b cause=%0d, expected %0d",
                           ei, x.pc, exc_valid, exc_cause, x.exp));
          if (x.exp == CAUSE_OOB_LOAD || x.exp == CAUSE_OOB_STORE) begin
            checks++;
            if (exc_tval !== x.addr || mem_allow !== 1'b0)
              fail($sformatf("instr %0d: tval=%h mem_allow=%b", ei, exc_tval, mem_allow));
          end else if (x.exp == CAUSE_RET_ADDR) begin
            checks++;
            if (exc_tval !== x.target) fail($sformatf("instr %0d: tval=%h", ei, exc_tval));
          end else if (x.cls.is_load || x.cls.is_store) begin
            checks++;
            if (mem_allow !== 1'b1) fail($sformatf("instr %0d: access blocked", ei));
          end
          if (x.chk_rdata) begin
            checks++;
            if (cfg_rdata !== x.exp_rdata)
              fail($sformatf("instr %0d: read %h, expected %h", ei, cfg_rdata, x.exp_rdata));
          end
          if (x.tag == EV_CALL) begin
            checks++;
            if (!ev_call) fail($sformatf("instr %0d: call not seen", ei));
          end
          if (x.tag == EV_GOOD_RET || x.tag == EV_BAD_RET) begin
            checks++;
            if (!ev_return) fail($sformatf("instr %0d: return not seen", ei));
          end
        end
        // ---- clock edge and bookkeeping
        @(posedge clk);
        cycles++;
        if (stall) ev_count[EV_STALL]++;
        if (ex_kill) begin
          ev_count[EV_KILL]++;
          pi = ei; ei = -1;                       // replay the killed instruction
        end else if (!stall) begin
          if (ei >= 0) begin
            ev_count[prog[ei].tag]++;
            if (prog[ei].tag == EV_CALL) begin
              #1;
              checks++;
              if (rar_out !== prog[ei].link) fail($sformatf("RAR=%h after call", rar_out));
            end
          end
          if (id_valid && flush) ev_count[EV_FLUSH]++;
          if (id_valid && !flush) begin ei = pi; pi++; end
          else ei = -1;
        end
        #1;
      end
      id_valid = 1'b0; stall = 1'b0; flush = 1'b0; ex_kill = 1'b0;
      done = 1'b1;
      wait (!go);
      done = 1'b0;
    end
  end

endmodule
