// aero_core - AEro partitioned 4-stage RISC pipeline (F, D, E, M).
//
// A statically scheduled, in-order core with three hardware partitions.
// Every piece of architectural and pipeline state is replicated once per
// partition: program counter, register bank (16 x 32 bit), ALU flags
// (Z, N, C), stack pointer and the F/D, D/E and E/M pipeline registers.
// The 2-bit active-partition flag from the SwCU selects one copy through a
// multiplexer; only that copy advances in a cycle, the other two stay
// frozen exactly as they were, with their in-flight instructions, until
// their partition is scheduled again. No instruction knows which partition
// it runs in, and switching costs no cycles. With apf = 00 nothing moves.
//
// Stages (of the active partition p):
//   F  fetch imem[{apf, pc[p]}], pc[p] <= pc[p]+1 or the branch target
//   D  decode, read the register bank (with write-through of M's result)
//   E  ALU and flags; branches, CALL and RET resolve here
//   M  load/store through the MCU, register write-back
// There are no interlocks and no forwarding into E: a result can be used by
// the second instruction after its producer (one slot in between). Taken
// branches, calls and returns have two delay slots (the instructions in F
// and D execute). Every instruction takes one slot, so execution time is
// a fixed function of the instruction path.
//
// Memory: LD/ST carry an 11-bit direct data address (bit 10: 1 protected,
// 0 shared), LDX/STX take it from a register. Data reads are combinational
// and complete in M. CALL pushes the return address (call + 3) through the
// stack port (the second port of the data memory) at PR_STACK + sp; the
// stack port otherwise always reads the top entry, which RET uses.
//
// From the paper: 32-bit words, four stages F/D/E/M, three partitions
// with replicated register banks, jump registers and control registers,
// the frozen state of inactive partitions, register-register ISA without
// immediates, a stack on the second data-memory port whose output defaults
// to the latest return address, and reset clearing registers and PCs. The
// paper does not publish the instruction set: opcodes, fields, the hazard
// rule and the delay slots are this design's own.
// Lint notes: only the PC_W low bits of the stack word are a return address,
// so s_rdata[31:10] is unused. rst_n also feeds the 'disable iff' of the
// assertion, which verilator reports as a net used both synchronously and
// asynchronously; the flip-flops themselves use it only asynchronously.
module aero_core
  import partaa_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [1:0]           apf,
  // instruction memory
  output logic [IMEM_AW-1:0]   imem_addr,
  input  logic [31:0]          imem_rdata,
  // data port (partition-visible address, mapped by the MCU outside)
  output logic                 d_re,
  output logic                 d_we,
  output logic [VADDR_W-1:0]   d_addr,
  output logic [DATA_W-1:0]    d_wdata,
  input  logic [DATA_W-1:0]    d_rdata,
  // stack port (offset inside the protected region)
  output logic                 s_we,
  output logic [OFF_W-1:0]     s_off,
  output logic [DATA_W-1:0]    s_wdata,
  input  logic [DATA_W-1:0]    s_rdata,
  // observation
  output logic                 retire,     // an instruction left M
  output logic                 br_taken    // a control transfer in E
);
  typedef struct packed {
    logic            v;
    logic [PC_W-1:0] pc;
    logic [31:0]     ir;
  } fd_t;

  typedef struct packed {
    logic               v;
    opcode_t            op;
    logic [REG_AW-1:0]  rd;
    logic [DATA_W-1:0]  a;
    logic [DATA_W-1:0]  b;
    logic [VADDR_W-1:0] addr;
    logic [PC_W-1:0]    pc;
    logic [PC_W-1:0]    tgt;
  } de_t;

  typedef struct packed {
    logic               v;
    opcode_t            op;
    logic [REG_AW-1:0]  rd;
    logic [DATA_W-1:0]  res;
    logic [VADDR_W-1:0] addr;
  } em_t;

  localparam int SP_W = $clog2(STACK_DEPTH);

  logic [PC_W-1:0]   pc  [N_PART];
  fd_t               fd  [N_PART];
  de_t               de  [N_PART];
  em_t               em  [N_PART];
  logic [DATA_W-1:0] rf  [N_PART][N_REGS];
  alu_flags_t        fl  [N_PART];
  logic [SP_W-1:0]   sp  [N_PART];

  logic       act;
  logic [1:0] p;
  assign act = (apf != 2'b00);
  assign p   = act ? (apf - 2'd1) : 2'd0;

  // ------------------------------------------------------------------ F
  assign imem_addr = {apf, pc[p]};

  // ------------------------------------------------------------------ M
  em_t               m;
  logic              m_wr;
  logic [DATA_W-1:0] m_val;
  assign m = em[p];
  always_comb begin
    d_re    = 1'b0;
    d_we    = 1'b0;
    d_addr  = m.addr;
    d_wdata = m.res;
    m_wr    = 1'b0;
    m_val   = m.res;
    if (act && m.v) begin
      unique case (m.op)
        OP_LD, OP_LDX: begin d_re = 1'b1; m_wr = 1'b1; m_val = d_rdata; end
        OP_ST, OP_STX: d_we = 1'b1;
        OP_ADD, OP_SUB, OP_AND, OP_OR, OP_XOR, OP_SHL, OP_SHR: m_wr = 1'b1;
        default: ;
      endcase
    end
  end
  assign retire = act && m.v;

  // ------------------------------------------------------------------ D
  fd_t               f;
  de_t               d_next;
  opcode_t           d_op;
  logic [REG_AW-1:0] d_rd, d_rs1, d_rs2, d_rb;
  logic [DATA_W-1:0] d_ra_val, d_rb_val;
  assign f     = fd[p];
  assign d_op  = opcode_t'(f.ir[31:26]);
  assign d_rd  = f.ir[25:22];
  assign d_rs1 = f.ir[21:18];
  assign d_rs2 = f.ir[17:14];
  assign d_rb  = (d_op == OP_ST) ? d_rd : d_rs2;

  always_comb begin
    d_ra_val = (m_wr && m.rd == d_rs1) ? m_val : rf[p][d_rs1];
    d_rb_val = (m_wr && m.rd == d_rb)  ? m_val : rf[p][d_rb];
    d_next      = '0;
    d_next.v    = f.v;
    d_next.op   = d_op;
    d_next.rd   = d_rd;
    d_next.a    = d_ra_val;
    d_next.b    = d_rb_val;
    d_next.pc   = f.pc;
    d_next.tgt  = f.ir[PC_W-1:0];
    d_next.addr = (d_op == OP_LDX || d_op == OP_STX) ? d_ra_val[VADDR_W-1:0]
                                                     : f.ir[VADDR_W-1:0];
  end

  // ------------------------------------------------------------------ E
  de_t               e;
  em_t               e_next;
  alu_flags_t        e_fl;
  logic              e_setfl;
  logic              e_taken;
  logic [PC_W-1:0]   e_tgt;
  logic [DATA_W:0]   e_sum;
  assign e = de[p];

  always_comb begin
    e_next      = '0;
    e_next.v    = e.v;
    e_next.op   = e.op;
    e_next.rd   = e.rd;
    e_next.addr = e.addr;
    e_next.res  = '0;
    e_sum       = '0;
    e_setfl     = 1'b0;
    e_fl        = fl[p];
    e_taken     = 1'b0;
    e_tgt       = e.tgt;
    s_we        = 1'b0;
    s_off       = PR_STACK + OFF_W'(sp[p]) - OFF_W'(1);  // top of stack
    s_wdata     = '0;
    if (e.v) begin
      unique case (e.op)
        OP_ADD: begin e_sum = {1'b0, e.a} + {1'b0, e.b}; e_next.res = e_sum[DATA_W-1:0]; e_setfl = 1'b1; end
        OP_SUB: begin e_sum = {1'b0, e.a} - {1'b0, e.b}; e_next.res = e_sum[DATA_W-1:0]; e_setfl = 1'b1; end
        OP_AND: begin e_next.res = e.a & e.b;          e_setfl = 1'b1; end
        OP_OR:  begin e_next.res = e.a | e.b;          e_setfl = 1'b1; end
        OP_XOR: begin e_next.res = e.a ^ e.b;          e_setfl = 1'b1; end
        OP_SHL: begin e_next.res = e.a << e.b[4:0];    e_setfl = 1'b1; end
        OP_SHR: begin e_next.res = e.a >> e.b[4:0];    e_setfl = 1'b1; end
        OP_ST:  e_next.res = e.b;
        OP_STX: e_next.res = e.b;
        OP_JMP: e_taken = 1'b1;
        OP_BZ:  e_taken = fl[p].z;
        OP_BNZ: e_taken = !fl[p].z;
        OP_BN:  e_taken = fl[p].n;
        OP_CALL: begin
          e_taken = 1'b1;
          s_we    = 1'b1;
          s_off   = PR_STACK + OFF_W'(sp[p]);
          s_wdata = DATA_W'(e.pc + PC_W'(BRANCH_DELAY_SLOTS + 1));
        end
        OP_RET: begin
          e_taken = 1'b1;
          e_tgt   = s_rdata[PC_W-1:0];
        end
        default: ;
      endcase
      if (e_setfl) begin
        e_fl.z = (e_next.res == '0);
        e_fl.n = e_next.res[DATA_W-1];
        e_fl.c = e_sum[DATA_W];
      end
    end
    if (!act) s_we = 1'b0;
  end
  assign br_taken = act && e_taken;

  // ------------------------------------------------------ state update
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_PART; i++) begin
        pc[i] <= '0;
        fd[i] <= '0;
        de[i] <= '0;
        em[i] <= '0;
        fl[i] <= '0;
        sp[i] <= '0;
        for (int r = 0; r < N_REGS; r++) rf[i][r] <= '0;
      end
    end else if (act) begin
      // F
      pc[p]    <= e_taken ? e_tgt : pc[p] + PC_W'(1);
      fd[p].v  <= 1'b1;
      fd[p].pc <= pc[p];
      fd[p].ir <= imem_rdata;
      // D, E
      de[p] <= d_next;
      em[p] <= e_next;
      fl[p] <= e_fl;
      if (e.v && e.op == OP_CALL) sp[p] <= sp[p] + SP_W'(1);
      if (e.v && e.op == OP_RET)  sp[p] <= sp[p] - SP_W'(1);
      // M
      if (m_wr) rf[p][m.rd] <= m_val;
    end
  end

  // An inactive flag code never reaches the data memory.
  assert property (@(posedge clk) disable iff (!rst_n) (d_we || d_re) |-> act);
endmodule
