// partaa_pkg - types and constants shared by the PaRTAA multiprocessor.
//
// Holds the machine sizes (four processors of three partitions, 32-bit data
// words, 16 registers per partition), the data-memory address split used by
// the memory-control unit, the memory map of the shared and protected
// regions, the instruction encoding of the AEro core and the NoC packet type.
//
// From the published architecture: 4 processors, 3 partitions, 32-bit data
// and processor-flag words, the 2-bit active-partition flag, the 10-bit
// partition flags, the 64-bit global clock and the shared-region addresses
// of clock_L, clock_H and the four processor-flag words (0x00, 0x04, 0x08,
// 0x12, 0x16, 0x20, taken literally as word offsets). Everything else here
// (address width, opcode values, instruction fields, NI register offsets,
// stack placement) is this implementation's own choice.
//
// Lint note: a module that imports the package uses only some of its
// constants, so linting one module reports the others as unused.
package partaa_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int N_PROC    = 4;             // processors
  localparam int N_PART    = 3;             // partitions per processor
  localparam int DATA_W    = 32;            // data word / register width
  localparam int N_REGS    = 16;            // registers per partition bank
  localparam int REG_AW    = $clog2(N_REGS);  // register index bits
  localparam int DMEM_AW   = 12;            // n: physical data address bits
  localparam int VADDR_W   = DMEM_AW - 1;   // address bits a partition sees
  localparam int OFF_W     = DMEM_AW - 2;   // offset inside one segment
  localparam int PC_W      = 10;            // per-partition program counter
  localparam int IMEM_AW   = PC_W + 2;      // {partition segment, pc}
  localparam int PFLAG_W   = 10;            // user flag bits per partition

  // The NoC: 4 routers with 3 NIs each, one transmission channel per NI.
  localparam int N_NI      = N_PROC * N_PART;
  localparam int NI_AW     = $clog2(N_NI);

  // ------------------------------------------------------ active partition
  // 2'b00 means that no partition executes (held); 2'b01..2'b11 are
  // partitions 1..3. The same code is the segment number the MCU puts on
  // the two MSBs of a protected-region address; segment 00 is shared.
  typedef logic [1:0] apf_t;

  // -------------------------------------------------------- shared region
  // Word offsets of the assistive hardware in the shared region.
  localparam logic [OFF_W-1:0] SH_CLOCK_L = OFF_W'('h00);
  localparam logic [OFF_W-1:0] SH_CLOCK_H = OFF_W'('h04);
  localparam logic [OFF_W-1:0] SH_PFLAG1  = OFF_W'('h08);
  localparam logic [OFF_W-1:0] SH_PFLAG2  = OFF_W'('h12);
  localparam logic [OFF_W-1:0] SH_PFLAG3  = OFF_W'('h16);
  localparam logic [OFF_W-1:0] SH_PFLAG4  = OFF_W'('h20);
  // UART sampling-port buffers, read-only, in the shared MM-IO band.
  localparam logic [OFF_W-1:0] SH_UART_BASE = OFF_W'('h30);
  localparam int               N_UART_SIG   = 8;
  // UART output samples: a write to SH_UART_TX + i queues signal i for
  // sending; a read returns this processor's pending bit.
  localparam logic [OFF_W-1:0] SH_UART_TX   = OFF_W'('h38);
  localparam int               N_UART_TX    = 8;

  // ----------------------------------------------------- protected region
  // Word offsets inside a partition's protected segment.
  localparam logic [OFF_W-1:0] PR_FLAG     = OFF_W'('h000); // write: flag
  localparam logic [OFF_W-1:0] PR_NI_DEST  = OFF_W'('h001); // NI dest id
  localparam logic [OFF_W-1:0] PR_NI_DATA  = OFF_W'('h002); // NI tx data
  localparam logic [OFF_W-1:0] PR_NI_STAT  = OFF_W'('h003); // NI fresh bits
  localparam logic [OFF_W-1:0] PR_NI_RX    = OFF_W'('h010); // +ch: rx buffer
  localparam logic [OFF_W-1:0] PR_STACK    = OFF_W'('h020); // stack base
  localparam int               STACK_DEPTH = 32;

  // ---------------------------------------------------- instruction set
  // 32-bit register-register instructions, no immediates:
  //   [31:26] opcode  [25:22] rd  [21:18] rs1  [17:14] rs2
  //   [10:0]  direct data address (LD, ST)
  //   [9:0]   branch / call target (JMP, BZ, BNZ, BN, CALL)
  typedef enum logic [5:0] {
    OP_NOP  = 6'd0,
    OP_ADD  = 6'd1,   // rd = rs1 + rs2          sets Z N C
    OP_SUB  = 6'd2,   // rd = rs1 - rs2          sets Z N C
    OP_AND  = 6'd3,
    OP_OR   = 6'd4,
    OP_XOR  = 6'd5,
    OP_SHL  = 6'd6,   // rd = rs1 << rs2[4:0]
    OP_SHR  = 6'd7,   // rd = rs1 >> rs2[4:0]
    OP_LD   = 6'd8,   // rd = mem[addr]
    OP_ST   = 6'd9,   // mem[addr] = rd
    OP_LDX  = 6'd10,  // rd = mem[rs1]
    OP_STX  = 6'd11,  // mem[rs1] = rs2
    OP_JMP  = 6'd12,
    OP_BZ   = 6'd13,  // branch if Z
    OP_BNZ  = 6'd14,  // branch if not Z
    OP_BN   = 6'd15,  // branch if N
    OP_CALL = 6'd16,  // push return address on the partition stack
    OP_RET  = 6'd17   // pc = top of the partition stack
  } opcode_t;

  // Branches resolve in E: the two instructions after a taken branch
  // (already in F and D) always execute.
  localparam int BRANCH_DELAY_SLOTS = 2;

  typedef struct packed {
    logic z;
    logic n;
    logic c;
  } alu_flags_t;

  // ---------------------------------------------------------- NoC packet
  typedef struct packed {
    logic [NI_AW-1:0]  dest;   // destination NI (router = dest / 3)
    logic [NI_AW-1:0]  src;    // channel id = transmitting NI
    logic [DATA_W-1:0] data;
  } pkt_t;

  // Helpers for building instructions (testbenches, program generators).
  function automatic logic [31:0] enc_r(opcode_t op, logic [3:0] rd, logic [3:0] rs1,
                                          logic [3:0] rs2);
    return {op, rd, rs1, rs2, 14'd0};
  endfunction
  function automatic logic [31:0] enc_m(opcode_t op, logic [3:0] r, logic [10:0] addr);
    return {op, r, 11'd0, addr};
  endfunction
  function automatic logic [31:0] enc_j(opcode_t op, logic [9:0] target);
    return {op, 16'd0, target};
  endfunction

endpackage
