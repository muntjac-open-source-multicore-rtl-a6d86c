// Shared types and constants of the Muntjac-style RV64 SoC.
//
// Holds the decoded-instruction bundle passed from the decoder to the issue
// logic, the fetch bundle passed from the frontend to the backend, the
// redirect/training bundle passed back, and the TileLink channel structs
// (A, B, C, D, E) used by the caches, the broadcaster and the buses.
// XLEN is 64 as the paper states (RV64). The physical address width, bus
// width and line size are this design's own choices: 56-bit physical
// addresses (the Sv39 physical address size), a 64-bit TileLink data bus and
// 64-byte cache lines.
package muntjac_pkg;

  localparam int unsigned XLEN      = 64;
  localparam int unsigned PADDR_W   = 56;
  localparam int unsigned BUS_W     = 64;
  localparam int unsigned LINE_B    = 64;           // bytes per cache line
  localparam int unsigned BEATS     = LINE_B / (BUS_W / 8);
  localparam int unsigned SOURCE_W  = 4;
  localparam int unsigned SINK_W    = 2;

  // Memory map (this design's choice; CLINT and PLIC bases follow common
  // RISC-V platform practice).
  localparam logic [PADDR_W-1:0] ROM_BASE   = 56'h0000_0000_0001_0000;
  localparam logic [PADDR_W-1:0] ROM_MASK   = 56'h0000_0000_0000_FFFF;
  localparam logic [PADDR_W-1:0] CLINT_BASE = 56'h0000_0000_0200_0000;
  localparam logic [PADDR_W-1:0] PLIC_BASE  = 56'h0000_0000_0C00_0000;
  localparam logic [PADDR_W-1:0] MEM_BASE   = 56'h0000_0000_8000_0000;
  localparam logic [63:0]        RESET_PC   = 64'h0000_0000_0001_0000;

  function automatic logic is_mem_addr(logic [PADDR_W-1:0] a);
    return a >= MEM_BASE;
  endfunction
  function automatic logic is_rom_addr(logic [PADDR_W-1:0] a);
    return (a & ~ROM_MASK) == ROM_BASE;
  endfunction

  // ---------------------------------------------------------------- decode
  typedef enum logic [2:0] {
    FU_ALU, FU_BRANCH, FU_MEM, FU_MULDIV, FU_SYS
  } fu_e;

  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU, ALU_XOR, ALU_SRL, ALU_SRA,
    ALU_OR, ALU_AND, ALU_PASSB
  } alu_op_e;

  typedef enum logic [2:0] {
    BR_BEQ, BR_BNE, BR_BLT, BR_BGE, BR_BLTU, BR_BGEU, BR_JAL, BR_JALR
  } br_op_e;

  typedef enum logic [2:0] {
    MEM_LOAD, MEM_STORE, MEM_LR, MEM_SC, MEM_AMO
  } mem_op_e;

  typedef enum logic [3:0] {
    SYS_CSRRW, SYS_CSRRS, SYS_CSRRC, SYS_ECALL, SYS_EBREAK, SYS_MRET,
    SYS_WFI, SYS_FENCE, SYS_FENCE_I, SYS_ILLEGAL, SYS_INTERRUPT
  } sys_op_e;

  typedef struct packed {
    fu_e         fu;
    alu_op_e     alu_op;
    logic        op_a_pc;     // operand A is the PC (AUIPC)
    logic        op_b_imm;    // operand B is the immediate
    logic        word;        // *W instruction: 32-bit op, sign-extended
    br_op_e      br_op;
    mem_op_e     mem_op;
    logic [1:0]  mem_size;    // log2 bytes
    logic        mem_unsigned;
    logic [4:0]  amo_op;      // funct5 of AMO instructions
    logic [2:0]  md_op;       // funct3 of M-extension instructions
    sys_op_e     sys_op;
    logic [11:0] csr;
    logic        csr_imm;     // CSR*I form: rs1 field is a zero-extended immediate
    logic        use_rs1;
    logic        use_rs2;
    logic        wr_rd;
    logic [4:0]  rs1;
    logic [4:0]  rs2;
    logic [4:0]  rd;
    logic [63:0] imm;
  } decoded_t;

  // AMO funct5 encodings (RISC-V A extension)
  localparam logic [4:0] AMO_ADD  = 5'b00000, AMO_SWAP = 5'b00001,
                         AMO_LR   = 5'b00010, AMO_SC   = 5'b00011,
                         AMO_XOR  = 5'b00100, AMO_OR   = 5'b01000,
                         AMO_AND  = 5'b01100, AMO_MIN  = 5'b10000,
                         AMO_MAX  = 5'b10100, AMO_MINU = 5'b11000,
                         AMO_MAXU = 5'b11100;

  // ---------------------------------------------------------------- frontend
  typedef struct packed {
    logic [63:0] pc;
    logic [31:0] instr;       // a compressed instruction sits in [15:0]
    logic        compressed;
    logic [63:0] pred_npc;    // PC the frontend will fetch after this one
  } fetch_t;

  typedef enum logic [1:0] {
    CF_BRANCH, CF_JUMP, CF_CALL, CF_RET
  } cf_type_e;

  // Sent from the backend with every resolved control transfer.
  typedef struct packed {
    logic        valid;       // a branch or jump resolved
    logic [63:0] pc;          // its PC
    logic        compressed;
    cf_type_e    cf_type;
    logic        taken;
    logic [63:0] target;
  } train_t;

  // ---------------------------------------------------------------- TileLink
  typedef enum logic [2:0] {
    PutFullData = 3'd0, PutPartialData = 3'd1, ArithmeticData = 3'd2,
    LogicalData = 3'd3, Get = 3'd4, Intent = 3'd5, AcquireBlock = 3'd6,
    AcquirePerm = 3'd7
  } tl_a_op_e;

  typedef enum logic [2:0] {
    AccessAck = 3'd0, AccessAckData = 3'd1, HintAck = 3'd2, Grant = 3'd4,
    GrantData = 3'd5, ReleaseAck = 3'd6
  } tl_d_op_e;

  // Channel B and C opcodes used here
  localparam logic [2:0] TL_PROBE_BLOCK = 3'd6;
  localparam logic [2:0] TL_PROBE_ACK   = 3'd4;
  // Cap / shrink parameters
  localparam logic [2:0] TL_NtoB = 3'd0, TL_toN = 3'd2, TL_BtoN = 3'd1,
                         TL_NtoN = 3'd5, TL_toB = 3'd1;

  typedef struct packed {
    tl_a_op_e             opcode;
    logic [2:0]           param;
    logic [2:0]           size;
    logic [SOURCE_W-1:0]  source;
    logic [PADDR_W-1:0]   address;
    logic [BUS_W/8-1:0]   mask;
    logic [BUS_W-1:0]     data;
    logic                 lock;    // user bit: hold the manager for an atomic
  } tl_a_t;

  typedef struct packed {
    logic [2:0]           opcode;
    logic [2:0]           param;
    logic [2:0]           size;
    logic [SOURCE_W-1:0]  source;
    logic [PADDR_W-1:0]   address;
  } tl_b_t;

  typedef struct packed {
    logic [2:0]           opcode;
    logic [2:0]           param;
    logic [2:0]           size;
    logic [SOURCE_W-1:0]  source;
    logic [PADDR_W-1:0]   address;
  } tl_c_t;

  typedef struct packed {
    tl_d_op_e             opcode;
    logic [2:0]           param;
    logic [2:0]           size;
    logic [SOURCE_W-1:0]  source;
    logic [SINK_W-1:0]    sink;
    logic                 denied;
    logic [BUS_W-1:0]     data;
  } tl_d_t;

  typedef struct packed {
    logic [SINK_W-1:0]    sink;
  } tl_e_t;

  // Number of beats of a message carrying data of 2^size bytes
  function automatic int unsigned tl_beats(logic [2:0] size);
    return (size > 3'd3) ? (1 << (size - 3'd3)) : 1;
  endfunction

endpackage
