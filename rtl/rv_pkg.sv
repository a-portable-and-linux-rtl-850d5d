// rv_pkg: types and constants shared by the RVSoC blocks.
//
// It holds the RV32 opcode map, the ALU operation codes, the step
// encoding of the twelve-step RVCoreM state machine, the request and
// response structures that run between the core, the MMU and the cache,
// and the physical address map. The ISA encodings follow the RISC-V
// unprivileged and privileged specifications; the address map and the
// bus structures are choices of this design.
package rv_pkg;

  // ---------------------------------------------------------------- opcodes
  localparam logic [6:0] OP_LUI    = 7'b0110111;
  localparam logic [6:0] OP_AUIPC  = 7'b0010111;
  localparam logic [6:0] OP_JAL    = 7'b1101111;
  localparam logic [6:0] OP_JALR   = 7'b1100111;
  localparam logic [6:0] OP_BRANCH = 7'b1100011;
  localparam logic [6:0] OP_LOAD   = 7'b0000011;
  localparam logic [6:0] OP_STORE  = 7'b0100011;
  localparam logic [6:0] OP_IMM    = 7'b0010011;
  localparam logic [6:0] OP_OP     = 7'b0110011;
  localparam logic [6:0] OP_FENCE  = 7'b0001111;
  localparam logic [6:0] OP_SYSTEM = 7'b1110011;
  localparam logic [6:0] OP_AMO    = 7'b0101111;

  // ------------------------------------------------------------ ALU_I ops
  typedef enum logic [4:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU, ALU_XOR, ALU_SRL, ALU_SRA,
    ALU_OR, ALU_AND, ALU_MUL, ALU_MULH, ALU_MULHSU, ALU_MULHU, ALU_PASSB
  } alu_op_t;

  // ------------------------------------------------- RVCoreM twelve steps
  typedef enum logic [3:0] {
    S_INI, S_IF, S_CVT, S_ID, S_OF, S_EX1, S_LD, S_EX2, S_SD, S_WB, S_COM, S_FIN
  } step_t;

  // ------------------------------------------------------ access kinds
  typedef enum logic [1:0] { ACC_IF = 2'd0, ACC_LD = 2'd1, ACC_SD = 2'd2 } acc_t;

  // ---------------------------------------------------- privilege modes
  localparam logic [1:0] PRV_U = 2'd0;
  localparam logic [1:0] PRV_S = 2'd1;
  localparam logic [1:0] PRV_M = 2'd3;

  // ------------------------------------------------ exception cause codes
  localparam logic [31:0] EXC_INST_ILLEGAL  = 32'd2;
  localparam logic [31:0] EXC_BREAKPOINT    = 32'd3;
  localparam logic [31:0] EXC_ECALL_U       = 32'd8;
  localparam logic [31:0] EXC_INST_PF       = 32'd12;
  localparam logic [31:0] EXC_LOAD_PF       = 32'd13;
  localparam logic [31:0] EXC_STORE_PF      = 32'd15;

  // ------------------------------------------------------- CSR numbers
  localparam logic [11:0] CSR_SSTATUS  = 12'h100;
  localparam logic [11:0] CSR_SIE      = 12'h104;
  localparam logic [11:0] CSR_STVEC    = 12'h105;
  localparam logic [11:0] CSR_SCOUNTEREN = 12'h106;
  localparam logic [11:0] CSR_SSCRATCH = 12'h140;
  localparam logic [11:0] CSR_SEPC     = 12'h141;
  localparam logic [11:0] CSR_SCAUSE   = 12'h142;
  localparam logic [11:0] CSR_STVAL    = 12'h143;
  localparam logic [11:0] CSR_SIP      = 12'h144;
  localparam logic [11:0] CSR_SATP     = 12'h180;
  localparam logic [11:0] CSR_MSTATUS  = 12'h300;
  localparam logic [11:0] CSR_MISA     = 12'h301;
  localparam logic [11:0] CSR_MEDELEG  = 12'h302;
  localparam logic [11:0] CSR_MIDELEG  = 12'h303;
  localparam logic [11:0] CSR_MIE      = 12'h304;
  localparam logic [11:0] CSR_MTVEC    = 12'h305;
  localparam logic [11:0] CSR_MCOUNTEREN = 12'h306;
  localparam logic [11:0] CSR_MSCRATCH = 12'h340;
  localparam logic [11:0] CSR_MEPC     = 12'h341;
  localparam logic [11:0] CSR_MCAUSE   = 12'h342;
  localparam logic [11:0] CSR_MTVAL    = 12'h343;
  localparam logic [11:0] CSR_MIP      = 12'h344;
  localparam logic [11:0] CSR_MCYCLE   = 12'hB00;
  localparam logic [11:0] CSR_MINSTRET = 12'hB02;
  localparam logic [11:0] CSR_MCYCLEH  = 12'hB80;
  localparam logic [11:0] CSR_MINSTRETH= 12'hB82;
  localparam logic [11:0] CSR_CYCLE    = 12'hC00;
  localparam logic [11:0] CSR_INSTRET  = 12'hC02;
  localparam logic [11:0] CSR_CYCLEH   = 12'hC80;
  localparam logic [11:0] CSR_INSTRETH = 12'hC82;
  localparam logic [11:0] CSR_MHARTID  = 12'hF14;

  // ----------------------------------------------------- physical map
  // DRAM main memory 64 MB, the disk area (upper 64 MB of the DRAM) and
  // the two register blocks. RVuc's local memory is in its own space.
  localparam logic [31:0] PA_MEM_BASE     = 32'h8000_0000;
  localparam logic [31:0] PA_DISK_BASE    = 32'h9000_0000;
  localparam logic [31:0] PA_CONSOLE_BASE = 32'h4000_0000;
  localparam logic [31:0] PA_DISKREG_BASE = 32'h4000_1000;

  // Physical memory request: 4-byte word read/write (2-byte aligned for
  // reads), byte enables for writes.
  typedef struct packed {
    logic        valid;
    logic        we;
    logic [31:0] addr;
    logic [3:0]  be;
    logic [31:0] wdata;
  } mem_req_t;

  typedef struct packed {
    logic        ready;   // one-cycle strobe: request done, rdata valid
    logic [31:0] rdata;
  } mem_rsp_t;

  // Core to MMU: virtual request with its access kind.
  typedef struct packed {
    logic        valid;
    acc_t        kind;
    logic        we;
    logic [31:0] addr;
    logic [3:0]  be;
    logic [31:0] wdata;
  } core_req_t;

  typedef struct packed {
    logic        ready;   // request done (data valid, or fault)
    logic        fault;   // page fault
    logic [31:0] rdata;
  } core_rsp_t;

  // Cache to DRAM controller: one request word carried by the FIFO.
  typedef struct packed {
    logic         we;
    logic [26:0]  addr;   // DRAM byte address (128 MB)
    logic [15:0]  mask;   // byte enables within the 16-byte line
    logic [127:0] wdata;
  } dram_req_t;

endpackage
