// hpm_pkg: types and constants shared by the pipeline and its synchronous
// performance monitor.
//
// The central type is events_t, the "triggered events" vector. Every
// instruction (and every bubble) carries one through the inter-stage
// registers; bit k is set by the stage that detects event k and is counted
// only after the instruction has left the write-back stage. The bit order is
// the counter order of the event table: bit 0 cycle, bit 1 unused (the slot
// of the time counter, which is not part of the monitor), bit 2 retired
// instruction, bits 3..13 the platform events programmed by default into
// mhpmcounter3..13.
//
// The pipeline register payloads (ifid_t, idex_t, exmem_t, memwb_t), the ALU
// operation encoding and the CSR address map are also defined here; those
// follow the RISC-V base ISA and privileged specification, the struct
// layouts are this implementation's own.
package hpm_pkg;

  // ---------------------------------------------------------------- events
  localparam int unsigned NUM_EVENTS = 14;
  typedef logic [NUM_EVENTS-1:0] events_t;

  typedef enum logic [3:0] {
    EV_CYCLE       = 4'd0,
    EV_TIME        = 4'd1,   // reserved slot, never set
    EV_INSTRET     = 4'd2,
    EV_EXCEPTION   = 4'd3,
    EV_EXT_INT     = 4'd4,
    EV_TIME_INT    = 4'd5,
    EV_BRANCH      = 4'd6,   // conditional branch taken
    EV_BRANCH_NT   = 4'd7,   // conditional branch not taken
    EV_UNCOND_JUMP = 4'd8,   // JAL / JALR
    EV_HAZARD      = 4'd9,   // bubble inserted by the hazard unit
    EV_MEM_ACCESS  = 4'd10,  // any load or store through MEM
    EV_LOAD        = 4'd11,
    EV_STORE       = 4'd12,
    EV_FETCH       = 4'd13
  } hpm_event_e;

  // -------------------------------------------------------------- ALU ops
  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU, ALU_XOR,
    ALU_SRL, ALU_SRA, ALU_OR, ALU_AND, ALU_PASSB
  } alu_op_e;

  typedef enum logic [1:0] { OPA_RS1, OPA_PC, OPA_ZERO } opa_sel_e;

  typedef enum logic [1:0] { CSR_NONE, CSR_RW, CSR_RS, CSR_RC } csr_op_e;

  // --------------------------------------------------------- trap causes
  localparam logic [31:0] CAUSE_ILLEGAL   = 32'd2;
  localparam logic [31:0] CAUSE_BREAK     = 32'd3;
  localparam logic [31:0] CAUSE_ECALL_U   = 32'd8;
  localparam logic [31:0] CAUSE_ECALL_M   = 32'd11;
  localparam logic [31:0] CAUSE_MTI       = 32'h8000_0007;
  localparam logic [31:0] CAUSE_MEI       = 32'h8000_000B;

  // ------------------------------------------------------- CSR addresses
  localparam logic [11:0] CSR_MSTATUS       = 12'h300;
  localparam logic [11:0] CSR_MISA          = 12'h301;
  localparam logic [11:0] CSR_MIE           = 12'h304;
  localparam logic [11:0] CSR_MTVEC         = 12'h305;
  localparam logic [11:0] CSR_MCOUNTEREN    = 12'h306;
  localparam logic [11:0] CSR_MCOUNTINHIBIT = 12'h320;
  localparam logic [11:0] CSR_MHPMEVENT0    = 12'h320; // +n for mhpmevent n (3..31)
  localparam logic [11:0] CSR_MSCRATCH      = 12'h340;
  localparam logic [11:0] CSR_MEPC          = 12'h341;
  localparam logic [11:0] CSR_MCAUSE        = 12'h342;
  localparam logic [11:0] CSR_MTVAL         = 12'h343;
  localparam logic [11:0] CSR_MIP           = 12'h344;
  localparam logic [11:0] CSR_MCOUNTER0     = 12'hB00; // mcycle, -, minstret, mhpmcounter3..
  localparam logic [11:0] CSR_MCOUNTERH0    = 12'hB80;
  localparam logic [11:0] CSR_UCOUNTER0     = 12'hC00; // cycle, time, instret, hpmcounter3..
  localparam logic [11:0] CSR_UCOUNTERH0    = 12'hC80;
  localparam logic [11:0] CSR_MHARTID       = 12'hF14;

  typedef enum logic { PRIV_U = 1'b0, PRIV_M = 1'b1 } priv_e;

  // ------------------------------------------------- inter-stage payloads
  // The valid bit and the triggered-events vector of each slot are kept by
  // stage_reg beside these payloads.
  typedef struct packed {
    logic [31:0] pc;
    logic [31:0] instr;
  } ifid_t;

  typedef struct packed {
    logic [31:0] pc;
    alu_op_e     alu_op;
    opa_sel_e    opa_sel;
    logic        opb_imm;    // operand B is the immediate
    logic [4:0]  rs1;
    logic [4:0]  rs2;
    logic [4:0]  rd;
    logic        use_rs1;
    logic        use_rs2;
    logic [31:0] rs1_val;
    logic [31:0] rs2_val;
    logic [31:0] imm;
    logic        reg_we;
    logic        is_branch;
    logic        is_jal;
    logic        is_jalr;
    logic        is_load;
    logic        is_store;
    logic [2:0]  funct3;
    csr_op_e     csr_op;
    logic [11:0] csr_addr;
    logic        csr_wr;     // the CSR instruction writes the CSR
    logic [31:0] csr_src;    // rs1 value or zero-extended uimm
    logic        is_mret;
    logic        trap;       // exception or interrupt attached to this slot
    logic [31:0] cause;
    logic [31:0] tval;
  } idex_t;

  typedef struct packed {
    logic [31:0] pc;
    logic [4:0]  rd;
    logic        reg_we;
    logic [31:0] result;     // ALU result / link address / memory address
    logic [31:0] store_data;
    logic        is_load;
    logic        is_store;
    logic [2:0]  funct3;
    csr_op_e     csr_op;
    logic [11:0] csr_addr;
    logic        csr_wr;
    logic [31:0] csr_src;
    logic        is_mret;
    logic        trap;
    logic [31:0] cause;
    logic [31:0] tval;
  } exmem_t;

  typedef struct packed {
    logic [31:0] pc;
    logic [4:0]  rd;
    logic        reg_we;
    logic [31:0] wdata;      // ALU or load result (CSR result comes from the CSR unit)
    csr_op_e     csr_op;
    logic [11:0] csr_addr;
    logic        csr_wr;
    logic [31:0] csr_src;
    logic        is_mret;
    logic        trap;
    logic [31:0] cause;
    logic [31:0] tval;
  } memwb_t;

  // Event vector of a freshly fetched instruction: cycle, presumed
  // retirement and fetch (first row of the worked example).
  localparam events_t EV_FETCHED = events_t'((1 << EV_CYCLE) | (1 << EV_INSTRET) | (1 << EV_FETCH));

endpackage
