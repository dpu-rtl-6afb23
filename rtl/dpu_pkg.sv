// dpu_pkg: types and constants shared by the DAG processing unit.
//
// The sizes follow the chip: 64 compute units (CUs), a 256KB global scratchpad
// split in 64 banks of 4KB, a 2KB local scratchpad per CU and a 32-entry 32b
// register file per PE. Instructions of the PE are 21 bits: an 18b compute
// field (3b opcode and three 5b register addresses) and 3 flow-control bits.
// The bit positions inside the instruction, the opcode numbering, the layout of
// the load/store address words and the memory depths are this design's own
// choices; the paper gives only the field widths.
package dpu_pkg;

  localparam int unsigned NUM_CU       = 64;
  localparam int unsigned WORD_W       = 32;
  localparam int unsigned NREGS        = 32;
  localparam int unsigned REG_AW       = 5;
  localparam int unsigned GBANK_WORDS  = 1024;   // 4KB of 32b words
  localparam int unsigned GBANK_AW     = 10;
  localparam int unsigned LOCAL_WORDS  = 512;    // 2KB of 32b words
  localparam int unsigned LOCAL_AW     = 9;
  localparam int unsigned INSTR_W      = 21;
  localparam int unsigned IMEM_DEPTH   = 1024;
  localparam int unsigned LDMEM_DEPTH  = 1024;
  localparam int unsigned STMEM_DEPTH  = 1024;

  // Arithmetic precision: one 32b, two 16b or four 8b lanes per word.
  typedef enum logic [1:0] {
    PREC_32 = 2'd0,
    PREC_16 = 2'd1,
    PREC_8  = 2'd2
  } prec_e;

  // 3b opcode of the compute field (Table 2 of the instruction set).
  typedef enum logic [2:0] {
    OP_ADD      = 3'd0,
    OP_MUL      = 3'd1,
    OP_MAX      = 3'd2,
    OP_MIN      = 3'd3,
    OP_GBARRIER = 3'd4,
    OP_LBARRIER = 3'd5,
    OP_SET_LDSL = 3'd6,   // set_ld_stream_len, 15b immediate
    OP_SET_PREC = 3'd7    // set_precision, immediate[1:0] is a prec_e
  } opcode_e;

  // One PE instruction: compute field in [20:3], flow control in [2:0].
  typedef struct packed {
    opcode_e           op;    // [20:18]
    logic [REG_AW-1:0] src1;  // [17:13]
    logic [REG_AW-1:0] src2;  // [12:8]
    logic [REG_AW-1:0] dst;   // [7:3]
    logic              ld0;   // [2] move one load-FIFO entry into the register file
    logic              ld1;   // [1] move a second load-FIFO entry
    logic              st;    // [0] push the arithmetic result onto the store FIFO
  } instr_t;

  // One entry of the load address memory.
  typedef struct packed {
    logic              global_sel;  // 1: global scratchpad, 0: local scratchpad
    logic [5:0]        bank;        // global bank (ignored for local loads)
    logic [GBANK_AW-1:0] addr;      // word address in the bank / local scratchpad
    logic [REG_AW-1:0] dst;         // destination register in the PE
  } ld_entry_t;                     // 22 bits

  // One entry of the store address memory. Global stores always go to the
  // CU's own bank (asymmetric crossbar), so no bank number is stored.
  typedef struct packed {
    logic                global_sel;
    logic [GBANK_AW-1:0] addr;
  } st_entry_t;                     // 11 bits

  // Load FIFO entry: loaded word and its destination register.
  typedef struct packed {
    logic [REG_AW-1:0] dst;
    logic [WORD_W-1:0] data;
  } ld_data_t;                      // 37 bits

  // Host programming port: which memory of which CU (or which global bank).
  typedef enum logic [2:0] {
    HSEL_IMEM   = 3'd0,
    HSEL_LDMEM  = 3'd1,
    HSEL_STMEM  = 3'd2,
    HSEL_LOCAL  = 3'd3,
    HSEL_GLOBAL = 3'd4,
    HSEL_PLEN   = 3'd5   // program length register of a CU
  } host_sel_e;

  // Exponent length of the custom posit for each precision (8b:2, 16b:4, 32b:6).
  function automatic int unsigned posit_es(input int unsigned n);
    return (n == 8) ? 2 : (n == 16) ? 4 : 6;
  endfunction

endpackage
