// hisepq_pkg: shared constants and types of the quantum control processor.
//
// Holds the instruction opcodes, the field layout of the four target-register
// kinds, the operation word that travels from the quantum decoder through the
// op buffers to the per-qubit timed FIFOs, and the register-bus request used
// between the AXI4-Lite interface and the four memory-mapped slaves.
//
// The bit positions of SMSO, SMSOL, SITO and SITOL follow the published
// instruction formats. Every other opcode value and field position, the
// Q.Bundle layout and the address map are choices of this design.
package hisepq_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned TIME_W     = 32;   // central clock / time points
  localparam int unsigned PC_W       = 12;   // program RAM word address
  localparam int unsigned DADDR_W    = 10;   // data RAM word address
  localparam int unsigned QIDX_W     = 11;   // qubit index (16 windows x 100)
  localparam int unsigned OP_W       = 7;    // gate operation field of Q.Bundle
  localparam int unsigned MICRO_W    = 8;    // micro-code sent to the DAC side
  localparam int unsigned LMASK_W    = 100;  // SMSOL mask
  localparam int unsigned SMASK_W    = 8;    // SMSO mask
  localparam int unsigned IMM_W      = 7;    // immediate qubit index
  localparam int unsigned NPAIR      = 7;    // SITOL qubit pairs
  localparam int unsigned OFS_W      = 4;    // local offset

  // ---------------------------------------------------------------- opcodes
  // Bit 31 = 1 marks a Q.Bundle; otherwise bits [30:25] are the opcode and
  // opcode bit 5 marks a quantum instruction.
  typedef enum logic [5:0] {
    OPC_NOP    = 6'h00,
    OPC_CMP    = 6'h01,
    OPC_BR     = 6'h02,
    OPC_FBR    = 6'h03,
    OPC_LDI    = 6'h04,
    OPC_LDUI   = 6'h05,
    OPC_LW     = 6'h06,
    OPC_SW     = 6'h07,
    OPC_FMR    = 6'h08,
    OPC_AND    = 6'h09,
    OPC_OR     = 6'h0A,
    OPC_XOR    = 6'h0B,
    OPC_ADD    = 6'h0C,
    OPC_SUB    = 6'h0D,
    OPC_J      = 6'h0E,
    OPC_END    = 6'h0F,
    OPC_SRA    = 6'h10,
    OPC_FHR    = 6'h11,
    OPC_QWAIT  = 6'h20,
    OPC_QWAITR = 6'h21,
    OPC_SMSO   = 6'h22,
    OPC_SMSOL  = 6'h23,
    OPC_SITO   = 6'h24,
    OPC_SITOL  = 6'h25,
    OPC_QSET   = 6'h26
  } opcode_e;

  // Comparison flags set by CMP and tested by BR / read by FBR.
  typedef enum logic [3:0] {
    FL_ALWAYS = 4'd0, FL_NEVER = 4'd1, FL_EQ = 4'd2, FL_NE = 4'd3,
    FL_LT     = 4'd4, FL_GE    = 4'd5, FL_LTU = 4'd6, FL_GEU = 4'd7
  } flag_e;

  // Target-register kinds (also the 2-bit kind field of a Q.Bundle lane).
  typedef enum logic [1:0] {
    QK_SMASK = 2'd0,   // Sd    : 8-bit mask      (SMSO)
    QK_LMASK = 2'd1,   // Sd(l) : 100-bit mask    (SMSOL)
    QK_SPAIR = 2'd2,   // Td    : one pair        (SITO)
    QK_LPAIR = 2'd3    // Td(l) : up to 7 pairs   (SITOL)
  } qkind_e;

  // Payload of one target register. The widest kind (Td(l)) has
  // 7 valid bits + 98 index bits = 105 bits; SMSOL needs 100.
  localparam int unsigned QPAY_W = NPAIR + NPAIR*2*IMM_W;  // 105

  typedef struct packed {
    logic [OFS_W-1:0]  offset;
    logic [QPAY_W-1:0] pay;     // kind-specific, right aligned
  } qreg_t;

  // Write request to the Q-register file.
  typedef struct packed {
    logic               valid;
    logic               bitwr;    // QSet: write one payload bit
    qkind_e             kind;
    logic [4:0]         idx;
    logic [6:0]         bit_idx;
    logic               bit_val;
    qreg_t              data;
  } qreg_wr_t;

  // Gate-op LUT entry.
  typedef struct packed {
    logic               meas;     // operation is a measurement
    logic [MICRO_W-1:0] micro;
  } lut_ent_t;

  // Entry of a per-qubit timed FIFO.
  typedef struct packed {
    logic [TIME_W-1:0]  t;
    logic               meas;
    logic [1:0]         role;     // 01 source, 10 target, 11 single-qubit
    logic [MICRO_W-1:0] micro;
  } tq_ent_t;

  // Indicator encodings of the register decoder.
  localparam logic [1:0] IND_NONE = 2'b00;
  localparam logic [1:0] IND_SRC  = 2'b01;
  localparam logic [1:0] IND_TGT  = 2'b10;
  localparam logic [1:0] IND_SQ   = 2'b11;

  // ---------------------------------------------------------------- bus
  // Slave selection on address bits [15:14].
  typedef enum logic [1:0] {
    SL_CSR = 2'd0, SL_CFG = 2'd1, SL_PRAM = 2'd2, SL_DRAM = 2'd3
  } slave_e;

  typedef struct packed {
    logic        valid;
    logic        we;
    slave_e      sel;
    logic [11:0] addr;    // word address inside the slave
    logic [31:0] wdata;
  } bus_req_t;

  // Status reported by the core to the CSR slave.
  typedef struct packed {
    logic busy;
    logic done;
    logic err_conflict;
    logic err_miss;
    logic hist_overflow;
  } core_status_t;

  // Instruction handed from the dispatcher to the execute units.
  typedef struct packed {
    logic [127:0]    bits;   // long: bits[127:0]; short: bits[31:0]
    logic            is_long;
    logic [PC_W-1:0] pc;
  } instr_t;

  function automatic logic is_long_word(input logic [31:0] w);
    return !w[31] && (w[30:25] == OPC_SMSOL || w[30:25] == OPC_SITOL);
  endfunction

  function automatic logic is_quantum_word(input logic [31:0] w);
    return w[31] || w[30];
  endfunction

endpackage
