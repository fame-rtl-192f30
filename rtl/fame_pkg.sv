// fame_pkg: constants and types shared by the FAME accelerator RTL.
//
// Coefficients are 54-bit RNS residues (one limb coefficient per lane);
// the Barrett constant mu = floor(2^108 / q) needs 55 bits for a modulus
// q in [2^53, 2^54). The PE instruction word (instr_t) and its opcode and
// ALU-operation encodings are this design's own: the accelerator is driven
// by a host that streams one instruction word per PE.
// Lint note: ALU_LAT is not used by the RTL itself (mod_alu's depth
// follows from MUL_LAT); it names the latency for the engines' comments and
// the testbenches.
package fame_pkg;

  localparam int unsigned COEFF_W = 54;          // log q, RNS prime width
  localparam int unsigned MU_W    = COEFF_W + 1; // Barrett constant width
  localparam int unsigned MUL_LAT = 4;           // barrett_mul pipeline depth
  localparam int unsigned ALU_LAT = MUL_LAT + 1; // mod_alu pipeline depth
  localparam int unsigned NBANKS  = 4;           // scratchpad banks per PE
  localparam int unsigned HBM_W   = 256;         // AXI / FIFO data width

  typedef logic [COEFF_W-1:0] coeff_t;
  typedef logic [MU_W-1:0]    mu_t;

  // Operation of one modular ALU: out = f(a, b, c)
  typedef enum logic [2:0] {
    ALU_ADD = 3'd0,  // a + b
    ALU_SUB = 3'd1,  // a - b
    ALU_MUL = 3'd2,  // a * b
    ALU_MAC = 3'd3,  // c + a * b
    ALU_MSB = 3'd4   // c - a * b
  } alu_op_e;

  typedef enum logic [3:0] {
    OP_NOP   = 4'd0,
    OP_SETQ  = 4'd1,  // load modulus q and Barrett constant mu
    OP_ALU   = 4'd2,  // element-wise modular operation over len rows
    OP_PERM  = 4'd3,  // permute one limb (N/dp rows) through the SPN
    OP_LOAD  = 4'd4,  // rows from the HBM read lanes into a bank
    OP_STORE = 4'd5,  // rows from a bank to the HBM write lanes
    OP_SEND  = 4'd6,  // rows from a bank onto the inter-PE bus
    OP_RECV  = 4'd7,  // rows from the inter-PE bus into a bank
    OP_SYNC  = 4'd8   // wait until every engine of the PE is idle
  } opcode_e;

  typedef struct packed {
    opcode_e      op;
    alu_op_e      aop;
    logic [1:0]   bank_a;   // source A (ALU a, PERM/STORE/SEND source)
    logic [1:0]   bank_b;   // source B (ALU b)
    logic [1:0]   bank_c;   // source C (ALU c for MAC/MSB)
    logic [1:0]   bank_d;   // destination
    logic [15:0]  addr_a;
    logic [15:0]  addr_b;
    logic [15:0]  addr_c;
    logic [15:0]  addr_d;
    logic [15:0]  len;      // rows of dp coefficients
    logic [3:0]   sched;    // permutation schedule number
    logic [3:0]   peer;     // destination PE of SEND
    coeff_t       q;
    mu_t          mu;
  } instr_t;

  // Engines inside a PE
  typedef enum logic [1:0] {
    ENG_ALU  = 2'd0,
    ENG_PERM = 2'd1,
    ENG_HBM  = 2'd2,
    ENG_BUS  = 2'd3
  } engine_e;

endpackage
