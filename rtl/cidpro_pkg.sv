// cidpro_pkg -- types and constants shared by the CIDPro co-processor.
//
// The co-processor sits on a Rocket-style RoCC port. A custom instruction
// carries a 7-bit funct field; this design splits it into an operation code
// for the diversifying ALU (funct[6:3]) and the diversification level dl
// (funct[2:0]). An instruction with level dl completes after a pseudo-random
// 1..2^dl cycles. That funct selects both the operation and the random range
// follows the paper; the bit layout and the 3-bit level are this design's
// choice (levels 0..7 cover every level the paper evaluates, 2..6).
package cidpro_pkg;

  // Data width of the core's integer registers (RV64 Rocket).
  localparam int unsigned XLEN   = 64;
  // Widest diversification level; n = 2^dl ranges over 1..2^MAX_DL.
  localparam int unsigned MAX_DL = 7;
  // Width of the dl field in funct.
  localparam int unsigned DL_W   = 3;

  // Di-ALU operation codes held in funct[6:3].
  typedef enum logic [3:0] {
    OP_ADD = 4'd0,
    OP_MUL = 4'd1
  } alu_op_e;

  // funct layout: {op, dl}.
  typedef struct packed {
    alu_op_e         op;
    logic [DL_W-1:0] dl;
  } funct_t;

  // RoCC instruction word (R-type layout of the RISC-V custom opcodes).
  typedef struct packed {
    funct_t     funct;   // [31:25]
    logic [4:0] rs2;     // [24:20]
    logic [4:0] rs1;     // [19:15]
    logic       xd;      // [14]  instruction writes rd
    logic       xs1;     // [13]  rs1 is read
    logic       xs2;     // [12]  rs2 is read
    logic [4:0] rd;      // [11:7]
    logic [6:0] opcode;  // [6:0]
  } rocc_inst_t;

  // RISC-V custom-0 major opcode.
  localparam logic [6:0] OPC_CUSTOM0 = 7'b0001011;

endpackage
