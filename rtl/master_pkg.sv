// master_pkg -- types and constants shared by the MASTER accelerator.
//
// MASTER is a processing-in-memory accelerator built from spintronic (MTJ)
// computational-RAM tiles. Every instruction is 64 bits wide and has one of
// three forms: a logic operation (opcode, tile, two or three row addresses),
// a memory operation (opcode, tile, one row address) or an Activate Columns
// instruction (opcode, tile, one to five column addresses). The field widths
// follow the paper: opcode 4 bits, tile address 9 bits, row and column
// addresses 10 bits each. The paper does not print bit positions or opcode
// values; here the fields are packed from the MSB down in the order they are
// drawn (opcode in [63:60], tile in [59:51], address k in
// [50-10k+10 : 41-10k+10]), bit 0 is unused, and the opcode values below are
// this design's own choice.
package master_pkg;

  localparam int unsigned INSTR_W = 64;  // instruction width
  localparam int unsigned OPC_W   = 4;   // opcode width
  localparam int unsigned TILE_W  = 9;   // tile address width
  localparam int unsigned ADDR_W  = 10;  // row / column address width
  localparam int unsigned N_ADDR  = 5;   // address slots in one instruction

  // Reserved tile addresses (this design's choice): all-ones addresses every
  // data tile at once; the one below it is the sensor's input buffer, which
  // the system treats as one more (read-only) tile.
  localparam logic [TILE_W-1:0] TILE_BCAST  = '1;
  localparam logic [TILE_W-1:0] TILE_SENSOR = TILE_BCAST - 1'b1;

  typedef enum logic [OPC_W-1:0] {
    OP_READ     = 4'h0,  // memory: row of tile -> line buffer
    OP_WRITE    = 4'h1,  // memory: line buffer -> row, active columns only
    OP_PRESET0  = 4'h2,  // memory: write 0 into row, active columns only
    OP_PRESET1  = 4'h3,  // memory: write 1 into row, active columns only
    OP_ACT_LIST = 4'h4,  // activate the listed columns (1..5, repeats allowed)
    OP_ACT_RNG  = 4'h5,  // bulk activate: col1..col2 in steps of col3 (0 = 1)
    OP_RSVD6    = 4'h6,  // reserved, no operation
    OP_RSVD7    = 4'h7,  // reserved, no operation
    OP_NAND     = 4'h8,  // logic: m = NAND(n1, n2)  (STT preset 0)
    OP_AND      = 4'h9,  // logic: m = AND(n1, n2)   (STT preset 1)
    OP_NOR      = 4'hA,  // logic: m = NOR(n1, n2)   (STT preset 0)
    OP_OR       = 4'hB,  // logic: m = OR(n1, n2)    (STT preset 1)
    OP_NOT      = 4'hC,  // logic: m = NOT(n1)       (STT preset 0)
    OP_COPY     = 4'hD,  // logic: m = n1            (STT preset 1)
    OP_RSVDE    = 4'hE,  // reserved, no operation
    OP_RSVDF    = 4'hF   // reserved, no operation
  } opcode_e;

  typedef enum logic [1:0] {
    CLS_MEMORY = 2'd0,
    CLS_LOGIC  = 2'd1,
    CLS_ACT    = 2'd2,
    CLS_NONE   = 2'd3
  } iclass_e;

  // Decoded instruction, as the memory controller broadcasts it to the tiles.
  typedef struct packed {
    logic                          valid;  // one-cycle issue strobe
    opcode_e                       op;
    logic [TILE_W-1:0]             tile;
    logic [N_ADDR-1:0][ADDR_W-1:0] addr;   // addr[0] is Row/Col Address 1
  } cmd_t;

  function automatic iclass_e op_class(opcode_e op);
    unique case (op)
      OP_READ, OP_WRITE, OP_PRESET0, OP_PRESET1:  return CLS_MEMORY;
      OP_ACT_LIST, OP_ACT_RNG:                    return CLS_ACT;
      OP_NAND, OP_AND, OP_NOR, OP_OR,
      OP_NOT, OP_COPY:                            return CLS_LOGIC;
      default:                                    return CLS_NONE;
    endcase
  endfunction

  // Single-input logic gates use Row Address 1 as input and Row Address 2 as
  // output; two-input gates use rows 1 and 2 as inputs and row 3 as output.
  function automatic logic op_one_input(opcode_e op);
    return (op == OP_NOT) || (op == OP_COPY);
  endfunction

  // Number of addresses an instruction carries. The tile spends one decode
  // step per address, which is why instructions differ in latency.
  function automatic int unsigned op_n_addr(opcode_e op);
    unique case (op)
      OP_READ, OP_WRITE, OP_PRESET0, OP_PRESET1: return 1;
      OP_NOT, OP_COPY:                           return 2;
      OP_NAND, OP_AND, OP_NOR, OP_OR:            return 3;
      OP_ACT_RNG:                                return 3;
      OP_ACT_LIST:                               return 5;
      default:                                   return 0;
    endcase
  endfunction

  // Longest instruction: five column addresses plus the apply step.
  localparam int unsigned MAX_INSTR_STEPS = N_ADDR + 1;

  function automatic cmd_t decode(logic [INSTR_W-1:0] instr);
    cmd_t c;
    c.valid = 1'b0;
    c.op    = opcode_e'(instr[63:60]);
    c.tile  = instr[59:51];
    for (int k = 0; k < N_ADDR; k++)
      c.addr[k] = instr[50-10*k -: 10];
    return c;
  endfunction

  function automatic logic [INSTR_W-1:0] encode(
      opcode_e op, logic [TILE_W-1:0] tile,
      logic [ADDR_W-1:0] a1, logic [ADDR_W-1:0] a2 = '0,
      logic [ADDR_W-1:0] a3 = '0, logic [ADDR_W-1:0] a4 = '0,
      logic [ADDR_W-1:0] a5 = '0);
    return {op, tile, a1, a2, a3, a4, a5, 1'b0};
  endfunction

endpackage
