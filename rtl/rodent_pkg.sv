// rodent_pkg: types and constants shared by the in-memory homomorphic SVM
// accelerator.
//
// An instruction is 40 bits: a 3-bit opcode, three 12-bit cell addresses
// (two inputs and one output) and one bit that selects row logic (0) or
// column logic (1). The field widths follow the accelerator description; the
// opcode values and the field order are this design's choice.
//
// Address conventions (this design's choice):
//   * bits [ADDR_W-2:0] index a row or column inside one computation array;
//   * bit ADDR_W-1 of the OUTPUT address is the "neighbour" flag: the result
//     is written into the adjacent array through the inter-array transistors
//     (the array below for column logic, the array to the right for row logic);
//   * for OP_SET, in_a[0] is the constant written and bit ADDR_W-1 of in_b
//     redirects the write to the row (RP) or column (CP) parity cell.
package rodent_pkg;

  localparam int unsigned OPC_W   = 3;
  localparam int unsigned ADDR_W  = 12;
  localparam int unsigned INSTR_W = OPC_W + 3 * ADDR_W + 1;  // 40
  localparam int unsigned NB_BIT  = ADDR_W - 1;              // neighbour / parity flag

  typedef enum logic [OPC_W-1:0] {
    OP_NOP  = 3'd0,
    OP_NOT  = 3'd1,
    OP_AND  = 3'd2,
    OP_NAND = 3'd3,
    OP_OR   = 3'd4,
    OP_NOR  = 3'd5,
    OP_SET  = 3'd6,   // write a constant (output preset / plain write)
    OP_ACT  = 3'd7    // activate rows (row mode) or columns (column mode) from the valid bitmask
  } opcode_e;

  typedef logic [ADDR_W-1:0] addr_t;

  typedef struct packed {
    opcode_e op;
    addr_t   in_a;
    addr_t   in_b;
    addr_t   out;
    logic    col_mode;   // 0: row logic, 1: column logic
  } instr_t;

  // Command driven by a driver into every array of its column.
  typedef struct packed {
    logic   valid;
    instr_t ins;
  } array_cmd_t;

  // Status register values: the four states of the controller.
  typedef enum logic [1:0] {
    SR_RECEIVE  = 2'd0,
    SR_ENCODE   = 2'd1,
    SR_COMPUTE  = 2'd2,
    SR_TRANSMIT = 2'd3
  } sr_e;

  // Boolean function of one in-memory gate. The MTJ threshold gate realises
  // these truth tables; only the function matters at this level.
  function automatic logic gate_eval(opcode_e op, logic a, logic b, logic konst);
    unique case (op)
      OP_NOT:  gate_eval = ~a;
      OP_AND:  gate_eval = a & b;
      OP_NAND: gate_eval = ~(a & b);
      OP_OR:   gate_eval = a | b;
      OP_NOR:  gate_eval = ~(a | b);
      OP_SET:  gate_eval = konst;
      default: gate_eval = 1'b0;
    endcase
  endfunction

  // True for the opcodes that write cells.
  function automatic logic op_writes(opcode_e op);
    return op inside {OP_NOT, OP_AND, OP_NAND, OP_OR, OP_NOR, OP_SET};
  endfunction

endpackage
