// mtl_pkg: types and helpers shared by every block of the programmable MTL
// monitor.
//
// opcode_e is the 3-bit opcode of a Processing Element, with the encoding of
// the PE instruction format (000 wire, 001 not, 010 or, 011 and, 100 implies).
// cell_e is the content of one cell of a Que. The monitor's queue alphabet is
// {true, false, Maybe}; a fourth code, EMPTY, marks a cell that holds no
// partial verdict yet, so that a modify never touches it. The 2-bit encoding
// of cell_e is this design's choice.
//
// logic_unit() is the Logic Unit of a PE. Codes 101..111 are unused and
// behave as wire (a choice of this design).
package mtl_pkg;

  typedef enum logic [2:0] {
    OP_WIRE    = 3'b000,
    OP_NOT     = 3'b001,
    OP_OR      = 3'b010,
    OP_AND     = 3'b011,
    OP_IMPLIES = 3'b100
  } opcode_e;

  typedef enum logic [1:0] {
    CELL_EMPTY = 2'b00,
    CELL_MAYBE = 2'b01,
    CELL_FALSE = 2'b10,
    CELL_TRUE  = 2'b11
  } cell_e;

  // Width of an index into a set of n items; at least one bit.
  function automatic int idx_width(input int n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

  function automatic logic logic_unit(input opcode_e op, input logic a, input logic b);
    case (op)
      OP_NOT:     return ~a;
      OP_OR:      return a | b;
      OP_AND:     return a & b;
      OP_IMPLIES: return ~a | b;
      default:    return a;       // wire
    endcase
  endfunction

endpackage
