// rebits_pkg: types and constants shared by the REBits floating point add
// unit. The instruction encoding below is this design's own: an fpadd, a move
// from FPERR into a floating point register (the context-switch save path and
// the normal way software reads the error), a move from a floating point
// register into FPERR (the context-switch restore path) and a load of an
// immediate value that stands in for the memory stage, which is outside this
// unit. Each instruction names its precision, 32 or 64 bits, and so which of
// the two FPERR registers (FPERR32, FPERR64) it touches, and whether it is
// scalar or packed. FLEN, the 128-bit register width, is the paper's example
// of a packed register.
package rebits_pkg;

  // IEEE-754 binary32 and binary64 field widths.
  localparam int unsigned F32_EXP_W = 8;
  localparam int unsigned F32_MAN_W = 23;
  localparam int unsigned F64_EXP_W = 11;
  localparam int unsigned F64_MAN_W = 52;

  // Width of one floating point register, as in SSE: it holds one scalar
  // float or double in its low bits (the rest zero), or a packed vector of
  // FLEN/32 floats or FLEN/64 doubles.
  localparam int unsigned FLEN = 128;

  typedef enum logic [2:0] {
    OP_NOP   = 3'd0,
    OP_FPADD = 3'd1,  // rd <- rs1 + rs2; FPERR(prec) <- rounding error
    OP_MFERR = 3'd2,  // rd <- FPERR(prec)
    OP_MTERR = 3'd3,  // FPERR(prec) <- rs1 (restore after a context switch)
    OP_LOAD  = 3'd4   // rd <- imm (stands in for a load from memory)
  } op_e;

  typedef enum logic {
    PREC_32 = 1'b0,
    PREC_64 = 1'b1
  } prec_e;

  // One instruction as it enters Decode. `imm` is used by OP_LOAD only.
  // `vec` selects packed operation: every lane of the register is added and
  // every lane of FPERR receives its lane's error; a scalar operation works
  // on lane 0 only and zeroes the other lanes of its results.
  typedef struct packed {
    op_e             op;
    prec_e           prec;
    logic            vec;
    logic [4:0]      rd;
    logic [4:0]      rs1;
    logic [4:0]      rs2;
    logic [FLEN-1:0] imm;
  } instr_t;

endpackage
