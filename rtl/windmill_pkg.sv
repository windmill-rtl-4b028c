// windmill_pkg: types and constants shared by the WindMill CGRA blocks.
//
// The data word is 32 bits, matching the 32-bit shared-memory banks. A PE
// configuration ("context") is one 64-bit word, cfg_t, holding the operation,
// the two operand sources, an immediate, the iteration count of the control
// step and the write-back flags. The paper does not publish its configuration
// format, opcode set or field widths; everything in this package except the
// data width and the array/memory sizes is this design's own choice.
package windmill_pkg;

  parameter int unsigned DW = 32;   // data word (shared memory banks are 32 bits wide)
  parameter int unsigned CFG_W = 64;  // one context word
  parameter int unsigned NB = 8;    // neighbour inputs per PE: 4 mesh + 4 one-hop

  // Operation codes. OP_LOAD/OP_STORE are only meaningful in an LSU.
  typedef enum logic [4:0] {
    OP_NOP   = 5'd0,
    OP_ADD   = 5'd1,
    OP_SUB   = 5'd2,
    OP_MUL   = 5'd3,
    OP_AND   = 5'd4,
    OP_OR    = 5'd5,
    OP_XOR   = 5'd6,
    OP_SHL   = 5'd7,
    OP_SHR   = 5'd8,
    OP_LT    = 5'd9,
    OP_EQ    = 5'd10,
    OP_MAX   = 5'd11,
    OP_MIN   = 5'd12,
    OP_PASS  = 5'd13,
    OP_SEL   = 5'd14,  // branch select: local reg != 0 ? a : b
    OP_MAC   = 5'd15,  // local reg + a*b
    OP_LOAD  = 5'd16,
    OP_STORE = 5'd17
  } op_e;

  // Operand sources: the eight neighbour links (mesh N/E/S/W and one-hop
  // N2/E2/S2/W2, both with torus wrap-around), the local register, the
  // immediate, the shared register and "none" (operand is zero).
  typedef enum logic [3:0] {
    SRC_N    = 4'd0,
    SRC_E    = 4'd1,
    SRC_S    = 4'd2,
    SRC_W    = 4'd3,
    SRC_N2   = 4'd4,
    SRC_E2   = 4'd5,
    SRC_S2   = 4'd6,
    SRC_W2   = 4'd7,
    SRC_LOC  = 4'd8,
    SRC_IMM  = 4'd9,
    SRC_SREG = 4'd10,
    SRC_NONE = 4'd11
  } src_e;

  // Shared-register sharing modes (paper: line-, row-, quadrant-, global-shared).
  typedef enum logic [1:0] {
    SR_LINE = 2'd0,   // one register per PE line (array row)
    SR_ROW  = 2'd1,   // one register per array column
    SR_QUAD = 2'd2,   // one register per array quadrant
    SR_GLOB = 2'd3    // one register for the whole array
  } sreg_mode_e;

  typedef struct packed {
    logic [12:0] rsvd;
    logic        last;       // final control step of the program
    logic        loc_we;     // write the result into the local register
    logic        sreg_we;    // write the result into the shared register
    sreg_mode_e  sreg_mode;  // which shared register is read/written
    logic        affine;     // LSU: address = imm + i*stride (else imm + operand)
    logic [7:0]  stride;     // LSU affine stride in words
    logic [7:0]  iter;       // firings in this control step (0 means 256)
    logic [15:0] imm;        // immediate / LSU base address
    src_e        src_b;
    src_e        src_a;
    op_e         op;
  } cfg_t;

  // Token-carrying sources (neighbour links) must be valid before a PE fires.
  function automatic logic src_is_link(src_e s);
    return s inside {SRC_N, SRC_E, SRC_S, SRC_W, SRC_N2, SRC_E2, SRC_S2, SRC_W2};
  endfunction

  function automatic logic [DW-1:0] alu(op_e op, logic [DW-1:0] a, logic [DW-1:0] b,
                                        logic [DW-1:0] loc);
    logic [DW-1:0] r;
    unique case (op)
      OP_ADD:  r = a + b;
      OP_SUB:  r = a - b;
      OP_MUL:  r = a * b;
      OP_AND:  r = a & b;
      OP_OR:   r = a | b;
      OP_XOR:  r = a ^ b;
      OP_SHL:  r = a << b[4:0];
      OP_SHR:  r = a >> b[4:0];
      OP_LT:   r = {{(DW-1){1'b0}}, $signed(a) < $signed(b)};
      OP_EQ:   r = {{(DW-1){1'b0}}, a == b};
      OP_MAX:  r = ($signed(a) > $signed(b)) ? a : b;
      OP_MIN:  r = ($signed(a) < $signed(b)) ? a : b;
      OP_PASS: r = a;
      OP_SEL:  r = (loc != '0) ? a : b;
      OP_MAC:  r = loc + a * b;
      default: r = '0;
    endcase
    return r;
  endfunction

  // Host / CPE instruction opcodes decoded by the register transformation table.
  typedef enum logic [3:0] {
    RI_NOP    = 4'd0,
    RI_CFG    = 4'd1,  // stream configuration records from external memory to context memories
    RI_LOAD   = 4'd2,  // external memory -> shared memory
    RI_STORE  = 4'd3,  // shared memory -> external memory
    RI_LAUNCH = 4'd4,  // start the PEAs in the mask
    RI_WAIT   = 4'd5,  // wait until the PEAs in the mask have finished
    RI_MODE   = 4'd6   // set SCMD/MCMD and ping-pong enable of the RCAs in the mask
  } rtt_op_e;

  // A host instruction: word 0 carries opcode, RCA mask and a small field;
  // three argument words follow (external address, shared-memory address, length).
  typedef struct packed {
    logic [DW-1:0] arg2;
    logic [DW-1:0] arg1;
    logic [DW-1:0] arg0;
    rtt_op_e       op;
    logic [3:0]    mask;
    logic [23:0]   field;
  } rtt_instr_t;

endpackage
