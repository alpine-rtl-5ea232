// alpine_pkg -- types and constants shared by the tightly-coupled AIMC
// (analog in-memory computing) subsystem.
//
// The four CM instructions extend the ARMv8 ISA. Their 11-bit major opcodes
// (0x108, 0x008, 0x208) and the field order OpCode | Rm | R/W | Ra | Rn | Rd
// follow the instruction table of the architecture. The bit positions are
// this design's choice: the fields are laid out like the ARMv8
// "data-processing, 3 source" group, opcode in [31:21], Rm [20:16],
// R/W [15], Ra [14:10], Rn [9:5], Rd [4:0].
//
// tile_cmd_t is the command the core-side AIMC CTRL unit sends to the tile's
// local controller; the tile answers with a one-cycle response carrying 32
// bits of packed data (used by CM_DEQUEUE).
package alpine_pkg;

  // Major opcodes of the CM instructions.
  localparam logic [10:0] OPC_QUEUE      = 11'h108;  // CM_QUEUE (R/W=1) and CM_DEQUEUE (R/W=0)
  localparam logic [10:0] OPC_PROCESS    = 11'h008;  // CM_PROCESS
  localparam logic [10:0] OPC_INITIALIZE = 11'h208;  // CM_INITIALIZE

  // 8-bit elements packed into one 32-bit argument register.
  localparam int unsigned PACK = 4;

  typedef enum logic [2:0] {
    CM_NONE       = 3'd0,
    CM_QUEUE      = 3'd1,
    CM_DEQUEUE    = 3'd2,
    CM_PROCESS    = 3'd3,
    CM_INITIALIZE = 3'd4
  } cm_op_e;

  // Instruction word split into its fields.
  typedef struct packed {
    logic [10:0] opcode;
    logic [4:0]  rm;
    logic        rw;
    logic [4:0]  ra;
    logic [4:0]  rn;
    logic [4:0]  rd;
  } cm_instr_t;

  // Command from the core-side AIMC CTRL unit to the tile controller.
  //   CM_QUEUE      : data = packed inputs, index = input-memory index, count = 1..4
  //   CM_DEQUEUE    : index = output-memory index, count = 1..4
  //   CM_PROCESS    : no operands
  //   CM_INITIALIZE : data[7:0] = signed weight, index = row, col = column
  typedef struct packed {
    cm_op_e      op;
    logic [31:0] data;
    logic [31:0] index;
    logic [2:0]  count;
    logic [31:0] col;
  } tile_cmd_t;

  // Build a CM instruction word from its fields (used by software tool
  // chains and test benches).
  function automatic logic [31:0] cm_encode(input cm_op_e op, input logic [4:0] rd,
                                            input logic [4:0] rn, input logic [4:0] rm,
                                            input logic [4:0] ra);
    cm_instr_t f;
    f = '{opcode: OPC_QUEUE, rm: rm, rw: 1'b0, ra: ra, rn: rn, rd: rd};
    unique case (op)
      CM_QUEUE:      f.rw = 1'b1;
      CM_DEQUEUE:    f.rw = 1'b0;
      CM_PROCESS:    f.opcode = OPC_PROCESS;
      CM_INITIALIZE: f.opcode = OPC_INITIALIZE;
      default:       f.opcode = 11'h000;
    endcase
    return 32'(f);
  endfunction

  // Saturate a signed value to the signed 8-bit range of the converters.
  function automatic logic signed [7:0] sat8(input logic signed [63:0] v);
    if (v > 64'sd127)       return 8'sd127;
    else if (v < -64'sd128) return -8'sd128;
    else                    return v[7:0];
  endfunction

endpackage
