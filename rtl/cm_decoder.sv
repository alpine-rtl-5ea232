// cm_decoder -- recognises the CM instructions of the ISA extension.
//
// The 32-bit instruction word is split into OpCode | Rm | R/W | Ra | Rn | Rd
// (bit positions in alpine_pkg). The opcode and R/W bit select the operation:
//   0x108, R/W=1  CM_QUEUE       0x108, R/W=0  CM_DEQUEUE
//   0x008, R/W=0  CM_PROCESS     0x208, R/W=0  CM_INITIALIZE
// These values are the architecture's. Any other word decodes to CM_NONE
// and is_cm stays low, so the issue stage routes it to another pipeline.
// Treating 0x008/0x208 with R/W=1 as "not a CM instruction" is this design's
// choice. Purely combinational.
module cm_decoder
  import alpine_pkg::*;
(
  input  logic [31:0] instr,
  output cm_op_e      op,
  output logic        is_cm,
  output logic [4:0]  rd,
  output logic [4:0]  rn,
  output logic [4:0]  rm,
  output logic [4:0]  ra
);
  cm_instr_t f;
  assign f  = cm_instr_t'(instr);
  assign rd = f.rd;
  assign rn = f.rn;
  assign rm = f.rm;
  assign ra = f.ra;

  always_comb begin
    op = CM_NONE;
    unique case (f.opcode)
      OPC_QUEUE:      op = f.rw ? CM_QUEUE : CM_DEQUEUE;
      OPC_PROCESS:    if (!f.rw) op = CM_PROCESS;
      OPC_INITIALIZE: if (!f.rw) op = CM_INITIALIZE;
      default:        op = CM_NONE;
    endcase
  end

  assign is_cm = (op != CM_NONE);
endmodule
