// aimc_ctrl -- AIMC control pipeline of one CPU core.
//
// Sits in the core's execute stage next to the ALU and load/store pipelines
// and is the core's only path to its private AIMC tile: no load, store or
// cache is involved. The issue stage offers an instruction word together with
// the values of its source registers Rn, Rm and Ra. When the word is a CM
// instruction (is_cm) and the unit is idle (issue_ready) the instruction is
// taken, turned into a tile command and sent to the tile controller over a
// valid/ready handshake. The unit then waits for the tile's one-cycle
// response and reports completion on the writeback port: CM_DEQUEUE writes
// its packed outputs, zero-extended, to Rd; the other three complete without
// a register write.
//
// Operand roles (this design's choice where the architecture only says that
// "argument registers" carry count and index):
//   CM_QUEUE      Rn = packed inputs, Rm = count 1..4, Ra = input index
//   CM_DEQUEUE    Rn = output index,  Rm = count 1..4,  Rd <- packed outputs
//   CM_PROCESS    no operands
//   CM_INITIALIZE Rn[7:0] = weight,   Ra = row, Rm = column
//
// Timing: one instruction in flight. issue_ready drops the cycle after an
// accept and rises again the cycle after wb_valid, so a following CM
// instruction is stalled for the whole tile latency. wb_valid is a one-cycle
// pulse registered from the tile response.
module aimc_ctrl
  import alpine_pkg::*;
#(
  parameter int unsigned XLEN = 64
) (
  input  logic            clk,
  input  logic            rst_n,
  // issue stage
  input  logic            issue_valid,
  input  logic [31:0]     issue_instr,
  input  logic [XLEN-1:0] rn_val,
  input  logic [XLEN-1:0] rm_val,
  input  logic [XLEN-1:0] ra_val,
  output logic            issue_ready,
  output logic            is_cm,
  // writeback stage
  output logic            wb_valid,
  output logic            wb_we,
  output logic [4:0]      wb_rd,
  output logic [XLEN-1:0] wb_data,
  // tile controller
  output logic            cmd_valid,
  input  logic            cmd_ready,
  output tile_cmd_t       cmd,
  input  logic            rsp_valid,
  input  logic [31:0]     rsp_data
);
  typedef enum logic [1:0] {S_IDLE, S_SEND, S_WAIT} state_e;
  state_e state_q;

  cm_op_e     dec_op;
  logic [4:0] dec_rd, dec_rn, dec_rm, dec_ra;

  cm_decoder u_dec (
    .instr(issue_instr), .op(dec_op), .is_cm(is_cm),
    .rd(dec_rd), .rn(dec_rn), .rm(dec_rm), .ra(dec_ra)
  );

  // Count operand: 1..4 elements; 0 or more than 4 are clamped to 4.
  function automatic logic [2:0] clamp_count(input logic [XLEN-1:0] v);
    if (v == '0 || v > XLEN'(PACK)) return 3'(PACK);
    else                            return v[2:0];
  endfunction

  tile_cmd_t  cmd_d;
  always_comb begin
    cmd_d       = '0;
    cmd_d.op    = dec_op;
    unique case (dec_op)
      CM_QUEUE: begin
        cmd_d.data  = rn_val[31:0];
        cmd_d.count = clamp_count(rm_val);
        cmd_d.index = ra_val[31:0];
      end
      CM_DEQUEUE: begin
        cmd_d.count = clamp_count(rm_val);
        cmd_d.index = rn_val[31:0];
      end
      CM_INITIALIZE: begin
        cmd_d.data  = {24'd0, rn_val[7:0]};
        cmd_d.index = ra_val[31:0];
        cmd_d.col   = rm_val[31:0];
      end
      default: ;
    endcase
  end

  logic is_deq_q;
  assign issue_ready = (state_q == S_IDLE);
  assign cmd_valid   = (state_q == S_SEND);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= S_IDLE;
      cmd      <= '0;
      is_deq_q <= 1'b0;
      wb_rd    <= '0;
      wb_valid <= 1'b0;
      wb_we    <= 1'b0;
      wb_data  <= '0;
    end else begin
      wb_valid <= 1'b0;
      wb_we    <= 1'b0;
      unique case (state_q)
        S_IDLE: if (issue_valid && is_cm) begin
          cmd      <= cmd_d;
          is_deq_q <= (dec_op == CM_DEQUEUE);
          wb_rd    <= dec_rd;
          state_q  <= S_SEND;
        end
        S_SEND: if (cmd_ready) state_q <= S_WAIT;
        S_WAIT: if (rsp_valid) begin
          wb_valid <= 1'b1;
          wb_we    <= is_deq_q;
          wb_data  <= is_deq_q ? XLEN'(rsp_data) : '0;
          state_q  <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // The command must stay put while the tile is not ready.
  a_cmd_stable: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd));
  // A response is only legal while an instruction is outstanding.
  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid |-> state_q == S_WAIT);
endmodule
