// alpine_top -- tightly-coupled AIMC subsystem of a multi-core CPU.
//
// Every CPU core gets a private AIMC tile, reached through an AIMC CTRL unit
// placed in the core's execute stage beside its ALU and load/store
// pipelines. A core drives its tile only with the four CM instructions
// (CM_INITIALIZE to program weights, CM_QUEUE inputs, CM_PROCESS an MVM,
// CM_DEQUEUE outputs); no tile is shared and nothing crosses the memory
// hierarchy, so the NUM_CORES slices are independent. One tile per core and
// eight cores follow the architecture; the cores themselves are not part of
// this RTL, so each core's issue and writeback signals are ports:
//   issue_valid/issue_instr/rn_val/rm_val/ra_val in, issue_ready/is_cm out:
//     the issue stage offers an instruction and its source operands; a CM
//     instruction is taken when issue_valid && is_cm && issue_ready; while
//     issue_ready is low the core must stall its next CM instruction.
//   wb_valid/wb_we/wb_rd/wb_data out: completion of a CM instruction and,
//     for CM_DEQUEUE, the value for register Rd.
// See aimc_ctrl and aimc_tile for the command set and cycle timing.
module alpine_top
  import alpine_pkg::*;
#(
  parameter int unsigned NUM_CORES    = 8,
  parameter int unsigned XLEN         = 64,
  parameter int unsigned M            = 2048,
  parameter int unsigned N            = 2048,
  parameter int unsigned LATENCY      = 230,
  parameter int unsigned IO_CYCLES    = 3,
  parameter int unsigned PROG_CYCLES  = 2,
  parameter int unsigned PULSE_WINDOW = 128,
  parameter int unsigned ADC_CYCLES   = 32,
  parameter int unsigned ADC_SHIFT    = 7
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            issue_valid [NUM_CORES],
  input  logic [31:0]     issue_instr [NUM_CORES],
  input  logic [XLEN-1:0] rn_val      [NUM_CORES],
  input  logic [XLEN-1:0] rm_val      [NUM_CORES],
  input  logic [XLEN-1:0] ra_val      [NUM_CORES],
  output logic            issue_ready [NUM_CORES],
  output logic            is_cm       [NUM_CORES],
  output logic            wb_valid    [NUM_CORES],
  output logic            wb_we       [NUM_CORES],
  output logic [4:0]      wb_rd       [NUM_CORES],
  output logic [XLEN-1:0] wb_data     [NUM_CORES]
);
  for (genvar c = 0; c < int'(NUM_CORES); c++) begin : g_core
    logic        cmd_valid, cmd_ready, rsp_valid;
    tile_cmd_t   cmd;
    logic [31:0] rsp_data;

    aimc_ctrl #(.XLEN(XLEN)) u_aimc_ctrl (
      .clk, .rst_n,
      .issue_valid(issue_valid[c]), .issue_instr(issue_instr[c]),
      .rn_val(rn_val[c]), .rm_val(rm_val[c]), .ra_val(ra_val[c]),
      .issue_ready(issue_ready[c]), .is_cm(is_cm[c]),
      .wb_valid(wb_valid[c]), .wb_we(wb_we[c]), .wb_rd(wb_rd[c]), .wb_data(wb_data[c]),
      .cmd_valid, .cmd_ready, .cmd, .rsp_valid, .rsp_data
    );

    aimc_tile #(
      .M(M), .N(N), .LATENCY(LATENCY), .IO_CYCLES(IO_CYCLES),
      .PROG_CYCLES(PROG_CYCLES), .PULSE_WINDOW(PULSE_WINDOW),
      .ADC_CYCLES(ADC_CYCLES), .ADC_SHIFT(ADC_SHIFT)
    ) u_tile (
      .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .rsp_valid, .rsp_data
    );
  end
endmodule
