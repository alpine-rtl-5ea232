// aimc_tile -- one analog in-memory computing tile.
//
// Holds an M x N crossbar of signed 8-bit weights that stay in place between
// inferences, and computes y = W^T x for an M-element input vector x in
// constant time. The parts are wired as in the tile organisation the
// architecture describes:
//   input memory (M bytes, DAC registers) -> DAC bank (pulse-width encoded
//   word-line pulses) -> PCM crossbar (bit-line charge integration) ->
//   ADC bank (signed 8-bit codes) -> output memory (N bytes),
// all sequenced by the tile's local controller, which is the only port to
// the outside: a valid/ready command from the core's AIMC CTRL unit and a
// one-cycle response (see aimc_tile_ctrl for the command set and timing).
//
// Result of an MVM: y[j] = sat8((sum_i x[i] * w[i][j]) >>> ADC_SHIFT).
// Timing: CM_QUEUE/CM_DEQUEUE IO_CYCLES, CM_INITIALIZE PROG_CYCLES,
// CM_PROCESS LATENCY cycles from command to response.
module aimc_tile
  import alpine_pkg::*;
#(
  parameter int unsigned M            = 2048,
  parameter int unsigned N            = 2048,
  parameter int unsigned LATENCY      = 230,
  parameter int unsigned IO_CYCLES    = 3,
  parameter int unsigned PROG_CYCLES  = 2,
  parameter int unsigned PULSE_WINDOW = 128,
  parameter int unsigned ADC_CYCLES   = 32,
  parameter int unsigned ADC_SHIFT    = 7,
  parameter int unsigned ACC_W        = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  tile_cmd_t   cmd,
  output logic        rsp_valid,
  output logic [31:0] rsp_data
);
  logic                    in_we, out_we, prog_we, xbar_clear;
  logic [31:0]             in_index, in_data, out_index, out_rdata, prog_row, prog_col;
  logic [2:0]              in_count, out_count;
  logic signed [7:0]       prog_w;
  logic                    dac_start, dac_done, dac_busy, adc_start, adc_valid;
  logic signed [7:0]       x [M];
  logic signed [7:0]       y [N];
  logic [M-1:0]            pulse, neg;
  logic signed [ACC_W-1:0] charge [N];

  aimc_tile_ctrl #(
    .LATENCY(LATENCY), .IO_CYCLES(IO_CYCLES), .PROG_CYCLES(PROG_CYCLES),
    .PULSE_WINDOW(PULSE_WINDOW), .ADC_CYCLES(ADC_CYCLES)
  ) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd, .rsp_valid, .rsp_data,
    .in_we, .in_index, .in_count, .in_data,
    .out_index, .out_count, .out_rdata, .out_we,
    .prog_we, .prog_row, .prog_col, .prog_w, .xbar_clear,
    .dac_start, .dac_done, .adc_start, .adc_valid
  );

  aimc_in_mem #(.M(M)) u_in_mem (
    .clk, .rst_n, .we(in_we), .index(in_index), .count(in_count),
    .wdata(in_data), .x
  );

  dac_pwm #(.M(M), .PULSE_WINDOW(PULSE_WINDOW)) u_dac (
    .clk, .rst_n, .start(dac_start), .x, .pulse, .neg,
    .busy(dac_busy), .done(dac_done)
  );

  pcm_crossbar #(.M(M), .N(N), .ACC_W(ACC_W)) u_xbar (
    .clk, .rst_n, .prog_we, .prog_row, .prog_col, .prog_w,
    .clear(xbar_clear), .pulse, .neg, .charge
  );

  adc_bank #(.N(N), .ACC_W(ACC_W), .ADC_SHIFT(ADC_SHIFT), .ADC_CYCLES(ADC_CYCLES)) u_adc (
    .clk, .rst_n, .start(adc_start), .charge, .valid(adc_valid), .code(y)
  );

  aimc_out_mem #(.N(N)) u_out_mem (
    .clk, .rst_n, .we(out_we), .y, .index(out_index), .count(out_count),
    .rdata(out_rdata)
  );

  // The input vector must not change while the DACs are pulsing.
  a_no_queue_during_mvm: assert property (@(posedge clk) disable iff (!rst_n)
    dac_busy |-> !in_we);
endmodule
