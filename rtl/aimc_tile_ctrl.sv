// aimc_tile_ctrl -- local control unit of an AIMC tile.
//
// Executes one command at a time from the core-side AIMC CTRL unit and
// sequences the tile's memories and converters:
//   CM_QUEUE      writes up to 4 packed bytes into the input memory (the DAC
//                 registers); occupies the port IO_CYCLES cycles.
//   CM_DEQUEUE    reads up to 4 packed bytes from the output memory and returns
//                 them in rsp_data; IO_CYCLES cycles.
//   CM_INITIALIZE programs one crossbar weight; PROG_CYCLES cycles.
//   CM_PROCESS    clears the bit-line integrators and starts the DAC pulse
//                 window; when the window closes it starts the ADCs; when the
//                 codes are valid it stores them in the output memory. The
//                 response is given LATENCY cycles after the command.
// The sequence (input memory -> DACs -> crossbar -> ADCs -> output memory)
// and the 100 ns MVM latency and 4 GB/s port throughput come from the
// architecture; LATENCY = 230 is 100 ns at the 2.3 GHz core clock and
// IO_CYCLES = 3 is one 4-byte transfer at 4 GB/s (2.3 cycles) rounded up.
// The handshake, PROG_CYCLES and the phase split are this design's choices.
//
// Timing: cmd_ready is high only when idle. If a command is accepted at
// clock edge E0, its rsp_valid pulse is sampled at edge E0 + cycles, where
// cycles is IO_CYCLES, PROG_CYCLES or LATENCY. rsp_data carries the packed
// bytes for CM_DEQUEUE and zero otherwise. All outputs to the datapath are
// registered one-cycle pulses.
module aimc_tile_ctrl
  import alpine_pkg::*;
#(
  parameter int unsigned LATENCY      = 230,
  parameter int unsigned IO_CYCLES    = 3,
  parameter int unsigned PROG_CYCLES  = 2,
  parameter int unsigned PULSE_WINDOW = 128,
  parameter int unsigned ADC_CYCLES   = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // command / response
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  tile_cmd_t         cmd,
  output logic              rsp_valid,
  output logic [31:0]       rsp_data,
  // input memory write
  output logic              in_we,
  output logic [31:0]       in_index,
  output logic [2:0]        in_count,
  output logic [31:0]       in_data,
  // output memory
  output logic [31:0]       out_index,
  output logic [2:0]        out_count,
  input  logic [31:0]       out_rdata,
  output logic              out_we,
  // crossbar programming and integration
  output logic              prog_we,
  output logic [31:0]       prog_row,
  output logic [31:0]       prog_col,
  output logic signed [7:0] prog_w,
  output logic              xbar_clear,
  // converters
  output logic              dac_start,
  input  logic              dac_done,
  output logic              adc_start,
  input  logic              adc_valid
);
  // The MVM phases must fit in the latency: start, window, ADC, store.
  if (LATENCY < PULSE_WINDOW + ADC_CYCLES + 4) begin : g_bad_latency
    $error("aimc_tile_ctrl: LATENCY too short for PULSE_WINDOW + ADC_CYCLES");
  end
  // A response is registered after the command edge, so every operation
  // takes at least two cycles.
  if (IO_CYCLES < 2 || PROG_CYCLES < 2) begin : g_bad_cycles
    $error("aimc_tile_ctrl: IO_CYCLES and PROG_CYCLES must be at least 2");
  end

  typedef enum logic {S_IDLE, S_BUSY} state_e;
  state_e      state_q;
  cm_op_e      op_q;
  logic [15:0] cnt_q, tgt_q;
  logic        mvm_done_q;

  assign cmd_ready = (state_q == S_IDLE);
  assign out_we    = adc_valid && (state_q == S_BUSY) && (op_q == CM_PROCESS);

  function automatic logic [15:0] cycles_of(input cm_op_e op);
    unique case (op)
      CM_QUEUE, CM_DEQUEUE: return 16'(IO_CYCLES);
      CM_INITIALIZE:        return 16'(PROG_CYCLES);
      CM_PROCESS:           return 16'(LATENCY);
      default:              return 16'd1;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      op_q       <= CM_NONE;
      cnt_q      <= '0;
      tgt_q      <= '0;
      mvm_done_q <= 1'b0;
      rsp_valid  <= 1'b0;
      rsp_data   <= '0;
      in_we      <= 1'b0;
      in_index   <= '0;
      in_count   <= '0;
      in_data    <= '0;
      out_index  <= '0;
      out_count  <= '0;
      prog_we    <= 1'b0;
      prog_row   <= '0;
      prog_col   <= '0;
      prog_w     <= '0;
      xbar_clear <= 1'b0;
      dac_start  <= 1'b0;
      adc_start  <= 1'b0;
    end else begin
      rsp_valid  <= 1'b0;
      in_we      <= 1'b0;
      prog_we    <= 1'b0;
      xbar_clear <= 1'b0;
      dac_start  <= 1'b0;
      adc_start  <= 1'b0;
      unique case (state_q)
        S_IDLE: if (cmd_valid) begin
          op_q       <= cmd.op;
          cnt_q      <= 16'd1;
          tgt_q      <= cycles_of(cmd.op);
          mvm_done_q <= (cmd.op != CM_PROCESS);
          state_q    <= S_BUSY;
          unique case (cmd.op)
            CM_QUEUE: begin
              in_we    <= 1'b1;
              in_index <= cmd.index;
              in_count <= cmd.count;
              in_data  <= cmd.data;
            end
            CM_DEQUEUE: begin
              out_index <= cmd.index;
              out_count <= cmd.count;
            end
            CM_INITIALIZE: begin
              prog_we  <= 1'b1;
              prog_row <= cmd.index;
              prog_col <= cmd.col;
              prog_w   <= cmd.data[7:0];
            end
            CM_PROCESS: begin
              xbar_clear <= 1'b1;
              dac_start  <= 1'b1;
            end
            default: ;
          endcase
        end
        S_BUSY: begin
          cnt_q <= cnt_q + 16'd1;
          if (op_q == CM_PROCESS) begin
            if (dac_done)  adc_start  <= 1'b1;
            if (adc_valid) mvm_done_q <= 1'b1;
          end
          if (cnt_q + 16'd1 >= tgt_q && (mvm_done_q || adc_valid)) begin
            rsp_valid <= 1'b1;
            rsp_data  <= (op_q == CM_DEQUEUE) ? out_rdata : '0;
            state_q   <= S_IDLE;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_no_cmd_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    state_q == S_BUSY |-> !cmd_ready);
endmodule
