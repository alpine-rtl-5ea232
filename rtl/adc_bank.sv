// adc_bank -- behavioural model of the tile's ADCs, one per bit line
// (mixed-signal in a real chip).
//
// On start every ADC samples its bit line's integrated charge and, after
// ADC_CYCLES cycles, presents a signed 8-bit code. The converters are signed
// 8-bit as in the architecture; their gain is this design's choice: a fixed
// power of two, code = saturate_int8(charge >>> ADC_SHIFT), rounding toward
// minus infinity. With ADC_SHIFT = 7 the code is the dot product divided by
// 128, so a full-scale input (128) times a weight w reproduces w.
//
// Timing: start is a one-cycle pulse; valid is a one-cycle pulse ADC_CYCLES
// cycles later (counted in clock edges); code holds its value until the next
// start.
module adc_bank
#(
  parameter int unsigned N          = 2048,
  parameter int unsigned ACC_W      = 32,
  parameter int unsigned ADC_SHIFT  = 7,
  parameter int unsigned ADC_CYCLES = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic signed [ACC_W-1:0] charge [N],
  output logic                    valid,
  output logic signed [7:0]       code [N]
);
  logic [15:0] cnt_q;
  logic        busy_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q  <= '0;
      busy_q <= 1'b0;
      valid  <= 1'b0;
    end else begin
      valid <= 1'b0;
      if (start) begin
        if (ADC_CYCLES <= 1) begin
          valid <= 1'b1;
        end else begin
          busy_q <= 1'b1;
          cnt_q  <= 16'd1;
        end
      end else if (busy_q) begin
        cnt_q <= cnt_q + 16'd1;
        if (32'(cnt_q) == ADC_CYCLES - 1) begin
          busy_q <= 1'b0;
          valid  <= 1'b1;
        end
      end
    end
  end

  // One converter per bit line: sample and quantise on start.
  for (genvar j = 0; j < int'(N); j++) begin : g_adc
    logic signed [ACC_W-1:0] q;
    assign q = charge[j] >>> ADC_SHIFT;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)     code[j] <= '0;
      else if (start) code[j] <= (q > ACC_W'(127))  ? 8'sd127 :
                                 (q < -ACC_W'(128)) ? -8'sd128 : q[7:0];
    end
  end
endmodule
