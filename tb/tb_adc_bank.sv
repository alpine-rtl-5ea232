// tb_adc_bank -- self-checking test of the ADC bank model.
// Applies random and extreme bit-line charges, checks each code against
// saturate_int8(charge >>> ADC_SHIFT) computed here, and checks that valid
// comes exactly ADC_CYCLES edges after start.
module tb_adc_bank;
  localparam int N = 8, SH = 7, AC = 5;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, valid;
  logic signed [31:0] charge [N];
  logic signed [7:0] code [N];

  adc_bank #(.N(N), .ADC_SHIFT(SH), .ADC_CYCLES(AC)) dut (.*);
  always #5 clk = ~clk;

  function automatic int expect_code(input logic signed [31:0] q);
    int v = int'(q >>> SH);
    if (v > 127) return 127;
    if (v < -128) return -128;
    return v;
  endfunction

  initial begin
    logic signed [31:0] held [N];
    int lat;
    for (int j = 0; j < N; j++) charge[j] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 20; r++) begin
      @(negedge clk);
      for (int j = 0; j < N; j++) charge[j] = $signed($urandom % 65536) - 32768;
      charge[0] = 32'sd16256;   //  127*128 -> 127
      charge[1] = 32'sd16384;   //  128*128 -> saturates to 127
      charge[2] = -32'sd16384;  // -128*128 -> -128
      charge[3] = -32'sd1;      // floor -> -1
      charge[4] = -32'sd20000;  // saturates to -128
      held = charge;
      start = 1;
      @(negedge clk);
      start = 0;
      for (int j = 0; j < N; j++) charge[j] = $urandom;   // sampled already
      lat = 1;
      while (!valid && lat < 50) begin @(negedge clk); lat++; end
      checks++;
      if (lat != AC) begin failures++; $display("FAIL latency %0d exp %0d", lat, AC); end
      for (int j = 0; j < N; j++) begin
        checks++;
        if (int'(code[j]) != expect_code(held[j])) begin
          failures++;
          $display("FAIL code[%0d]=%0d exp %0d (charge %0d)", j, code[j], expect_code(held[j]), held[j]);
        end
      end
      @(negedge clk);
      checks++;
      if (valid) begin failures++; $display("FAIL valid longer than one cycle"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
