// tb_dac_pwm -- self-checking test of the word-line DAC bank.
// For random signed inputs (including -128, 0, 127) it checks, cycle by
// cycle, that row i is pulsed for exactly |x_i| cycles of the window with
// polarity sign(x_i), that busy spans PULSE_WINDOW cycles and that done
// follows the window by one cycle.
module tb_dac_pwm;
  localparam int M = 8, W = 128;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic signed [7:0] x [M];
  logic [M-1:0] pulse, neg;
  logic busy, done;

  dac_pwm #(.M(M), .PULSE_WINDOW(W)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    int cnt [M];
    for (int i = 0; i < M; i++) x[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 6; r++) begin
      @(negedge clk);
      for (int i = 0; i < M; i++) x[i] = 8'($urandom);
      if (r == 0) begin x[0] = -128; x[1] = 127; x[2] = 0; x[3] = -1; end
      for (int i = 0; i < M; i++) cnt[i] = 0;
      check(pulse == '0, "no pulse before start");
      start = 1;
      @(negedge clk);
      start = 0;
      for (int t = 0; t < W; t++) begin
        check(busy === 1'b1 && done === 1'b0, $sformatf("busy in window t=%0d", t));
        for (int i = 0; i < M; i++) begin
          automatic int mag = (x[i] < 0) ? -int'(x[i]) : int'(x[i]);
          check(pulse[i] === (t < mag), $sformatf("pulse row %0d t=%0d x=%0d", i, t, x[i]));
          check(neg[i] === (x[i] < 0), $sformatf("polarity row %0d", i));
          cnt[i] += pulse[i];
        end
        @(negedge clk);
      end
      check(busy === 1'b0 && done === 1'b1 && pulse == '0, "done one cycle after window");
      for (int i = 0; i < M; i++)
        check(cnt[i] == ((x[i] < 0) ? -int'(x[i]) : int'(x[i])), $sformatf("duration row %0d", i));
      @(negedge clk);
      check(done === 1'b0, "done is one cycle");
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
