// tb_pcm_crossbar -- self-checking test of the crossbar model.
// Programs random signed weights, then drives word-line pulses the way the
// DACs do (row i pulsed during the first |x_i| cycles, polarity sign(x_i))
// and compares every bit line's charge with the dot product sum_i x_i*w_ij
// computed by the bench. Also checks clear, reprogramming of one cell and
// that out-of-range programming is ignored.
module tb_pcm_crossbar;
  localparam int M = 8, N = 6;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, prog_we = 0, clear = 0;
  logic [31:0] prog_row = 0, prog_col = 0;
  logic signed [7:0] prog_w = 0;
  logic [M-1:0] pulse = '0, neg = '0;
  logic signed [31:0] charge [N];
  logic signed [7:0] wref [M][N];

  pcm_crossbar #(.M(M), .N(N)) dut (.*);
  always #5 clk = ~clk;

  task automatic prog_cell(input int r, input int c, input logic signed [7:0] v);
    @(negedge clk);
    prog_we = 1; prog_row = r; prog_col = c; prog_w = v;
    @(negedge clk);
    prog_we = 0;
  endtask

  task automatic mvm_check(input logic signed [7:0] xv [M]);
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    for (int t = 0; t < 128; t++) begin
      for (int i = 0; i < M; i++) begin
        automatic int mag = (xv[i] < 0) ? -int'(xv[i]) : int'(xv[i]);
        pulse[i] = (t < mag);
        neg[i]   = (xv[i] < 0);
      end
      @(negedge clk);
    end
    pulse = '0;
    @(negedge clk);
    for (int j = 0; j < N; j++) begin
      automatic int exp_v = 0;
      for (int i = 0; i < M; i++) exp_v += int'(xv[i]) * int'(wref[i][j]);
      checks++;
      if (charge[j] !== exp_v) begin
        failures++;
        $display("FAIL charge[%0d]=%0d exp %0d", j, charge[j], exp_v);
      end
    end
  endtask

  initial begin
    logic signed [7:0] xv [M];
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int j = 0; j < N; j++) begin
      checks++;
      if (charge[j] !== 0) begin failures++; $display("FAIL reset charge"); end
    end
    for (int i = 0; i < M; i++)
      for (int j = 0; j < N; j++) begin
        wref[i][j] = 8'($urandom);
        prog_cell(i, j, wref[i][j]);
      end
    prog_cell(M, 0, 8'sd99);       // out of range: ignored
    prog_cell(0, N, 8'sd99);
    for (int r = 0; r < 8; r++) begin
      for (int i = 0; i < M; i++) xv[i] = 8'($urandom);
      if (r == 0) for (int i = 0; i < M; i++) xv[i] = -128;
      if (r == 1) for (int i = 0; i < M; i++) xv[i] = 0;
      mvm_check(xv);
      wref[r % M][r % N] = 8'($urandom);
      prog_cell(r % M, r % N, wref[r % M][r % N]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
