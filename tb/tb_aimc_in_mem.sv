// tb_aimc_in_mem -- self-checking test of the tile input memory.
// Random packed writes of 1..4 bytes at random indices, including ones that
// run past the end; after each write every byte of x is compared with a
// reference array kept by the bench. Also checks the reset value.
module tb_aimc_in_mem;
  localparam int M = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, we = 0;
  logic [31:0] index = 0, wdata = 0;
  logic [2:0] count = 0;
  logic signed [7:0] x [M];
  logic signed [7:0] ref_mem [M];

  aimc_in_mem #(.M(M)) dut (.*);
  always #5 clk = ~clk;

  task automatic compare();
    for (int i = 0; i < M; i++) begin
      checks++;
      if (x[i] !== ref_mem[i]) begin
        failures++;
        $display("FAIL x[%0d]=%0d exp %0d", i, x[i], ref_mem[i]);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < M; i++) ref_mem[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); compare();
    for (int k = 0; k < 300; k++) begin
      @(negedge clk);
      we    = 1;
      index = $urandom % (M + 4);
      count = 3'(1 + $urandom % 4);
      wdata = $urandom;
      for (int b = 0; b < 4; b++)
        if (b < count && index + b < M) ref_mem[index + b] = wdata[8*b +: 8];
      @(negedge clk);
      we = 0;
      index = $urandom; wdata = $urandom;   // no write: must not change anything
      @(negedge clk);
      compare();
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
