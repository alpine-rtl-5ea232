// tb_aimc_out_mem -- self-checking test of the tile output memory.
// Loads random vectors through the parallel write port, then reads packed
// groups of 1..4 bytes at random indices (also past the end) and compares
// them with the packing computed by the bench. Also checks the reset value.
module tb_aimc_out_mem;
  localparam int N = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, we = 0;
  logic signed [7:0] y [N];
  logic [31:0] index = 0, rdata;
  logic [2:0] count = 4;
  logic signed [7:0] ref_mem [N];

  aimc_out_mem #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [31:0] expect_word(input int idx, input int cnt);
    logic [31:0] r = '0;
    for (int b = 0; b < 4; b++)
      if (b < cnt && idx + b < N) r[8*b +: 8] = ref_mem[idx + b];
    return r;
  endfunction

  task automatic read_check(input int idx, input int cnt);
    index = idx; count = 3'(cnt);
    #1;
    checks++;
    if (rdata !== expect_word(idx, cnt)) begin
      failures++;
      $display("FAIL read idx=%0d cnt=%0d got %h exp %h", idx, cnt, rdata, expect_word(idx, cnt));
    end
  endtask

  initial begin
    for (int j = 0; j < N; j++) begin ref_mem[j] = 0; y[j] = 8'($urandom); end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int j = 0; j < N; j += 4) read_check(j, 4);
    for (int r = 0; r < 20; r++) begin
      @(negedge clk);
      for (int j = 0; j < N; j++) begin y[j] = 8'($urandom); ref_mem[j] = y[j]; end
      we = 1;
      @(negedge clk);
      we = 0;
      for (int j = 0; j < N; j++) y[j] = 8'($urandom);  // not written
      @(negedge clk);
      for (int k = 0; k < 30; k++) read_check($urandom % (N + 4), 1 + $urandom % 4);
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
