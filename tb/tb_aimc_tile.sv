// tb_aimc_tile -- self-checking test of a whole AIMC tile.
// Programs a random weight matrix, queues random input vectors in packed
// groups of up to four, runs CM_PROCESS and dequeues the result, comparing
// every output with sat8((sum_i x_i*w_ij) >>> 7) computed by the bench.
// Also checks the command-to-response cycle counts: 230 for an MVM (100 ns
// at 2.3 GHz) and 3 for each 4-byte transfer (4 GB/s), and that weights
// stay in place across inferences.
module tb_aimc_tile;
  import alpine_pkg::*;
  localparam int M = 12, N = 10, LAT = 230, IOC = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, rsp_valid;
  tile_cmd_t cmd = '0;
  logic [31:0] rsp_data;

  aimc_tile #(.M(M), .N(N)) dut (.*);
  always #5 clk = ~clk;

  int cyc = 0, t_acc = 0, t_rsp = 0;
  always @(posedge clk) begin
    cyc++;
    if (cmd_valid && cmd_ready) t_acc = cyc;
    if (rsp_valid) t_rsp = cyc;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic issue(input tile_cmd_t c, output logic [31:0] data, output int lat);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    while (!rsp_valid) @(negedge clk);
    data = rsp_data;
    @(negedge clk);
    lat = t_rsp - t_acc;
  endtask

  logic signed [7:0] w [M][N];
  logic signed [7:0] x [M];

  function automatic int expect_y(input int j);
    int s = 0;
    for (int i = 0; i < M; i++) s += int'(x[i]) * int'(w[i][j]);
    s = s >>> 7;
    return (s > 127) ? 127 : (s < -128) ? -128 : s;
  endfunction

  initial begin
    tile_cmd_t c;
    logic [31:0] d;
    int lat;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < M; i++)
      for (int j = 0; j < N; j++) begin
        w[i][j] = 8'($urandom);
        c = '0; c.op = CM_INITIALIZE; c.index = i; c.col = j; c.data = 32'(w[i][j]) & 32'hFF;
        issue(c, d, lat);
      end
    for (int r = 0; r < 6; r++) begin
      for (int i = 0; i < M; i++) x[i] = 8'($urandom);
      if (r == 1) for (int i = 0; i < M; i++) x[i] = (i % 2) ? 8'sd127 : -8'sd128;
      for (int i = 0; i < M; i += 4) begin
        c = '0; c.op = CM_QUEUE; c.index = i; c.count = 3'((M - i < 4) ? M - i : 4);
        for (int b = 0; b < 4; b++) if (i + b < M) c.data[8*b +: 8] = x[i + b];
        issue(c, d, lat);
        check(lat == IOC, $sformatf("queue takes %0d cycles", lat));
      end
      c = '0; c.op = CM_PROCESS;
      issue(c, d, lat);
      check(lat == LAT, $sformatf("MVM takes %0d cycles, expected %0d", lat, LAT));
      for (int j = 0; j < N; j += 4) begin
        c = '0; c.op = CM_DEQUEUE; c.index = j; c.count = 3'((N - j < 4) ? N - j : 4);
        issue(c, d, lat);
        check(lat == IOC, "dequeue takes IO_CYCLES");
        for (int b = 0; b < 4; b++) begin
          if (j + b < N) check(int'($signed(d[8*b +: 8])) == expect_y(j + b),
                               $sformatf("y[%0d]=%0d exp %0d", j + b, $signed(d[8*b +: 8]), expect_y(j + b)));
          else check(d[8*b +: 8] == 8'd0, "bytes past N read as zero");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
