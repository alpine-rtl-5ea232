// tb_aimc_tile_ctrl -- self-checking test of the tile controller.
// The bench stands in for the datapath: it answers dac_start with dac_done
// after the pulse window and adc_start with adc_valid after the conversion
// time, and serves output-memory reads from a pattern. It checks the fields
// the controller drives for each command, the order of the MVM phases, the
// single output-memory store, that cmd_ready is low while busy, and the
// command-to-response cycle counts: IO_CYCLES, PROG_CYCLES and LATENCY.
module tb_aimc_tile_ctrl;
  import alpine_pkg::*;
  localparam int LAT = 230, IOC = 3, PGC = 2, PW = 128, ADCC = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, rsp_valid;
  tile_cmd_t cmd = '0;
  logic [31:0] rsp_data;
  logic in_we, out_we, prog_we, xbar_clear, dac_start, adc_start;
  logic dac_done = 0, adc_valid = 0;
  logic [31:0] in_index, in_data, out_index, out_rdata, prog_row, prog_col;
  logic [2:0] in_count, out_count;
  logic signed [7:0] prog_w;

  aimc_tile_ctrl #(.LATENCY(LAT), .IO_CYCLES(IOC), .PROG_CYCLES(PGC),
                   .PULSE_WINDOW(PW), .ADC_CYCLES(ADCC)) dut (.*);
  always #5 clk = ~clk;

  // Output memory stand-in: a pattern derived from index and count.
  assign out_rdata = {out_index[7:0], 5'd0, out_count, 8'hA5, out_index[15:8] ^ 8'h3C};

  // Datapath stand-in and event log, all sampled at rising edges.
  int cyc = 0, t_acc = -1, t_rsp = -1, t_dac = -1, t_adc = -1, n_out_we = 0;
  int dac_cnt = -1, adc_cnt = -1;
  always @(posedge clk) begin
    cyc++;
    if (cmd_valid && cmd_ready) t_acc = cyc;
    if (rsp_valid) t_rsp = cyc;
    if (out_we) n_out_we++;
    dac_done  <= 1'b0;
    adc_valid <= 1'b0;
    if (!rst_n) begin dac_cnt = -1; adc_cnt = -1; end
    else if (dac_start) begin t_dac = cyc; dac_cnt = 0; end
    else if (dac_cnt >= 0) begin
      dac_cnt++;
      if (dac_cnt == PW) begin dac_done <= 1'b1; dac_cnt = -1; end
    end
    if (!rst_n) ;
    else if (adc_start) begin t_adc = cyc; adc_cnt = 0; end
    else if (adc_cnt >= 0) begin
      adc_cnt++;
      if (adc_cnt == ADCC - 1) begin adc_valid <= 1'b1; adc_cnt = -1; end
    end
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  // Send one command and wait for its response; returns the cycle count.
  task automatic run_cmd(input tile_cmd_t c, output int lat, output logic [31:0] data);
    @(negedge clk);
    check(cmd_ready === 1'b1, "ready when idle");
    cmd = c; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0; cmd = '0;
    check(cmd_ready === 1'b0, "not ready while busy");
    t_rsp = -1;
    while (t_rsp < 0) begin
      @(negedge clk);
      if (t_rsp < 0 && !rsp_valid) check(cmd_ready === 1'b0, "not ready before response");
      if (cyc > 100000) break;
    end
    data = rsp_data;
    lat = t_rsp - t_acc;
  endtask

  initial begin
    tile_cmd_t c;
    int lat;
    logic [31:0] d;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 10; r++) begin
      // CM_QUEUE
      c = '0; c.op = CM_QUEUE; c.index = $urandom % 64; c.count = 3'(1 + $urandom % 4); c.data = $urandom;
      fork
        begin
          @(posedge in_we);
          check(in_index == c.index && in_count == c.count && in_data == c.data, "queue fields");
        end
        run_cmd(c, lat, d);
      join
      check(lat == IOC, $sformatf("queue latency %0d", lat));
      // CM_INITIALIZE
      c = '0; c.op = CM_INITIALIZE; c.index = $urandom % 64; c.col = $urandom % 64; c.data = 32'($urandom % 256);
      fork
        begin
          @(posedge prog_we);
          check(prog_row == c.index && prog_col == c.col && prog_w == c.data[7:0], "initialize fields");
        end
        run_cmd(c, lat, d);
      join
      check(lat == PGC, $sformatf("initialize latency %0d", lat));
      // CM_PROCESS
      c = '0; c.op = CM_PROCESS;
      n_out_we = 0; t_dac = -1; t_adc = -1;
      run_cmd(c, lat, d);
      check(lat == LAT, $sformatf("process latency %0d exp %0d", lat, LAT));
      check(t_dac == t_acc + 1, "DAC starts right after the command");
      check(t_adc == t_dac + PW + 2, $sformatf("ADC starts after the pulse window (%0d)", t_adc - t_dac));
      check(n_out_we == 1, $sformatf("one output-memory store (%0d)", n_out_we));
      // CM_DEQUEUE
      c = '0; c.op = CM_DEQUEUE; c.index = $urandom % 65536; c.count = 3'(1 + $urandom % 4);
      run_cmd(c, lat, d);
      check(lat == IOC, $sformatf("dequeue latency %0d", lat));
      check(d == {c.index[7:0], 5'd0, c.count, 8'hA5, c.index[15:8] ^ 8'h3C}, "dequeue data");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
