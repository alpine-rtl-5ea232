// aimc_out_mem -- output memory of an AIMC tile.
//
// N signed bytes, one per crossbar bit line. At the end of an MVM the ADC
// bank stores all N codes at once (we). A read returns up to four bytes
// packed into 32 bits: byte k of rdata is address index+k when k < count and
// index+k < N, otherwise zero. The read is combinational; the tile controller
// registers it. Reset clears the memory. Size N bytes follows the tile
// specification; packing order and reset are this design's choices.
module aimc_out_mem #(
  parameter int unsigned N = 2048
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               we,
  input  logic signed [7:0]  y [N],
  input  logic [31:0]        index,
  input  logic [2:0]         count,
  output logic [31:0]        rdata
);
  logic signed [7:0] mem [N];

  for (genvar j = 0; j < int'(N); j++) begin : g_byte
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)  mem[j] <= '0;
      else if (we) mem[j] <= y[j];
    end
  end

  always_comb begin
    rdata = '0;
    for (int k = 0; k < 4; k++) begin
      if (k < int'(count) && (64'(index) + 64'(k)) < 64'(N))
        rdata[8*k +: 8] = mem[index + 32'(k)];
    end
  end
endmodule
