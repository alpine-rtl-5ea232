// aimc_in_mem -- input memory of an AIMC tile (the DAC registers).
//
// M signed bytes, one per crossbar word line. A write stores up to four
// bytes packed in a 32-bit word: byte k (bits [8k+7:8k]) goes to address
// index+k for k < count; bytes that would land past M are dropped. All M
// bytes are visible at once on x so that every word line's DAC reads its own
// value in parallel. Writes take effect at the clock edge; reset clears the
// memory to zero. Size M bytes follows the tile specification (M-row
// crossbar, M-byte input memory); byte order and reset are this design's.
module aimc_in_mem #(
  parameter int unsigned M = 2048
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   we,
  input  logic [31:0]            index,
  input  logic [2:0]             count,
  input  logic [31:0]            wdata,
  output logic signed [7:0]      x [M]
);
  // One register per byte; byte i takes lane k = i - index of the packed
  // word when 0 <= k < count.
  for (genvar i = 0; i < int'(M); i++) begin : g_byte
    logic [31:0] k;
    assign k = 32'(i) - index;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                                x[i] <= '0;
      else if (we && 32'(i) >= index && k < 32'(count))
        x[i] <= wdata[8*k[1:0] +: 8];
    end
  end
endmodule
