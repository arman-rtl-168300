// output_sram -- output SRAM bank collecting the drained results of two arrays.
//
// In the paper's interconnect drawing an output SRAM sits on the right of
// each pair of arrays. Results leave an array row by row, so a word holds one
// 32-bit result per row lane, and address c holds column c of the pair's
// output tile. Port 0 receives the left array's drain when it works on its
// own (through the row demultiplexers); port 1 receives the right edge of the
// right array. The two write ports never target the same address in one
// cycle (the left array writes columns 0..B-1, the right one B..2B-1); if
// they did, port 1 would win. Port 1 has priority is this design's choice.
// The host reads a word with one cycle of latency.
module output_sram
  import arman_pkg::*;
#(
  parameter int unsigned LANES = BASE,
  parameter int unsigned DEPTH = 2*BASE,
  localparam int unsigned ABITS = $clog2(DEPTH)
) (
  input  logic                     clk,
  input  logic [1:0]               we,
  input  logic [1:0][ABITS-1:0]    waddr,
  input  logic [1:0][LANES-1:0][AW-1:0] wdata,
  input  logic [ABITS-1:0]         raddr,
  output logic [LANES-1:0][AW-1:0] rdata
);

  logic [LANES*AW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we[0]) mem[waddr[0]] <= wdata[0];
    if (we[1]) mem[waddr[1]] <= wdata[1];
    rdata <= mem[raddr];
  end

endmodule
