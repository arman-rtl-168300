// operand_sram -- input or weight SRAM bank with one write and two read ports.
//
// The paper places an input SRAM and a weight SRAM on the edges of the arrays
// and states that each memory bank has two output ports, which is what lets
// the interconnect either give two arrays private streams or broadcast one
// stream to both. A word holds one 8-bit operand per array lane, so address k
// of a weight bank is column k of the weight tile and address k of an input
// bank is row k of the activation tile.
//
// The write port is the host/DRAM side. Each read port has its own enable and
// address and returns data one cycle after the request; a port that was not
// enabled returns zeros in that cycle, so an idle stream feeds zeros (which
// add nothing to an output-stationary accumulation). The default depth makes
// the two input and two weight banks 8 MB together, the paper's cache size;
// the split of that capacity among banks is this design's choice. The array
// is a plain behavioural memory that synthesis maps to an SRAM macro.
module operand_sram
  import arman_pkg::*;
#(
  parameter int unsigned LANES = BASE,
  parameter int unsigned DEPTH = 32768,
  localparam int unsigned ABITS = $clog2(DEPTH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // host write port
  input  logic                     we,
  input  logic [ABITS-1:0]         waddr,
  input  logic [LANES-1:0][DW-1:0] wdata,
  // read ports 0 and 1
  input  logic [1:0]               re,
  input  logic [1:0][ABITS-1:0]    raddr,
  output logic [1:0][LANES-1:0][DW-1:0] rdata
);

  logic [LANES*DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  for (genvar p = 0; p < 2; p++) begin : g_port
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)     rdata[p] <= '0;
      else if (re[p]) rdata[p] <= mem[raddr[p]];
      else            rdata[p] <= '0;
    end
  end

endmodule
