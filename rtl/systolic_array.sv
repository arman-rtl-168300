// systolic_array -- one B x B output-stationary systolic array (one tier).
//
// Weights enter row i on the left edge and move right one PE per cycle;
// activations enter column j on the top edge and move down one PE per cycle.
// With operands skewed so that row i and column j start i and j cycles late,
// PE(i,j) sees W[i][k] and X[k][j] together and accumulates
// C[i][j] = sum_k W[i][k]*X[k][j]. After the compute phase the controller
// switches the array to drain mode and every row shifts its B results out of
// the right edge, last column first, one per cycle.
//
// Edge ports are packed per lane: w_in[i] / w_out[i] / p_in[i] / p_out[i]
// belong to row i, a_in[j] / a_out[j] to column j. The right-edge and
// bottom-edge outputs let the reconfigurable interconnect chain this array
// into a neighbour (scale-up) or send its results to the output SRAM
// (scale-out). Latency: one cycle per PE hop in both directions. The base
// size 64 is the paper's; the edge-port packaging is this design's.
module systolic_array
  import arman_pkg::*;
#(
  parameter int unsigned B = BASE
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  pe_mode_e                 mode,
  input  logic [B-1:0][DW-1:0]     w_in,   // left edge, per row
  input  logic [B-1:0][DW-1:0]     a_in,   // top edge, per column
  input  logic [B-1:0][AW-1:0]     p_in,   // drain chain in, per row
  output logic [B-1:0][DW-1:0]     w_out,  // right edge, per row
  output logic [B-1:0][DW-1:0]     a_out,  // bottom edge, per column
  output logic [B-1:0][AW-1:0]     p_out   // drain chain out, per row
);

  // Horizontal nets have B+1 taps per row, vertical nets B+1 taps per column.
  logic [B-1:0][B:0][DW-1:0] wh;
  logic [B-1:0][B:0][AW-1:0] ph;
  logic [B-1:0][B:0][DW-1:0] av;

  for (genvar i = 0; i < B; i++) begin : g_edge_row
    assign wh[i][0] = w_in[i];
    assign ph[i][0] = p_in[i];
    assign w_out[i] = wh[i][B];
    assign p_out[i] = ph[i][B];
  end
  for (genvar j = 0; j < B; j++) begin : g_edge_col
    assign av[j][0] = a_in[j];
    assign a_out[j] = av[j][B];
  end

  for (genvar i = 0; i < B; i++) begin : g_row
    for (genvar j = 0; j < B; j++) begin : g_col
      mac_pe u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .mode     (mode),
        .w_in     (wh[i][j]),
        .a_in     (av[j][i]),
        .psum_in  (ph[i][j]),
        .w_out    (wh[i][j+1]),
        .a_out    (av[j][i+1]),
        .psum_out (ph[i][j+1])
      );
    end
  end

endmodule
