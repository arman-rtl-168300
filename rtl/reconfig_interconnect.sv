// reconfig_interconnect -- the Mux/DeMux network that rearranges the arrays.
//
// Four B x B arrays sit in a 2 x 2 grid: 0 top-left, 1 top-right,
// 2 bottom-left, 3 bottom-right. Weights enter from the left (weight banks
// W0 for the top pair, W1 for the bottom pair), activations from the top
// (input banks I0 for the left pair, I1 for the right pair) and results drain
// to the right (output banks O0 top, O1 bottom). Each operand bank has two
// read ports, P0 and P1. The ten groups, numbered as in the paper's
// interconnect figure, are (selector value 1 / 0):
//   1  mux, array 0 rows     : W0.P0        / W0.P1
//   2  mux, array 0 columns  : I0.P0        / I0.P1
//   3  demux, array 0 right  : to O0 port 0 / on into array 1
//   4  mux, array 1 rows     : W0.P1        / from group 3
//   5  mux, array 1 columns  : I1.P0        / I1.P1
//   6  mux, array 2 rows     : W1.P0        / W1.P1
//   7  mux, array 2 columns  : I0.P1        / bottom of array 0
//   8  demux, array 2 right  : to O1 port 0 / on into array 3
//   9  mux, array 3 rows     : W1.P1        / from group 8
//   10 mux, array 3 columns  : I1.P1        / bottom of array 1
// Value 1 everywhere gives four independent arrays (2x2) and 0 everywhere
// one 2B x 2B array (1x1), as the paper's table requires. Which bank port
// feeds the edge groups 1, 2, 5 and 6 is not drawn legibly in the paper: the
// assignment above is this design's, chosen so that the table's rows for
// 4x1 and 1x4 make two arrays share one port (a broadcast) and 2x2 gives
// every array a port of its own. The demultiplexers carry the whole right
// edge of a row (8-bit weight and 32-bit drain value); the unselected
// output of a demultiplexer is driven with zeros. Purely combinational.
// The weights leaving arrays 1 and 3 on the right and the activations
// leaving arrays 2 and 3 at the bottom reach the outer edge of the grid and
// are not used; those input bits are left unconnected on purpose.
module reconfig_interconnect
  import arman_pkg::*;
#(
  parameter int unsigned B = BASE
) (
  input  group_sel_t                        sel,
  // skewed operand streams: [bank][port]
  input  logic [1:0][1:0][B-1:0][DW-1:0]    w_bank,   // W0, W1
  input  logic [1:0][1:0][B-1:0][DW-1:0]    i_bank,   // I0, I1
  // array edges
  input  logic [3:0][B-1:0][DW-1:0]         arr_w_out,
  input  logic [3:0][B-1:0][DW-1:0]         arr_a_out,
  input  logic [3:0][B-1:0][AW-1:0]         arr_p_out,
  output logic [3:0][B-1:0][DW-1:0]         arr_w_in,
  output logic [3:0][B-1:0][DW-1:0]         arr_a_in,
  output logic [3:0][B-1:0][AW-1:0]         arr_p_in,
  // output bank write data: [bank][port]
  output logic [1:0][1:0][B-1:0][AW-1:0]    o_data
);

  // demux branches toward the right-hand array
  logic [B-1:0][DW-1:0] d3_w, d8_w;
  logic [B-1:0][AW-1:0] d3_p, d8_p;

  always_comb begin
    // group 3 and group 8 demultiplexers
    d3_w        = sel[2] ? '0 : arr_w_out[0];
    d3_p        = sel[2] ? '0 : arr_p_out[0];
    o_data[0][0] = sel[2] ? arr_p_out[0] : '0;
    d8_w        = sel[7] ? '0 : arr_w_out[2];
    d8_p        = sel[7] ? '0 : arr_p_out[2];
    o_data[1][0] = sel[7] ? arr_p_out[2] : '0;
    o_data[0][1] = arr_p_out[1];
    o_data[1][1] = arr_p_out[3];

    // array 0
    arr_w_in[0] = sel[0] ? w_bank[0][0] : w_bank[0][1];   // group 1
    arr_a_in[0] = sel[1] ? i_bank[0][0] : i_bank[0][1];   // group 2
    arr_p_in[0] = '0;
    // array 1
    arr_w_in[1] = sel[3] ? w_bank[0][1] : d3_w;           // group 4
    arr_p_in[1] = sel[3] ? '0           : d3_p;
    arr_a_in[1] = sel[4] ? i_bank[1][0] : i_bank[1][1];   // group 5
    // array 2
    arr_w_in[2] = sel[5] ? w_bank[1][0] : w_bank[1][1];   // group 6
    arr_a_in[2] = sel[6] ? i_bank[0][1] : arr_a_out[0];   // group 7
    arr_p_in[2] = '0;
    // array 3
    arr_w_in[3] = sel[8] ? w_bank[1][1] : d8_w;           // group 9
    arr_p_in[3] = sel[8] ? '0           : d8_p;
    arr_a_in[3] = sel[9] ? i_bank[1][1] : arr_a_out[1];   // group 10
  end

endmodule
