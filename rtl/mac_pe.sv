// mac_pe -- one processing element of an output-stationary systolic array.
//
// Following the TPU-style MAC unit the paper uses, the PE registers an 8-bit
// operand arriving from the left (the weight) and passes it to its right
// neighbour, registers an 8-bit operand arriving from above (the activation)
// and passes it down, and multiplies the two into a 32-bit adder. Because
// the dataflow is output stationary, the adder's other input is the PE's own
// 32-bit accumulator: each PE owns one output element.
//
// The 32-bit "partial sum in" register of the paper's MAC drawing is used
// here as the result drain chain: in PE_DRAIN the accumulator loads the value
// of the left neighbour and exposes its own on psum_out, so a row of PEs is a
// shift register that empties toward the output SRAM on the right.
//
// Modes (pe_mode_e): PE_HOLD keeps everything, PE_CLEAR zeroes the
// accumulator and operand registers, PE_COMPUTE accumulates w_in*a_in (signed)
// and forwards the operands with one cycle of latency, PE_DRAIN shifts. The
// signed operand format, the mode encoding and the reuse of the 32-bit path
// for draining are choices of this design; widths follow the paper.
module mac_pe
  import arman_pkg::*;
#(
  parameter int unsigned DW_P = DW,
  parameter int unsigned AW_P = AW
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  pe_mode_e               mode,
  input  logic signed [DW_P-1:0] w_in,
  input  logic signed [DW_P-1:0] a_in,
  input  logic        [AW_P-1:0] psum_in,
  output logic signed [DW_P-1:0] w_out,
  output logic signed [DW_P-1:0] a_out,
  output logic        [AW_P-1:0] psum_out
);

  logic signed [AW_P-1:0]   acc;
  logic signed [2*DW_P-1:0] prod;

  assign prod     = w_in * a_in;
  assign psum_out = acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc   <= '0;
      w_out <= '0;
      a_out <= '0;
    end else begin
      unique case (mode)
        PE_CLEAR: begin
          acc   <= '0;
          w_out <= '0;
          a_out <= '0;
        end
        PE_COMPUTE: begin
          acc   <= acc + AW_P'(prod);
          w_out <= w_in;
          a_out <= a_in;
        end
        PE_DRAIN: acc <= psum_in;
        default: ;
      endcase
    end
  end

endmodule
