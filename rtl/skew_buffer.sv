// skew_buffer -- staggers the lanes of an SRAM word for systolic entry.
//
// An SRAM read returns one word with a value for every row (or column) of an
// array, all at once. A systolic array needs lane i to arrive i cycles after
// lane 0, so lane i passes through a chain of i registers (lane 0 is a wire).
// This is the "buffer" on the array edges; the paper names it but does not
// draw its insides, so the triangular register chain is this design's choice.
// Interface: in[i] enters every cycle, out[i] is in[i] delayed by i cycles.
// The registers reset to zero so that idle lanes feed zeros into the array.
module skew_buffer #(
  parameter int unsigned LANES = 64,
  parameter int unsigned W     = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [LANES-1:0][W-1:0] in,
  output logic [LANES-1:0][W-1:0] out
);

  assign out[0] = in[0];

  for (genvar i = 1; i < LANES; i++) begin : g_lane
    logic [i-1:0][W-1:0] sr;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) sr <= '0;
      else begin
        sr[0] <= in[i];
        for (int s = 1; s < i; s++) sr[s] <= sr[s-1];
      end
    end
    assign out[i] = sr[i-1];
  end

endmodule
