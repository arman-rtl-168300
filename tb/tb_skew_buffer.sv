// tb_skew_buffer -- checks that lane i of the skew buffer is its input
// delayed by exactly i cycles, using a history of random input words.
module tb_skew_buffer;
  localparam int L = 8;
  logic clk = 0, rst_n = 0;
  logic [L-1:0][7:0] in, out;
  logic [L-1:0][7:0] hist [64];
  int checks = 0, failures = 0;

  skew_buffer #(.LANES(L), .W(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      for (int i = 0; i < L; i++) in[i] = 8'($urandom);
      hist[t] = in;
      #1;
      for (int i = 0; i < L; i++) begin
        checks++;
        if (t >= i) begin
          if (out[i] !== hist[t-i][i]) begin
            failures++;
            $display("FAIL t=%0d lane %0d got %0h exp %0h", t, i, out[i], hist[t-i][i]);
          end
        end else if (out[i] !== 8'h00) begin
          failures++;
          $display("FAIL t=%0d lane %0d not zero after reset", t, i);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
