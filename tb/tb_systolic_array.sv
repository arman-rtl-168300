// tb_systolic_array -- runs a 4x4 output-stationary array on random signed
// matrices W (4xK) and X (Kx4) with operands skewed by hand, drains the
// results through the right edge and compares them with C = W*X computed in
// the testbench. Also checks the edge forwarding of both operands (row i's
// weight reaches the right edge B cycles after entering) and that the drain
// chain takes its left input. Two rounds with different K.
module tb_systolic_array;
  import arman_pkg::*;
  localparam int B = 4;
  logic clk = 0, rst_n = 0;
  pe_mode_e mode;
  logic [B-1:0][7:0] w_in, a_in, w_out, a_out;
  logic [B-1:0][31:0] p_in, p_out;
  int checks = 0, failures = 0;

  systolic_array #(.B(B)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [7:0] W [B][16];
    logic signed [7:0] X [16][B];
    int C [B][B];
    logic [B-1:0][7:0] w_hist [64];
    mode = PE_HOLD; w_in = '0; a_in = '0; p_in = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int round = 0; round < 2; round++) begin
      int K;
      K = (round == 0) ? 6 : 13;
      for (int i = 0; i < B; i++) for (int k = 0; k < K; k++) W[i][k] = 8'($urandom);
      for (int k = 0; k < K; k++) for (int j = 0; j < B; j++) X[k][j] = 8'($urandom);
      for (int i = 0; i < B; i++) for (int j = 0; j < B; j++) begin
        C[i][j] = 0;
        for (int k = 0; k < K; k++) C[i][j] += int'(W[i][k]) * int'(X[k][j]);
      end
      mode = PE_CLEAR;
      @(negedge clk);
      mode = PE_COMPUTE;
      for (int t = 0; t < K + 2*B; t++) begin
        for (int i = 0; i < B; i++) w_in[i] = (t - i >= 0 && t - i < K) ? W[i][t-i] : 8'h0;
        for (int j = 0; j < B; j++) a_in[j] = (t - j >= 0 && t - j < K) ? X[t-j][j] : 8'h0;
        w_hist[t] = w_in;
        @(negedge clk);
        // weight leaving row i entered B cycles ago
        if (t >= B - 1) begin
          checks++;
          if (w_out !== w_hist[t-B+1]) begin
            failures++;
            $display("FAIL right-edge forwarding t=%0d", t);
          end
        end
      end
      w_in = '0; a_in = '0;
      mode = PE_DRAIN;
      for (int d = 0; d < 2*B; d++) begin
        for (int i = 0; i < B; i++) p_in[i] = 32'(1000 * i + d);
        #1;
        for (int i = 0; i < B; i++) begin
          checks++;
          if (d < B) begin
            if ($signed(p_out[i]) != C[i][B-1-d]) begin
              failures++;
              $display("FAIL C[%0d][%0d] got %0d exp %0d", i, B-1-d, $signed(p_out[i]), C[i][B-1-d]);
            end
          end else if (p_out[i] !== 32'(1000 * i + d - B)) begin
            failures++;
            $display("FAIL drain chain row %0d", i);
          end
        end
        @(negedge clk);
      end
      mode = PE_HOLD; p_in = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
