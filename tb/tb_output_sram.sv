// tb_output_sram -- writes through both write ports in the same cycles at
// different addresses and reads every word back through the host port.
module tb_output_sram;
  localparam int L = 4, D = 16;
  logic clk = 0;
  logic [1:0] we;
  logic [1:0][3:0] waddr;
  logic [1:0][L-1:0][31:0] wdata;
  logic [3:0] raddr;
  logic [L-1:0][31:0] rdata;
  logic [L*32-1:0] model [D];
  int checks = 0, failures = 0;

  output_sram #(.LANES(L), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = '0; wdata = '0; raddr = 0;
    @(negedge clk);
    for (int c = 0; c < D/2; c++) begin
      we = 2'b11;
      waddr[0] = 4'(c); waddr[1] = 4'(c + D/2);
      for (int p = 0; p < 2; p++)
        for (int l = 0; l < L; l++) wdata[p][l] = $urandom;
      model[c] = wdata[0]; model[c + D/2] = wdata[1];
      @(negedge clk);
    end
    we = 0;
    for (int a = 0; a < D; a++) begin
      raddr = 4'(a);
      @(negedge clk);
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        $display("FAIL addr %0d", a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
