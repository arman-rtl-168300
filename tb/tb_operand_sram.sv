// tb_operand_sram -- writes random words through the host port, then reads
// them back on both read ports at independent addresses, checking the
// one-cycle read latency and the zero output of an idle port.
module tb_operand_sram;
  localparam int L = 4, D = 64;
  logic clk = 0, rst_n = 0;
  logic we;
  logic [5:0] waddr;
  logic [L-1:0][7:0] wdata;
  logic [1:0] re;
  logic [1:0][5:0] raddr;
  logic [1:0][L-1:0][7:0] rdata;
  logic [L*8-1:0] model [D];
  int checks = 0, failures = 0;

  operand_sram #(.LANES(L), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; raddr = '0; waddr = 0; wdata = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int a = 0; a < D; a++) begin
      we = 1; waddr = 6'(a); wdata = {$urandom};
      model[a] = wdata;
      @(negedge clk);
    end
    we = 0;
    for (int n = 0; n < 200; n++) begin
      logic [1:0] pre;
      logic [1:0][5:0] pa;
      pre = 2'($urandom); pa[0] = 6'($urandom); pa[1] = 6'($urandom);
      re = pre; raddr = pa;
      @(negedge clk);
      for (int p = 0; p < 2; p++) begin
        checks++;
        if (rdata[p] !== (pre[p] ? model[pa[p]] : '0)) begin
          failures++;
          $display("FAIL port %0d addr %0d", p, pa[p]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
