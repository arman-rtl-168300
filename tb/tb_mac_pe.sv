// tb_mac_pe -- self-checking test of the output-stationary MAC element.
// Drives random signed 8-bit operand pairs in compute mode and compares the
// accumulator with a software sum, checks the one-cycle operand forwarding,
// the clear mode, hold mode and the drain shift (accumulator loads psum_in).
module tb_mac_pe;
  import arman_pkg::*;

  logic clk = 0, rst_n = 0;
  pe_mode_e mode;
  logic signed [7:0] w_in, a_in, w_out, a_out;
  logic [31:0] psum_in, psum_out;
  int checks = 0, failures = 0;

  mac_pe dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, $signed(got), $signed(exp));
    end
  endtask

  initial begin
    int signed ref_acc;
    logic signed [7:0] pw, pa;
    mode = PE_HOLD; w_in = 0; a_in = 0; psum_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    mode = PE_CLEAR;
    @(negedge clk);
    check(psum_out, 0, "clear");
    for (int round = 0; round < 4; round++) begin
      ref_acc = 0;
      mode = PE_CLEAR;
      @(negedge clk);
      mode = PE_COMPUTE;
      for (int k = 0; k < 50; k++) begin
        pw = 8'($urandom); pa = 8'($urandom);
        if (k == 0) begin pw = -128; pa = -128; end
        w_in = pw; a_in = pa;
        ref_acc += int'(pw) * int'(pa);
        @(negedge clk);
        check(32'(w_out), 32'(pw), "w forward");
        check(32'(a_out), 32'(pa), "a forward");
        check(psum_out, 32'(ref_acc), "accumulate");
      end
      mode = PE_HOLD; w_in = 8'sd3; a_in = 8'sd3;
      repeat (3) @(negedge clk);
      check(psum_out, 32'(ref_acc), "hold");
      mode = PE_DRAIN; psum_in = $urandom;
      check(psum_out, 32'(ref_acc), "drain out");
      @(negedge clk);
      check(psum_out, psum_in, "drain shift");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
