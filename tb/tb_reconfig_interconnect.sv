// tb_reconfig_interconnect -- drives every selector combination with random
// bank data and array edge outputs, and checks every array edge input and
// output-bank data word against the routing list of the ten groups.
module tb_reconfig_interconnect;
  import arman_pkg::*;
  localparam int B = 2;
  group_sel_t sel;
  logic [1:0][1:0][B-1:0][7:0] w_bank, i_bank;
  logic [3:0][B-1:0][7:0] arr_w_out, arr_a_out, arr_w_in, arr_a_in;
  logic [3:0][B-1:0][31:0] arr_p_out, arr_p_in;
  logic [1:0][1:0][B-1:0][31:0] o_data;
  int checks = 0, failures = 0;

  reconfig_interconnect #(.B(B)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic [63:0] got, input logic [63:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL sel=%b %s", sel, what);
    end
  endtask

  initial begin
    for (int s = 0; s < 1024; s++) begin
      logic g1, g2, g3, g4, g5, g6, g7, g8, g9, g10;
      sel = group_sel_t'(s);
      {g10, g9, g8, g7, g6, g5, g4, g3, g2, g1} = sel;
      w_bank = {$urandom, $urandom}; i_bank = {$urandom, $urandom};
      arr_w_out = {$urandom, $urandom}; arr_a_out = {$urandom, $urandom};
      for (int a = 0; a < 4; a++) for (int l = 0; l < B; l++) arr_p_out[a][l] = $urandom;
      #1;
      // top-left array: only from the banks
      chk(64'(arr_w_in[0]), 64'(g1 ? w_bank[0][0] : w_bank[0][1]), "g1");
      chk(64'(arr_a_in[0]), 64'(g2 ? i_bank[0][0] : i_bank[0][1]), "g2");
      chk(64'(arr_p_in[0]), 64'(0), "p0");
      // top-right: rows from W0 port 1 or the top-left array's right edge
      if (g4) begin
        chk(64'(arr_w_in[1]), 64'(w_bank[0][1]), "g4 bank");
        chk(64'(arr_p_in[1]), 64'(0), "g4 p bank");
      end else begin
        chk(64'(arr_w_in[1]), g3 ? 64'(0) : 64'(arr_w_out[0]), "g4 chain w");
        chk(64'(arr_p_in[1]), g3 ? 64'(0) : 64'(arr_p_out[0]), "g4 chain p");
      end
      chk(64'(arr_a_in[1]), 64'(g5 ? i_bank[1][0] : i_bank[1][1]), "g5");
      // bottom-left
      chk(64'(arr_w_in[2]), 64'(g6 ? w_bank[1][0] : w_bank[1][1]), "g6");
      chk(64'(arr_a_in[2]), 64'(g7 ? i_bank[0][1] : arr_a_out[0]), "g7");
      chk(64'(arr_p_in[2]), 64'(0), "p2");
      // bottom-right
      if (g9) begin
        chk(64'(arr_w_in[3]), 64'(w_bank[1][1]), "g9 bank");
        chk(64'(arr_p_in[3]), 64'(0), "g9 p bank");
      end else begin
        chk(64'(arr_w_in[3]), g8 ? 64'(0) : 64'(arr_w_out[2]), "g9 chain w");
        chk(64'(arr_p_in[3]), g8 ? 64'(0) : 64'(arr_p_out[2]), "g9 chain p");
      end
      chk(64'(arr_a_in[3]), 64'(g10 ? i_bank[1][1] : arr_a_out[1]), "g10");
      // output banks
      chk(64'(o_data[0][0]), g3 ? 64'(arr_p_out[0]) : 64'(0), "g3 out");
      chk(64'(o_data[1][0]), g8 ? 64'(arr_p_out[2]) : 64'(0), "g8 out");
      chk(64'(o_data[0][1]), 64'(arr_p_out[1]), "O0 p1");
      chk(64'(o_data[1][1]), 64'(arr_p_out[3]), "O1 p1");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
