// tb_arrangement_decoder -- compares the decoded selectors of every
// arrangement with the selector table typed in as text ('-' = don't care)
// and checks which arrays are reported idle.
module tb_arrangement_decoder;
  import arman_pkg::*;
  arrangement_e arrangement;
  group_sel_t sel;
  array_mask_t active;
  int checks = 0, failures = 0;

  arrangement_decoder dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    string rows [8];
    logic [3:0] act [8];
    arrangement_e names [8];
    names = '{ARR_2X2, ARR_1X4, ARR_4X1, ARR_1X3, ARR_3X1, ARR_1X2, ARR_2X1, ARR_1X1};
    rows  = '{"1111111111", "1011011111", "0111101111", "10110---11",
              "---1101111", "1011010110", "0100101001", "0000000000"};
    act   = '{4'b1111, 4'b1111, 4'b1111, 4'b1011, 4'b1110, 4'b1111, 4'b1111, 4'b1111};
    for (int n = 0; n < 8; n++) begin
      arrangement = names[n];
      #1;
      for (int g = 0; g < 10; g++) begin
        if (rows[n][g] == "-") continue;
        checks++;
        if (sel[g] !== (rows[n][g] == "1")) begin
          failures++;
          $display("FAIL arrangement %0d group %0d", n, g + 1);
        end
      end
      checks++;
      if (active !== act[n]) begin
        failures++;
        $display("FAIL arrangement %0d active %b", n, active);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
