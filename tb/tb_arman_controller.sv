// tb_arman_controller -- checks the controller's sequence and streams with
// B = 4: done arrives K + 7B + 2 cycles after start; the number of reads of
// each operand port, their first cycle (0 or B late) and their addresses
// (base p*DEPTH/2 + k); the number and addresses of output writes; that the
// arrangement only changes on start; and that idle arrays stay cleared.
module tb_arman_controller;
  import arman_pkg::*;
  localparam int B = 4, D = 64;
  logic clk = 0, rst_n = 0, start, busy, done;
  arrangement_e cfg_arrangement, arrangement;
  logic [5:0] cfg_k;
  group_sel_t sel;
  array_mask_t active;
  pe_mode_e [3:0] pe_mode;
  logic [1:0][1:0] w_re, i_re, o_we;
  logic [1:0][1:0][5:0] w_raddr, i_raddr;
  logic [1:0][1:0][2:0] o_waddr;
  int checks = 0, failures = 0;

  arman_controller #(.B(B), .DEPTH(D)) dut (.*);
  arrangement_decoder u_dec (.arrangement, .sel, .active);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (arr %0d)", what, arrangement); end
  endtask

  // expected first-read cycle (-1 = port unused) per arrangement, order:
  // W0P0 W0P1 W1P0 W1P1 I0P0 I0P1 I1P0 I1P1
  function automatic int first_read(arrangement_e a, int port);
    int tbl [8][8];
    tbl[ARR_2X2] = '{0, 0, 0, 0, 0, 0, 0, 0};
    tbl[ARR_1X4] = '{0, 0, 0, 0, -1, 0, -1, 0};
    tbl[ARR_4X1] = '{-1, 0, -1, 0, 0, 0, 0, 0};
    tbl[ARR_1X3] = '{0, 0, -1, 0, -1, 0, -1, 0};
    tbl[ARR_3X1] = '{-1, 0, -1, 0, -1, 0, 0, 0};
    tbl[ARR_1X2] = '{0, 0, B, B, -1, 0, -1, 0};
    tbl[ARR_2X1] = '{-1, 0, -1, 0, 0, 0, B, B};
    tbl[ARR_1X1] = '{-1, 0, -1, B, -1, 0, -1, B};
    return tbl[a][port];
  endfunction

  // expected output writes per bank: pairs chained write 2B words via port 1
  function automatic int writes(arrangement_e a, int bank, int port);
    bit chained, left_on;
    chained = (bank == 0) ? (a == ARR_2X1 || a == ARR_1X1) : (a == ARR_2X1 || a == ARR_1X1);
    left_on = !((bank == 1 && a == ARR_1X3) || (bank == 0 && a == ARR_3X1));
    if (port == 1) return chained ? 2*B : B;
    return (chained || !left_on) ? 0 : B;
  endfunction

  initial begin
    arrangement_e order [9];
    order = '{ARR_2X2, ARR_1X1, ARR_1X4, ARR_4X1, ARR_1X3, ARR_3X1, ARR_1X2, ARR_2X1, ARR_2X2};
    start = 0; cfg_arrangement = ARR_2X2; cfg_k = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int n = 0; n < 9; n++) begin
      int K, cyc, first [8], nread [8], nwr [2][2];
      bit addr_ok;
      K = 3 + n;
      addr_ok = 1;
      for (int p = 0; p < 8; p++) begin first[p] = -1; nread[p] = 0; end
      nwr = '{'{0, 0}, '{0, 0}};
      cfg_arrangement = order[n]; cfg_k = 6'(K); start = 1;
      @(negedge clk);
      start = 0;
      cfg_arrangement = ARR_2X2;   // must not disturb the running job
      cyc = 1;
      while (!done && cyc < 1000) begin
        for (int b = 0; b < 2; b++) for (int p = 0; p < 2; p++) begin
          int w, i;
          w = 2*b + p; i = 4 + 2*b + p;
          if (w_re[b][p]) begin
            if (first[w] < 0) first[w] = cyc - 2;
            if (w_raddr[b][p] != 6'(p*D/2 + nread[w])) addr_ok = 0;
            nread[w]++;
          end
          if (i_re[b][p]) begin
            if (first[i] < 0) first[i] = cyc - 2;
            if (i_raddr[b][p] != 6'(p*D/2 + nread[i])) addr_ok = 0;
            nread[i]++;
          end
          if (o_we[b][p]) nwr[b][p]++;
        end
        for (int a = 0; a < 4; a++)
          if (!active[a] && pe_mode[a] != PE_CLEAR) addr_ok = 0;
        chk(arrangement == order[n] || cyc == 1, "arrangement latched");
        @(negedge clk);
        cyc++;
      end
      chk(cyc == K + 7*B + 2, $sformatf("latency %0d", cyc));
      chk(addr_ok, "read addresses / idle arrays");
      for (int p = 0; p < 8; p++) begin
        chk(first[p] == first_read(order[n], p), $sformatf("port %0d first read %0d", p, first[p]));
        chk(nread[p] == ((first_read(order[n], p) < 0) ? 0 : K), $sformatf("port %0d reads %0d", p, nread[p]));
      end
      for (int b = 0; b < 2; b++) for (int p = 0; p < 2; p++)
        chk(nwr[b][p] == writes(order[n], b, p), $sformatf("bank %0d port %0d writes %0d", b, p, nwr[b][p]));
      @(negedge clk);
      chk(!busy, "idle after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
