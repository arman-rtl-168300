// tb_arman_top -- end-to-end test of the reconfigurable accelerator.
//
// For a sequence of jobs covering all eight arrangements (and switching
// arrangement between jobs) the testbench loads random signed operands into
// the four operand banks through the host port, starts the job, checks that
// done arrives K + 7B + 2 cycles later, then reads both output banks and
// compares every result of every active array with a reference computed
// here. The reference knows, per arrangement, which bank port or neighbour
// feeds the rows and the columns of each array; a chained array receives the
// operand of the array it is chained to. It also counts how often each
// mechanism occurred (arrangement switch, horizontal chain, vertical chain,
// shared port feeding two arrays, direct drain through a demultiplexer, idle
// array, stream started B cycles late) and fails a mechanism never seen.
module tb_arman_top;
  import arman_pkg::*;
  localparam int B = 4, D = 64;
  localparam int AB = $clog2(D), OB = $clog2(2*B);
  localparam int NJOBS = 10;

  logic clk = 0, rst_n = 0, start, busy, done;
  arrangement_e cfg_arrangement;
  logic [AB-1:0] cfg_k;
  logic h_we, h_obank;
  logic [1:0] h_bank;
  logic [AB-1:0] h_addr;
  logic [B-1:0][7:0] h_wdata;
  logic [OB-1:0] h_oaddr;
  logic [B-1:0][31:0] h_ordata;
  int checks = 0, failures = 0;

  arman_top #(.B(B), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #50ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // operand bank images: [bank 0..3 = W0 W1 I0 I1][port][k][lane]
  logic signed [7:0] mem [4][2][][B];

  // source of rows (weights) / columns (inputs) of array a; 0..3 = bank
  // port (bank*2 + port) of the weight or input banks, 4 = neighbour, -1 idle
  function automatic void sources(arrangement_e arr, output int ws [4], output int is [4]);
    case (arr)
      ARR_2X2: begin ws = '{0, 1, 2, 3}; is = '{0, 2, 1, 3}; end
      ARR_1X4: begin ws = '{0, 1, 2, 3}; is = '{1, 3, 1, 3}; end
      ARR_4X1: begin ws = '{1, 1, 3, 3}; is = '{0, 2, 1, 3}; end
      ARR_1X3: begin ws = '{0, 1, -1, 3}; is = '{1, 3, -1, 3}; end
      ARR_3X1: begin ws = '{-1, 1, 3, 3}; is = '{-1, 2, 1, 3}; end
      ARR_1X2: begin ws = '{0, 1, 2, 3}; is = '{1, 3, 4, 4}; end
      ARR_2X1: begin ws = '{1, 4, 3, 4}; is = '{0, 2, 1, 3}; end
      default: begin ws = '{1, 4, 3, 4}; is = '{1, 3, 4, 4}; end
    endcase
  endfunction

  int n_switch, n_hchain, n_vchain, n_shared, n_direct, n_idle, n_late;

  initial begin
    arrangement_e order [NJOBS];
    arrangement_e prev;
    order = '{ARR_2X2, ARR_1X1, ARR_4X1, ARR_1X4, ARR_1X3, ARR_3X1, ARR_1X2, ARR_2X1, ARR_2X1, ARR_2X2};
    n_switch = 0; n_hchain = 0; n_vchain = 0; n_shared = 0; n_direct = 0; n_idle = 0; n_late = 0;
    start = 0; cfg_arrangement = ARR_2X2; cfg_k = 0;
    h_we = 0; h_bank = 0; h_addr = 0; h_wdata = '0; h_obank = 0; h_oaddr = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    prev = ARR_2X2;
    for (int n = 0; n < NJOBS; n++) begin
      int K, cyc, ws [4], is [4];
      logic signed [7:0] wrow [4][][B];   // effective weights [array][k][row]
      logic signed [7:0] icol [4][][B];   // effective inputs  [array][k][col]
      K = 1 + (n * 7) % 12;
      // load operands
      for (int bk = 0; bk < 4; bk++) for (int p = 0; p < 2; p++) begin
        mem[bk][p] = new[K];
        for (int k = 0; k < K; k++) begin
          for (int l = 0; l < B; l++) mem[bk][p][k][l] = 8'($urandom);
          h_we = 1; h_bank = 2'(bk); h_addr = AB'(p * D/2 + k);
          for (int l = 0; l < B; l++) h_wdata[l] = mem[bk][p][k][l];
          @(negedge clk);
        end
      end
      h_we = 0;
      // run
      cfg_arrangement = order[n]; cfg_k = AB'(K); start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done && cyc < 100000) begin
        @(negedge clk);
        cyc++;
      end
      checks++;
      if (cyc != K + 7*B + 2) begin
        failures++;
        $display("FAIL job %0d latency %0d expected %0d", n, cyc, K + 7*B + 2);
      end
      // mechanism counters, from the configuration the hardware ran with
      if (dut.arrangement != prev) n_switch++;
      prev = dut.arrangement;
      if (!dut.sel[2] || !dut.sel[7]) n_hchain++;
      if (!dut.sel[6] || !dut.sel[9]) n_vchain++;
      if ((dut.active[0] && !dut.sel[0] && dut.active[1] && dut.sel[3]) ||
          (dut.active[0] && !dut.sel[1] && dut.active[2] && dut.sel[6]) ||
          (dut.active[1] && !dut.sel[4] && dut.active[3] && dut.sel[9]) ||
          (dut.active[2] && !dut.sel[5] && dut.active[3] && dut.sel[8])) n_shared++;
      if ((dut.active[0] && dut.sel[2]) || (dut.active[2] && dut.sel[7])) n_direct++;
      if (dut.active != 4'b1111) n_idle++;
      if (dut.u_ctrl.w_late != '0 || dut.u_ctrl.i_late != '0) n_late++;
      // reference
      sources(order[n], ws, is);
      for (int a = 0; a < 4; a++) begin
        wrow[a] = new[K];
        icol[a] = new[K];
      end
      for (int a = 0; a < 4; a++) begin
        for (int k = 0; k < K; k++) begin
          if (ws[a] >= 0 && ws[a] < 4) wrow[a][k] = mem[ws[a] / 2][ws[a] % 2][k];
          else if (ws[a] == 4) wrow[a][k] = wrow[a-1][k];
          if (is[a] >= 0 && is[a] < 4) icol[a][k] = mem[2 + is[a] / 2][is[a] % 2][k];
          else if (is[a] == 4) icol[a][k] = icol[a-2][k];
        end
      end
      for (int bk = 0; bk < 2; bk++) begin
        for (int c = 0; c < 2*B; c++) begin
          int a, j;
          a = 2*bk + ((c < B) ? 0 : 1);
          j = c % B;
          h_obank = 1'(bk); h_oaddr = OB'(c);
          @(negedge clk);
          if (ws[a] < 0) continue;
          for (int i = 0; i < B; i++) begin
            int exp_v;
            exp_v = 0;
            for (int k = 0; k < K; k++) exp_v += int'(wrow[a][k][i]) * int'(icol[a][k][j]);
            checks++;
            if ($signed(h_ordata[i]) != exp_v) begin
              failures++;
              if (failures < 20)
                $display("FAIL job %0d arr %0d array %0d C[%0d][%0d] got %0d exp %0d",
                         n, order[n], a, i, j, $signed(h_ordata[i]), exp_v);
            end
          end
        end
      end
    end
    $display("mechanisms: switch=%0d hchain=%0d vchain=%0d shared_port=%0d direct_drain=%0d idle_array=%0d late_stream=%0d",
             n_switch, n_hchain, n_vchain, n_shared, n_direct, n_idle, n_late);
    if (n_switch == 0) failures++;
    if (n_hchain == 0) failures++;
    if (n_vchain == 0) failures++;
    if (n_shared == 0) failures++;
    if (n_direct == 0) failures++;
    if (n_idle == 0) failures++;
    if (n_late == 0) failures++;
    checks += 7;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
