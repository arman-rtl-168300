// tb_workload_layers -- tiles of real CNN layers on the full-size accelerator.
//
// Runs one output tile of three layer shapes on arman_top at its default
// size (four 64x64 arrays, 2 MB operand banks), with random int8 data, and
// checks each result against a direct computation of the layer (a nested
// convolution loop, not a matrix product), so the im2col mapping, the
// arrangement and the accelerator are checked together. Layer shapes are
// the standard published ones of each network:
//
//   ResNet50 conv3_x 3x3 conv: 28x28x128 input, pad 1, stride 1, 128
//     filters. K = 3*3*128 = 1152. Arrangement 1x1 (one 128x128 array):
//     128 filters x the first 128 output pixels.
//   AlexNet conv1: 227x227x3 input, 11x11 filters, stride 4, 96 filters.
//     K = 363. Arrangement 4x1: the same 64 filters are loaded in both
//     weight banks and the four arrays work on four groups of 64 output
//     pixels (256 pixels).
//   DeepSpeech fully connected layer, 2048 -> 2048 units. K = 2048.
//     Arrangement 1x2 (two 128x64 arrays): 128 output units x 128 time
//     steps, the two tall arrays taking 64 time steps each.
//
// Operand images are built here (im2col) and written through the host port;
// each job's latency is checked against K + 7B + 2 cycles.
module tb_workload_layers;
  import arman_pkg::*;
  localparam int B = BASE, D = 32768;
  localparam int AB = $clog2(D), OB = $clog2(2*B);

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

  arman_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Operand image of one bank region: [k][lane]
  typedef logic signed [7:0] word_t [B];
  word_t img [4][2][];          // [W0 W1 I0 I1][port][k]
  logic [3:0][1:0] used;        // regions to load

  task automatic load_and_run(arrangement_e arr, int K);
    int cyc;
    for (int bk = 0; bk < 4; bk++) for (int p = 0; p < 2; p++) begin
      if (!used[bk][p]) continue;
      for (int k = 0; k < K; k++) begin
        h_we = 1; h_bank = 2'(bk); h_addr = AB'(p * D/2 + k);
        for (int l = 0; l < B; l++) h_wdata[l] = img[bk][p][k][l];
        @(negedge clk);
      end
    end
    h_we = 0;
    cfg_arrangement = arr; cfg_k = AB'(K); start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done && cyc < 200000) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc != K + 7*B + 2) begin
      failures++;
      $display("FAIL latency %0d expected %0d", cyc, K + 7*B + 2);
    end
  endtask

  // read output bank word c, lane i
  logic [B-1:0][31:0] obuf [2][2*B];
  task automatic read_outputs();
    for (int bk = 0; bk < 2; bk++)
      for (int c = 0; c < 2*B; c++) begin
        h_obank = 1'(bk); h_oaddr = OB'(c);
        @(negedge clk);
        obuf[bk][c] = h_ordata;
      end
  endtask

  task automatic expect_val(string layer, int got, int exp_v, int bk, int c, int i);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 20) $display("FAIL %s bank %0d word %0d lane %0d: got %0d exp %0d",
                                  layer, bk, c, i, got, exp_v);
    end
  endtask

  // ---------------- ResNet50 conv3_x 3x3 on 1x1 ----------------
  localparam int RH = 28, RC = 128, RF = 128, RK = 9 * RC;
  logic signed [7:0] r_in [RC][RH][RH];
  logic signed [7:0] r_w  [RF][RC][3][3];

  function automatic logic signed [7:0] r_pix(int c, int y, int x);
    if (y < 0 || y >= RH || x < 0 || x >= RH) return 0;
    return r_in[c][y][x];
  endfunction

  task automatic run_resnet();
    for (int c = 0; c < RC; c++) for (int y = 0; y < RH; y++) for (int x = 0; x < RH; x++)
      r_in[c][y][x] = 8'($urandom);
    for (int f = 0; f < RF; f++) for (int c = 0; c < RC; c++)
      for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) r_w[f][c][ky][kx] = 8'($urandom);
    used = '0;
    used[0][1] = 1; used[1][1] = 1; used[2][1] = 1; used[3][1] = 1;
    for (int bk = 0; bk < 4; bk++) img[bk][1] = new[RK];
    for (int c = 0; c < RC; c++) for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) begin
      int k;
      k = (c * 3 + ky) * 3 + kx;
      for (int l = 0; l < B; l++) begin
        int p0, p1;
        img[0][1][k][l] = r_w[l][c][ky][kx];          // filters 0..63
        img[1][1][k][l] = r_w[B + l][c][ky][kx];      // filters 64..127
        p0 = l; p1 = B + l;                           // output pixels
        img[2][1][k][l] = r_pix(c, p0 / RH + ky - 1, p0 % RH + kx - 1);
        img[3][1][k][l] = r_pix(c, p1 / RH + ky - 1, p1 % RH + kx - 1);
      end
    end
    load_and_run(ARR_1X1, RK);
    read_outputs();
    for (int bk = 0; bk < 2; bk++) for (int c = 0; c < 2*B; c++) for (int i = 0; i < B; i++) begin
      int f, oy, ox, acc;
      f = bk * B + i; oy = c / RH; ox = c % RH; acc = 0;
      for (int ch = 0; ch < RC; ch++) for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++)
        acc += int'(r_w[f][ch][ky][kx]) * int'(r_pix(ch, oy + ky - 1, ox + kx - 1));
      expect_val("resnet50", $signed(obuf[bk][c][i]), acc, bk, c, i);
    end
    $display("ResNet50 conv3_x tile (1x1, K=%0d) checked", RK);
  endtask

  // ---------------- AlexNet conv1 on 4x1 ----------------
  localparam int AH = 227, AO = 55, AC = 3, AKS = 11, AS = 4, AK = AC * AKS * AKS;
  localparam int AROWS = 28;   // input rows touched by the first 256 output pixels
  logic signed [7:0] a_in [AC][AROWS][AH];
  logic signed [7:0] a_w  [B][AC][AKS][AKS];

  task automatic run_alexnet();
    for (int c = 0; c < AC; c++) for (int y = 0; y < AROWS; y++) for (int x = 0; x < AH; x++)
      a_in[c][y][x] = 8'($urandom);
    for (int f = 0; f < B; f++) for (int c = 0; c < AC; c++)
      for (int ky = 0; ky < AKS; ky++) for (int kx = 0; kx < AKS; kx++) a_w[f][c][ky][kx] = 8'($urandom);
    used = '0;
    used[0][1] = 1; used[1][1] = 1;                    // shared weight ports
    used[2] = 2'b11; used[3] = 2'b11;                  // four pixel groups
    img[0][1] = new[AK]; img[1][1] = new[AK];
    for (int bk = 2; bk < 4; bk++) for (int p = 0; p < 2; p++) img[bk][p] = new[AK];
    for (int c = 0; c < AC; c++) for (int ky = 0; ky < AKS; ky++) for (int kx = 0; kx < AKS; kx++) begin
      int k;
      k = (c * AKS + ky) * AKS + kx;
      for (int l = 0; l < B; l++) begin
        img[0][1][k][l] = a_w[l][c][ky][kx];
        img[1][1][k][l] = a_w[l][c][ky][kx];
        // array 0: I0.P0 pixels 0..63, array 1: I1.P0 64..127,
        // array 2: I0.P1 128..191, array 3: I1.P1 192..255
        for (int g = 0; g < 4; g++) begin
          int pix, oy, ox;
          pix = g * B + l; oy = pix / AO; ox = pix % AO;
          img[2 + (g % 2)][g / 2][k][l] = a_in[c][oy * AS + ky][ox * AS + kx];
        end
      end
    end
    load_and_run(ARR_4X1, AK);
    read_outputs();
    for (int bk = 0; bk < 2; bk++) for (int c = 0; c < 2*B; c++) for (int i = 0; i < B; i++) begin
      int pix, oy, ox, acc;
      pix = bk * 2 * B + c; oy = pix / AO; ox = pix % AO; acc = 0;
      for (int ch = 0; ch < AC; ch++) for (int ky = 0; ky < AKS; ky++) for (int kx = 0; kx < AKS; kx++)
        acc += int'(a_w[i][ch][ky][kx]) * int'(a_in[ch][oy * AS + ky][ox * AS + kx]);
      expect_val("alexnet", $signed(obuf[bk][c][i]), acc, bk, c, i);
    end
    $display("AlexNet conv1 tile (4x1, K=%0d) checked", AK);
  endtask

  // ---------------- DeepSpeech fully connected on 1x2 ----------------
  localparam int SK = 2048, ST = 2 * B, SN = 2 * B;
  logic signed [7:0] s_x [ST][SK];
  logic signed [7:0] s_w [SN][SK];

  task automatic run_deepspeech();
    for (int t = 0; t < ST; t++) for (int k = 0; k < SK; k++) s_x[t][k] = 8'($urandom);
    for (int n = 0; n < SN; n++) for (int k = 0; k < SK; k++) s_w[n][k] = 8'($urandom);
    used = '0;
    used[0] = 2'b11; used[1] = 2'b11;                   // units 0..63 / 64..127, twice
    used[2][1] = 1; used[3][1] = 1;                     // time steps 0..63 / 64..127
    for (int p = 0; p < 2; p++) begin img[0][p] = new[SK]; img[1][p] = new[SK]; end
    img[2][1] = new[SK]; img[3][1] = new[SK];
    for (int k = 0; k < SK; k++) for (int l = 0; l < B; l++) begin
      for (int p = 0; p < 2; p++) begin
        img[0][p][k][l] = s_w[l][k];
        img[1][p][k][l] = s_w[B + l][k];
      end
      img[2][1][k][l] = s_x[l][k];
      img[3][1][k][l] = s_x[B + l][k];
    end
    load_and_run(ARR_1X2, SK);
    read_outputs();
    for (int bk = 0; bk < 2; bk++) for (int c = 0; c < 2*B; c++) for (int i = 0; i < B; i++) begin
      int n, t, acc;
      n = bk * B + i; t = c; acc = 0;
      for (int k = 0; k < SK; k++) acc += int'(s_w[n][k]) * int'(s_x[t][k]);
      expect_val("deepspeech", $signed(obuf[bk][c][i]), acc, bk, c, i);
    end
    $display("DeepSpeech FC tile (1x2, K=%0d) checked", SK);
  endtask

  initial begin
    start = 0; cfg_arrangement = ARR_2X2; cfg_k = 0;
    h_we = 0; h_bank = 0; h_addr = 0; h_wdata = '0; h_obank = 0; h_oaddr = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    run_resnet();
    run_alexnet();
    run_deepspeech();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
