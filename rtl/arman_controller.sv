// arman_controller -- sequencing and address generation for one layer tile.
//
// On start (accepted only while idle, which is when the arrangement may be
// switched) the controller latches the arrangement and the reduction length K
// and runs CLEAR (one cycle), COMPUTE (K + 5B cycles) and DRAIN (2B cycles),
// then pulses done. The compute length covers the worst case: a stream that
// starts B cycles late, one cycle of SRAM latency, and a skewed diagonal
// through a 2B x 2B array. Drain length is the width of the widest chain.
//
// Read streams. Port p of every operand bank reads the half of the bank
// starting at p*DEPTH/2: address base_p + k at stream cycle k, k = 0..K-1.
// A stream that feeds an array which receives its other operand through a
// neighbour (array 1 chained after array 0 horizontally, array 2 chained
// below array 0, and likewise for array 3) starts B cycles late, because
// that other operand has first crossed B PEs. The late streams are derived
// from the group selectors: rows of array 2 (3) start late when group 7 (10)
// chains it vertically, columns of array 1 (3) when group 4 (9) chains it
// horizontally.
//
// Drain. In drain cycle d the right edge of array 1 (3) holds the results of
// output column 2B-1-d of its pair and is written to port 1 of its output
// bank at that address; when group 3 (8) sends array 0 (2) straight to the
// output bank, its column B-1-d is written to port 0 for d < B. Idle arrays
// stay in CLEAR and write nothing.
//
// The paper says only that there is control logic per mode and a mechanism
// to switch modes; this sequencing, the fixed bank halves and the timing are
// this design's.
module arman_controller
  import arman_pkg::*;
#(
  parameter int unsigned B     = BASE,
  parameter int unsigned DEPTH = 32768,
  localparam int unsigned ABITS = $clog2(DEPTH),
  localparam int unsigned OBITS = $clog2(2*B),
  localparam int unsigned KBITS = ABITS        // K ranges 1 .. DEPTH/2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  arrangement_e            cfg_arrangement,
  input  logic [KBITS-1:0]        cfg_k,
  output logic                    busy,
  output logic                    done,
  // active configuration
  output arrangement_e            arrangement,
  input  group_sel_t              sel,          // from arrangement_decoder
  input  array_mask_t             active,
  output pe_mode_e [3:0]          pe_mode,
  // operand read ports: [bank][port]
  output logic [1:0][1:0]             w_re,
  output logic [1:0][1:0][ABITS-1:0]  w_raddr,
  output logic [1:0][1:0]             i_re,
  output logic [1:0][1:0][ABITS-1:0]  i_raddr,
  // output bank write ports: [bank][port]
  output logic [1:0][1:0]             o_we,
  output logic [1:0][1:0][OBITS-1:0]  o_waddr
);

  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_COMPUTE, S_DRAIN, S_DONE} state_e;

  localparam int unsigned TBITS = KBITS + $clog2(8*B) + 1;

  state_e           state;
  logic [KBITS-1:0] k_len;
  logic [TBITS-1:0] t;        // cycle within COMPUTE or DRAIN
  logic [TBITS-1:0] t_comp_last;

  assign t_comp_last = TBITS'(k_len) + TBITS'(5*B) - 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      arrangement <= ARR_2X2;
      k_len       <= '0;
      t           <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          arrangement <= cfg_arrangement;
          k_len       <= (cfg_k == '0) ? KBITS'(1) : cfg_k;
          state       <= S_CLEAR;
        end
        S_CLEAR: begin
          t     <= '0;
          state <= S_COMPUTE;
        end
        S_COMPUTE: begin
          if (t == t_comp_last) begin
            t     <= '0;
            state <= S_DRAIN;
          end else t <= t + 1'b1;
        end
        S_DRAIN: begin
          if (t == TBITS'(2*B-1)) begin
            t     <= '0;
            state <= S_DONE;
          end else t <= t + 1'b1;
        end
        default: state <= S_IDLE;   // S_DONE
      endcase
    end
  end

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);

  // PE modes
  always_comb begin
    for (int a = 0; a < 4; a++) begin
      unique case (state)
        S_COMPUTE: pe_mode[a] = active[a] ? PE_COMPUTE : PE_CLEAR;
        S_DRAIN:   pe_mode[a] = active[a] ? PE_DRAIN   : PE_CLEAR;
        S_CLEAR:   pe_mode[a] = PE_CLEAR;
        default:   pe_mode[a] = active[a] ? PE_HOLD : PE_CLEAR;
      endcase
    end
  end

  // Which array each port feeds and whether that stream starts B late.
  logic [1:0][1:0] w_use, w_late, i_use, i_late;
  logic row_late2, row_late3, col_late1, col_late3;

  always_comb begin
    row_late2 = !sel[6];
    row_late3 = !sel[9];
    col_late1 = !sel[3];
    col_late3 = !sel[8];
    // W0: P0 -> array 0 (g1=1); P1 -> array 0 (g1=0) and array 1 (g4=1)
    w_use[0][0]  = active[0] &&  sel[0];
    w_use[0][1]  = (active[0] && !sel[0]) || (active[1] && sel[3]);
    w_late[0]    = '0;
    // W1: P0 -> array 2 (g6=1); P1 -> array 2 (g6=0) and array 3 (g9=1)
    w_use[1][0]  = active[2] &&  sel[5];
    w_use[1][1]  = (active[2] && !sel[5]) || (active[3] && sel[8]);
    w_late[1][0] = row_late2;
    w_late[1][1] = (active[2] && !sel[5] && row_late2) || (active[3] && sel[8] && row_late3);
    // I0: P0 -> array 0 (g2=1); P1 -> array 0 (g2=0) and array 2 (g7=1)
    i_use[0][0]  = active[0] &&  sel[1];
    i_use[0][1]  = (active[0] && !sel[1]) || (active[2] && sel[6]);
    i_late[0]    = '0;
    // I1: P0 -> array 1 (g5=1); P1 -> array 1 (g5=0) and array 3 (g10=1)
    i_use[1][0]  = active[1] &&  sel[4];
    i_use[1][1]  = (active[1] && !sel[4]) || (active[3] && sel[9]);
    i_late[1][0] = col_late1;
    i_late[1][1] = (active[1] && !sel[4] && col_late1) || (active[3] && sel[9] && col_late3);
  end

  // Stream addresses
  always_comb begin
    for (int b = 0; b < 2; b++) begin
      for (int p = 0; p < 2; p++) begin
        logic [TBITS-1:0] kw, ki;
        kw = w_late[b][p] ? t - TBITS'(B) : t;
        ki = i_late[b][p] ? t - TBITS'(B) : t;
        w_re[b][p]    = (state == S_COMPUTE) && w_use[b][p] &&
                        (!w_late[b][p] || t >= TBITS'(B)) && kw < TBITS'(k_len);
        i_re[b][p]    = (state == S_COMPUTE) && i_use[b][p] &&
                        (!i_late[b][p] || t >= TBITS'(B)) && ki < TBITS'(k_len);
        w_raddr[b][p] = ABITS'(p * (DEPTH/2)) + ABITS'(kw);
        i_raddr[b][p] = ABITS'(p * (DEPTH/2)) + ABITS'(ki);
      end
    end
  end

  // Output writes
  always_comb begin
    for (int b = 0; b < 2; b++) begin
      // port 0: left array sent directly (group 3 / 8 = 1)
      o_we[b][0]    = (state == S_DRAIN) && active[2*b] && sel[(b == 1) ? 7 : 2] && t < TBITS'(B);
      o_waddr[b][0] = OBITS'(B - 1) - OBITS'(t);
      // port 1: right edge of the right array
      o_we[b][1]    = (state == S_DRAIN) && active[2*b+1] &&
                      (t < TBITS'(B) || !sel[(b == 1) ? 7 : 2]);
      o_waddr[b][1] = OBITS'(2*B - 1) - OBITS'(t);
    end
  end

endmodule
