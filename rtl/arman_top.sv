// arman_top -- ARMAN: four systolic arrays that reconfigure into one, two,
// three or four accelerators.
//
// Four B x B output-stationary arrays (B = 64, 128 x 128 PEs in all; in the
// paper each array is one tier of a monolithic 3D stack) are joined by the
// Mux/DeMux groups of reconfig_interconnect. The arrangement chosen at start
// sets the ten group selectors (arrangement_decoder) and thus whether arrays
// work apart (2x2), in pairs (2x1 wide, 1x2 tall), share one operand stream
// (4x1, 1x4, 3x1, 1x3) or form a single 128 x 128 array (1x1).
//
// Data path: two weight banks (W0 feeding the top pair from the left, W1 the
// bottom pair) and two input banks (I0 feeding the left pair from the top, I1
// the right pair) each have two read ports; every port goes through a skew
// buffer into the interconnect. Results drain to the right into two output
// banks (O0 for the top pair, O1 for the bottom pair).
//
// Host interface (the side of the off-chip DRAM and host processor, which are
// outside this design): h_we/h_bank/h_addr/h_wdata write an operand word into
// bank 0 = W0, 1 = W1, 2 = I0, 3 = I1; h_obank/h_oaddr read an output word
// with one cycle of latency. Memory layout: port p of a bank streams the half
// of the bank that starts at p*DEPTH/2, address base+k holding reduction
// index k (a column of weights for the bank's B rows, or a row of
// activations for its B columns). Output bank word c holds output column c
// of the pair, one 32-bit value per row.
//
// Operation: set cfg_arrangement and cfg_k, pulse start while !busy; done
// pulses K + 7B + 2 cycles after start. A new arrangement takes effect with
// the next start, which is how the array is switched between layers.
module arman_top
  import arman_pkg::*;
#(
  parameter int unsigned B     = BASE,
  parameter int unsigned DEPTH = 32768,
  localparam int unsigned ABITS = $clog2(DEPTH),
  localparam int unsigned OBITS = $clog2(2*B)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // control
  input  logic                    start,
  input  arrangement_e            cfg_arrangement,
  input  logic [ABITS-1:0]        cfg_k,
  output logic                    busy,
  output logic                    done,
  // host write port for operand banks
  input  logic                    h_we,
  input  logic [1:0]              h_bank,
  input  logic [ABITS-1:0]        h_addr,
  input  logic [B-1:0][DW-1:0]    h_wdata,
  // host read port for output banks
  input  logic                    h_obank,
  input  logic [OBITS-1:0]        h_oaddr,
  output logic [B-1:0][AW-1:0]    h_ordata
);

  arrangement_e arrangement;
  group_sel_t   sel;
  array_mask_t  active;
  pe_mode_e [3:0] pe_mode;

  logic [1:0][1:0]             w_re, i_re, o_we;
  logic [1:0][1:0][ABITS-1:0]  w_raddr, i_raddr;
  logic [1:0][1:0][OBITS-1:0]  o_waddr;

  logic [1:0][1:0][B-1:0][DW-1:0] w_rdata, i_rdata, w_skew, i_skew;
  logic [3:0][B-1:0][DW-1:0] arr_w_in, arr_a_in, arr_w_out, arr_a_out;
  logic [3:0][B-1:0][AW-1:0] arr_p_in, arr_p_out;
  logic [1:0][1:0][B-1:0][AW-1:0] o_data;
  logic [1:0][B-1:0][AW-1:0] o_rdata;

  arman_controller #(.B(B), .DEPTH(DEPTH)) u_ctrl (
    .clk, .rst_n, .start, .cfg_arrangement, .cfg_k, .busy, .done,
    .arrangement, .sel, .active, .pe_mode,
    .w_re, .w_raddr, .i_re, .i_raddr, .o_we, .o_waddr
  );

  arrangement_decoder u_dec (.arrangement, .sel, .active);

  for (genvar b = 0; b < 2; b++) begin : g_bank
    operand_sram #(.LANES(B), .DEPTH(DEPTH)) u_wsram (
      .clk, .rst_n,
      .we(h_we && h_bank == 2'(b)), .waddr(h_addr), .wdata(h_wdata),
      .re(w_re[b]), .raddr(w_raddr[b]), .rdata(w_rdata[b])
    );
    operand_sram #(.LANES(B), .DEPTH(DEPTH)) u_isram (
      .clk, .rst_n,
      .we(h_we && h_bank == 2'(b + 2)), .waddr(h_addr), .wdata(h_wdata),
      .re(i_re[b]), .raddr(i_raddr[b]), .rdata(i_rdata[b])
    );
    for (genvar p = 0; p < 2; p++) begin : g_port
      skew_buffer #(.LANES(B), .W(DW)) u_wskew (.clk, .rst_n, .in(w_rdata[b][p]), .out(w_skew[b][p]));
      skew_buffer #(.LANES(B), .W(DW)) u_iskew (.clk, .rst_n, .in(i_rdata[b][p]), .out(i_skew[b][p]));
    end
    output_sram #(.LANES(B), .DEPTH(2*B)) u_osram (
      .clk, .we(o_we[b]), .waddr(o_waddr[b]), .wdata(o_data[b]),
      .raddr(h_oaddr), .rdata(o_rdata[b])
    );
  end

  assign h_ordata = o_rdata[h_obank];

  reconfig_interconnect #(.B(B)) u_net (
    .sel, .w_bank(w_skew), .i_bank(i_skew),
    .arr_w_out, .arr_a_out, .arr_p_out,
    .arr_w_in, .arr_a_in, .arr_p_in, .o_data
  );

  for (genvar a = 0; a < 4; a++) begin : g_array
    systolic_array #(.B(B)) u_sa (
      .clk, .rst_n, .mode(pe_mode[a]),
      .w_in(arr_w_in[a]), .a_in(arr_a_in[a]), .p_in(arr_p_in[a]),
      .w_out(arr_w_out[a]), .a_out(arr_a_out[a]), .p_out(arr_p_out[a])
    );
  end

endmodule
