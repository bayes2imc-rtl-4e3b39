// b2i_tile: a tile of Bayes2IMC cores with its buffers and neuron processing unit.
//
// A layer is mapped by splitting its input vector over the NCORES cores: core k holds rows
// 128k .. 128k+127 of the layer's weight parameters and reads its slice of the input from its
// own input buffer bank. All cores are started together and run in lock step, so their column
// sums leave at the same time; the neuron processing unit adds them, applies BN (coefficients
// in bn_coeff_mem), ReLU and max-pooling and writes the 8-bit activations into the output
// buffer, or, for the last layer, forwards the sums as logits.
//
// Interface: the host programs crossbar devices (prog_*, with prog_core selecting the core),
// loads BN coefficients (bn_we ...), writes input banks (in_we, in_core, in_addr, in_data) and
// reads the output buffer (out_raddr -> out_rdata one cycle later). `start` runs one MVM on all
// cores with the common T_NP, n_r and mode; `mvm_done` pulses when the sums are in the transfer
// registers, `vec_done` when the neuron unit has processed the last column of a vector. `stall`
// reports cycles in which core 0 waits for its transfer registers. Cores get different LFSR
// seeds (seed + k). The number of cores per tile (4) is this design's choice.
module b2i_tile
  import b2i_pkg::*;
#(
  parameter int unsigned NCORES = 4,
  parameter int unsigned WPR    = WP_ROWS,
  parameter int unsigned NPR    = NP_ROWS,
  parameter int unsigned NC     = COLS
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic [31:0]                          seed,
  // programming
  input  logic                                 prog_en,
  input  logic [$clog2(NCORES)-1:0]            prog_core,
  input  logic                                 prog_np,
  input  logic [$clog2(WPR)-1:0]               prog_row,
  input  logic [$clog2(NC)-1:0]                prog_col,
  input  logic                                 prog_neg,
  input  logic [G_W-1:0]                       prog_g,
  input  logic                                 bn_we,
  input  logic [$clog2(NC)-1:0]                bn_waddr,
  input  logic [15:0]                          bn_wa,
  input  logic [15:0]                          bn_wb,
  // buffers
  input  logic                                 in_we,
  input  logic [$clog2(NCORES)-1:0]            in_core,
  input  logic [$clog2(WPR)-1:0]               in_addr,
  input  logic [X_W-1:0]                       in_data,
  input  logic [$clog2(NC)-1:0]                out_raddr,
  output logic [X_W-1:0]                       out_rdata,
  // control
  input  logic                                 start,
  input  logic [TNP_W-1:0]                     t_np,
  input  logic                                 nr2,
  input  logic                                 freq_mode,
  input  logic [2:0]                           pool_n,
  input  logic                                 last_layer,
  output logic                                 busy,
  output logic                                 mvm_done,
  output logic                                 vec_done,
  output logic                                 stall,
  // logits
  output logic                                 logit_valid,
  input  logic                                 logit_ready,
  output logic [$clog2(NC)-1:0]                logit_col,
  output logic signed [ACC_W+$clog2(NCORES):0] logit_data
);
  logic [NCORES-1:0]                 c_busy, c_done, c_stall, c_xen, c_oval;
  logic [NCORES-1:0][$clog2(WPR)-1:0] c_xaddr;
  logic [NCORES-1:0][X_W-1:0]        c_xdata;
  logic [NCORES-1:0][$clog2(NC)-1:0] c_ocol;
  logic [NCORES-1:0][ACC_W-1:0]      c_odata;
  logic                              nu_ready;
  logic [$clog2(NC)-1:0]             bn_raddr;
  logic signed [15:0]                bn_a, bn_b;
  logic                              act_valid;
  logic [$clog2(NC)-1:0]             act_col;
  logic [X_W-1:0]                    act_data;

  for (genvar k = 0; k < NCORES; k++) begin : g_core
    act_buffer #(.DEPTH(WPR), .W(X_W)) u_inbuf (
      .clk, .we(in_we && 32'(in_core) == k), .waddr(in_addr), .wdata(in_data),
      .re(c_xen[k]), .raddr(c_xaddr[k]), .rdata(c_xdata[k])
    );

    b2i_core #(.WPR(WPR), .NPR(NPR), .NC(NC)) u_core (
      .clk, .rst_n, .seed(seed + 32'(k)),
      .prog_en(prog_en && 32'(prog_core) == k), .prog_np, .prog_row, .prog_col, .prog_neg, .prog_g,
      .start, .t_np, .nr2, .freq_mode, .busy(c_busy[k]), .done(c_done[k]), .stall(c_stall[k]),
      .x_rd_en(c_xen[k]), .x_rd_addr(c_xaddr[k]), .x_rd_data(c_xdata[k]),
      .out_valid(c_oval[k]), .out_ready(nu_ready), .out_col(c_ocol[k]), .out_data(c_odata[k])
    );
  end

  assign busy     = |c_busy || |c_oval;
  assign mvm_done = c_done[0];
  assign stall    = c_stall[0];

  bn_coeff_mem #(.NC(NC)) u_bnmem (
    .clk, .we(bn_we), .waddr(bn_waddr), .wa(bn_wa), .wb(bn_wb), .raddr(bn_raddr), .ra(bn_a), .rb(bn_b)
  );

  neuron_unit #(.NCORES(NCORES), .NC(NC)) u_nu (
    .clk, .rst_n, .last_layer, .pool_n,
    .in_valid(c_oval[0]), .in_ready(nu_ready), .in_col(c_ocol[0]), .in_psum(c_odata),
    .bn_raddr, .bn_a, .bn_b,
    .act_valid, .act_col, .act_data, .vec_done,
    .logit_valid, .logit_ready, .logit_col, .logit_data
  );

  act_buffer #(.DEPTH(NC), .W(X_W)) u_outbuf (
    .clk, .we(act_valid), .waddr(act_col), .wdata(act_data), .re(1'b1), .raddr(out_raddr), .rdata(out_rdata)
  );

  // The cores run in lock step: they must present the same column at the same time.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    c_oval[0] |-> (&c_oval && c_ocol == {NCORES{c_ocol[0]}}));
endmodule
