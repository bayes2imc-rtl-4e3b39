// b2i_top: Bayes2IMC accelerator: tiles of in-memory-computing cores, drift compensation and the
// post-processing unit.
//
// NTILES tiles (b2i_tile) each run one MVM of a layer on NCORES cores at a time. All cores share
// one read-pulse setting: drift_comp turns the time since programming and the read mode n_r into
// the noise-plane pulse length T_NP (8 or 4 cycles after programming, shrinking as the devices
// drift), which is the only drift correction the network needs. The tile selected by `ppu_tile`
// feeds its last-layer logits to post_proc_unit, which corrects them, applies softmax and
// averages N_MC ensemble members into the prediction.
//
// The chip-level controller that maps layers onto tiles, moves activations between them and
// runs the N_MC repetitions is not specified in the paper; its signals are the programming,
// buffer, coefficient and tile-control ports of this module. Tile t seeds its cores' LFSRs with
// seed + 1024*t + core. Programming is done through a direct device-write port
// that stands for the program-and-verify write circuitry. Tile count (2) and cores per tile (4)
// are this design's choices.
module b2i_top
  import b2i_pkg::*;
#(
  parameter int unsigned NTILES = 2,
  parameter int unsigned NCORES = 4,
  parameter int unsigned WPR    = WP_ROWS,
  parameter int unsigned NPR    = NP_ROWS,
  parameter int unsigned NC     = COLS
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic [31:0]                           seed,
  // device programming and BN coefficients (host)
  input  logic                                  prog_en,
  input  logic [$clog2(NTILES)-1:0]             prog_tile,
  input  logic [$clog2(NCORES)-1:0]             prog_core,
  input  logic                                  prog_np,
  input  logic [$clog2(WPR)-1:0]                prog_row,
  input  logic [$clog2(NC)-1:0]                 prog_col,
  input  logic                                  prog_neg,
  input  logic [G_W-1:0]                        prog_g,
  input  logic                                  bn_we,
  input  logic [$clog2(NTILES)-1:0]             bn_tile,
  input  logic [$clog2(NC)-1:0]                 bn_waddr,
  input  logic [15:0]                           bn_wa,
  input  logic [15:0]                           bn_wb,
  // activation buffers (host)
  input  logic                                  in_we,
  input  logic [$clog2(NTILES)-1:0]             in_tile,
  input  logic [$clog2(NCORES)-1:0]             in_core,
  input  logic [$clog2(WPR)-1:0]                in_addr,
  input  logic [X_W-1:0]                        in_data,
  input  logic [$clog2(NTILES)-1:0]             out_tile,
  input  logic [$clog2(NC)-1:0]                 out_raddr,
  output logic [X_W-1:0]                        out_rdata,
  // read mode and drift compensation
  input  logic                                  nr2,
  input  logic                                  freq_mode,
  input  logic                                  comp_en,
  input  logic [31:0]                           t_s,
  output logic [TNP_W-1:0]                      t_np,
  // tile control
  input  logic [NTILES-1:0]                     start,
  input  logic [NTILES-1:0][2:0]                pool_n,
  input  logic [NTILES-1:0]                     last_layer,
  output logic [NTILES-1:0]                     busy,
  output logic [NTILES-1:0]                     mvm_done,
  output logic [NTILES-1:0]                     vec_done,
  output logic [NTILES-1:0]                     stall,
  // post-processing
  input  logic [$clog2(NTILES)-1:0]             ppu_tile,
  input  logic                                  lc_en,
  input  logic                                  cfg_we,
  input  logic [$clog2(NCLASS)-1:0]             cfg_cls,
  input  lc_coef_t                              cfg_coef,
  output logic                                  res_valid,
  output logic [NCLASS-1:0][PROB_W-1:0]         res_prob,
  output logic [$clog2(NCLASS)-1:0]             res_class,
  output logic                                  member_done
);
  localparam int unsigned LW = ACC_W + $clog2(NCORES) + 1;

  logic [NTILES-1:0]                    l_valid, l_ready;
  logic [NTILES-1:0][$clog2(NC)-1:0]    l_col;
  logic [NTILES-1:0][LW-1:0]            l_data;
  logic [NTILES-1:0][X_W-1:0]           o_data;
  logic                                 ppu_ready;

  drift_comp #(.KAPPA(KAPPA)) u_drift (.t_s, .nr2, .comp_en, .t_np);

  for (genvar t = 0; t < NTILES; t++) begin : g_tile
    b2i_tile #(.NCORES(NCORES), .WPR(WPR), .NPR(NPR), .NC(NC)) u_tile (
      .clk, .rst_n, .seed(seed + 32'(t * 1024)),
      .prog_en(prog_en && 32'(prog_tile) == t), .prog_core, .prog_np, .prog_row, .prog_col, .prog_neg, .prog_g,
      .bn_we(bn_we && 32'(bn_tile) == t), .bn_waddr, .bn_wa, .bn_wb,
      .in_we(in_we && 32'(in_tile) == t), .in_core, .in_addr, .in_data,
      .out_raddr, .out_rdata(o_data[t]),
      .start(start[t]), .t_np, .nr2, .freq_mode, .pool_n(pool_n[t]), .last_layer(last_layer[t]),
      .busy(busy[t]), .mvm_done(mvm_done[t]), .vec_done(vec_done[t]), .stall(stall[t]),
      .logit_valid(l_valid[t]), .logit_ready(l_ready[t]), .logit_col(l_col[t]), .logit_data(l_data[t])
    );
    // Logits of a tile that does not feed the post-processing unit are dropped.
    assign l_ready[t] = (32'(ppu_tile) == t) ? ppu_ready : 1'b1;
  end

  assign out_rdata = o_data[out_tile];

  post_proc_unit #(.LW(LW)) u_ppu (
    .clk, .rst_n, .lc_en, .cfg_we, .cfg_cls, .cfg_coef,
    .in_valid(l_valid[ppu_tile]), .in_ready(ppu_ready), .in_cls(7'(l_col[ppu_tile])),
    .in_logit(l_data[ppu_tile]), .res_valid, .res_prob, .res_class, .member_done
  );
endmodule
