// neuron_unit: tile-level neuron processing unit (pre-activation accumulation, BN, ReLU,
// max-pooling).
//
// A layer wider than 128 inputs is split over the cores of a tile, which run in lock step and
// stream the same column at the same time. This unit adds the NCORES partial sums of a column
// (stage 1), then, in stage 2, applies batch normalization with a single multiplier and adder,
// y = ((a * s) >>> 8) + b (a in Q8.8, b an integer, from bn_coeff_mem), ReLU, and saturation to
// the 0..127 range of the next layer's 8-bit inputs. Max-pooling keeps a running maximum per
// column over `pool_n` consecutive output vectors (pool_n = 1: no pooling) and writes the result
// out when the window is complete. For the last layer (`last_layer` high) BN, ReLU and pooling
// are bypassed and the full-precision sums leave as logits on a valid/ready stream towards the
// post-processing unit; only then can this unit apply back-pressure (in_ready low).
//
// The paper places one BN multiplier/adder and the accumulation, ReLU and pooling at tile level;
// the fixed-point formats, the saturation and the pooling order are this design's choices.
module neuron_unit
  import b2i_pkg::*;
#(
  parameter int unsigned NCORES = 4,
  parameter int unsigned NC     = COLS
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                last_layer,
  input  logic [2:0]                          pool_n,
  // partial sums from the cores
  input  logic                                in_valid,
  output logic                                in_ready,
  input  logic [$clog2(NC)-1:0]               in_col,
  input  logic [NCORES-1:0][ACC_W-1:0]        in_psum,
  // BN coefficient memory
  output logic [$clog2(NC)-1:0]               bn_raddr,
  input  logic signed [15:0]                  bn_a,
  input  logic signed [15:0]                  bn_b,
  // activations
  output logic                                act_valid,
  output logic [$clog2(NC)-1:0]               act_col,
  output logic [X_W-1:0]                      act_data,
  output logic                                vec_done,
  // logits (last layer)
  output logic                                logit_valid,
  input  logic                                logit_ready,
  output logic [$clog2(NC)-1:0]               logit_col,
  output logic signed [ACC_W+$clog2(NCORES):0] logit_data
);
  localparam int unsigned SW = ACC_W + $clog2(NCORES) + 1;

  logic                   s1_valid;
  logic [$clog2(NC)-1:0]  s1_col;
  logic signed [SW-1:0]   s1_sum;
  logic                   s1_go;
  logic [2:0]             pool_idx;
  logic [X_W-1:0]         pmax [NC];

  logic signed [SW-1:0]   sum_c;
  always_comb begin
    sum_c = '0;
    for (int k = 0; k < NCORES; k++) sum_c = sum_c + SW'(signed'(in_psum[k]));
  end

  // Stage 1 advances when it is empty or its content moves on.
  assign s1_go    = !s1_valid || !last_layer || logit_ready;
  assign in_ready = s1_go;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_col   <= '0;
      s1_sum   <= '0;
    end else if (s1_go) begin
      s1_valid <= in_valid;
      if (in_valid) begin
        s1_col <= in_col;
        s1_sum <= sum_c;
      end
    end
  end

  // Stage 2: BN, ReLU, saturation, pooling.
  logic signed [SW+16:0] prod;
  logic signed [SW+16:0] y;
  logic [X_W-1:0]        yq;
  logic [X_W-1:0]        pooled;
  logic                  last_col;
  assign bn_raddr = s1_col;
  always_comb begin
    prod   = (SW+17)'(s1_sum) * (SW+17)'(bn_a);
    y      = (prod >>> 8) + (SW+17)'(bn_b);
    if (y <= 0)        yq = '0;
    else if (y > 127)  yq = X_W'(127);
    else               yq = X_W'(y);
    pooled = (pool_idx == '0 || yq > pmax[s1_col]) ? yq : pmax[s1_col];
    last_col = (32'(s1_col) == NC - 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pool_idx  <= '0;
      act_valid <= 1'b0;
      act_col   <= '0;
      act_data  <= '0;
      vec_done  <= 1'b0;
    end else begin
      act_valid <= 1'b0;
      vec_done  <= 1'b0;
      if (s1_valid && !last_layer) begin
        pmax[s1_col] <= pooled;
        if (pool_idx + 3'd1 >= pool_n) begin
          act_valid <= 1'b1;
          act_col   <= s1_col;
          act_data  <= pooled;
        end
        if (last_col) begin
          pool_idx <= (pool_idx + 3'd1 >= pool_n) ? '0 : pool_idx + 3'd1;
          vec_done <= 1'b1;
        end
      end
    end
  end

  assign logit_valid = s1_valid && last_layer;
  assign logit_col   = s1_col;
  assign logit_data  = s1_sum;
endmodule
