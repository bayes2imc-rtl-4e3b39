// core_ctrl: read sequencer of a Bayes2IMC core.
//
// One MVM reads the weight plane row by row. A row takes P = T_NP clock cycles (P is latched at
// `start`; P = 1 in frequentist mode). In the first cycle of a row the WP word line of row j is
// on (T_WP = one cycle); the NP word line(s) chosen by the stochastic arbiter are on for all P
// cycles, so the NP current is weighted P times the WP current. The integrators restart at the
// first cycle of every row, and in that same cycle the sense amplifiers decide the weights of
// the previous row (sense), while the input x of that row is read from the input buffer. One
// cycle later the accumulators add or subtract x. After the last row: one sense cycle, one
// accumulate cycle, then the column sums are loaded into the transfer registers, waiting
// (stalling) if those are still sending out the previous MVM. An MVM therefore takes
// WP_ROWS * P + 3 cycles from the cycle after `start` to `done`, when there is no stall.
//
// The row-by-row order, the single-cycle T_WP and T_NP = P cycles follow the paper; the
// placement of the WP pulse at the start of the NP pulse, the overlap of sense with the next
// row and the stall rule are this design's choices.
module core_ctrl
  import b2i_pkg::*;
#(
  parameter int unsigned WPR = WP_ROWS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [TNP_W-1:0]        t_np,
  input  logic                    freq_mode,
  input  logic                    tx_busy,
  output logic                    busy,
  output logic                    done,
  output logic                    stall,
  // word-line control
  output logic                    wp_en,
  output logic [$clog2(WPR)-1:0]  wp_row,
  output logic                    np_en,
  output logic                    arb_req,
  // integrators, sense amplifiers, accumulators, transfer registers
  output logic                    integ_en,
  output logic                    integ_clr,
  output logic                    sense,
  output logic                    x_rd_en,
  output logic [$clog2(WPR)-1:0]  x_rd_addr,
  output logic                    acc_en,
  output logic                    acc_first,
  output logic                    tx_load
);
  typedef enum logic [2:0] {S_IDLE, S_RUN, S_SENSE, S_ACC, S_LOAD} state_t;
  state_t state;

  logic [TNP_W-1:0]       p_len, ph;
  logic [$clog2(WPR)-1:0] row;
  logic                   fm;
  logic                   acc_pend;
  logic [$clog2(WPR)-1:0] acc_row;

  wire last_ph  = (ph == p_len - 1'b1);
  wire last_row = (32'(row) == WPR - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      p_len    <= TNP_W'(KAPPA);
      ph       <= '0;
      row      <= '0;
      fm       <= 1'b0;
      acc_pend <= 1'b0;
      acc_row  <= '0;
    end else begin
      acc_pend <= sense;
      if (sense) acc_row <= x_rd_addr;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_RUN;
          p_len <= freq_mode ? TNP_W'(1) : ((t_np == '0) ? TNP_W'(1) : t_np);
          fm    <= freq_mode;
          ph    <= '0;
          row   <= '0;
        end
        S_RUN: begin
          if (last_ph) begin
            ph <= '0;
            if (last_row) state <= S_SENSE;
            else          row   <= row + 1'b1;
          end else ph <= ph + 1'b1;
        end
        S_SENSE: state <= S_ACC;
        S_ACC:   state <= S_LOAD;
        S_LOAD:  if (!tx_busy) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy      = (state != S_IDLE);
    wp_en     = (state == S_RUN) && (ph == '0);
    wp_row    = row;
    np_en     = (state == S_RUN) && !fm;
    // New NP rows are drawn one cycle before each row starts.
    arb_req   = (state == S_IDLE && start) || (state == S_RUN && last_ph && !last_row);
    integ_en  = (state == S_RUN);
    integ_clr = (state == S_RUN) && (ph == '0);
    sense     = ((state == S_RUN) && (ph == '0) && (row != '0)) || (state == S_SENSE);
    x_rd_en   = sense;
    x_rd_addr = (state == S_SENSE) ? row : row - 1'b1;
    acc_en    = acc_pend;
    acc_first = acc_pend && (acc_row == '0);
    tx_load   = (state == S_LOAD) && !tx_busy;
    done      = tx_load;
    stall     = (state == S_LOAD) && tx_busy;
  end
endmodule
