// sl_integrator: behavioural model of the current integrators and differential sense amplifiers
// at the foot of the crossbar columns.
//
// This is a behavioural model of an analog circuit (integrating capacitors and a differential
// sense amplifier per column), written in synthesizable style so that the core can be linted
// and simulated. Each column has two integrators, one per source line of the differential pair.
// Charge is modelled as the sum of the current codes over the clock cycles of the read window:
// because the WP word line is on for T_WP and the NP word line for T_NP = kappa * T_WP, the
// charge difference is T_WP * ((Gw+ - Gw-) + kappa * (Gn+ - Gn-)), whose sign is the sign of
// kappa^-1 (Gw+ - Gw-) + (Gn+ - Gn-) in the core equation of the paper.
//
// Timing: in a cycle with `en` high the integrators add this cycle's current; with `clr` also
// high they restart from this cycle's current instead (a new window with no idle cycle). With
// `sense` high the sense amplifiers compare the charges accumulated so far (before this cycle's
// current) and register w_pos = 1 (weight +1) if the SL+ charge is not below the SL- charge; a
// tie gives +1, following "w = +1 if zeta <= z_w".
module sl_integrator
  import b2i_pkg::*;
#(
  parameter int unsigned NC = COLS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    clr,
  input  logic                    sense,
  input  logic [NC-1:0][I_W-1:0]  i_pos,
  input  logic [NC-1:0][I_W-1:0]  i_neg,
  output logic [NC-1:0]           w_pos
);
  logic [NC-1:0][Q_W-1:0] q_pos, q_neg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_pos <= '0;
      q_neg <= '0;
      w_pos <= '0;
    end else begin
      for (int c = 0; c < NC; c++) begin
        if (sense) w_pos[c] <= (q_pos[c] >= q_neg[c]);
        if (en) begin
          q_pos[c] <= (clr ? '0 : q_pos[c]) + Q_W'(i_pos[c]);
          q_neg[c] <= (clr ? '0 : q_neg[c]) + Q_W'(i_neg[c]);
        end else if (clr) begin
          q_pos[c] <= '0;
          q_neg[c] <= '0;
        end
      end
    end
  end
endmodule
