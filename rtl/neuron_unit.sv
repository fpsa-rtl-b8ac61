// neuron_unit: behavioural model of the integrate-and-fire neuron at the foot
// of one crossbar column. The real part is an analog capacitor with a
// comparator, an S-R latch and a discharge transistor; this model is written
// so that tools can compile it, but it stands for that analog circuit.
//
// The capacitor voltage is modelled in the paper's linear "eta domain": each
// clock the membrane adds the charge the column delivered in that cycle. When
// the sum reaches the threshold eta the neuron fires: the spike is held for
// one cycle (the S-R latch, cleared by the next clock) and the capacitor is
// discharged to the reset level, so any excess above eta is lost, as in the
// paper's circuit. A window reset (win_rst) discharges the capacitor without
// a spike before each sampling window. Over a window the spike count is then
// close to sum(charge)/eta, the paper's Y_j = sum_i g_ji X_i / eta.
//
// Timing: charge present in cycle t gives a spike in cycle t+1 (registered
// output). win_rst has priority over integration. eta is an input so that the
// processing element can hold it in a configuration register.
module neuron_unit #(
  parameter int unsigned CHG_W = 16,
  parameter int unsigned V_W   = 20
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             win_rst,
  input  logic [V_W-1:0]   eta,
  input  logic [CHG_W-1:0] charge,
  output logic             spike
);

  logic [V_W:0] v_q;      // one spare bit: v_q < eta plus one cycle of charge
  logic [V_W:0] v_sum;

  assign v_sum = v_q + (V_W + 1)'(charge);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q   <= '0;
      spike <= 1'b0;
    end else if (win_rst) begin
      v_q   <= '0;
      spike <= 1'b0;
    end else if (v_sum >= {1'b0, eta}) begin
      v_q   <= '0;          // discharge to the reset level
      spike <= 1'b1;
    end else begin
      v_q   <= v_sum;
      spike <= 1'b0;
    end
  end

  initial assert (V_W >= CHG_W) else $error("V_W must hold one cycle of charge");

endmodule
