// ca_rule90 - elementary cellular automaton, rule 90, over a D-cell hypervector.
//
// Every bit of the hypervector is one cell; the next state of a cell is the XOR
// of its two cyclic neighbours, i.e. next = rho(+1)(state) ^ rho(-1)(state).
// This follows the paper's rule-90 equation. The register holds the most
// recently generated vector, which is the seed of the next step.
//
// Interface: load_i writes load_val_i into the state; otherwise step_i
// advances one rule-90 step. next_o is the combinational rule-90 image of the
// state, state_o the registered state. One step per clock cycle.
// The state is cleared by reset (an all-zero state is a fixed point, so a
// non-zero seed must be loaded before use: this is the design's own choice).
module ca_rule90 #(
  parameter int unsigned D = hdc_pkg::HV_DIM_DEFAULT
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load_i,
  input  logic [D-1:0] load_val_i,
  input  logic         step_i,
  output logic [D-1:0] state_o,
  output logic [D-1:0] next_o
);

  logic [D-1:0] state_q;

  // rho(+1): bit i <- bit i+1 ; rho(-1): bit i <- bit i-1 (cyclic)
  assign next_o  = {state_q[0], state_q[D-1:1]} ^ {state_q[D-2:0], state_q[D-1]};
  assign state_o = state_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      state_q <= '0;
    else if (load_i) state_q <= load_val_i;
    else if (step_i) state_q <= next_o;
  end

endmodule
