// hd_cellular_automaton: D-cell elementary cellular automaton, rule 30.
//
// Rematerializes the item memory of channel hypervectors. The register is
// loaded with a hardwired random seed hypervector (channel hypervector C1);
// each step_i advances every cell by rule 30 over its neighbourhood of three:
//     next[i] = left XOR (centre OR right),  left = cell i+1, right = cell i-1,
// with the ends wrapped around (cyclic boundary). After k steps from the seed
// the state is channel hypervector C(k+1). Reloading reproduces the same
// sequence. Rule 30, the neighbourhood of three, the D cells and the seed
// reload follow the paper; which neighbour is "left" and the cyclic boundary
// are this design's choices.
// Timing: load_i has priority over step_i; both take effect at the next
// clock edge. Reset loads the seed.
module hd_cellular_automaton
  import hd_pkg::*;
#(
  parameter int unsigned D    = 8192,
  parameter int unsigned SEED = SEED_CA
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         load_i,   // reload the seed state
  input  logic         step_i,   // advance one generation
  output logic [D-1:0] state_o   // current hypervector
);

  logic [D-1:0] seed_hv;
  logic [D-1:0] next_state;

  for (genvar n = 0; n < D; n++) begin : g_cell
    localparam logic SEED_BIT = seed_bit(SEED, n);
    assign seed_hv[n] = SEED_BIT;
    // rule 30: left ^ (centre | right)
    assign next_state[n] = state_o[(n + 1) % D] ^ (state_o[n] | state_o[(n + D - 1) % D]);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)      state_o <= seed_hv;
    else if (load_i)  state_o <= seed_hv;
    else if (step_i)  state_o <= next_state;
  end

endmodule : hd_cellular_automaton
