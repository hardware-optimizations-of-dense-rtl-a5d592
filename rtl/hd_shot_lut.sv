// hd_shot_lut: s-hot lookup table.
//
// Turns a quantized signal value s (binary, 0..Q-1) into an s-hot code of
// Q-1 bits: bits 0..s-1 are 1, the rest 0 (a thermometer code). The code is the
// input manipulator of the CIM-replacing manipulator: value 0 leaves the seed
// S0 untouched and value Q-1 flips all Q-1 groups, i.e. D/2 bits.
// Values above Q-1 saturate to Q-1.
// The code has Q-1 bits because the connectivity matrix has one row per
// quantum, (D/2)/(Q-1) bits each, as in the paper's q = 8 example with 7 rows.
// Combinational, zero latency; written as a comparison per output bit, which
// a synthesis tool maps to the same small table.
module hd_shot_lut #(
  parameter int unsigned Q     = 21,
  parameter int unsigned VAL_W = (Q > 1) ? $clog2(Q) : 1
) (
  input  logic [VAL_W-1:0] value_i,  // quantized signal value s
  output logic [Q-2:0]     shot_o    // s-hot code
);

  always_comb begin
    for (int unsigned r = 0; r < Q - 1; r++) begin
      shot_o[r] = (32'(value_i) > r);
    end
  end

endmodule : hd_shot_lut
