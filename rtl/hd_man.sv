// hd_man: generic hypervector manipulator (MAN).
//
// A purely combinational OR-XOR network fixed by a ROWS x D connectivity
// matrix. Output bit n is input bit n toggled when any manipulator bit m with
// matrix cell (m,n) = 1 is high:
//     hv_o[n] = hv_i[n] ^ |(manip_i & column_n)
// A column with a single 1 becomes a plain XOR; an empty column is a wire.
// The same module serves three purposes, selected by KIND:
//   MAN_CIM  replaces the continuous item memory (driven by an s-hot code),
//   MAN_IM   replaces the item memory of channel hypervectors (1-hot code),
//   MAN_B2B  derives the similar hypervector for back-to-back bundling.
// The matrix itself is computed at elaboration by hd_pkg::conn_column from
// KIND and SEED (the paper fixes the number of 1s per row, not their place).
// Timing: no state, zero latency.
module hd_man
  import hd_pkg::*;
#(
  parameter int unsigned D    = 8192,
  parameter int unsigned ROWS = 20,
  parameter man_kind_e   KIND = MAN_CIM,
  parameter int unsigned SEED = SEED_CIM
) (
  input  logic [D-1:0]    hv_i,     // input hypervector
  input  logic [ROWS-1:0] manip_i,  // input manipulator
  output logic [D-1:0]    hv_o      // manipulated hypervector
);

  for (genvar n = 0; n < D; n++) begin : g_col
    localparam logic [MAX_ROWS-1:0] COL = conn_column(KIND, SEED, ROWS, D, n);
    assign hv_o[n] = hv_i[n] ^ (|(manip_i & COL[ROWS-1:0]));
  end

endmodule : hd_man
