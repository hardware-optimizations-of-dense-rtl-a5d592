// hd_b2b_bundler: binarized back-to-back (B2B) bundling.
//
// Approximates the majority of a series of hypervectors while keeping a single
// D-bit register, with no counters. For the i-th hypervector of a bundle:
//     sim    = MAN(bundle, row i)          (flip the bits of row i)
//     bundle <= maj3(hv_i, bundle, sim)
// Where row i has a 1 the two copies of the bundle disagree, so the new vote
// decides the bit; elsewhere the old bundle wins. Row i of the connectivity
// matrix holds about D/i ones, so the i-th vote gets weight 1/i and the bundle
// keeps weight 1-1/i; row 1 is all ones, so the first vote is copied in whole.
// A 1-hot shift register walks the rows; after ROWS votes it stays on the
// last row. first_i restarts at row 1 for a new bundle.
// The majority-of-three structure, the 1/i weights, the 1-hot shift register
// and ROWS = 256 (the case-study maximum bundle cycles) follow the paper; the
// random positions of the 1s and the stay-on-last-row rule are this design's.
// Timing: one hypervector per cycle when en_i is high; bundle_o is the
// register, bundle_next_o the value it takes at the next edge.
module hd_b2b_bundler
  import hd_pkg::*;
#(
  parameter int unsigned D    = 8192,
  parameter int unsigned ROWS = 256
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         en_i,          // bundle hv_i this cycle
  input  logic         first_i,       // hv_i is the first of a new bundle
  input  logic [D-1:0] hv_i,          // N-gram hypervector to bundle
  output logic [D-1:0] bundle_o,      // current bundled hypervector
  output logic [D-1:0] bundle_next_o  // bundle after hv_i is added
);

  logic [ROWS-1:0] row_q;    // 1-hot shift register
  logic [ROWS-1:0] manip;
  logic [D-1:0]    sim_hv;

  assign manip = first_i ? ROWS'(1) : row_q;

  hd_man #(.D(D), .ROWS(ROWS), .KIND(MAN_B2B), .SEED(SEED_B2B)) u_man (
    .hv_i    (bundle_o),
    .manip_i (manip),
    .hv_o    (sim_hv)
  );

  assign bundle_next_o = (hv_i & bundle_o) | (hv_i & sim_hv) | (bundle_o & sim_hv);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      row_q    <= ROWS'(1);
      bundle_o <= '0;
    end else if (en_i) begin
      bundle_o <= bundle_next_o;
      row_q    <= manip[ROWS-1] ? manip : (manip << 1);
    end
  end

endmodule : hd_b2b_bundler
