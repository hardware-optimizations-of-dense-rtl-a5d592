// hd_sat_counter_block: block of D bidirectional saturating counters.
//
// Bundles a series of hypervectors by componentwise majority. Each component
// has a W-bit two's-complement counter that counts up for a 1 vote and down
// for a 0 vote and saturates at -2^(W-1) and 2^(W-1)-1 instead of wrapping.
// The bundled bit is 1 when the counter is positive (a tie, counter 0, gives 0).
// first_i marks the first vote of a new bundle: the counter is then set to
// +1/-1 from that vote alone, so no separate clear cycle is needed.
// Counting up/down in one counter and saturating follow the paper; the tie
// rule and the first-vote load are this design's choices.
// Timing: a vote with en_i is counted at the clock edge; maj_o follows the
// registered counters.
module hd_sat_counter_block #(
  parameter int unsigned D = 8192,
  parameter int unsigned W = 3
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         en_i,     // count vote_i this cycle
  input  logic         first_i,  // vote_i starts a new bundle
  input  logic [D-1:0] vote_i,   // hypervector to add
  output logic [D-1:0] maj_o     // bundled hypervector
);

  localparam logic signed [W-1:0] CMAX = {1'b0, {(W-1){1'b1}}};
  localparam logic signed [W-1:0] CMIN = {1'b1, {(W-1){1'b0}}};
  localparam logic signed [W-1:0] PONE = W'(1);
  localparam logic signed [W-1:0] MONE = '1;

  logic signed [W-1:0] cnt [D];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int n = 0; n < D; n++) cnt[n] <= '0;
    end else if (en_i) begin
      for (int n = 0; n < D; n++) begin
        if (first_i)                      cnt[n] <= vote_i[n] ? PONE : MONE;
        else if (vote_i[n] && cnt[n] != CMAX)  cnt[n] <= cnt[n] + PONE;
        else if (!vote_i[n] && cnt[n] != CMIN) cnt[n] <= cnt[n] - PONE;
      end
    end
  end

  always_comb begin
    for (int n = 0; n < D; n++) maj_o[n] = (cnt[n] > 0);
  end

endmodule : hd_sat_counter_block
