// hd_ngram: window-shifting N-gram encoder.
//
// Binds the current record hypervector with the rotated records of the last
// N-1 accepted samples:
//     ngram = R[t] ^ rho(R[t-1]) ^ rho^2(R[t-2]) ^ ... ^ rho^(N-1)(R[t-N+1])
// where rho is a rotate-left by one position. The window stores the records
// already rotated: on every accepted record w[0] <= rho(R[t]) and
// w[k] <= rho(w[k-1]), so no record is rotated more than once per cycle and a
// new N-gram is available for every record (a sliding window).
// Structure and rotation direction follow the paper's figure of this encoder.
// This design adds a window fill count: ngram_valid_o is high once N-1 records
// precede the current one since reset or since clear_i (start of a new
// sequence), so that N-grams never mix two sequences.
// Timing: ngram_o is combinational from rec_i and the window; the window
// advances at the clock edge when en_i is high.
module hd_ngram #(
  parameter int unsigned D = 8192,
  parameter int unsigned N = 3
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         en_i,           // rec_i is accepted this cycle
  input  logic         clear_i,        // rec_i is the first of a new sequence
  input  logic [D-1:0] rec_i,          // record hypervector R[t]
  output logic [D-1:0] ngram_o,        // N-gram[t]
  output logic         ngram_valid_o   // N-gram[t] covers N records of one sequence
);

  localparam int unsigned WIN  = (N > 1) ? N - 1 : 1;
  localparam int unsigned CNT_W = $clog2(N + 1);

  logic [D-1:0]     win_q [WIN];
  logic [CNT_W-1:0] fill_q;

  function automatic logic [D-1:0] rol(input logic [D-1:0] x);
    return {x[D-2:0], x[D-1]};
  endfunction

  always_comb begin
    ngram_o = rec_i;
    if (N > 1) begin
      for (int k = 0; k < WIN; k++) ngram_o = ngram_o ^ win_q[k];
    end
    ngram_valid_o = clear_i ? (N == 1) : (32'(fill_q) >= N - 1);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int k = 0; k < WIN; k++) win_q[k] <= '0;
      fill_q <= '0;
    end else if (en_i) begin
      win_q[0] <= rol(rec_i);
      for (int k = 1; k < WIN; k++) win_q[k] <= rol(win_q[k-1]);
      if (clear_i)                       fill_q <= CNT_W'(1);
      else if (32'(fill_q) < N - 1)      fill_q <= fill_q + 1'b1;
    end
  end

endmodule : hd_ngram
