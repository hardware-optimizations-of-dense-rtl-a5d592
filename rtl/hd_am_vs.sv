// hd_am_vs: vector-sequential associative memory.
//
// Holds one prototype hypervector per class in a circular chain of NCLS
// registers and compares a query with one prototype per cycle through a single
// shared adder tree. At rest the last register of the chain holds class 0, the
// one before it class 1, and so on. An operation rotates the chain NCLS times,
// which brings every class to the last register once (class j in step j) and
// leaves the chain as it was:
//   * query: step j computes d_j = popcount(query ^ prototype_j); a comparator
//     with feedback keeps the smallest distance and its class (the first one
//     on a tie);
//   * train: in step ctrl.label the multiplexer in front of the chain takes
//     the incoming hypervector instead of the prototype leaving the chain.
// Chain, shared tree and comparator with feedback follow the paper's figure;
// the rest arrangement, writing by rotation and the tie rule are this
// design's. Prototypes reset to all zeros.
// Interface: valid/ready in, valid/ready out (label and Hamming distance).
// An operation is accepted only when idle and no result is waiting; it takes
// NCLS cycles after the accepting one, so a query result is valid NCLS+1
// cycles after acceptance: O(n_classes) cycles per classification.
module hd_am_vs
  import hd_pkg::*;
#(
  parameter int unsigned D      = 8192,
  parameter int unsigned NCLS   = 5,
  parameter int unsigned DIST_W = $clog2(D + 1)
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               in_valid_i,
  output logic               in_ready_o,
  input  logic [D-1:0]       in_hv_i,      // query or trained prototype
  input  hd_ctrl_t           in_ctrl_i,    // train selects write, label the class
  output logic               out_valid_o,
  input  logic               out_ready_i,
  output logic [LABEL_W-1:0] out_label_o,  // class of the closest prototype
  output logic [DIST_W-1:0]  out_dist_o    // its Hamming distance
);

  localparam int unsigned STEP_W = (NCLS > 1) ? $clog2(NCLS) : 1;

  typedef enum logic [1:0] {S_IDLE, S_QUERY, S_TRAIN} state_e;

  state_e              state_q;
  logic [STEP_W-1:0]   step_q;
  logic [D-1:0]        chain_q [NCLS];   // trained hypervector memory
  logic [D-1:0]        hv_q;             // query (or hypervector to write)
  logic [LABEL_W-1:0]  label_q;
  logic [DIST_W-1:0]   hdist;
  logic                better;

  hd_adder_tree #(.D(D), .OUT_W(DIST_W)) u_tree (
    .bits_i  (hv_q ^ chain_q[NCLS-1]),
    .count_o (hdist)
  );

  assign in_ready_o = (state_q == S_IDLE) && (!out_valid_o || out_ready_i);
  assign better     = (step_q == '0) || (hdist < out_dist_o);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q     <= S_IDLE;
      step_q      <= '0;
      for (int c = 0; c < NCLS; c++) chain_q[c] <= '0;
      hv_q        <= '0;
      label_q     <= '0;
      out_valid_o <= 1'b0;
      out_label_o <= '0;
      out_dist_o  <= '0;
    end else begin
      if (out_valid_o && out_ready_i) out_valid_o <= 1'b0;
      case (state_q)
        S_IDLE: begin
          if (in_valid_i && in_ready_o) begin
            hv_q    <= in_hv_i;
            label_q <= in_ctrl_i.label;
            step_q  <= '0;
            state_q <= in_ctrl_i.train ? S_TRAIN : S_QUERY;
          end
        end
        default: begin // S_QUERY, S_TRAIN: rotate the chain once per step
          for (int c = 1; c < NCLS; c++) chain_q[c] <= chain_q[c-1];
          if (state_q == S_TRAIN && LABEL_W'(step_q) == label_q) chain_q[0] <= hv_q;
          else                                                  chain_q[0] <= chain_q[NCLS-1];
          if (state_q == S_QUERY && better) begin
            out_dist_o  <= hdist;
            out_label_o <= LABEL_W'(step_q);
          end
          if (32'(step_q) == NCLS - 1) begin
            state_q <= S_IDLE;
            if (state_q == S_QUERY) out_valid_o <= 1'b1;
          end else begin
            step_q <= step_q + 1'b1;
          end
        end
      endcase
    end
  end

  a_out_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    out_valid_o && !out_ready_i |=> out_valid_o && $stable(out_label_o) && $stable(out_dist_o));

endmodule : hd_am_vs
