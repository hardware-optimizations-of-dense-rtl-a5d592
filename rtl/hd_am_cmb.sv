// hd_am_cmb: combinational (single-cycle) associative memory.
//
// Holds one prototype hypervector per class in NCLS registers and gives every
// class its own adder tree, so all NCLS Hamming distances popcount(query ^ P_c)
// and the comparator (smallest distance, first class on a tie) are computed in
// one combinational pass from the registered query.
//   * train (ctrl.train = 1): the register of class ctrl.label is written.
//   * query: the query register is loaded and the result is offered in the
//     next cycle.
// Query register, per-class trees and comparator follow the paper's figure;
// the tie rule and the all-zero reset of the prototypes are this design's.
// Interface: valid/ready in, valid/ready out (label and Hamming distance).
// One hypervector is accepted per cycle whenever no result is waiting or it is
// being taken; a query result is valid one cycle after acceptance: O(1).
module hd_am_cmb
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

  logic [D-1:0]      mem_q [NCLS];         // trained hypervector memory
  logic [D-1:0]      query_q;
  logic [DIST_W-1:0] hdist [NCLS];
  logic              fire;

  for (genvar c = 0; c < NCLS; c++) begin : g_class
    hd_adder_tree #(.D(D), .OUT_W(DIST_W)) u_tree (
      .bits_i  (query_q ^ mem_q[c]),
      .count_o (hdist[c])
    );
  end

  // comparator
  always_comb begin
    out_dist_o  = hdist[0];
    out_label_o = '0;
    for (int c = 1; c < NCLS; c++) begin
      if (hdist[c] < out_dist_o) begin
        out_dist_o  = hdist[c];
        out_label_o = LABEL_W'(c);
      end
    end
  end

  assign in_ready_o = !out_valid_o || out_ready_i;
  assign fire       = in_valid_i && in_ready_o;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int c = 0; c < NCLS; c++) mem_q[c] <= '0;
      query_q     <= '0;
      out_valid_o <= 1'b0;
    end else begin
      if (out_valid_o && out_ready_i) out_valid_o <= 1'b0;
      if (fire) begin
        if (in_ctrl_i.train) begin
          for (int c = 0; c < NCLS; c++) begin
            if (LABEL_W'(c) == in_ctrl_i.label) mem_q[c] <= in_hv_i;
          end
        end else begin
          query_q     <= in_hv_i;
          out_valid_o <= 1'b1;
        end
      end
    end
  end

  a_out_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    out_valid_o && !out_ready_i |=> out_valid_o && $stable(out_label_o) && $stable(out_dist_o));

endmodule : hd_am_cmb
