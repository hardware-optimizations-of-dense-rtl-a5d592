// hd_temporal_b2b: temporal encoder with binarized back-to-back bundling.
//
// Receives record hypervectors from the spatial encoder, builds an N-gram per
// record (hd_ngram) and then
//   * in inference (ctrl.train = 0): passes every valid N-gram on as a query;
//   * in training  (ctrl.train = 1): bundles every valid N-gram of the run
//     into the prototype with hd_b2b_bundler, and after the record marked
//     ctrl.last passes the bundled prototype on with its label, for the
//     associative memory to store. The next training run restarts the bundle.
// ctrl.seq_start clears the N-gram window. The N-gram window plus the B2B
// bundler follow the paper's figure of this encoder; the training-run framing
// with seq_start/last is this design's interface choice.
// A training run whose records give no valid N-gram passes on the old bundle.
// Interface: valid/ready on both sides, one output register. A record is
// accepted in any cycle in which the output register is free or being
// emptied: one record per cycle.
module hd_temporal_b2b
  import hd_pkg::*;
#(
  parameter int unsigned D        = 8192,
  parameter int unsigned N        = 3,
  parameter int unsigned B2B_ROWS = 256
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         in_valid_i,
  output logic         in_ready_o,
  input  logic [D-1:0] in_hv_i,     // record hypervector
  input  hd_ctrl_t     in_ctrl_i,
  output logic         out_valid_o,
  input  logic         out_ready_i,
  output logic [D-1:0] out_hv_o,    // query N-gram or trained prototype
  output hd_ctrl_t     out_ctrl_o
);

  logic         fire;
  logic [D-1:0] ngram;
  logic         ngram_valid;
  logic [D-1:0] bundle;
  logic [D-1:0] bundle_next;
  logic         first_q;      // next bundled N-gram starts a new prototype
  logic         bundle_en;

  assign in_ready_o = !out_valid_o || out_ready_i;
  assign fire       = in_valid_i && in_ready_o;

  hd_ngram #(.D(D), .N(N)) u_ngram (
    .clk_i         (clk_i),
    .rst_ni        (rst_ni),
    .en_i          (fire),
    .clear_i       (in_ctrl_i.seq_start),
    .rec_i         (in_hv_i),
    .ngram_o       (ngram),
    .ngram_valid_o (ngram_valid)
  );

  assign bundle_en = fire && in_ctrl_i.train && ngram_valid;

  hd_b2b_bundler #(.D(D), .ROWS(B2B_ROWS)) u_b2b (
    .clk_i         (clk_i),
    .rst_ni        (rst_ni),
    .en_i          (bundle_en),
    .first_i       (first_q),
    .hv_i          (ngram),
    .bundle_o      (bundle),
    .bundle_next_o (bundle_next)
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      first_q     <= 1'b1;
      out_valid_o <= 1'b0;
      out_hv_o    <= '0;
      out_ctrl_o  <= '0;
    end else begin
      if (out_valid_o && out_ready_i) out_valid_o <= 1'b0;
      if (fire) begin
        if (in_ctrl_i.train) begin
          if (bundle_en) first_q <= 1'b0;
          if (in_ctrl_i.last) begin
            out_valid_o <= 1'b1;
            out_hv_o    <= bundle_en ? bundle_next : bundle;
            out_ctrl_o  <= in_ctrl_i;
            first_q     <= 1'b1;
          end
        end else if (ngram_valid) begin
          out_valid_o <= 1'b1;
          out_hv_o    <= ngram;
          out_ctrl_o  <= in_ctrl_i;
        end
      end
    end
  end

  a_out_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    out_valid_o && !out_ready_i |=> out_valid_o && $stable(out_hv_o) && $stable(out_ctrl_o));

endmodule : hd_temporal_b2b
