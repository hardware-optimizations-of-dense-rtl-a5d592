// hd_top: dense binary hyperdimensional classifier for multichannel biosignals.
//
// Three stages in series, each passing hypervectors to the next over a
// valid/ready handshake:
//   1. spatial encoder: a sample of NC quantized channel values becomes one
//      record hypervector (bind each value's signal hypervector with its
//      channel hypervector, bundle over channels);
//   2. temporal encoder (hd_temporal_b2b): N consecutive records become an
//      N-gram; in training the N-grams of a run are bundled back to back into
//      a prototype, in inference each N-gram is a query;
//   3. associative memory: stores one prototype per class and returns the
//      class with the smallest Hamming distance to a query.
// Defaults are the case-study configuration: D = 8192, 4 channels, 5 classes,
// 21 quantization levels, trigrams, 3-bit spatial bundle counters, 256 B2B
// rows, with the manipulator-based spatial encoder (SPATIAL_MAN) and the
// vector-sequential memory (AM_VS), the smallest of the Pareto-optimal
// combinations. SPATIAL_CA selects the cellular-automaton spatial encoder and
// AM_CMB the single-cycle combinational memory instead.
//
// Interface: in_values_i/in_ctrl_i are offered with in_valid_i and taken when
// in_ready_o is high. in_ctrl_i.train marks training samples with their
// in_ctrl_i.label; in_ctrl_i.last closes a training run and writes its
// prototype into the memory; in_ctrl_i.seq_start starts a new sequence
// (clears the N-gram window). Every inference sample from the N-th of a
// sequence on yields one result (out_label_o, out_dist_o) with out_valid_o,
// held until out_ready_i. The analog front end (filtering, envelope and
// quantization) is outside: the inputs are already quantized to 0..Q-1.
module hd_top
  import hd_pkg::*;
#(
  parameter int unsigned   D        = 8192,
  parameter int unsigned   NC       = 4,
  parameter int unsigned   NCLS     = 5,
  parameter int unsigned   Q        = 21,
  parameter int unsigned   N        = 3,
  parameter int unsigned   CNT_W    = 3,
  parameter int unsigned   B2B_ROWS = 256,
  parameter spatial_kind_e SPATIAL  = SPATIAL_MAN,
  parameter am_kind_e      AM       = AM_VS,
  parameter int unsigned   VAL_W    = (Q > 1) ? $clog2(Q) : 1,
  parameter int unsigned   DIST_W   = $clog2(D + 1)
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     in_valid_i,
  output logic                     in_ready_o,
  input  logic [NC-1:0][VAL_W-1:0] in_values_i,  // quantized channel values
  input  hd_ctrl_t                 in_ctrl_i,
  output logic                     out_valid_o,
  input  logic                     out_ready_i,
  output logic [LABEL_W-1:0]       out_label_o,  // predicted class
  output logic [DIST_W-1:0]        out_dist_o    // Hamming distance to it
);

  logic         rec_valid, rec_ready;
  logic [D-1:0] rec_hv;
  hd_ctrl_t     rec_ctrl;
  logic         tmp_valid, tmp_ready;
  logic [D-1:0] tmp_hv;
  hd_ctrl_t     tmp_ctrl;

  if (SPATIAL == SPATIAL_CA) begin : g_spatial_ca
    hd_spatial_ca #(.D(D), .NC(NC), .Q(Q), .CNT_W(CNT_W), .VAL_W(VAL_W)) u_spatial (
      .clk_i, .rst_ni,
      .in_valid_i, .in_ready_o, .in_values_i, .in_ctrl_i,
      .out_valid_o (rec_valid), .out_ready_i (rec_ready),
      .out_hv_o    (rec_hv),    .out_ctrl_o  (rec_ctrl)
    );
  end else begin : g_spatial_man
    hd_spatial_man #(.D(D), .NC(NC), .Q(Q), .CNT_W(CNT_W), .VAL_W(VAL_W)) u_spatial (
      .clk_i, .rst_ni,
      .in_valid_i, .in_ready_o, .in_values_i, .in_ctrl_i,
      .out_valid_o (rec_valid), .out_ready_i (rec_ready),
      .out_hv_o    (rec_hv),    .out_ctrl_o  (rec_ctrl)
    );
  end

  hd_temporal_b2b #(.D(D), .N(N), .B2B_ROWS(B2B_ROWS)) u_temporal (
    .clk_i, .rst_ni,
    .in_valid_i  (rec_valid), .in_ready_o  (rec_ready),
    .in_hv_i     (rec_hv),    .in_ctrl_i   (rec_ctrl),
    .out_valid_o (tmp_valid), .out_ready_i (tmp_ready),
    .out_hv_o    (tmp_hv),    .out_ctrl_o  (tmp_ctrl)
  );

  if (AM == AM_CMB) begin : g_am_cmb
    hd_am_cmb #(.D(D), .NCLS(NCLS), .DIST_W(DIST_W)) u_am (
      .clk_i, .rst_ni,
      .in_valid_i (tmp_valid), .in_ready_o (tmp_ready),
      .in_hv_i    (tmp_hv),    .in_ctrl_i  (tmp_ctrl),
      .out_valid_o, .out_ready_i, .out_label_o, .out_dist_o
    );
  end else begin : g_am_vs
    hd_am_vs #(.D(D), .NCLS(NCLS), .DIST_W(DIST_W)) u_am (
      .clk_i, .rst_ni,
      .in_valid_i (tmp_valid), .in_ready_o (tmp_ready),
      .in_hv_i    (tmp_hv),    .in_ctrl_i  (tmp_ctrl),
      .out_valid_o, .out_ready_i, .out_label_o, .out_dist_o
    );
  end

endmodule : hd_top
