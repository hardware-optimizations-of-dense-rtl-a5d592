// hd_spatial_ca: sequential spatial encoder with a cellular automaton.
//
// Turns one time-aligned sample of NC quantized channel values into a record
// hypervector R = majority over channels k of (C_k XOR S_v(k)). The continuous
// item memory is replaced by a manipulator (as in hd_spatial_man); the item
// memory of channel hypervectors is replaced by a rule-30 cellular automaton:
// it is reloaded with the hardwired seed C1 when a sample is accepted and
// stepped once per channel, so in the cycle of channel k it holds C_k.
//   * a channel multiplexer picks the value of channel k,
//   * hd_shot_lut turns it into an s-hot code,
//   * the manipulator (CIM matrix) flips groups of the hardwired seed S0,
//     giving the signal hypervector S_v,
//   * S_v is bound (XOR) with the automaton state,
//   * a block of saturating bidirectional counters bundles the NC bound
//     hypervectors one per cycle.
// With an even channel count the "additional feature" (binding of the first
// and last bound hypervector, held in an XOR-feedback register) is bundled in
// one extra cycle as a tie breaker. The structure follows the paper's figure
// of this encoder; the first/last choice and the handshake are this design's.
//
// Interface: valid/ready on both sides. A sample is accepted only when the
// encoder is idle; then it takes NC cycles (+1 for the additional feature)
// plus one cycle into the output register: one record every NC+3 cycles
// (NC+2 for odd NC).
module hd_spatial_ca
  import hd_pkg::*;
#(
  parameter int unsigned D     = 8192,
  parameter int unsigned NC    = 4,    // channels
  parameter int unsigned Q     = 21,   // quantization levels
  parameter int unsigned CNT_W = 3,    // bundle counter width
  parameter int unsigned VAL_W = (Q > 1) ? $clog2(Q) : 1
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic                  in_valid_i,
  output logic                  in_ready_o,
  input  logic [NC-1:0][VAL_W-1:0] in_values_i,
  input  hd_ctrl_t              in_ctrl_i,
  output logic                  out_valid_o,
  input  logic                  out_ready_i,
  output logic [D-1:0]          out_hv_o,     // record hypervector R[t]
  output hd_ctrl_t              out_ctrl_o
);

  localparam bit ADD_FEATURE = (NC % 2 == 0) && (NC >= 2);
  localparam int unsigned LAST_STEP = ADD_FEATURE ? NC : NC - 1;
  localparam int unsigned STEP_W = $clog2(NC + 2);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_FINISH} state_e;

  state_e                  state_q;
  logic [STEP_W-1:0]       step_q;
  logic [NC-1:0][VAL_W-1:0] values_q;
  hd_ctrl_t                ctrl_q;
  logic [D-1:0]            feat_q;        // additional feature register

  logic [VAL_W-1:0] ch_value;
  logic [Q-2:0]     shot;
  logic [D-1:0]     s0_hv;
  logic [D-1:0]     sig_hv;
  logic [D-1:0]     bound_hv;
  logic [D-1:0]     vote_hv;
  logic [D-1:0]     maj_hv;
  logic             in_feature_step;

  for (genvar n = 0; n < D; n++) begin : g_s0
    localparam logic S0_BIT = seed_bit(SEED_S0, n);
    assign s0_hv[n] = S0_BIT;
  end

  // channel multiplexer
  always_comb begin
    ch_value = '0;
    for (int unsigned k = 0; k < NC; k++) begin
      if (32'(step_q) == k) ch_value = values_q[k];
    end
  end

  hd_shot_lut #(.Q(Q), .VAL_W(VAL_W)) u_shot (
    .value_i (ch_value),
    .shot_o  (shot)
  );

  hd_man #(.D(D), .ROWS(Q - 1), .KIND(MAN_CIM), .SEED(SEED_CIM)) u_man_cim (
    .hv_i    (s0_hv),
    .manip_i (shot),
    .hv_o    (sig_hv)
  );

  logic [D-1:0] chan_hv;

  // Reloaded with C1 when a sample is accepted, stepped once per channel.
  hd_cellular_automaton #(.D(D), .SEED(SEED_CA)) u_ca (
    .clk_i   (clk_i),
    .rst_ni  (rst_ni),
    .load_i  (state_q == S_IDLE && in_valid_i),
    .step_i  (state_q == S_RUN && 32'(step_q) < NC),
    .state_o (chan_hv)
  );

  assign bound_hv = sig_hv ^ chan_hv;

  assign in_feature_step = ADD_FEATURE && (32'(step_q) == NC);
  assign vote_hv         = in_feature_step ? feat_q : bound_hv;

  hd_sat_counter_block #(.D(D), .W(CNT_W)) u_counters (
    .clk_i   (clk_i),
    .rst_ni  (rst_ni),
    .en_i    (state_q == S_RUN),
    .first_i (step_q == '0),
    .vote_i  (vote_hv),
    .maj_o   (maj_hv)
  );

  assign in_ready_o = (state_q == S_IDLE);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q     <= S_IDLE;
      step_q      <= '0;
      values_q    <= '0;
      ctrl_q      <= '0;
      feat_q      <= '0;
      out_valid_o <= 1'b0;
      out_hv_o    <= '0;
      out_ctrl_o  <= '0;
    end else begin
      if (out_valid_o && out_ready_i) out_valid_o <= 1'b0;
      case (state_q)
        S_IDLE: begin
          if (in_valid_i) begin
            values_q    <= in_values_i;
            ctrl_q      <= in_ctrl_i;
            step_q      <= '0;
            state_q     <= S_RUN;
          end
        end
        S_RUN: begin
          if (step_q == '0)                 feat_q <= bound_hv;
          else if (32'(step_q) == NC - 1)   feat_q <= feat_q ^ bound_hv;
          if (32'(step_q) == LAST_STEP) begin
            state_q <= S_FINISH;
          end else begin
            step_q <= step_q + 1'b1;
          end
        end
        default: begin // S_FINISH
          if (!out_valid_o || out_ready_i) begin
            out_valid_o <= 1'b1;
            out_hv_o    <= maj_hv;
            out_ctrl_o  <= ctrl_q;
            state_q     <= S_IDLE;
          end
        end
      endcase
    end
  end

  // An offered result stays put until it is taken.
  a_out_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    out_valid_o && !out_ready_i |=> out_valid_o && $stable(out_hv_o) && $stable(out_ctrl_o));

endmodule : hd_spatial_ca
