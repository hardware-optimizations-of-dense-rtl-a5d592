// tb_hd_top_ca_cmb: end-to-end testbench of the HD classifier in its other
// configuration (cellular-automaton spatial encoder, B2B temporal encoder,
// combinational single-cycle memory) at D = 256 with 16 B2B rows; channels,
// classes, levels and N-gram size at their defaults. Same stimulus and checks
// as tb_hd_top.
//
// Five synthetic "gestures" are defined by a base value per channel; samples
// are the base plus noise of +-2 levels. Each class is trained with one run
// of 20 samples (18 trigrams, more than the 16 B2B rows), then every class is
// queried with sequences of 8 samples. A bit-level reference model of the
// whole chain (records, trigrams, back-to-back bundling, nearest prototype)
// gives the expected label and distance of every result. The testbench also
// requires that most queries are classified as the class they came from, and
// counts the mechanisms the design has: prototype writes, query results,
// input stalls, output back-pressure, sequence restarts and reuse of the last
// B2B row; each must occur at least once.
`timescale 1ns/1ps
module tb_hd_top_ca_cmb;
  import hd_pkg::*;
  import hd_ref_pkg::*;
  localparam int unsigned D = 256, NC = 4, NCLS = 5, Q = 21, N = 3, ROWS = 16;
  localparam bit USE_CA = 1;
  localparam int unsigned TRAIN_LEN = 20, QUERY_LEN = 8, QUERY_SEQS = 2;
  localparam int unsigned DIST_W = $clog2(D + 1);

  int checks = 0, failures = 0;
  int n_proto = 0, n_result = 0, n_in_stall = 0, n_out_stall = 0, n_seq = 0, n_lastrow = 0, n_correct = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic [NC-1:0][4:0] in_values = '0;
  hd_ctrl_t in_ctrl = '0;
  logic [LABEL_W-1:0] out_label;
  logic [DIST_W-1:0] out_dist;

  hd_top #(.D(D), .NC(NC), .NCLS(NCLS), .Q(Q), .N(N), .CNT_W(3), .B2B_ROWS(ROWS),
           .SPATIAL(SPATIAL_CA), .AM(AM_CMB)) dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready),
    .in_values_i(in_values), .in_ctrl_i(in_ctrl), .out_valid_o(out_valid),
    .out_ready_i(out_ready), .out_label_o(out_label), .out_dist_o(out_dist));
  always #5 clk = ~clk;

  // reference state
  hv_t proto [NCLS];
  hv_t hist [$];
  hv_t bundle = '0;
  int  row = 0;
  bit  first = 1;
  int  exp_label [$], exp_dist [$], true_label [$];
  int  base [NCLS][NC];
  bit  acc_flag = 0, randomize_ready = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Reference of one accepted sample.
  task automatic model(input int unsigned vals [], input hd_ctrl_t c, input int truth);
    hv_t rec, ng;
    int best, bd, hd;
    rec = ref_record(D, NC, Q, vals, USE_CA);
    if (c.seq_start) hist.delete();
    hist.push_front(rec);
    if (hist.size() > N) void'(hist.pop_back());
    if (hist.size() == N) begin
      ng = '0;
      for (int i = 0; i < N; i++) ng ^= ref_rol(D, hist[i], i);
      if (c.train) begin
        if (first) row = 0;
        bundle = ref_b2b(D, ROWS, bundle, ng, row);
        if (row == ROWS - 1) n_lastrow++;
        if (row < ROWS - 1) row++;
        first = 0;
      end else begin
        best = 0; bd = D + 1;
        for (int k = 0; k < NCLS; k++) begin
          hd = ref_hamming(D, ng, proto[k]);
          if (hd < bd) begin bd = hd; best = k; end
        end
        exp_label.push_back(best);
        exp_dist.push_back(bd);
        true_label.push_back(truth);
      end
    end
    if (c.train && c.last) begin
      proto[c.label] = bundle;
      first = 1;
    end
  endtask

  always @(negedge clk) if (randomize_ready) out_ready <= ($urandom_range(0, 3) != 0);

  always @(posedge clk) begin
    acc_flag = rst_n && in_valid && in_ready;
    if (rst_n && in_valid && !in_ready) n_in_stall++;
    if (rst_n && out_valid && !out_ready) n_out_stall++;
    if (rst_n && dut.tmp_valid && dut.tmp_ready && dut.tmp_ctrl.train) n_proto++;
    if (rst_n && out_valid && out_ready) begin
      int t;
      check(exp_label.size() > 0, "unexpected result");
      if (exp_label.size() > 0) begin
        check(int'(out_label) == exp_label.pop_front(), $sformatf("label %0d", out_label));
        check(int'(out_dist) == exp_dist.pop_front(), $sformatf("distance %0d", out_dist));
        t = true_label.pop_front();
        if (int'(out_label) == t) n_correct++;
        n_result++;
      end
    end
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_sample(input int cls, input hd_ctrl_t c);
    int unsigned vals [];
    int v;
    vals = new[NC];
    @(negedge clk);
    for (int k = 0; k < NC; k++) begin
      v = base[cls][k] + $urandom_range(0, 4) - 2;
      if (v < 0) v = 0;
      if (v > Q - 1) v = Q - 1;
      vals[k] = v;
      in_values[k] = 5'(v);
    end
    in_ctrl = c;
    in_valid = 1;
    if (c.seq_start) n_seq++;
    model(vals, c, cls);
    do begin @(posedge clk); #1; end while (!acc_flag);
    if ($urandom_range(0, 3) == 0) begin @(negedge clk) in_valid = 0; end
  endtask

  initial begin
    hd_ctrl_t c;
    for (int k = 0; k < NCLS; k++) proto[k] = '0;
    for (int k = 0; k < NCLS; k++)
      for (int ch = 0; ch < NC; ch++) base[k][ch] = $urandom_range(0, Q - 1);
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // training
    for (int k = 0; k < NCLS; k++)
      for (int i = 0; i < TRAIN_LEN; i++) begin
        c = '0;
        c.train = 1; c.label = LABEL_W'(k);
        c.seq_start = (i == 0); c.last = (i == TRAIN_LEN - 1);
        send_sample(k, c);
      end
    // inference, with output back-pressure from the second half on
    for (int s = 0; s < QUERY_SEQS * NCLS; s++) begin
      if (s == NCLS) randomize_ready = 1;
      for (int i = 0; i < QUERY_LEN; i++) begin
        c = '0;
        c.seq_start = (i == 0);
        send_sample(s % NCLS, c);
      end
    end
    @(negedge clk) in_valid = 0;
    randomize_ready = 0;
    @(negedge clk) out_ready = 1;
    repeat (100) @(posedge clk);
    check(exp_label.size() == 0, "results missing");
    check(n_result == QUERY_SEQS * NCLS * (QUERY_LEN - N + 1), $sformatf("%0d results", n_result));
    check(n_correct * 10 >= n_result * 8, $sformatf("only %0d of %0d queries matched their class", n_correct, n_result));
    check(n_proto == NCLS, $sformatf("%0d prototypes written", n_proto));
    check(n_in_stall > 0 && n_out_stall > 0 && n_seq > 0 && n_lastrow > 0,
          $sformatf("coverage in_stall=%0d out_stall=%0d seq=%0d lastrow=%0d", n_in_stall, n_out_stall, n_seq, n_lastrow));
    $display("mechanisms: prototypes=%0d results=%0d correct=%0d in_stalls=%0d out_stalls=%0d sequences=%0d last_row_votes=%0d",
             n_proto, n_result, n_correct, n_in_stall, n_out_stall, n_seq, n_lastrow);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
