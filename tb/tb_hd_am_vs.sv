// tb_hd_am_vs: self-checking testbench of the vector-sequential associative
// memory. D = 128, 5 classes. Prototypes are written in random class order
// (and some rewritten later); queries are noisy copies of prototypes or random
// vectors, some equidistant to exercise the tie rule. The expected label and
// distance come from the testbench's own copy of the prototypes (smallest
// Hamming distance, lowest class on a tie). Phase 1 keeps the output ready
// and checks that a result appears NCLS+1 cycles after the query is accepted
// (one prototype compared per cycle); phase 2 adds back-pressure.
`timescale 1ns/1ps
module tb_hd_am_vs;
  import hd_pkg::*;
  import hd_ref_pkg::*;
  localparam int unsigned D = 128, NCLS = 5;
  localparam int unsigned LATENCY = NCLS + 1;
  int checks = 0, failures = 0, n_query = 0, n_train = 0, n_tie = 0, n_stall = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic [D-1:0] in_hv = '0;
  hd_ctrl_t in_ctrl = '0;
  logic [LABEL_W-1:0] out_label;
  logic [7:0] out_dist;

  hd_am_vs #(.D(D), .NCLS(NCLS)) dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready),
    .in_hv_i(in_hv), .in_ctrl_i(in_ctrl), .out_valid_o(out_valid), .out_ready_i(out_ready),
    .out_label_o(out_label), .out_dist_o(out_dist));
  always #5 clk = ~clk;

  hv_t    proto [NCLS];
  int     exp_label [$];
  int     exp_dist [$];
  longint acc_cyc [$];
  longint cyc = 0;
  bit     phase1 = 1, acc_flag = 0, seen_valid = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(negedge clk) if (!phase1) out_ready <= ($urandom_range(0, 2) != 0);

  always @(posedge clk) begin
    cyc++;
    acc_flag = rst_n && in_valid && in_ready;
    if (rst_n && in_valid && !in_ready) n_stall++;
    if (acc_flag) begin
      if (in_ctrl.train) begin
        proto[in_ctrl.label] = hv_t'(in_hv);
        n_train++;
      end else begin
        int best, bd, hd, ties;
        best = 0; bd = D + 1; ties = 0;
        for (int c = 0; c < NCLS; c++) begin
          hd = ref_hamming(D, hv_t'(in_hv), proto[c]);
          if (hd == bd) ties++;
          if (hd < bd) begin bd = hd; best = c; ties = 0; end
        end
        if (ties > 0) n_tie++;
        exp_label.push_back(best);
        exp_dist.push_back(bd);
        acc_cyc.push_back(cyc);
      end
    end
    if (rst_n && out_valid && !seen_valid) begin
      longint a;
      a = acc_cyc[0];
      if (phase1) check(cyc - a == LATENCY, $sformatf("latency %0d", cyc - a));
    end
    seen_valid = out_valid && !out_ready;
    if (rst_n && out_valid && out_ready) begin
      void'(acc_cyc.pop_front());
      check(int'(out_label) == exp_label.pop_front(), $sformatf("label %0d", out_label));
      check(int'(out_dist) == exp_dist.pop_front(), $sformatf("distance %0d", out_dist));
      n_query++;
    end
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input logic [D-1:0] hv, input bit train, input int label);
    @(negedge clk);
    in_valid = 1;
    in_hv = hv;
    in_ctrl = '0;
    in_ctrl.train = train;
    in_ctrl.label = LABEL_W'(label);
    do begin @(posedge clk); #1; end while (!acc_flag);
    @(negedge clk) in_valid = 0;
  endtask

  initial begin
    int order [NCLS];
    logic [D-1:0] q;
    for (int c = 0; c < NCLS; c++) begin proto[c] = '0; order[c] = c; end
    order.shuffle();
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // query before training: all prototypes zero, tie goes to class 0
    send('1, 0, 0);
    for (int c = 0; c < NCLS; c++) send(D'(ref_random(D)), 1, order[c]);
    for (int t = 0; t < 60; t++) begin
      if (t == 30) phase1 = 0;
      if (t % 15 == 7) send(D'(ref_random(D)), 1, $urandom_range(0, NCLS - 1));
      if (t % 10 == 3) begin
        // equidistant query: differs from class 1 and class 3 equally
        q = D'(proto[1]);
        for (int n = 0; n < D; n++) if (proto[1][n] != proto[3][n] && n % 2 == 0) q[n] = proto[3][n];
        send(q, 0, 0);
        continue;
      end
      q = D'(proto[$urandom_range(0, NCLS - 1)]);
      for (int f = 0; f < $urandom_range(0, 50); f++) q[$urandom_range(0, D - 1)] ^= 1'b1;
      if (t % 7 == 0) q = D'(ref_random(D));
      send(q, 0, 0);
    end
    phase1 = 1;
    @(negedge clk) out_ready = 1;
    repeat (20) @(posedge clk);
    check(exp_label.size() == 0, "results missing");
    check(n_query > 50 && n_train > 5 && n_tie > 0 && n_stall > 0,
          $sformatf("coverage query=%0d train=%0d tie=%0d stall=%0d", n_query, n_train, n_tie, n_stall));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
