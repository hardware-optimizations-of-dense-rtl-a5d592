// tb_hd_temporal_b2b: self-checking testbench of the B2B temporal encoder.
// D = 64, trigrams, 8 B2B rows. Random sequences alternate between training
// runs (label, seq_start on the first record, last on the final one; some runs
// longer than 8 N-grams so the last row is reused) and inference sequences.
// The reference forms each N-gram from the sequence history and bundles
// training N-grams with the "take the new vote where row i has a 1" rule;
// it expects one query per valid inference N-gram and one prototype per
// training run. Phase 1 keeps the output ready and checks that a record is
// accepted every cycle; phase 2 adds random back-pressure.
`timescale 1ns/1ps
module tb_hd_temporal_b2b;
  import hd_pkg::*;
  import hd_ref_pkg::*;
  localparam int unsigned D = 64, N = 3, ROWS = 8;
  int checks = 0, failures = 0, n_query = 0, n_proto = 0, n_stall = 0, n_wrap = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic [D-1:0] in_hv = '0, out_hv;
  hd_ctrl_t in_ctrl = '0, out_ctrl;

  hd_temporal_b2b #(.D(D), .N(N), .B2B_ROWS(ROWS)) dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready),
    .in_hv_i(in_hv), .in_ctrl_i(in_ctrl), .out_valid_o(out_valid), .out_ready_i(out_ready),
    .out_hv_o(out_hv), .out_ctrl_o(out_ctrl));
  always #5 clk = ~clk;

  hv_t      exp_q [$];
  hd_ctrl_t expc_q [$];
  hv_t      hist [$];
  hv_t      bundle = '0;
  int       row = 0;
  bit       first = 1;
  bit       phase1 = 1;
  bit       acc_flag = 0;

  always @(negedge clk) if (!phase1) out_ready <= ($urandom_range(0, 2) != 0);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reference model, evaluated on every accepted record
  always @(posedge clk) begin
    acc_flag = rst_n && in_valid && in_ready;
    if (rst_n && in_valid && in_ready) begin
      hv_t ng;
      bit  ngv;
      if (in_ctrl.seq_start) hist.delete();
      hist.push_front(hv_t'(in_hv));
      ngv = (hist.size() >= N);
      ng  = '0;
      if (ngv) for (int i = 0; i < N; i++) ng ^= ref_rol(D, hist[i], i);
      if (hist.size() > N) void'(hist.pop_back());
      if (in_ctrl.train) begin
        if (ngv) begin
          if (first) row = 0;
          bundle = ref_b2b(D, ROWS, bundle, ng, row);
          if (row == ROWS - 1) n_wrap++;
          if (row < ROWS - 1) row++;
          first = 0;
        end
        if (in_ctrl.last) begin
          exp_q.push_back(bundle);
          expc_q.push_back(in_ctrl);
          first = 1;
        end
      end else if (ngv) begin
        exp_q.push_back(ng);
        expc_q.push_back(in_ctrl);
      end
    end
    if (rst_n && phase1) check(in_ready, "record refused with output ready");
    if (rst_n && in_valid && !in_ready) n_stall++;
    if (rst_n && out_valid && out_ready) begin
      check(exp_q.size() > 0, "unexpected output");
      if (exp_q.size() > 0) begin
        check(out_hv == D'(exp_q.pop_front()), $sformatf("output hypervector (train=%0d)", out_ctrl.train));
        check(out_ctrl == expc_q.pop_front(), "output control");
        if (out_ctrl.train) n_proto++; else n_query++;
      end
    end
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int len;
    bit tr;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int s = 0; s < 40; s++) begin
      if (s == 20) phase1 = 0;
      tr  = (s % 3 != 2);
      len = (s % 5 == 0) ? 14 : $urandom_range(2, 7);
      for (int i = 0; i < len; i++) begin
        @(negedge clk);
        in_valid = 1;
        in_hv = {$urandom(), $urandom()};
        in_ctrl = '0;
        in_ctrl.train = tr;
        in_ctrl.label = LABEL_W'(s % 5);
        in_ctrl.seq_start = (i == 0);
        in_ctrl.last = tr && (i == len - 1);
        do begin @(posedge clk); #1; end while (!acc_flag);
      end
    end
    phase1 = 1;
    @(negedge clk) in_valid = 0; out_ready = 1;
    repeat (10) @(posedge clk);
    check(exp_q.size() == 0, "outputs missing");
    check(n_query > 20 && n_proto > 20 && n_stall > 0 && n_wrap > 0,
          $sformatf("coverage query=%0d proto=%0d stall=%0d lastrow=%0d", n_query, n_proto, n_stall, n_wrap));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
