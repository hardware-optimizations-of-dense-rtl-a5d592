// tb_hd_spatial_man: self-checking testbench of the manipulator-based spatial
// encoder. D = 256, 4 channels, Q = 21, 3-bit counters. Random samples (with
// the extreme values 0 and 20 included) are compared with the reference
// record: exact majority of the four bound hypervectors S_v XOR C_k and the
// additional feature. Phase 1 streams with the output always ready and checks
// that a record is accepted every NC+3 cycles and appears NC+3 cycles after
// acceptance; phase 2 adds random input gaps and output back-pressure.
`timescale 1ns/1ps
module tb_hd_spatial_man;
  import hd_pkg::*;
  import hd_ref_pkg::*;
  localparam int unsigned D = 256, NC = 4, Q = 21, VAL_W = 5;
  localparam bit USE_CA = 0;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic [NC-1:0][VAL_W-1:0] in_values = '0;
  hd_ctrl_t in_ctrl = '0, out_ctrl;
  logic [D-1:0] out_hv;

  hd_spatial_man #(.D(D), .NC(NC), .Q(Q), .CNT_W(3)) dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready),
    .in_values_i(in_values), .in_ctrl_i(in_ctrl), .out_valid_o(out_valid),
    .out_ready_i(out_ready), .out_hv_o(out_hv), .out_ctrl_o(out_ctrl));

  always #5 clk = ~clk;

  hv_t      exp_q [$];
  hd_ctrl_t expc_q [$];
  longint   acc_q [$];
  longint   cyc = 0, last_acc = -1;
  int       received = 0;
  bit       phase1 = 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && in_valid && in_ready) begin
      int unsigned vals [];
      vals = new[NC];
      for (int k = 0; k < NC; k++) vals[k] = in_values[k];
      exp_q.push_back(ref_record(D, NC, Q, vals, USE_CA));
      expc_q.push_back(in_ctrl);
      if (phase1 && last_acc >= 0) check(cyc - last_acc == NC + 3, $sformatf("accept interval %0d", cyc - last_acc));
      acc_q.push_back(cyc);
      last_acc = cyc;
    end
    if (rst_n && out_valid && out_ready) begin
      longint a;
      a = acc_q.pop_front();
      if (phase1) check(cyc - a == NC + 3, $sformatf("latency %0d", cyc - a));
      check(out_hv == D'(exp_q.pop_front()), $sformatf("record %0d", received));
      check(out_ctrl == expc_q.pop_front(), "control passed along");
      received++;
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
    int sent = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    while (sent < 80) begin
      @(negedge clk);
      if (sent == 40) phase1 = 0;
      if (!phase1) out_ready = ($urandom_range(0, 2) != 0);
      if (in_valid && !in_ready) continue;        // hold until taken
      if (!phase1 && $urandom_range(0, 3) == 0) begin in_valid = 0; continue; end
      in_valid = 1;
      for (int k = 0; k < NC; k++)
        in_values[k] = VAL_W'((sent < 2) ? sent * (Q - 1) : $urandom_range(0, Q - 1));
      in_ctrl = '0;
      in_ctrl.label = LABEL_W'(sent);
      in_ctrl.train = sent[0];
      sent++;
      // wait for acceptance before changing the sample
      do @(posedge clk); while (!(in_valid && in_ready));
    end
    @(negedge clk) in_valid = 0; out_ready = 1;
    repeat (50) @(posedge clk);
    check(received == 80, $sformatf("received %0d records", received));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
