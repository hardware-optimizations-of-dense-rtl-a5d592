// tb_hd_cellular_automaton: self-checking testbench of the rule-30 automaton.
// D = 1024. Checks the seed after reset, 40 steps against a rule-number table
// model, the reload of the seed, that stalled cycles hold the state, and that
// the generated hypervectors are pairwise within the orthogonality band
// D/2 +- 6 sqrt(D)/2.
`timescale 1ns/1ps
module tb_hd_cellular_automaton;
  import hd_pkg::*;
  import hd_ref_pkg::*;
  localparam int unsigned D = 1024;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, load = 0, step = 0;
  logic [D-1:0] state;
  hv_t model;
  hv_t hist [40];

  hd_cellular_automaton #(.D(D)) dut (.clk_i(clk), .rst_ni(rst_n), .load_i(load), .step_i(step), .state_o(state));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned hd;
    repeat (2) @(posedge clk);
    rst_n = 1;
    model = ref_channel_ca(D, 0);
    @(negedge clk);
    check(state == D'(model), "seed after reset");
    for (int i = 0; i < 40; i++) begin
      hist[i] = model;
      step = (i % 5 != 4);            // every fifth cycle stalls
      @(negedge clk);
      if (step) model = ref_rule30(D, model);
      check(state == D'(model), $sformatf("state after cycle %0d", i));
    end
    step = 0;
    load = 1;
    @(negedge clk);
    load = 0;
    check(state == D'(ref_channel_ca(D, 0)), "reload of the seed");
    for (int i = 0; i < 40; i++)
      for (int j = i + 1; j < 40; j++) begin
        if (hist[i] == hist[j]) continue;  // stalled copies
        hd = ref_hamming(D, hist[i], hist[j]);
        check(hd > D/2 - 96 && hd < D/2 + 96, $sformatf("distance %0d between steps %0d and %0d", hd, i, j));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
