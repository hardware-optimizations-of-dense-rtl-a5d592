// tb_hd_sat_counter_block: self-checking testbench of the saturating counters.
// D = 16, W = 3. Random bundles of 1 to 12 votes, with random idle cycles, are
// compared with an integer model that clamps to [-4, 3]; long runs of equal
// votes exercise both saturation limits.
`timescale 1ns/1ps
module tb_hd_sat_counter_block;
  localparam int unsigned D = 16;
  localparam int unsigned W = 3;
  int checks = 0, failures = 0;
  int sat_hi = 0, sat_lo = 0;
  logic clk = 0, rst_n = 0, en = 0, first = 0;
  logic [D-1:0] vote, maj;
  int model [D];

  hd_sat_counter_block #(.D(D), .W(W)) dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .first_i(first), .vote_i(vote), .maj_o(maj));
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [D-1:0] expv;
    int nvotes;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 200; b++) begin
      nvotes = $urandom_range(1, 12);
      for (int i = 0; i < nvotes; i++) begin
        @(negedge clk);
        en = ($urandom_range(0, 3) != 0) || i == 0;
        first = (i == 0);
        if (!en) begin i--; continue; end
        vote = (b % 4 == 0) ? ((b % 8 == 0) ? '1 : '0) : D'($urandom());
        for (int n = 0; n < D; n++) begin
          if (first) model[n] = vote[n] ? 1 : -1;
          else begin
            model[n] += vote[n] ? 1 : -1;
            if (model[n] > 3) begin model[n] = 3; sat_hi++; end
            if (model[n] < -4) begin model[n] = -4; sat_lo++; end
          end
        end
        @(posedge clk); #1;
        en = 0;
        for (int n = 0; n < D; n++) expv[n] = (model[n] > 0);
        checks++;
        if (maj !== expv) begin
          failures++;
          $display("FAIL: bundle %0d vote %0d got %h expected %h", b, i, maj, expv);
        end
      end
    end
    checks++;
    if (sat_hi == 0 || sat_lo == 0) begin failures++; $display("FAIL: saturation not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
