// tb_hd_b2b_bundler: self-checking testbench of back-to-back bundling.
// Part 1 (D = 64, 10 rows): random hypervectors with stalls and restarts are
// compared with the reference update "bits where row i has a 1 take the new
// vote", including more than 10 votes (the last row is reused) and the first
// vote being copied whole. Part 2 (D = 4096, 16 rows): bundling 10 random,
// nearly orthogonal hypervectors keeps every one of them closer than the
// orthogonality band (normalized distance below 0.47 ... 0.48), as the
// method's capacity of 10-15 hypervectors promises.
`timescale 1ns/1ps
module tb_hd_b2b_bundler;
  import hd_ref_pkg::*;
  localparam int unsigned D = 64, ROWS = 10, DB = 4096, RB = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0, first = 0, en2 = 0, first2 = 0;
  logic [D-1:0] hv = '0, bundle, bnext;
  logic [DB-1:0] hv2 = '0, bundle2, bnext2;

  hd_b2b_bundler #(.D(D), .ROWS(ROWS)) dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .first_i(first),
    .hv_i(hv), .bundle_o(bundle), .bundle_next_o(bnext));
  hd_b2b_bundler #(.D(DB), .ROWS(RB)) dut2 (.clk_i(clk), .rst_ni(rst_n), .en_i(en2), .first_i(first2),
    .hv_i(hv2), .bundle_o(bundle2), .bundle_next_o(bnext2));
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
    hv_t model = '0;
    int row = 0;
    hv_t set [10];
    int unsigned hd;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      en    = ($urandom_range(0, 3) != 0);
      first = en && (t == 0 || $urandom_range(0, 24) == 0);
      hv    = {$urandom(), $urandom()};
      if (first) row = 0;
      @(posedge clk); #1;
      if (en) begin
        model = ref_b2b(D, ROWS, model, hv_t'(hv), row);
        if (first) check(bundle == hv, "first vote copied whole");
        check(bundle == D'(model), $sformatf("bundle at %0d (row %0d)", t, row));
        if (row < ROWS - 1) row++;
      end
    end
    en = 0;
    // capacity
    for (int i = 0; i < 10; i++) begin
      @(negedge clk);
      set[i] = ref_random(DB);
      hv2 = DB'(set[i]);
      en2 = 1;
      first2 = (i == 0);
    end
    @(negedge clk);
    en2 = 0;
    for (int i = 0; i < 10; i++) begin
      hd = ref_hamming(DB, hv_t'(bundle2), set[i]);
      check(hd < DB * 48 / 100, $sformatf("member %0d lost: distance %0d of %0d", i, hd, DB));
      check(hd > DB / 4, $sformatf("member %0d dominates: distance %0d", i, hd));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
