// tb_hd_ngram: self-checking testbench of the window-shifting N-gram encoder.
// D = 32, N = 3. Random records, random stalls and sequence restarts; the
// reference keeps the records of the current sequence and forms
// R[t] ^ rol(R[t-1], 1) ^ rol(R[t-2], 2) directly. Checks ngram_o whenever it
// is valid and ngram_valid_o in every accepted cycle.
`timescale 1ns/1ps
module tb_hd_ngram;
  import hd_ref_pkg::*;
  localparam int unsigned D = 32, N = 3;
  int checks = 0, failures = 0, n_valid = 0, n_clear = 0;
  logic clk = 0, rst_n = 0, en = 0, clr = 0, nvalid;
  logic [D-1:0] rec = '0, ngram;
  hv_t hist [$];

  hd_ngram #(.D(D), .N(N)) dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .clear_i(clr),
                                .rec_i(rec), .ngram_o(ngram), .ngram_valid_o(nvalid));
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hv_t expv;
    bit  expvalid;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      en  = ($urandom_range(0, 4) != 0);
      clr = en && ($urandom_range(0, 15) == 0);
      rec = $urandom();
      #1;
      if (en) begin
        if (clr) begin hist.delete(); n_clear++; end
        hist.push_front(hv_t'(rec));
        expvalid = (hist.size() >= N);
        checks++;
        if (nvalid !== expvalid) begin failures++; $display("FAIL: valid at %0d", t); end
        if (expvalid) begin
          expv = '0;
          for (int i = 0; i < N; i++) expv ^= ref_rol(D, hist[i], i);
          n_valid++;
          checks++;
          if (ngram !== D'(expv)) begin failures++; $display("FAIL: ngram at %0d", t); end
        end
        if (hist.size() > N) void'(hist.pop_back());
      end
    end
    checks++;
    if (n_valid < 100 || n_clear < 5) begin failures++; $display("FAIL: coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
