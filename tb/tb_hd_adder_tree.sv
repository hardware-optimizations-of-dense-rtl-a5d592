// tb_hd_adder_tree: self-checking testbench of the popcount adder tree.
// Trees of 100 (padded to 128), 64 and 8192 bits against a bit-counting loop,
// for all-zero, all-one and random inputs.
`timescale 1ns/1ps
module tb_hd_adder_tree;
  int checks = 0, failures = 0;
  logic [99:0]   a;
  logic [63:0]   b;
  logic [8191:0] c;
  logic [6:0]    ca;
  logic [6:0]    cb;
  logic [13:0]   cc;

  hd_adder_tree #(.D(100))  ua (.bits_i(a), .count_o(ca));
  hd_adder_tree #(.D(64))   ub (.bits_i(b), .count_o(cb));
  hd_adder_tree #(.D(8192)) uc (.bits_i(c), .count_o(cc));

  function automatic int count(input logic [8191:0] x, input int n);
    int s = 0;
    for (int i = 0; i < n; i++) s += x[i];
    return s;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 60; t++) begin
      case (t)
        0: begin a = '0; b = '0; c = '0; end
        1: begin a = '1; b = '1; c = '1; end
        default: begin
          a = {$urandom(), $urandom(), $urandom(), $urandom()};
          b = {$urandom(), $urandom()};
          for (int w = 0; w < 256; w++) c[w*32 +: 32] = (t % 3 == 0) ? $urandom() & $urandom() : $urandom();
        end
      endcase
      #1;
      check(int'(ca) == count(8192'(a), 100), $sformatf("D=100: %0d", ca));
      check(int'(cb) == count(8192'(b), 64), $sformatf("D=64: %0d", cb));
      check(int'(cc) == count(c, 8192), $sformatf("D=8192: %0d", cc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
