// tb_hd_shot_lut: self-checking testbench of the s-hot lookup table.
// Every 5-bit input value for Q = 21 (values above 20 saturate) must give a
// thermometer code with min(value, 20) ones starting at bit 0.
`timescale 1ns/1ps
module tb_hd_shot_lut;
  localparam int unsigned Q = 21;
  int checks = 0, failures = 0;
  logic [4:0]   value;
  logic [Q-2:0] shot;

  hd_shot_lut #(.Q(Q)) dut (.value_i(value), .shot_o(shot));

  initial begin : watchdog
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned exp_n;
    logic [Q-2:0] expv;
    for (int v = 0; v < 32; v++) begin
      value = 5'(v);
      #1;
      exp_n = (v > Q-1) ? Q-1 : v;
      expv = '0;
      for (int unsigned b = 0; b < exp_n; b++) expv[b] = 1'b1;
      checks++;
      if (shot !== expv) begin
        failures++;
        $display("FAIL: value %0d gave %b", v, shot);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
