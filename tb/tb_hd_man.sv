// tb_hd_man: self-checking testbench of the hypervector manipulator.
//
// Three manipulators with D = 1024: a CIM matrix for Q = 21 (20 rows), an
// item-memory matrix for 10 channels and a back-to-back matrix with 10 rows.
// Checks the matrices' counting rules (exactly D/2 positions in groups of
// (D/2)/(Q-1), at most one 1 per CIM column, B2B row 1 all ones, about D/m
// ones in B2B row m, about D/2 in IM rows) and the OR-XOR function against a
// bitwise reference for random inputs and manipulators.
`timescale 1ns/1ps
module tb_hd_man;
  import hd_pkg::*;
  import hd_ref_pkg::*;

  localparam int unsigned D = 1024;
  localparam int unsigned Q = 21;
  localparam int unsigned NCH = 10;
  localparam int unsigned NB = 10;

  int checks = 0, failures = 0;

  logic [D-1:0] in_hv, out_cim, out_im, out_b2b;
  logic [Q-2:0] m_cim;
  logic [NCH-1:0] m_im;
  logic [NB-1:0] m_b2b;

  hd_man #(.D(D), .ROWS(Q-1), .KIND(MAN_CIM), .SEED(SEED_CIM)) u_cim (.hv_i(in_hv), .manip_i(m_cim), .hv_o(out_cim));
  hd_man #(.D(D), .ROWS(NCH), .KIND(MAN_IM), .SEED(SEED_IM)) u_im (.hv_i(in_hv), .manip_i(m_im), .hv_o(out_im));
  hd_man #(.D(D), .ROWS(NB), .KIND(MAN_B2B), .SEED(SEED_B2B)) u_b2b (.hv_i(in_hv), .manip_i(m_b2b), .hv_o(out_b2b));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Reference: toggle bit n once if any active row has a 1 in column n.
  function automatic logic [D-1:0] ref_man(input man_kind_e k, input int unsigned seed,
                                           input int unsigned rows, input logic [D-1:0] x,
                                           input logic [MAX_ROWS-1:0] m);
    logic [D-1:0] y = x;
    logic [MAX_ROWS-1:0] col;
    bit hit;
    for (int unsigned n = 0; n < D; n++) begin
      col = conn_column(k, seed, rows, D, n);
      hit = 0;
      for (int unsigned r = 0; r < rows; r++) if (col[r] && m[r]) hit = 1;
      if (hit) y[n] = ~y[n];
    end
    return y;
  endfunction

  initial begin : watchdog
    #1ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    int unsigned cnt [MAX_ROWS];
    int unsigned ones;
    logic [MAX_ROWS-1:0] col;
    // Matrix statistics.
    for (int r = 0; r < MAX_ROWS; r++) cnt[r] = 0;
    ones = 0;
    for (int unsigned n = 0; n < D; n++) begin
      col = conn_column(MAN_CIM, SEED_CIM, Q-1, D, n);
      if ($countones(col) > 1) ones++;
      for (int r = 0; r < Q-1; r++) cnt[r] += col[r];
    end
    check(ones == 0, "CIM column with more than one 1");
    ones = 0;
    for (int r = 0; r < Q-1; r++) begin
      ones += cnt[r];
      check(cnt[r] == (D/2)/(Q-1) || cnt[r] == (D/2)/(Q-1) + 1,
            $sformatf("CIM row %0d has %0d ones", r, cnt[r]));
    end
    check(ones == D/2, $sformatf("CIM total %0d, expected D/2", ones));

    for (int r = 0; r < NB; r++) cnt[r] = 0;
    for (int unsigned n = 0; n < D; n++) begin
      col = conn_column(MAN_B2B, SEED_B2B, NB, D, n);
      for (int r = 0; r < NB; r++) cnt[r] += col[r];
    end
    check(cnt[0] == D, "B2B row 1 is not all ones");
    for (int r = 1; r < NB; r++)
      check(cnt[r] > D/(r+1) - 4*$sqrt(real'(D)/(r+1)) && cnt[r] < D/(r+1) + 4*$sqrt(real'(D)/(r+1)),
            $sformatf("B2B row %0d has %0d ones", r+1, cnt[r]));

    for (int r = 0; r < NCH; r++) cnt[r] = 0;
    for (int unsigned n = 0; n < D; n++) begin
      col = conn_column(MAN_IM, SEED_IM, NCH, D, n);
      for (int r = 0; r < NCH; r++) cnt[r] += col[r];
    end
    for (int r = 0; r < NCH; r++)
      check(cnt[r] > D/2 - 96 && cnt[r] < D/2 + 96, $sformatf("IM row %0d has %0d ones", r, cnt[r]));

    // Function: all-zero input, everything active -> CIM gives exactly D/2 ones.
    in_hv = '0; m_cim = '1; m_im = '0; m_b2b = NB'(1);
    #1;
    check($countones(out_cim) == D/2, "CIM all-hot does not flip D/2 bits");
    check(out_b2b == '1, "B2B row 1 does not flip every bit");
    check(out_im == '0, "IM with no row active changed the input");

    // Random inputs and manipulators.
    for (int t = 0; t < 40; t++) begin
      in_hv = D'(ref_random(D));
      m_cim = (Q-1)'($urandom());
      m_im  = NCH'($urandom());
      m_b2b = NB'($urandom());
      if (t % 2 == 0) m_im = NCH'(1) << (t % NCH);
      #1;
      check(out_cim == ref_man(MAN_CIM, SEED_CIM, Q-1, in_hv, MAX_ROWS'(m_cim)), "CIM function");
      check(out_im  == ref_man(MAN_IM,  SEED_IM,  NCH, in_hv, MAX_ROWS'(m_im)),  "IM function");
      check(out_b2b == ref_man(MAN_B2B, SEED_B2B, NB,  in_hv, MAX_ROWS'(m_b2b)), "B2B function");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
