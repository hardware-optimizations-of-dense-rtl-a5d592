// hd_adder_tree: population count of a D-bit vector by a binary adder tree.
//
// Used by the associative memories to turn query XOR prototype into a Hamming
// distance in one combinational pass instead of O(D) counting cycles. The
// input is padded with zeros to P = 2^L >= D bits. Stage s (1..L) holds P/2^s
// sums of s+1 bits, each the sum of two stage s-1 values, so the adders of
// stage s are s bits wide, as in the paper's tree analysis (for D = 8192:
// 13 stages, 16369 one-bit adder equivalents). Purely combinational; no
// pipeline registers.
module hd_adder_tree #(
  parameter int unsigned D     = 8192,
  parameter int unsigned OUT_W = $clog2(D + 1)
) (
  input  logic [D-1:0]     bits_i,
  output logic [OUT_W-1:0] count_o
);

  localparam int unsigned L = (D > 1) ? $clog2(D) : 1;
  localparam int unsigned P = 1 << L;

  for (genvar s = 0; s <= L; s++) begin : g_stage
    logic [s:0] sum [P >> s];
    for (genvar i = 0; i < (P >> s); i++) begin : g_node
      if (s == 0) begin : g_leaf
        if (i < D) begin : g_bit
          assign sum[i] = bits_i[i];
        end else begin : g_pad
          assign sum[i] = 1'b0;
        end
      end else begin : g_add
        assign sum[i] = {1'b0, g_stage[s-1].sum[2*i]} + {1'b0, g_stage[s-1].sum[2*i+1]};
      end
    end
  end

  assign count_o = OUT_W'(g_stage[L].sum[0]);

endmodule : hd_adder_tree
