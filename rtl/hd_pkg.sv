// hd_pkg: types, constants and elaboration-time functions shared by the
// dense binary hyperdimensional (HD) classifier.
//
// The classifier never stores its seed hypervectors or connectivity matrices
// in a memory: they are "hardwired". This package defines them as pure
// functions of a seed number and a bit position, so that every module (and
// every testbench) computes the same constant pattern at elaboration time.
//
//  * hd_hash       32-bit integer mixer; the source of all pseudo-random bits.
//  * seed_bit      bit n of a random seed hypervector (S0, channel seed, CA seed).
//  * perm_index    a bijection of [0,D) used to pick distinct CIM bit positions.
//  * conn_column   column n of a manipulator connectivity matrix, for the three
//                  matrix kinds the design uses (CIM, IM, B2B).
//
// Matrix rules (row index m counts from 0 here, from 1 in the prose):
//  * MAN_CIM: D/2 distinct positions, chosen by perm_index, split into Q-1
//    groups of (D/2)/(Q-1) positions; row m owns group m. Each column has at
//    most one 1, so the manipulator reduces to XOR gates.
//  * MAN_IM:  every cell is 1 with probability 1/2; row m is channel
//    hypervector C_(m+1).
//  * MAN_B2B: cell (m,n) is 1 with probability 1/(m+1), rows independent;
//    row 0 is all ones.
// The exact random draws are this design's own; only these counting rules
// come from the method.
package hd_pkg;

  // Largest number of manipulator rows a matrix column may have.
  localparam int unsigned MAX_ROWS = 512;
  // Width of the label field carried alongside hypervectors.
  localparam int unsigned LABEL_W  = 8;

  // Seeds of the hardwired patterns.
  localparam int unsigned SEED_S0  = 32'h0000_5EED; // signal seed hypervector S0
  localparam int unsigned SEED_CIM = 32'h0000_0C13; // CIM connectivity matrix
  localparam int unsigned SEED_IM  = 32'h0000_01A1; // IM connectivity matrix (channel HVs)
  localparam int unsigned SEED_CA  = 32'h0000_0CA0; // cellular automaton initial state (C1)
  localparam int unsigned SEED_B2B = 32'h0000_0B2B; // back-to-back bundling matrix

  typedef enum logic [1:0] {
    MAN_CIM = 2'd0,
    MAN_IM  = 2'd1,
    MAN_B2B = 2'd2
  } man_kind_e;

  // Spatial encoder and associative memory flavours selectable in hd_top.
  typedef enum logic {SPATIAL_MAN = 1'b0, SPATIAL_CA = 1'b1} spatial_kind_e;
  typedef enum logic {AM_VS = 1'b0, AM_CMB = 1'b1} am_kind_e;

  // Side information that travels with every sample and hypervector.
  //   train     : 1 = training (prototype update), 0 = inference (query)
  //   seq_start : first sample of a new sequence; clears the N-gram window
  //   last      : last sample of a training run; the bundled prototype is
  //               written into the associative memory after it
  //   label     : class being trained
  typedef struct packed {
    logic               train;
    logic               seq_start;
    logic               last;
    logic [LABEL_W-1:0] label;
  } hd_ctrl_t;

  function automatic logic [31:0] hd_hash(input logic [31:0] a,
                                          input logic [31:0] b,
                                          input logic [31:0] c);
    logic [31:0] x;
    x = (a * 32'h9E37_79B1) ^ (b * 32'h85EB_CA77) ^ (c * 32'hC2B2_AE3D);
    x = x ^ (x >> 15);
    x = x * 32'h2C1B_3C6D;
    x = x ^ (x >> 12);
    x = x * 32'h297A_2D39;
    x = x ^ (x >> 15);
    return x;
  endfunction

  function automatic logic seed_bit(input int unsigned seed, input int unsigned n);
    logic [31:0] h;
    h = hd_hash(seed, n, 32'h5EED_B175);
    return ^h;
  endfunction

  // Number of bits needed to index [0,d).
  function automatic int unsigned idx_bits(input int unsigned d);
    int unsigned k;
    k = 1;
    while ((1 << k) < d) k++;
    return k;
  endfunction

  // Bijection of [0,d): a keyed mixer that is bijective on [0,2^k), applied
  // repeatedly until the result falls below d (cycle walking).
  function automatic int unsigned perm_index(input int unsigned seed,
                                             input int unsigned d,
                                             input int unsigned n);
    int unsigned k;
    logic [31:0] mask;
    logic [31:0] x;
    logic [31:0] key;
    k    = idx_bits(d);
    mask = (k >= 32) ? 32'hFFFF_FFFF : ((32'd1 << k) - 32'd1);
    key  = hd_hash(seed, 32'h7E4D, 32'h0);
    x    = n;
    for (int walk = 0; walk < 4096; walk++) begin
      for (int r = 0; r < 3; r++) begin
        x = (x * (key | 32'd1)) & mask;           // odd multiplier: bijective mod 2^k
        x = (x + (key >> 7) + r) & mask;
        x = x ^ (x >> ((k + 1) / 2));             // xorshift: bijective
      end
      if (x < d) break;
    end
    return x;
  endfunction

  // Column n of a connectivity matrix with `rows` rows for dimension d.
  function automatic logic [MAX_ROWS-1:0] conn_column(input man_kind_e   kind,
                                                      input int unsigned seed,
                                                      input int unsigned rows,
                                                      input int unsigned d,
                                                      input int unsigned n);
    logic [MAX_ROWS-1:0] col;
    int unsigned p;
    int unsigned half;
    logic [31:0] h;
    col = '0;
    case (kind)
      MAN_CIM: begin
        half = d / 2;
        p    = perm_index(seed, d, n);
        if (p < half && rows > 0) col[(p * rows) / half] = 1'b1;
      end
      MAN_IM: begin
        for (int unsigned m = 0; m < rows; m++) begin
          h = hd_hash(seed, m, n);
          col[m] = h[16];
        end
      end
      default: begin // MAN_B2B
        for (int unsigned m = 0; m < rows; m++) begin
          h = hd_hash(seed, m, n);
          col[m] = ((h % (m + 1)) == 0);
        end
      end
    endcase
    return col;
  endfunction

endpackage : hd_pkg
