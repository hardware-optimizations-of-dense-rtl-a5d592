// hd_ref_pkg: reference model of the HD classifier for the testbenches.
//
// Computes, bit by bit and without the RTL's structure, what each stage must
// produce: signal hypervectors of the continuous item memory, channel
// hypervectors (item memory matrix or rule-30 automaton), records as an exact
// componentwise majority, N-grams, the back-to-back bundling update written
// as "take the new vote where row i has a 1", and Hamming distances. The
// hardwired patterns come from hd_pkg's pattern functions, which define them.
// Vectors are MAXD bits wide; only the low d bits are meaningful.
package hd_ref_pkg;
  import hd_pkg::*;

  localparam int unsigned MAXD = 8192;
  typedef logic [MAXD-1:0] hv_t;

  function automatic hv_t ref_s0(input int unsigned d);
    hv_t x = '0;
    for (int unsigned n = 0; n < d; n++) x[n] = seed_bit(SEED_S0, n);
    return x;
  endfunction

  // Signal hypervector S_v: S0 with the first v groups of the CIM flipped.
  function automatic hv_t ref_signal(input int unsigned d, input int unsigned q,
                                     input int unsigned v);
    hv_t x;
    logic [MAX_ROWS-1:0] col;
    x = ref_s0(d);
    for (int unsigned n = 0; n < d; n++) begin
      col = conn_column(MAN_CIM, SEED_CIM, q - 1, d, n);
      for (int unsigned r = 0; r < q - 1; r++)
        if (col[r] && r < v) x[n] = ~x[n];
    end
    return x;
  endfunction

  // Channel hypervector C_(k+1) taken from row k of the item memory matrix.
  function automatic hv_t ref_channel_im(input int unsigned d, input int unsigned nc,
                                         input int unsigned k);
    hv_t x = '0;
    logic [MAX_ROWS-1:0] col;
    for (int unsigned n = 0; n < d; n++) begin
      col  = conn_column(MAN_IM, SEED_IM, nc, d, n);
      x[n] = col[k];
    end
    return x;
  endfunction

  // Rule 30 by its rule number: new cell = bit {left,centre,right} of 30.
  function automatic hv_t ref_rule30(input int unsigned d, input hv_t x);
    hv_t y = '0;
    logic [7:0] rule = 8'd30;
    logic [2:0] nb;
    for (int unsigned n = 0; n < d; n++) begin
      nb   = {x[(n + 1) % d], x[n], x[(n + d - 1) % d]};
      y[n] = rule[nb];
    end
    return y;
  endfunction

  function automatic hv_t ref_channel_ca(input int unsigned d, input int unsigned k);
    hv_t x = '0;
    for (int unsigned n = 0; n < d; n++) x[n] = seed_bit(SEED_CA, n);
    for (int unsigned i = 0; i < k; i++) x = ref_rule30(d, x);
    return x;
  endfunction

  // Exact componentwise majority of the first cnt vectors (tie gives 0).
  function automatic hv_t ref_majority(input int unsigned d, input hv_t v [],
                                       input int unsigned cnt);
    hv_t y = '0;
    int ones;
    for (int unsigned n = 0; n < d; n++) begin
      ones = 0;
      for (int unsigned i = 0; i < cnt; i++) ones += v[i][n];
      y[n] = (2 * ones > cnt);
    end
    return y;
  endfunction

  // Record of one sample: majority of bound channels plus, for an even
  // channel count, the binding of the first and last bound hypervector.
  function automatic hv_t ref_record(input int unsigned d, input int unsigned nc,
                                     input int unsigned q, input int unsigned vals [],
                                     input bit use_ca);
    hv_t votes [];
    int unsigned cnt;
    cnt   = (nc % 2 == 0) ? nc + 1 : nc;
    votes = new[cnt];
    for (int unsigned k = 0; k < nc; k++)
      votes[k] = ref_signal(d, q, vals[k]) ^
                 (use_ca ? ref_channel_ca(d, k) : ref_channel_im(d, nc, k));
    if (nc % 2 == 0) votes[nc] = votes[0] ^ votes[nc-1];
    return ref_majority(d, votes, cnt);
  endfunction

  function automatic hv_t ref_rol(input int unsigned d, input hv_t x, input int unsigned times);
    hv_t y = x;
    logic msb;
    for (int unsigned t = 0; t < times; t++) begin
      msb = y[d-1];
      y   = y << 1;
      y[0] = msb;
      y   = y & ((hv_t'(1) << d) - 1);
    end
    return y;
  endfunction

  // One back-to-back step with row r (0-based): bits where row r has a 1
  // take the new vote, the others keep the bundle.
  function automatic hv_t ref_b2b(input int unsigned d, input int unsigned rows,
                                  input hv_t bundle, input hv_t hv, input int unsigned r);
    hv_t y = bundle;
    logic [MAX_ROWS-1:0] col;
    for (int unsigned n = 0; n < d; n++) begin
      col = conn_column(MAN_B2B, SEED_B2B, rows, d, n);
      if (col[r]) y[n] = hv[n];
    end
    return y;
  endfunction

  function automatic int unsigned ref_hamming(input int unsigned d, input hv_t a, input hv_t b);
    int unsigned c = 0;
    for (int unsigned n = 0; n < d; n++) c += (a[n] != b[n]);
    return c;
  endfunction

  function automatic hv_t ref_random(input int unsigned d);
    hv_t x = '0;
    for (int unsigned n = 0; n < d; n++) x[n] = $urandom_range(0, 1);
    return x;
  endfunction

endpackage : hd_ref_pkg
