// proj_pkg: constants and constant functions shared by the projection
// datapath.
//
// The sorting network and the simplex projection are built from generate
// loops whose structure is decided at elaboration time. The functions here
// compute that structure:
//   * sort_num_stages / sort_stage give the stage list of Batcher's
//     merge-exchange sorting network (Knuth, TAOCP vol. 3, 5.2.2,
//     Algorithm M). It sorts any number of inputs without padding. Each stage
//     is a set of disjoint compare-and-swap elements: element i is compared
//     with element i+d whenever (i & p) == r and i+d < n.
//   * recip gives the fixed-point reciprocal round(2^rf / i). The simplex
//     projection uses it to divide the prefix sums by their index.
// Nothing here holds state or has timing of its own.
package proj_pkg;

  // Parameters of one stage of the merge-exchange network.
  typedef struct packed {
    int unsigned p;  // bit mask that selects the lower partner of a pair
    int unsigned d;  // distance between the two partners
    int unsigned r;  // value (i & p) must take for i to be a lower partner
  } sort_stage_t;

  // ceil(log2(n)) for n >= 1, 0 for n = 1.
  function automatic int unsigned log2_ceil(int unsigned n);
    int unsigned k;
    k = 0;
    while ((1 << k) < n) k++;
    return k;
  endfunction

  // Number of stages (depth) of the merge-exchange network: t(t+1)/2 with
  // t = ceil(log2 n).
  function automatic int unsigned sort_num_stages(int unsigned n);
    int unsigned t;
    t = log2_ceil(n);
    return (t * (t + 1)) / 2;
  endfunction

  // Parameters of stage s (0-based) of the network for n inputs (n >= 2).
  // This walks the loops of Algorithm M and picks the s-th pass.
  function automatic sort_stage_t sort_stage(int unsigned n, int unsigned s);
    sort_stage_t st;
    int unsigned t, p, q, r, d, k;
    bit          done;
    st = '0;
    t  = log2_ceil(n);
    k  = 0;
    for (int pl = int'(t) - 1; pl >= 0; pl--) begin
      p    = 1 << pl;
      q    = 1 << (t - 1);
      r    = 0;
      d    = p;
      done = 1'b0;
      for (int it = 0; it < int'(t); it++) begin
        if (!done) begin
          if (k == s) begin
            st.p = p;
            st.d = d;
            st.r = r;
          end
          k++;
          if (q != p) begin
            d = q - p;
            q = q >> 1;
            r = p;
          end else begin
            done = 1'b1;
          end
        end
      end
    end
    return st;
  endfunction

  // round(2^rf / i) for i >= 1.
  function automatic longint unsigned recip(int unsigned i, int unsigned rf);
    longint unsigned num;
    num = (longint'(1) << rf) + longint'(i) / 2;
    return num / longint'(i);
  endfunction

endpackage
