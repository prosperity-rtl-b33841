// prosparsity_ref_pkg -- reference model shared by the testbenches.
// Works on spike rows of up to 64 bits held in dynamic arrays, straight from
// the definitions: a Prefix of row q is a non-empty row that is a proper subset
// of q, or equal to q with a smaller index; of these the one with most ones is
// chosen, ties to the larger index. The execution order is the stable sort of
// the rows by their number of ones.
package prosparsity_ref_pkg;
  typedef logic [63:0] row_t;

  function automatic int ones(row_t v);
    int c = 0;
    for (int i = 0; i < 64; i++) c += int'(v[i]);
    return c;
  endfunction

  // -1 when the row has no Prefix
  function automatic int ref_prefix(row_t r [], int q);
    int best = -1, bn = 0;
    for (int j = 0; j < r.size(); j++) begin
      bit proper    = ((r[j] & ~r[q]) == 0) && (r[j] != r[q]);
      bit em_before = (r[j] == r[q]) && (j < q);
      if ((proper || em_before) && r[j] != 0 && ones(r[j]) >= bn) begin
        best = j; bn = ones(r[j]);
      end
    end
    return best;
  endfunction

  function automatic void ref_order(row_t r [], int kmax, ref int order [$]);
    order.delete();
    for (int v = 0; v <= kmax; v++)
      for (int i = 0; i < r.size(); i++)
        if (ones(r[i]) == v) order.push_back(i);
  endfunction

  // random spike row of k bits, clustered around a few base patterns so that
  // subsets and repeats occur as in real spike tiles
  function automatic row_t rand_row(int k, int dense);
    row_t base [4];
    row_t r;
    row_t mask = (k >= 64) ? '1 : ((row_t'(1) << k) - 1);
    base[0] = 64'h0000_0000_0000_0013; base[1] = 64'h0000_0000_0000_0300;
    base[2] = 64'h0000_0000_0000_4410; base[3] = 64'h0000_0000_0000_8001;
    r = base[$urandom_range(3)];
    if ($urandom_range(2) != 0) r |= {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom};
    if (dense != 0) r |= {$urandom, $urandom} & {$urandom, $urandom};
    if ($urandom_range(4) == 0) r &= {$urandom, $urandom};
    if ($urandom_range(20) == 0) r = '0;
    return r & mask;
  endfunction
endpackage
