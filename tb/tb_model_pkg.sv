// tb_model_pkg: reference models shared by the testbenches. They describe
// the permutation networks recursively, as they are drawn (a column of 2x2
// switches next to an upper and a lower half-size network), independently
// of the stage-by-stage RTL, plus modular arithmetic helpers.
package tb_model_pkg;

  typedef longint unsigned u64_t;
  typedef u64_t vec_t[];

  // bit of switch i (within its subnetwork) of stage s; a subnetwork of
  // size n at depth s sits at group g = offset / n, as in the RTL numbering
  function automatic bit swbit(bit sw[], int dp, int s, int offset, int n, int i);
    return sw[s * (dp / 2) + (offset / n) * (n / 2) + i];
  endfunction

  // input-side network: switches first, then upper/lower halves
  function automatic vec_t net_in(vec_t v, bit sw[], int dp, int s, int offset);
    int n = v.size();
    vec_t up = new[n / 2], lo = new[n / 2], r = new[n];
    for (int i = 0; i < n / 2; i++) begin
      if (swbit(sw, dp, s, offset, n, i)) begin up[i] = v[2*i+1]; lo[i] = v[2*i]; end
      else                                begin up[i] = v[2*i];   lo[i] = v[2*i+1]; end
    end
    if (n > 2) begin
      up = net_in(up, sw, dp, s + 1, offset);
      lo = net_in(lo, sw, dp, s + 1, offset + n / 2);
    end
    for (int i = 0; i < n / 2; i++) begin r[i] = up[i]; r[n/2 + i] = lo[i]; end
    return r;
  endfunction

  // output-side network: upper/lower halves first, then switches
  // s_last is the stage number of this level's switch column
  function automatic vec_t net_out(vec_t v, bit sw[], int dp, int s_last, int offset);
    int n = v.size();
    vec_t up = new[n / 2], lo = new[n / 2], r = new[n];
    for (int i = 0; i < n / 2; i++) begin up[i] = v[i]; lo[i] = v[n/2 + i]; end
    if (n > 2) begin
      up = net_out(up, sw, dp, s_last - 1, offset);
      lo = net_out(lo, sw, dp, s_last - 1, offset + n / 2);
    end
    for (int i = 0; i < n / 2; i++) begin
      if (swbit(sw, dp, s_last, offset, n, i)) begin r[2*i] = lo[i]; r[2*i+1] = up[i]; end
      else                                     begin r[2*i] = up[i]; r[2*i+1] = lo[i]; end
    end
    return r;
  endfunction

  function automatic int clog2(int x);
    int r = 0;
    while ((1 << r) < x) r++;
    return r;
  endfunction

  function automatic u64_t rnd54();
    return {$urandom, $urandom} & ((64'd1 << 54) - 1);
  endfunction

  function automatic u64_t rnd_q();
    return rnd54() | (64'd1 << 53) | 1;
  endfunction

  function automatic logic [54:0] calc_mu(u64_t q);
    logic [109:0] num;
    num = '0; num[108] = 1'b1;
    return 55'(num / 110'(q));
  endfunction

  function automatic u64_t mulmod(u64_t a, u64_t b, u64_t q);
    logic [127:0] p;
    p = 128'(a) * 128'(b);
    return 64'(p % 128'(q));
  endfunction

  function automatic u64_t addmod(u64_t a, u64_t b, u64_t q);
    return 64'((65'(a) + 65'(b)) % 65'(q));
  endfunction

  function automatic u64_t submod(u64_t a, u64_t b, u64_t q);
    return 64'((65'(a) + 65'(q) - 65'(b)) % 65'(q));
  endfunction

endpackage
