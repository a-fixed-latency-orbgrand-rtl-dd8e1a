// orb_tb_pkg -- reference model shared by the decoder testbenches.
//
// Works on vectors of up to 128 bits with the code length given at run time.
//  * cyclic_h     parity-check matrix of a cyclic code with generator g:
//                 H[i][j] = coefficient i of (x^j mod g(x)).
//  * encode       codeword c(x) = u(x) * g(x) (non-systematic).
//  * gen_schedule an ORBGRAND error-pattern schedule in improved logistic
//                 weight order (iLWO): weight sum_i (i+1)*(v_i+1) over the
//                 sorted flip positions v_0 < v_1 < ..., patterns of Hamming
//                 weight 1..3, weight 2 and 3 confined to the N/2 least
//                 reliable positions; the weight-1 patterns of the most
//                 reliable half are then gathered into one contiguous block,
//                 so that their internal order does not matter (this is what
//                 makes the pruned sorter loss-free).
//  * sort_perm    permutation that sorts magnitudes ascending (a full sort).
//  * ref_decode   serial ORBGRAND: HD(y) first, then the schedule in order;
//                 returns the first codeword found and where.
package orb_tb_pkg;

  typedef logic [127:0] vec_t;

  typedef struct packed {
    logic [1:0] hw;
    logic [7:0] p2;
    logic [7:0] p1;
    logic [7:0] p0;
  } pat_t;

  function automatic vec_t pat_vec(pat_t p);
    vec_t v = '0;
    v[p.p0] = 1'b1;
    if (p.hw >= 2) v[p.p1] = 1'b1;
    if (p.hw >= 3) v[p.p2] = 1'b1;
    return v;
  endfunction

  function automatic void cyclic_h(int n, int nk, logic [31:0] g, ref vec_t h[$]);
    logic [31:0] r;
    h.delete();
    for (int i = 0; i < nk; i++) h.push_back('0);
    r = 1;
    for (int j = 0; j < n; j++) begin
      for (int i = 0; i < nk; i++) h[i][j] = r[i];
      r = r << 1;
      if (r[nk]) r = r ^ g;
    end
  endfunction

  function automatic vec_t encode(int k, logic [31:0] g, vec_t u);
    vec_t c = '0;
    for (int i = 0; i < k; i++) if (u[i]) c = c ^ (vec_t'(g) << i);
    return c;
  endfunction

  function automatic vec_t syndrome(const ref vec_t h[$], input vec_t v);
    vec_t s = '0;
    foreach (h[i]) s[i] = ^(h[i] & v);
    return s;
  endfunction

  function automatic void gen_schedule(int nn, int qmax, ref pat_t sched[$]);
    pat_t bucket [1024][$];
    pat_t p;
    pat_t tmp[$];
    pat_t hi[$];
    int   half = nn / 2;
    bit   placed;
    for (int a = 0; a < nn; a++) begin
      p = '{hw: 1, p2: 0, p1: 0, p0: 8'(a)};
      bucket[a + 1].push_back(p);
    end
    for (int b = 1; b < half; b++)
      for (int a = 0; a < b; a++) begin
        p = '{hw: 2, p2: 0, p1: 8'(b), p0: 8'(a)};
        bucket[(a + 1) + 2 * (b + 1)].push_back(p);
      end
    for (int c = 2; c < half; c++)
      for (int b = 1; b < c; b++)
        for (int a = 0; a < b; a++) begin
          p = '{hw: 3, p2: 8'(c), p1: 8'(b), p0: 8'(a)};
          bucket[(a + 1) + 2 * (b + 1) + 3 * (c + 1)].push_back(p);
        end
    for (int w = 1; w < 1024 && tmp.size() < qmax; w++)
      foreach (bucket[w][i]) if (tmp.size() < qmax) tmp.push_back(bucket[w][i]);
    foreach (tmp[i]) if (tmp[i].hw == 1 && int'(tmp[i].p0) >= half) hi.push_back(tmp[i]);
    sched.delete();
    placed = 0;
    foreach (tmp[i]) begin
      if (tmp[i].hw == 1 && int'(tmp[i].p0) >= half) begin
        if (!placed) begin
          foreach (hi[j]) sched.push_back(hi[j]);
          placed = 1;
        end
      end else begin
        sched.push_back(tmp[i]);
      end
    end
  endfunction

  function automatic void sort_perm(int nn, const ref int mag[$], ref int perm[$]);
    int t;
    perm.delete();
    for (int i = 0; i < nn; i++) perm.push_back(i);
    for (int i = 1; i < nn; i++)
      for (int j = i; j > 0 && mag[perm[j-1]] > mag[perm[j]]; j--) begin
        t = perm[j]; perm[j] = perm[j-1]; perm[j-1] = t;
      end
  endfunction

  // q_hit = -1: HD(y) is a codeword; q_hit = qmax: nothing found.
  // nhit_stage: number of patterns of the hit's stage that also give a codeword.
  function automatic void ref_decode(const ref vec_t h[$], input vec_t hd, const ref int perm[$],
                                     const ref pat_t sched[$], input int qmax, input int qs,
                                     output int q_hit, output vec_t yhat,
                                     output int nhit_stage);
    vec_t s0, colsyn[128], s;
    int   nn = perm.size();
    int   stg = 0;
    s0 = syndrome(h, hd);
    q_hit = qmax; yhat = hd; nhit_stage = 0;
    if (s0 == 0) begin q_hit = -1; nhit_stage = 1; return; end
    for (int j = 0; j < nn; j++) begin
      vec_t u = '0;
      u[perm[j]] = 1'b1;
      colsyn[j] = syndrome(h, u);   // column syndrome in sorted order
    end
    for (int q = 0; q < qmax; q++) begin
      s = s0 ^ colsyn[sched[q].p0];
      if (sched[q].hw >= 2) s = s ^ colsyn[sched[q].p1];
      if (sched[q].hw >= 3) s = s ^ colsyn[sched[q].p2];
      if (s == 0) begin
        if (q_hit == qmax) begin
          q_hit = q;
          yhat = hd;
          yhat[perm[sched[q].p0]] ^= 1'b1;
          if (sched[q].hw >= 2) yhat[perm[sched[q].p1]] ^= 1'b1;
          if (sched[q].hw >= 3) yhat[perm[sched[q].p2]] ^= 1'b1;
          stg = q / qs;
        end
        if (q / qs == stg) nhit_stage++;
        else break;
      end
    end
  endfunction

endpackage
