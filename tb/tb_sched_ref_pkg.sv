// tb_sched_ref_pkg: software reference for the scheduled (compressed) tensor
// format, shared by the testbenches of the decompressor, the backside
// scheduler and the top level.
//
// sched_stream() turns a dense stream of rows into scheduled rows with a
// deliberately different algorithm from the hardware's levelled scheduler:
// lanes are visited one by one in index order, each taking the first still
// unused non-zero value of its promotion map (same map and option order as
// td_pkg). Any schedule produced this way is valid, so a decompressor must
// rebuild the dense stream from it. expand_stream() is the reference
// decompressor: it places each value at (pointer + step, source lane) and
// advances the pointer by the row's as.
package tb_sched_ref_pkg;
  import td_pkg::*;

  typedef struct {
    row_t                      v;
    logic [LANES-1:0][MSW-1:0] ms;
    lane_mask_t                nz;
    logic [ASW-1:0]            as_;
  } srow_t;

  function automatic void sched_stream(input row_t dense [$], output srow_t s [$]);
    automatic int n = dense.size();
    automatic int ptr = 0;
    automatic bit used [][LANES];
    used = new[n + DEPTH];
    s.delete();
    for (int r = 0; r < n + DEPTH; r++)
      for (int l = 0; l < LANES; l++)
        used[r][l] = (r >= n) || (dense[r][l][30:0] == 0);
    while (ptr < n) begin
      automatic srow_t sr;
      automatic int a = 0;
      sr.v = '0; sr.ms = '0; sr.nz = '0;
      for (int i = 0; i < LANES; i++)
        for (int o = 0; o < NOPT; o++) begin
          automatic int rr = ptr + opt_step(o);
          automatic int ll = opt_lane(i, o);
          if (!sr.nz[i] && !used[rr][ll]) begin
            used[rr][ll] = 1;
            sr.nz[i] = 1; sr.ms[i] = MSW'(o); sr.v[i] = dense[rr][ll];
          end
        end
      while (a < DEPTH) begin
        automatic bit empty = 1;
        for (int l = 0; l < LANES; l++) if (!used[ptr + a][l]) empty = 0;
        if (!empty) break;
        a++;
      end
      sr.as_ = ASW'(a);
      s.push_back(sr);
      ptr += a;
    end
  endfunction

  function automatic void expand_stream(input srow_t s [$], output row_t dense [$]);
    automatic int ptr = 0;
    dense.delete();
    foreach (s[k]) begin
      while (dense.size() < ptr + DEPTH) dense.push_back('0);
      for (int i = 0; i < LANES; i++)
        if (s[k].nz[i])
          dense[ptr + opt_step(int'(s[k].ms[i]))][opt_lane(i, int'(s[k].ms[i]))] = s[k].v[i];
      ptr += int'(s[k].as_);
    end
    while (dense.size() > ptr) void'(dense.pop_back());
  endfunction

  // Row equality that treats +0 and -0 alike (the stored form keeps no zeros).
  function automatic bit row_eq(input row_t a, input row_t b);
    for (int l = 0; l < LANES; l++)
      if (a[l] != b[l] && !(a[l][30:0] == 0 && b[l][30:0] == 0)) return 0;
    return 1;
  endfunction

  // Random dense row: each value non-zero with probability pct/100.
  function automatic row_t rand_row(input int pct);
    row_t r;
    int unsigned u, m;
    for (int l = 0; l < LANES; l++) begin
      u = $urandom % 100;
      m = $urandom;
      if (u < pct) r[l] = {m[31], 8'(1 + m[30:23] % 254), m[22:0]};
      else         r[l] = {m[31], 31'd0};
    end
    return r;
  endfunction
endpackage
