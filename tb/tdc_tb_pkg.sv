// tdc_tb_pkg: stimulus and reference helpers for the TDL TDC testbenches.
//
// A delay-line snapshot is described by the centres of its transition zones
// and the level before the first zone; levels alternate from zone to zone.
// Inside a zone of half-width h (taps c-h .. c+h-1) every tap is random,
// which models bubbles (limited to the 24-tap piece of the centre, see
// make_pattern); outside the zones the taps are solid. The reference
// position of zone k is worked out from the taps alone, the way a ones (or
// zeros) counter would see it:
//   ref_k = m_left + (number of taps equal to the level before zone k in
//           [m_left, m_right))
// where m_left is the end of the previous zone (or 0) and m_right the start
// of the next zone (or the end of the line). For a clean edge this is the
// number of taps ahead of the edge.
package tdc_tb_pkg;

  localparam int MAXT = 512;
  typedef logic [MAXT-1:0] raw_t;

  // Random centres for n zones: first >= w+hmax, gaps >= 2*w+2*hmax,
  // last <= last_max. Returns an empty queue if they do not fit.
  function automatic void rand_centres(input int n, input int w, input int hmax,
                                       input int last_max, output int c[$]);
    int lo, slack, step;
    c.delete();
    lo    = w + hmax;
    step  = 2 * w + 2 * hmax;
    slack = last_max - lo - (n - 1) * step;
    if (slack < 0) return;
    for (int k = 0; k < n; k++) begin
      int add;
      add = (slack > 0) ? int'($urandom_range(0, slack)) : 0;
      if (k < n - 1) add = add / 2;
      slack -= add;
      lo    += add;
      c.push_back(lo);
      lo    += step;
    end
  endfunction

  // Bubbles stay inside the w-tap piece that holds the centre of the zone:
  // the method corrects bubbles that lie within the two pieces it selects.
  function automatic raw_t make_pattern(input int taps, input int c[$],
                                        input bit lvl0, input int h, input int w);
    raw_t r;
    bit   lvl;
    int   z;
    r   = '0;
    lvl = lvl0;
    z   = 0;
    for (int i = 0; i < taps; i++) begin
      while (z < c.size() && i >= c[z] + h) begin
        lvl = !lvl;
        z++;
      end
      if (z < c.size() && i >= c[z] - h && i < c[z] + h) begin
        if (i / w == c[z] / w) r[i] = 1'($urandom_range(0, 1));
        else r[i] = (i < c[z]) ? lvl : !lvl;
      end else r[i] = lvl;
    end
    return r;
  endfunction

  function automatic int zone_ref(input raw_t r, input int taps, input int c[$],
                                  input int k, input bit lvl0, input int h);
    int  ml, mr, n;
    bit  v;
    v  = lvl0 ^ bit'(k % 2);
    ml = (k == 0) ? 0 : c[k-1] + h;
    mr = (k == c.size() - 1) ? taps : c[k+1] - h;
    n  = 0;
    for (int i = ml; i < mr; i++) if (r[i] == v) n++;
    return ml + n;
  endfunction

  function automatic int count_ones(input raw_t r, input int lo, input int hi);
    int n;
    n = 0;
    for (int i = lo; i < hi; i++) n += int'(r[i]);
    return n;
  endfunction

endpackage
