// msum_pkg -- types, counter signatures and the elaboration-time greedy
// scheduler of the generic matrix summation.
//
// The bit matrix to be summed is described by its column heights (bits of
// weight 2^c in column c).  The function schedule() builds the complete
// compressor before any hardware exists, the way a constant function does in
// RTL: it repeatedly runs one compression stage of generalized parallel
// counters (GPCs) over the matrix until every column can be absorbed by the
// ragged carry-propagate adder (see ragged_cpa).  The result is a packed
// record that matrix_sum turns into counter instances with for-generate.
//
// What follows the paper: the counter set (nine atom-composed whole-slice
// counters, the (1,3,2,5) slice counter, the full adder, the (6:1,1,1] and the
// (2,5:1,2,1] counters), the three metrics efficiency E=(p-q)/k, strength
// S=p/q and slack A, the precedence orders (E, S or E*S, slack as the last
// criterion; ties in E are broken by S before slack, this design's reading
// of the published counter counts, which are equal for E and E*S), the loop structure "for counter in order, for pos from anchor,
// while it fits: place it", and the anchor / carry-propagate acceptance rule
// (height <= 4 and height + carries <= 5, carries := (carries+height)/2).
//
// This design's own choices: a counter "fits" at pos when every one of its
// input columns still holds enough unconsumed bits of this stage and column
// pos is not yet acceptable to the carry-propagate stage, judged by replaying
// the acceptance rule from the anchor over the current effective heights
// (unconsumed bits plus counter outputs already placed in this stage); above
// the first column that fails, a column counts as acceptable only when its
// effective height is at most 3.  Counters are placed only where all their
// input columns lie below the result width; outputs that would land at or
// above the result width are dropped, which is exact because the sum always
// fits the result width.  Ties that survive the slack criterion keep the
// listing order of counter_e.
package msum_pkg;

  // ---------------------------------------------------------------------
  // Limits of the generic implementation
  // ---------------------------------------------------------------------
  localparam int MAXW  = 36;    // columns of the result (MUL16 needs 32)
  localparam int MAXS  = 12;    // compression stages
  localparam int MAXPL = 320;   // counter placements over all stages
  localparam int HB    = 11;    // bits of a column height (up to 2047)
  localparam int IB    = 12;    // bits of a flat bit index (up to 4095)

  typedef logic [MAXW-1:0][HB-1:0] hvec_t;     // column heights, column 0 first

  // ---------------------------------------------------------------------
  // Counters
  // ---------------------------------------------------------------------
  // The three two-column atoms of Figs. 5-7, named (weight-2 bits, weight-1 bits).
  typedef enum logic [1:0] {ATOM_22, ATOM_14, ATOM_06} atom_e;

  // Slice counters are named by their atoms, upper first: S_<upper>_<lower>.
  typedef enum logic [3:0] {
    C_FA,       // (3:1,1]          full adder, 1 LUT
    C_6_111,    // (6:1,1,1]        3 LUTs
    C_25_121,   // (2,5:1,2,1]      2 LUTs, Fig. 8
    C_1325,     // (1,3,2,5:1,1,1,1,1]  whole slice
    C_S22_22, C_S22_14, C_S22_06,
    C_S14_22, C_S14_14, C_S14_06,
    C_S06_22, C_S06_14, C_S06_06
  } counter_e;
  localparam int NCNT = 13;

  typedef enum logic [1:0] {M_EFFICIENCY, M_STRENGTH, M_PRODUCT} metric_e;

  // Signature of a GPC (p_3..p_0 : q_4..q_0] with k LUTs.
  typedef struct packed {
    logic [3:0][2:0] p;     // inputs per column (column 0 = index 0)
    logic [4:0][1:0] q;     // outputs per column
    logic [2:0]      k;     // LUTs occupied
    logic [2:0]      ncol;  // input columns spanned
    logic [2:0]      nout;  // output columns spanned
  } sig_t;

  function automatic int atom_w1(atom_e a);   // weight-1 bits of an atom
    case (a)
      ATOM_22: return 2;
      ATOM_14: return 4;
      default: return 6;
    endcase
  endfunction

  function automatic int atom_w2(atom_e a);   // weight-2 bits of an atom
    case (a)
      ATOM_22: return 2;
      ATOM_14: return 1;
      default: return 0;
    endcase
  endfunction

  function automatic atom_e upper_atom(counter_e c);
    case (c)
      C_S22_22, C_S22_14, C_S22_06: return ATOM_22;
      C_S14_22, C_S14_14, C_S14_06: return ATOM_14;
      default:                      return ATOM_06;
    endcase
  endfunction

  function automatic atom_e lower_atom(counter_e c);
    case (c)
      C_S22_22, C_S14_22, C_S06_22: return ATOM_22;
      C_S22_14, C_S14_14, C_S06_14: return ATOM_14;
      default:                      return ATOM_06;
    endcase
  endfunction

  function automatic logic is_slice(counter_e c);
    return c >= C_S22_22;
  endfunction

  function automatic sig_t sig(counter_e c);
    sig_t s;
    s = '0;
    case (c)
      C_FA:     begin s.p[0] = 3; s.q[0] = 1; s.q[1] = 1; s.k = 1; s.ncol = 1; s.nout = 2; end
      C_6_111:  begin s.p[0] = 6; s.q[0] = 1; s.q[1] = 1; s.q[2] = 1; s.k = 3; s.ncol = 1; s.nout = 3; end
      C_25_121: begin s.p[0] = 5; s.p[1] = 2; s.q[0] = 1; s.q[1] = 2; s.q[2] = 1;
                      s.k = 2; s.ncol = 2; s.nout = 3; end
      C_1325:   begin s.p[0] = 5; s.p[1] = 2; s.p[2] = 3; s.p[3] = 1;
                      s.q = {2'd1, 2'd1, 2'd1, 2'd1, 2'd1}; s.k = 4; s.ncol = 4; s.nout = 5; end
      default: begin
        // lower atom plus the carry-chain input (not for atom (0,6))
        s.p[0] = 3'(atom_w1(lower_atom(c)) + ((lower_atom(c) == ATOM_06) ? 0 : 1));
        s.p[1] = 3'(atom_w2(lower_atom(c)));
        s.p[2] = 3'(atom_w1(upper_atom(c)));
        s.p[3] = 3'(atom_w2(upper_atom(c)));
        s.q = {2'd1, 2'd1, 2'd1, 2'd1, 2'd1}; s.k = 4; s.ncol = 4; s.nout = 5;
      end
    endcase
    return s;
  endfunction

  function automatic int sig_p(sig_t s);           // total inputs
    return int'(s.p[0]) + int'(s.p[1]) + int'(s.p[2]) + int'(s.p[3]);
  endfunction

  function automatic int sig_q(sig_t s);           // total outputs
    return int'(s.q[0]) + int'(s.q[1]) + int'(s.q[2]) + int'(s.q[3]) + int'(s.q[4]);
  endfunction

  function automatic int sig_maxin(sig_t s);       // largest input total
    return int'(s.p[0]) + 2*int'(s.p[1]) + 4*int'(s.p[2]) + 8*int'(s.p[3]);
  endfunction

  function automatic int sig_maxout(sig_t s);      // largest representable output
    return int'(s.q[0]) + 2*int'(s.q[1]) + 4*int'(s.q[2]) + 8*int'(s.q[3]) + 16*int'(s.q[4]);
  endfunction

  // Compare two counters under a metric: +1 if a ranks above b, -1 below, 0 tie.
  // Rationals are compared by cross multiplication.
  function automatic int cmp_metric(counter_e a, counter_e b, metric_e m);
    sig_t sa, sb;
    int pa, qa, ka, pb, qb, kb, l, r;
    sa = sig(a); sb = sig(b);
    pa = sig_p(sa); qa = sig_q(sa); ka = int'(sa.k);
    pb = sig_p(sb); qb = sig_q(sb); kb = int'(sb.k);
    case (m)
      M_EFFICIENCY: begin l = (pa - qa) * kb;           r = (pb - qb) * ka;           end
      M_STRENGTH:   begin l = pa * qb;                  r = pb * qa;                  end
      default:      begin l = (pa - qa) * pa * kb * qb; r = (pb - qb) * pb * ka * qa; end
    endcase
    if (l > r) return 1;
    if (l < r) return -1;
    // efficiency ties are broken by strength (this makes the efficiency
    // order equal to the product order, as the published counts show)
    if (m == M_EFFICIENCY) begin
      l = pa * qb;
      r = pb * qa;
      if (l > r) return 1;
      if (l < r) return -1;
    end
    // last criterion: smaller slack A = 1 - (1+maxin)/(1+maxout) ranks higher
    l = (1 + sig_maxin(sa)) * (1 + sig_maxout(sb));
    r = (1 + sig_maxin(sb)) * (1 + sig_maxout(sa));
    if (l > r) return 1;
    if (l < r) return -1;
    return 0;
  endfunction

  typedef logic [NCNT-1:0][3:0] order_t;

  // Counters sorted by preference (stable insertion sort), index 0 first.
  function automatic order_t counter_order(metric_e m);
    order_t o;
    counter_e t;
    int j;
    for (int i = 0; i < NCNT; i++) o[i] = 4'(i);
    for (int i = 1; i < NCNT; i++) begin
      t = counter_e'(o[i]);
      j = i - 1;
      while (j >= 0 && cmp_metric(t, counter_e'(o[j]), m) > 0) begin
        o[j+1] = o[j];
        j = j - 1;
      end
      o[j+1] = t;
    end
    return o;
  endfunction

  // ---------------------------------------------------------------------
  // Carry-propagate stage (Tab. III)
  // ---------------------------------------------------------------------
  typedef enum logic [2:0] {CPE_NONE, CPE_COPY, CPE_FA, CPE_TE, CPE_NA} cpe_e;

  function automatic cpe_e cp_element(int carries, int height);
    if (height > 4 || height + carries > 5) return CPE_NA;
    if (height + carries == 0) return CPE_NONE;
    if (height + carries == 1) return CPE_COPY;
    if (height + carries <= 3) return CPE_FA;
    return CPE_TE;
  endfunction

  // Carries (0..2) arriving at column col of the carry-propagate stage.
  function automatic int cp_carries(hvec_t h, int col);
    int car;
    car = 0;
    for (int c = 0; c < col; c++) car = (car + int'(h[c])) / 2;
    return car;
  endfunction

  // ---------------------------------------------------------------------
  // Matrix helpers
  // ---------------------------------------------------------------------
  function automatic int total_bits(hvec_t h);
    int n;
    n = 0;
    for (int c = 0; c < MAXW; c++) n += int'(h[c]);
    return n;
  endfunction

  function automatic int col_offset(hvec_t h, int col);   // first flat index of a column
    int n;
    n = 0;
    for (int c = 0; c < col; c++) n += int'(h[c]);
    return n;
  endfunction

  // Result width: bits of the largest possible total, sum of h[c]*2^c.
  function automatic int result_width(hvec_t h);
    longint unsigned mx;
    int w;
    mx = 0;
    for (int c = 0; c < MAXW; c++) mx += longint'(h[c]) << c;
    w = 1;
    while (w < 64 && (mx >> w) != 0) w++;
    return w;
  endfunction

  // Heights of a single column, of two columns, and of an n x n multiplier.
  function automatic hvec_t hv1(int h0);
    hvec_t h;
    h = '0; h[0] = HB'(h0);
    return h;
  endfunction

  function automatic hvec_t hv2(int h0, int h1);
    hvec_t h;
    h = '0; h[0] = HB'(h0); h[1] = HB'(h1);
    return h;
  endfunction

  function automatic hvec_t hv_mul(int n);
    hvec_t h;
    h = '0;
    for (int c = 0; c < 2*n - 1; c++) h[c] = HB'((c < n) ? c + 1 : 2*n - 1 - c);
    return h;
  endfunction

  // ---------------------------------------------------------------------
  // Schedule record
  // ---------------------------------------------------------------------
  typedef struct packed {
    logic [3:0]           kind;     // counter_e
    logic [5:0]           pos;      // column of the counter's least significant input
    logic [3:0][IB-1:0]   in_base;  // flat index (this stage) of its first bit per input column
    logic [4:0][IB-1:0]   out_base; // flat index (next stage) of its first bit per output column
  } place_t;

  typedef struct packed {
    logic                         ok;       // construction finished within the limits
    logic [7:0]                   w;        // result width
    logic [3:0]                   nstages;  // compression stages
    logic [MAXS:0][9:0]           first;    // first placement of each stage (first[nstages] = total)
    logic [MAXS:0][MAXW-1:0][HB-1:0] height; // heights at the input of each stage; [nstages] feeds the CPA
    logic [MAXS-1:0][MAXW-1:0][HB-1:0] used; // bits of each column consumed by counters
    place_t [MAXPL-1:0]           place;
  } sched_t;

  // Per-column acceptance of the current effective heights, replayed from the anchor.
  function automatic logic [MAXW-1:0] acceptable(int anchor, int car0, int w,
                                                 logic [MAXW-1:0][HB-1:0] eff);
    logic [MAXW-1:0] acc;
    int car;
    logic chain;
    acc = '1;
    car = car0;
    chain = 1'b1;
    for (int c = anchor; c < w; c++) begin
      if (chain && int'(eff[c]) <= 4 && int'(eff[c]) + car <= 5) begin
        car = (car + int'(eff[c])) / 2;
      end else begin
        chain = 1'b0;
        acc[c] = (int'(eff[c]) <= 3);
      end
    end
    return acc;
  endfunction

  // Algorithm 1: greedy compressor and summation construction.
  function automatic sched_t schedule(hvec_t h0, metric_e m);
    sched_t s;
    order_t ord;
    int w, anchor, carries, np, st, pos, base;
    logic [MAXW-1:0][HB-1:0] cur, rem, prod, eff;
    logic [MAXW-1:0] acc;
    logic [MAXW-1:0][IB-1:0] offs, offn, cnt;
    sig_t sg;
    counter_e c;
    logic fits, done;

    s = sched_t'(0);
    ord = counter_order(m);
    w = result_width(h0);
    s.w = 8'(w);
    cur = '0;
    for (int i = 0; i < w && i < MAXW; i++) cur[i] = h0[i];
    s.height[0] = cur;
    anchor = 0;
    carries = 0;
    np = 0;
    st = 0;
    done = 1'b0;

    // update_anchor()
    while (anchor < w && int'(cur[anchor]) <= 4 && int'(cur[anchor]) + carries <= 5) begin
      carries = (carries + int'(cur[anchor])) / 2;
      anchor++;
    end

    while (anchor < w && !done) begin
      if (st >= MAXS) begin
        done = 1'b1;
      end else begin
        s.first[st] = 10'(np);
        rem  = cur;
        prod = '0;
        offs = '0;
        for (int i = 1; i < MAXW; i++) offs[i] = IB'(int'(offs[i-1]) + int'(cur[i-1]));
        acc = acceptable(anchor, carries, w, cur);
        for (int oi = 0; oi < NCNT; oi++) begin
          c  = counter_e'(ord[oi]);
          sg = sig(c);
          for (pos = anchor; pos + int'(sg.ncol) <= w; pos++) begin
            fits = 1'b1;
            while (fits) begin
              fits = !acc[pos] && np < MAXPL;
              for (int i = 0; i < 4; i++)
                if (i < int'(sg.ncol) && int'(rem[pos+i]) < int'(sg.p[i])) fits = 1'b0;
              if (fits) begin
                s.place[np].kind = 4'(c);
                s.place[np].pos  = 6'(pos);
                for (int i = 0; i < 4; i++)
                  if (i < int'(sg.ncol)) begin
                    // consume the lowest still unconsumed bits of the column
                    s.place[np].in_base[i] = IB'(int'(offs[pos+i]) + int'(cur[pos+i]) - int'(rem[pos+i]));
                    rem[pos+i] = HB'(int'(rem[pos+i]) - int'(sg.p[i]));
                  end
                for (int i = 0; i < 5; i++)
                  if (i < int'(sg.nout) && pos + i < w)
                    prod[pos+i] = HB'(int'(prod[pos+i]) + int'(sg.q[i]));
                np++;
                for (int i = 0; i < MAXW; i++) eff[i] = HB'(int'(rem[i]) + int'(prod[i]));
                acc = acceptable(anchor, carries, w, eff);
              end
            end
          end
        end
        // second pass: place outputs after the pass-through bits of each column
        for (int i = 0; i < MAXW; i++) begin
          s.used[st][i] = HB'(int'(cur[i]) - int'(rem[i]));
          eff[i] = HB'(int'(rem[i]) + int'(prod[i]));
        end
        offn = '0;
        for (int i = 1; i < MAXW; i++) offn[i] = IB'(int'(offn[i-1]) + int'(eff[i-1]));
        for (int i = 0; i < MAXW; i++) cnt[i] = IB'(int'(offn[i]) + int'(rem[i]));
        for (int j = int'(s.first[st]); j < np; j++) begin
          sg = sig(counter_e'(s.place[j].kind));
          base = int'(s.place[j].pos);
          for (int i = 0; i < 5; i++)
            if (i < int'(sg.nout) && base + i < w) begin
              s.place[j].out_base[i] = cnt[base+i];
              cnt[base+i] = IB'(int'(cnt[base+i]) + int'(sg.q[i]));
            end
        end
        cur = eff;
        st++;
        s.height[st] = cur;
        // update_anchor()
        while (anchor < w && int'(cur[anchor]) <= 4 && int'(cur[anchor]) + carries <= 5) begin
          carries = (carries + int'(cur[anchor])) / 2;
          anchor++;
        end
      end
    end
    s.nstages = 4'(st);
    s.first[st] = 10'(np);
    s.ok = (anchor >= w) && (w <= MAXW);
    return s;
  endfunction

  // Number of placements of one counter kind in a schedule (for reports and tests).
  function automatic int count_kind(sched_t s, counter_e c);
    int n;
    n = 0;
    for (int j = 0; j < MAXPL; j++)
      if (j < int'(s.first[s.nstages]) && counter_e'(s.place[j].kind) == c) n++;
    return n;
  endfunction

endpackage
