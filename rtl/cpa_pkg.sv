// cpa_pkg: elaboration-time arithmetic shared by the Dadda multiplier and its
// hybrid final adder.
//
// Three groups of constant functions live here:
//  * Region widths of the final carry propagate adder (CPA). For an N x N
//    multiplier the 2N-bit final adder is split into a low region of N/2 bits
//    (ripple carry), a middle region of N + 2^x bits (BEC carry select) and a
//    high region of N/4 bits (BEC carry look-ahead), with x = floor(log2 N) - 2.
//    For N a power of two the three widths add up to 2N exactly. For other N
//    the middle region is given whatever the two outer regions leave, which is
//    this design's own rule.
//  * Square-root group sizing of a variable-block carry select adder. Groups
//    start at 2 bits and grow by one bit towards the MSB; bits left over that
//    do not fill a further group are handed out one per group from the MSB
//    group downwards (a choice of this design, the sizing rule itself is the
//    classic square-root carry select one).
//  * The Dadda reduction schedule: the height sequence d(0)=2,
//    d(j+1)=floor(1.5*d(j)), and for each stage and column how many full and
//    half adders the stage places there, following Dadda's rule of reducing
//    each column only as far as the next target height.
package cpa_pkg;

  // ---------------------------------------------------------------- regions
  function automatic int clog2_floor(input int v);
    int r = 0;
    while ((1 << (r + 1)) <= v) r++;
    return r;
  endfunction

  function automatic int region1_width(input int n);
    return n / 2;
  endfunction

  function automatic int region3_width(input int n);
    return n / 4;
  endfunction

  // n + 2^x with x = 0 for n = 4..7, x = 1 for n = 8..15, ...
  function automatic int region2_formula(input int n);
    return n + (1 << (clog2_floor(n) - 2));
  endfunction

  function automatic int region2_width(input int n);
    return 2 * n - region1_width(n) - region3_width(n);
  endfunction

  // ------------------------------------------------- square-root group sizes
  localparam int MAX_GROUPS = 64;

  // Number of groups of a W-bit variable-block adder.
  function automatic int num_groups(input int w);
    int used = 0;
    int g = 0;
    int sz = 2;
    if (w <= 2) return 1;
    while (used + sz <= w) begin
      used += sz;
      g++;
      sz++;
    end
    return g;
  endfunction

  // Size of group k (k = 0 is the LSB group).
  function automatic int group_size(input int w, input int k);
    int g;
    int sizes[MAX_GROUPS];
    int used = 0;
    int rem;
    int idx;
    g = num_groups(w);
    if (w <= 2) return w;
    for (int i = 0; i < MAX_GROUPS; i++) sizes[i] = 0;
    for (int i = 0; i < g; i++) begin
      sizes[i] = i + 2;
      used += i + 2;
    end
    rem = w - used;
    idx = g - 1;
    while (rem > 0) begin
      sizes[idx]++;
      rem--;
      idx = (idx == 0) ? g - 1 : idx - 1;
    end
    return sizes[k];
  endfunction

  // Bit position of the LSB of group k.
  function automatic int group_lsb(input int w, input int k);
    int lsb = 0;
    for (int i = 0; i < k; i++) lsb += group_size(w, i);
    return lsb;
  endfunction

  // ------------------------------------------------------- Dadda schedule
  localparam int MAX_COLS = 256;  // supports N up to 128

  // Dadda height sequence d(0)=2, d(j+1)=floor(1.5*d(j)).
  function automatic int dadda_d(input int j);
    int d = 2;
    for (int i = 0; i < j; i++) d = (d * 3) / 2;
    return d;
  endfunction

  // Number of reduction stages for an N x N matrix: one per d(j) < N.
  function automatic int dadda_stages(input int n);
    int j = 0;
    while (dadda_d(j) < n) j++;
    return j;
  endfunction

  // Target height of stage s (s = 0 is the first stage, next to the AND array).
  function automatic int dadda_target(input int n, input int s);
    return dadda_d(dadda_stages(n) - 1 - s);
  endfunction

  // Initial height of column c of the N x N partial-product matrix.
  function automatic int pp_height(input int n, input int c);
    if (c > 2 * n - 2) return 0;
    return (c < n) ? c + 1 : 2 * n - 1 - c;
  endfunction

  // Row in column c that partial product b[i] & a[c-i] occupies.
  function automatic int pp_row(input int n, input int c, input int i);
    return (c < n) ? i : i - (c - n + 1);
  endfunction

  // Schedule of one stage, all columns at once. For column c:
  //   [c][Q_HEIGHT] column height entering the stage
  //   [c][Q_FA]     full adders the stage places in the column
  //   [c][Q_HA]     half adders the stage places in the column
  //   [c][Q_CIN]    carries entering the column from column c-1
  // Every stage up to s is replayed, so one call costs O(s * 2N).
  typedef enum int {Q_HEIGHT = 0, Q_FA = 1, Q_HA = 2, Q_CIN = 3} dadda_query_e;
  typedef logic [MAX_COLS-1:0][3:0][7:0] dadda_stage_t;

  function automatic dadda_stage_t dadda_stage(input int n, input int s);
    dadda_stage_t r;
    int h  [MAX_COLS];
    int hn [MAX_COLS];
    int d, cin, tot, ex, f, a;
    r = '0;
    for (int k = 0; k < 2 * n; k++) h[k] = pp_height(n, k);
    for (int st = 0; st <= s; st++) begin
      d   = dadda_target(n, st);
      cin = 0;
      for (int k = 0; k < 2 * n; k++) begin
        tot = h[k] + cin;
        ex  = tot - d;
        f   = (ex > 0) ? ex / 2 : 0;
        a   = (ex > 0) ? ex % 2 : 0;
        if (st == s) begin
          r[k][Q_HEIGHT] = 8'(h[k]);
          r[k][Q_FA]     = 8'(f);
          r[k][Q_HA]     = 8'(a);
          r[k][Q_CIN]    = 8'(cin);
        end
        hn[k] = tot - 2 * f - a;
        cin   = f + a;
      end
      for (int k = 0; k < 2 * n; k++) h[k] = hn[k];
    end
    return r;
  endfunction

endpackage
