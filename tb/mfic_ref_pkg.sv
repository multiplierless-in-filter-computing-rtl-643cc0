// mfic_ref_pkg -- behavioural reference model used by the testbenches.
//
// Everything here is computed independently of the RTL algorithms:
//  * mp_ref solves sum_i [L_i - z]_+ = gamma exactly by sorting the inputs
//    and dividing (the RTL uses a bit-serial search without division), and
//    returns floor(z), the RTL's integer convention.
//  * filt_ref is the MP-domain FIR output, clamped to 10 bits.
//  * mfic_model is a sample-by-sample model of the whole classifier:
//    decimating low-pass cascade, 5 + 25 band-pass filters, rectify-and-sum
//    kernel, and the MP kernel machine.
package mfic_ref_pkg;

  function automatic int floor_div(input longint num, input longint den);
    longint q;
    q = num / den;
    if ((num % den != 0) && (num < 0)) q = q - 1;
    return int'(q);
  endfunction

  function automatic int mp_ref(input int l[], input int gamma);
    int a[];
    longint s;
    int n;
    n = l.size();
    a = new[n];
    foreach (l[i]) a[i] = l[i];
    // insertion sort, descending
    for (int i = 1; i < n; i++) begin
      int v, j;
      v = a[i];
      j = i - 1;
      while (j >= 0 && a[j] < v) begin
        a[j+1] = a[j];
        j--;
      end
      a[j+1] = v;
    end
    s = 0;
    for (int k = 1; k <= n; k++) begin
      s += a[k-1];
      // level with k inputs active lies at or above the next input
      if (k == n || (s - gamma) >= longint'(k) * a[k])
        return floor_div(s - gamma, k);
    end
    return a[0];
  endfunction

  function automatic int sat(input int v, input int w);
    int mx, mn;
    mx = (1 << (w-1)) - 1;
    mn = -(1 << (w-1));
    if (v > mx) return mx;
    if (v < mn) return mn;
    return v;
  endfunction

  // MP-domain FIR: MP([h+x, -h-x]) - MP([h-x, -h+x]), clamped to 10 bits
  function automatic int filt_ref(input int x[], input int h[], input int gamma);
    int lp[], ln[];
    int m;
    m = x.size();
    lp = new[2*m];
    ln = new[2*m];
    for (int k = 0; k < m; k++) begin
      lp[2*k] = h[k] + x[k];  lp[2*k+1] = -(h[k] + x[k]);
      ln[2*k] = h[k] - x[k];  ln[2*k+1] = -(h[k] - x[k]);
    end
    return sat(mp_ref(lp, gamma) - mp_ref(ln, gamma), 10);
  endfunction

  function automatic int s10(input logic [9:0] v);
    return int'($signed(v));
  endfunction

  class mfic_model;
    int rom0[4][6];
    int rom1[5][16];
    int rom2[25][16];
    int wts[31][2];
    int lpwin[4][6];
    int bpwin0[16];
    int bpwin[4][16];
    int cnt;
    longint acc[30];
    int acc_w = 24;       // accumulator width; phi is its upper 10 bits
    int gf;
    int lp_runs[4];       // how often each low-pass stage ran
    int ev_lp_idx[$];     // low-pass outputs in order: stage and value
    int ev_lp_val[$];
    int ev_bp_idx[$];     // band-pass outputs in order: filter 0..29 and value
    int ev_bp_val[$];
    int bank_runs[4];     // how often each decimated bank was filtered

    function new();
      cnt = 0;
      foreach (acc[i]) acc[i] = 0;
      foreach (lpwin[i, j]) lpwin[i][j] = 0;
      foreach (bpwin0[i]) bpwin0[i] = 0;
      foreach (bpwin[i, j]) bpwin[i][j] = 0;
      foreach (lp_runs[i]) lp_runs[i] = 0;
      foreach (bank_runs[i]) bank_runs[i] = 0;
    endfunction

    function void load(input logic [9:0] r0[24], input logic [9:0] r1[80],
                       input logic [9:0] r2[400], input logic [9:0] rw[62]);
      for (int i = 0; i < 24; i++)  rom0[i/6][i%6]   = s10(r0[i]);
      for (int i = 0; i < 80; i++)  rom1[i/16][i%16] = s10(r1[i]);
      for (int i = 0; i < 400; i++) rom2[i/16][i%16] = s10(r2[i]);
      for (int i = 0; i < 62; i++)  wts[i/2][i%2]    = s10(rw[i]);
    endfunction

    function void shift6(int b, int v);
      for (int k = 5; k > 0; k--) lpwin[b][k] = lpwin[b][k-1];
      lpwin[b][0] = v;
    endfunction

    function void shift16(int b, int v);
      for (int k = 15; k > 0; k--) bpwin[b][k] = bpwin[b][k-1];
      bpwin[b][0] = v;
    endfunction

    function void add(int i, int y);
      if (y > 0) acc[i] += y;
      if (acc[i] > (longint'(1) << acc_w) - 1) acc[i] = (longint'(1) << acc_w) - 1;
    endfunction

    function int run(int win[], int h[]);
      return filt_ref(win, h, gf);
    endfunction

    function void sample(int x);
      int phase;
      bit pushed[4];
      int w6[], w16[], h6[], h16[];
      w6 = new[6]; h6 = new[6]; w16 = new[16]; h16 = new[16];
      phase = cnt;
      cnt = (cnt + 1) % 16;
      shift6(0, x);
      for (int k = 15; k > 0; k--) bpwin0[k] = bpwin0[k-1];
      bpwin0[0] = x;
      // octave 1
      for (int f = 0; f < 5; f++) begin
        for (int k = 0; k < 16; k++) begin w16[k] = bpwin0[k]; h16[k] = rom1[f][k]; end
        ev_bp_val.push_back(run(w16, h16));
        ev_bp_idx.push_back(f);
        add(f, ev_bp_val[$]);
      end
      // low-pass cascade
      foreach (pushed[i]) pushed[i] = 0;
      for (int s = 0; s < 4; s++) begin
        int mask, y;
        mask = (2 << s) - 1;
        if ((phase & mask) != mask) break;
        for (int k = 0; k < 6; k++) begin w6[k] = lpwin[s][k]; h6[k] = rom0[s][k]; end
        y = run(w6, h6);
        ev_lp_idx.push_back(s);
        ev_lp_val.push_back(y);
        if (s < 3) shift6(s + 1, y);
        shift16(s, y);
        pushed[s] = 1;
        lp_runs[s]++;
      end
      // decimated octaves
      foreach (pushed[b]) if (pushed[b]) bank_runs[b]++;
      for (int j = 0; j < 25; j++) begin
        int b;
        b = (j < 20) ? j / 5 : 3;
        if (pushed[b]) begin
          for (int k = 0; k < 16; k++) begin w16[k] = bpwin[b][k]; h16[k] = rom2[j][k]; end
          ev_bp_val.push_back(run(w16, h16));
          ev_bp_idx.push_back(5 + j);
          add(5 + j, ev_bp_val[$]);
        end
      end
    endfunction

    function int phi(int i);
      return int'(acc[i] >> (acc_w - 10));
    endfunction

    // MP kernel machine on the current kernel; clears the accumulators
    function void infer(input int g1, input int gn,
                        output int zp, output int zm, output int z,
                        output int pp, output int pm, output int p);
      int l3[], l4[], l5[];
      l3 = new[61]; l4 = new[61]; l5 = new[2];
      for (int i = 0; i < 30; i++) begin
        l3[2*i] = wts[i][0] + phi(i);  l3[2*i+1] = wts[i][1] - phi(i);
        l4[2*i] = wts[i][0] - phi(i);  l4[2*i+1] = wts[i][1] + phi(i);
      end
      l3[60] = wts[30][0];
      l4[60] = wts[30][1];
      zp = mp_ref(l3, g1);
      zm = mp_ref(l4, g1);
      l5[0] = zp; l5[1] = zm;
      z  = mp_ref(l5, gn);
      pp = (zp > z) ? zp - z : 0;
      pm = (zm > z) ? zm - z : 0;
      p  = pp - pm;
      foreach (acc[i]) acc[i] = 0;
    endfunction
  endclass

endpackage
