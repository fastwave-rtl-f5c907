// fw_ref_pkg: reference model of the FastWave network for the testbenches.
//
// A plain, sequential software model of one Fast-WaveNet generation step in
// the accelerator's number format (27-bit values with 19 fraction bits,
// exact integer products, shift toward minus infinity, saturation). It
// keeps its own shifting-free queues as arrays indexed modulo the queue
// length, and its own bit-exact description of the CORDIC tanh, written
// from the algorithm rather than from the RTL. The testbenches load the
// same random weights into the model and into the hardware and compare the
// sampled outputs, and the model also predicts the cycle count.
package fw_ref_pkg;

  localparam int FRAC = 19;
  localparam longint VMAX = (longint'(1) << 26) - 1;
  localparam longint VMIN = -(longint'(1) << 26);

  // accumulator (38 fraction bits) -> value, plus an offset value
  function automatic int fix(longint acc, int off);
    longint s;
    s = (acc >>> FRAC) + longint'(off);
    if (s > VMAX) s = VMAX;
    if (s < VMIN) s = VMIN;
    return int'(s);
  endfunction

  function automatic int level_value(int idx, int levels);
    longint num;
    num = longint'(2 * idx - (levels - 1)) * (longint'(1) << FRAC);
    return int'(num / longint'(levels - 1));
  endfunction

  // atanh(2^-i) at 24 fraction bits
  function automatic longint atanh24(int i);
    longint t[8] = '{0, 9215828, 4285116, 2108178, 1049945, 524459, 262165, 131075};
    if (i < 8) return t[i];
    return longint'(1) << (24 - i);
  endfunction

  // CORDIC tanh, as the algorithm is specified (see tanh_cordic)
  function automatic int tanh_ref(int x, output bit sat);
    longint a, t, k, r, cx, cy, cz, e, num, den, q;
    int seq[26];
    int n = 0;
    for (int i = 1; i <= 24; i++) begin
      seq[n++] = i;
      if (i == 4 || i == 13) seq[n++] = i;
    end
    a = (x < 0) ? -longint'(x) : longint'(x);
    sat = (a >= (longint'(8) << FRAC));
    if (sat) return (x < 0) ? -(1 << FRAC) : (1 << FRAC);
    t  = a << 6;
    k  = (t * 24204406) >>> 48;
    r  = t - k * 11629080;
    cx = 20258439; cy = 20258439; cz = -r;
    for (int s = 0; s < 26; s++) begin
      longint nx, ny;
      if (cz >= 0) begin
        nx = cx + (cy >>> seq[s]); ny = cy + (cx >>> seq[s]); cz = cz - atanh24(seq[s]);
      end else begin
        nx = cx - (cy >>> seq[s]); ny = cy - (cx >>> seq[s]); cz = cz + atanh24(seq[s]);
      end
      cx = nx; cy = ny;
    end
    e   = cx >>> k;
    num = (longint'(1) << 24) - e;
    den = (longint'(1) << 24) + e;
    q   = (num << FRAC) / den;
    return (x < 0) ? -int'(q) : int'(q);
  endfunction

  class fw_model;
    int nb, lpb, ch, fcn, fcm, nl;
    int p_out, p_in, p_out1, p_in1, tanh_units;
    int kw[];          // kernels: [l][tap][row][col], col stride ch
    int fw[];          // FC weights [row][col]
    int fb[];          // FC bias
    int qmem[];        // queues, layer l at qbase[l], qlen x ch
    int qbase[], qptr[];
    bit qfull[];
    longint cycles;    // predicted cycles of the last step
    int sat_events;    // tanh results taken from the saturation shortcut

    function new(int nb_, int lpb_, int ch_, int fcn_, int fcm_,
                 int p_out_, int p_in_, int p_out1_, int p_in1_, int tu_);
      int off = 0;
      nb = nb_; lpb = lpb_; ch = ch_; fcn = fcn_; fcm = fcm_; nl = nb * lpb;
      p_out = p_out_; p_in = p_in_; p_out1 = p_out1_; p_in1 = p_in1_; tanh_units = tu_;
      kw = new[nl * 2 * ch * ch];
      fw = new[fcm * fcn];
      fb = new[fcm];
      qbase = new[nl]; qptr = new[nl]; qfull = new[nl];
      for (int l = 0; l < nl; l++) begin
        qbase[l] = off;
        off += qlen(l) * ic(l);
      end
      qmem = new[off];
      clear();
    endfunction

    function int qlen(int l); return 1 << (l % lpb); endfunction
    function int ic(int l);   return (l == 0) ? 1 : ch; endfunction
    function int kidx(int l, int tap, int row, int col);
      return ((l * 2 + tap) * ch + row) * ch + col;
    endfunction

    function void clear();
      for (int l = 0; l < nl; l++) begin qptr[l] = 0; qfull[l] = 0; end
    endfunction

    // cycles of one matrix-vector product on the engine
    function longint mm_cycles(int m, int n, int po, int pi);
      return longint'((m / po + 1) * (n / pi) + 2);
    endfunction

    // one generation step: input value x0, returns the sampled level
    function int step(int x0, output int score);
      int cur[], nxt[], popped[], o1;
      longint acc;
      int best, besti;
      cur = new[1]; cur[0] = x0;
      cycles = 1;                          // period between two samples
      for (int l = 0; l < nl; l++) begin
        int n, po, pi;
        n  = ic(l);
        po = (l == 0) ? p_out1 : p_out;
        pi = (l == 0) ? p_in1  : p_in;
        popped = new[n];
        for (int i = 0; i < n; i++) begin
          int a;
          a = qbase[l] + qptr[l] * n + i;
          popped[i] = qfull[l] ? qmem[a] : 0;
          qmem[a] = cur[i];
        end
        qptr[l]++;
        if (qptr[l] == qlen(l)) begin qptr[l] = 0; qfull[l] = 1; end
        nxt = new[ch];
        cycles += 2 + 2 * mm_cycles(ch, n, po, pi) + 1;
        for (int g = 0; g < ch / tanh_units; g++) begin
          bit all_sat;
          all_sat = 1;
          for (int u = 0; u < tanh_units; u++) begin
            int o;
            bit s;
            o = g * tanh_units + u;
            acc = 0;
            for (int i = 0; i < n; i++) acc += longint'(kw[kidx(l, 0, o, i)]) * longint'(popped[i]);
            o1 = fix(acc, 0);
            acc = 0;
            for (int i = 0; i < n; i++) acc += longint'(kw[kidx(l, 1, o, i)]) * longint'(cur[i]);
            nxt[o] = tanh_ref(fix(acc, o1), s);
            sat_events += s;
            all_sat &= s;
          end
          cycles += all_sat ? 3 : 49;
        end
        cur = nxt;
      end
      best = 0; besti = 0;
      for (int m = 0; m < fcm; m++) begin
        int v;
        acc = 0;
        for (int i = 0; i < fcn; i++) acc += longint'(fw[m * fcn + i]) * longint'(cur[i]);
        v = fix(acc, fb[m]);
        if (m == 0 || v > best) begin best = v; besti = m; end
      end
      cycles += mm_cycles(fcm, fcn, p_out, p_in) + 1;
      score = best;
      return besti;
    endfunction
  endclass

endpackage
