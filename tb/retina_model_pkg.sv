// retina_model_pkg: reference model used by the testbenches.
//
// It recomputes, in plain integer arithmetic, what the retina must produce:
// the weight of a hit for a receptor, the excitation levels of the cells of a
// TPU and the list of track words a TPU emits for an event. It also holds the
// test geometry: on layer l the cells have a pitch of 40+4l coordinate units,
// and the receptor of global cell (gu, gv) sits at the centre of its pitch,
// so a straight track of parameters (u, v) in cell units crosses layer l at
// x = u*pitch, y = v*pitch.
package retina_model_pkg;
  import retina_pkg::*;

  localparam int FRAC = 7;
  localparam int WMAX = 128;
  localparam int AMAX = 65535;

  function automatic int pitch(int l);
    return 40 + 4 * l;
  endfunction

  function automatic int rec(int g, int l);
    return g * pitch(l) + pitch(l) / 2;
  endfunction

  function automatic int weight(int hx, int hy, int rx, int ry, int sd, int sh);
    longint dx = hx - rx;
    longint dy = hy - ry;
    longint d2;
    longint q;
    if (dx < 0) dx = -dx;
    if (dy < 0) dy = -dy;
    if (dx > sd || dy > sd) return 0;
    d2 = dx * dx + dy * dy;
    if (d2 > longint'(sd) * sd) return 0;
    q = d2 / (longint'(1) << sh);
    if (q >= 8) return 0;
    return WMAX / (1 << q);
  endfunction

  // hit of a straight track (u, v) in cell units on layer l, with noise
  function automatic hit_t track_hit(real u, real v, int l, int noise);
    hit_t h;
    h.layer = 4'(l);
    h.x = 14'($rtoi(u * pitch(l)) + $urandom_range(0, 2 * noise) - noise);
    h.y = 14'($rtoi(v * pitch(l)) + $urandom_range(0, 2 * noise) - noise);
    return h;
  endfunction

  // excitation levels of a 4x4 TPU whose first cell is (u0, v0)
  function automatic void tpu_levels(input hit_t hits[$], input int u0, input int v0,
                                     input int sd, input int sh, output int acc[16]);
    for (int c = 0; c < 16; c++) begin
      longint s = 0;
      int gu = u0 + c % 4;
      int gv = v0 + c / 4;
      foreach (hits[i])
        s += weight(int'(hits[i].x), int'(hits[i].y), rec(gu, int'(hits[i].layer)),
                    rec(gv, int'(hits[i].layer)), sd, sh);
      acc[c] = (s > AMAX) ? AMAX : int'(s);
    end
  endfunction

  // track words of one TPU for one event, in cell order
  function automatic void tpu_tracks(input int acc[16], input int thr, input int u0,
                                     input int v0, input int gtpu, ref word_t out[$]);
    for (int c = 0; c < 16; c++) begin
      int row = c / 4;
      int col = c % 4;
      bit mx = (acc[c] >= thr) && (acc[c] != 0);
      longint s = 0, su = 0, sv = 0;
      for (int dr = -1; dr <= 1; dr++)
        for (int dc = -1; dc <= 1; dc++) begin
          int rr = row + dr;
          int cc = col + dc;
          if (rr >= 0 && rr < 4 && cc >= 0 && cc < 4) begin
            int n = rr * 4 + cc;
            s  += acc[n];
            su += dc * acc[n];
            sv += dr * acc[n];
            if (n < c && acc[n] >= acc[c]) mx = 0;
            if (n > c && acc[n] > acc[c]) mx = 0;
          end
        end
      if (mx) begin
        longint qu = ((su < 0 ? -su : su) * (1 << FRAC)) / s;
        longint qv = ((sv < 0 ? -sv : sv) * (1 << FRAC)) / s;
        int u = (u0 + col + 1) * (1 << FRAC) + int'(su < 0 ? -qu : qu);
        int v = (v0 + row + 1) * (1 << FRAC) + int'(sv < 0 ? -qv : qv);
        track_t t;
        t.tpu = 6'(gtpu);
        t.u = TRK_W'(u);
        t.v = TRK_W'(v);
        out.push_back('{eoe: 1'b0, data: t});
      end
    end
  endfunction
endpackage
