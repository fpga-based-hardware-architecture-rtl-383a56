// cm_ref_pkg: bit-exact behavioural reference of the CM tracker, written
// directly from the algorithm (ROI filter, midpoint reference time, dt
// scaling, warp, bilinear voting, variance gradient, gradient ascent, ROI
// update) with the fixed-point formats of cm_pkg, and without any of the
// hardware's pipelining, banking or forwarding. Testbenches compare the RTL
// against it.
package cm_ref_pkg;
  import cm_pkg::*;

  class cm_ref;
    int roi_w, roi_h, depth, iters;
    longint eta;
    // ROI position, Q.VEL_F
    longint roi_px, roi_py;
    // batch state
    longint ev_t[$];
    int     ev_x[$], ev_y[$];
    longint tmin, tmax;
    bit     seen;
    int     dropped;
    bit     ovf;
    // results
    longint vx, vy;
    longint t_ref, recip;
    int     votes_out;   // contributions that fell outside the ROI
    longint hist_vx[$], hist_vy[$];

    function new(int w, int h, int d, int it, longint e);
      roi_w = w; roi_h = h; depth = d; iters = it; eta = e;
      roi_px = 0; roi_py = 0;
      begin_batch();
    endfunction

    function void load_roi(int x, int y);
      roi_px = longint'(x) <<< VEL_F;
      roi_py = longint'(y) <<< VEL_F;
    endfunction

    function int roi_x(); return int'(roi_px >>> VEL_F); endfunction
    function int roi_y(); return int'(roi_py >>> VEL_F); endfunction

    function void begin_batch();
      ev_t.delete(); ev_x.delete(); ev_y.delete();
      seen = 0; dropped = 0; ovf = 0;
    endfunction

    // one sensor event of the batch
    function void push(longint t, int x, int y);
      int rx, ry;
      if (!seen || t < tmin) tmin = t;
      if (!seen || t > tmax) tmax = t;
      seen = 1;
      rx = x - roi_x();
      ry = y - roi_y();
      if (rx >= 0 && rx < roi_w && ry >= 0 && ry < roi_h) begin
        if (ev_t.size() < depth) begin
          ev_t.push_back(t); ev_x.push_back(rx); ev_y.push_back(ry);
        end else begin
          ovf = 1; dropped++;
        end
      end
    endfunction

    static function longint sat(longint v, int w);
      longint mx = (longint'(1) <<< (w - 1)) - 1;
      if (v > mx) return mx;
      if (v < -mx - 1) return -mx - 1;
      return v;
    endfunction

    // run the whole optimisation of the batch and move the ROI
    function void optimise();
      longint rng, half;
      int l2p, np;
      longint iw[], gx[], gy[];
      l2p = $clog2(roi_w) + $clog2(roi_h);
      np  = roi_w * roi_h;
      rng   = tmax - tmin;
      t_ref = tmin + (rng >>> 1);
      half  = (rng >>> 1) + (rng & 1);
      recip = (half == 0) ? 0 : ((longint'(1) <<< 31) / half);
      vx = 0; vy = 0;
      votes_out = 0;
      hist_vx.delete(); hist_vy.delete();
      iw = new[np]; gx = new[np]; gy = new[np];
      for (int it = 0; it < iters; it++) begin
        longint s, sx, sy, mu, mux, muy;
        logic signed [127:0] ax, ay, d;
        longint gxv, gyv;
        for (int p = 0; p < np; p++) begin iw[p] = 0; gx[p] = 0; gy[p] = 0; end
        s = 0; sx = 0; sy = 0;
        foreach (ev_t[e]) begin
          longint tdiff, dt, xw, yw, dx, dy, ox, oy, i, j;
          logic signed [127:0] prod;
          tdiff = ev_t[e] - t_ref;
          prod  = 128'(tdiff) * 128'(recip);
          dt    = longint'(prod >>> (31 - DT_F));
          if (dt > (1 <<< DT_F)) dt = 1 <<< DT_F;
          if (dt < -(1 <<< DT_F)) dt = -(1 <<< DT_F);
          xw = (longint'(ev_x[e]) <<< POS_F) - ((dt * vx) >>> (DT_F + VEL_F - POS_F));
          yw = (longint'(ev_y[e]) <<< POS_F) - ((dt * vy) >>> (DT_F + VEL_F - POS_F));
          i = xw >>> POS_F; j = yw >>> POS_F;
          dx = xw & ((1 << POS_F) - 1); dy = yw & ((1 << POS_F) - 1);
          ox = (1 << POS_F) - dx; oy = (1 << POS_F) - dy;
          for (int b = 0; b < 2; b++) begin
            for (int a = 0; a < 2; a++) begin
              longint px, py, w, cx, cy;
              px = i + a; py = j + b;
              w  = (a ? dx : ox) * (b ? dy : oy);
              cx = ((b ? dy : oy) * dt) >>> (POS_F + DT_F - W_F);
              cy = ((a ? dx : ox) * dt) >>> (POS_F + DT_F - W_F);
              if (a) cx = -cx;
              if (b) cy = -cy;
              if (px >= 0 && px < roi_w && py >= 0 && py < roi_h) begin
                iw[py * roi_w + px] += w;
                gx[py * roi_w + px] += cx;
                gy[py * roi_w + px] += cy;
                s += w; sx += cx; sy += cy;
              end else begin
                votes_out++;
              end
            end
          end
        end
        mu = s >>> l2p; mux = sx >>> l2p; muy = sy >>> l2p;
        ax = 0; ay = 0;
        for (int p = 0; p < np; p++) begin
          d  = 128'(iw[p] - mu);
          ax += d * 128'(gx[p] - mux);
          ay += d * 128'(gy[p] - muy);
        end
        gxv = longint'(sat_grad(ax >>> (l2p - 1 + 2 * W_F - GRAD_F)));
        gyv = longint'(sat_grad(ay >>> (l2p - 1 + 2 * W_F - GRAD_F)));
        vx = sat(vx + longint'((128'(gxv) * 128'(eta)) >>> (GRAD_F + ETA_F - VEL_F)), VEL_W);
        vy = sat(vy + longint'((128'(gyv) * 128'(eta)) >>> (GRAD_F + ETA_F - VEL_F)), VEL_W);
        hist_vx.push_back(vx); hist_vy.push_back(vy);
      end
      roi_px += vx;
      roi_py += vy;
    endfunction
  endclass
endpackage
