// tb_datcon_top -- end-to-end test of the DATCON ROI finder at its default (full) size.
//
// Stimulus: simulated events. Each track is a helix from the interaction point: a circle
// through the origin in r-phi (direction phi0, signed curvature kappa) and a straight line in
// r-z (polar angle theta, z offset z0). Its hits on the four SVD layers are found by
// intersecting the circle with the flat plane of the ladder it crosses; each hit fires a
// cluster of 1 to 3 strips on both sensor sides. Random noise strips are added. Strips of an
// event are sorted by layer, ladder, sensor, side (p before n) and strip, duplicates removed,
// and followed by an end-of-event token.
//
// Tracks have 100 MeV < pT (|kappa| < 4.5 /m in the 1.5 T field) and 25 deg < theta < 145 deg.
//
// Events:
//   A  one clean track (|kappa| < 1.5 /m): both crossing pixels must be covered;
//   B  a track seen in only two SVD layers, plus noise: no ROI (layer threshold);
//   C  an empty event: just the token;
//   D  ten events of 1..10 tracks with noise (a B-meson pair event has about ten tracks);
//   E  20 tracks spread in phi0 and theta: more than MAX_TRK = 32 candidates, so the
//      combiner must drop some (overflow).
// Checks: one token per event, in order; in every event without overflow (events with
// overflow are left out of all counts below) the number of ROIs
// is between one and two (a second one across z = 0) per MPH, with 2 x (r-phi candidates) x
// (r-z candidates) MPHs, read from the two Hough outputs; in event A the true crossing pixel
// on each PXD layer lies inside an ROI on the right module; over events A and D at least 90 %
// of the true crossing pixels are inside an ROI of their event. A fraction, not every pixel,
// because the r-z track finder fits straight lines to helices whose z grows with arc length,
// not radius, and so misses some low-momentum tracks (the method quotes above 90 % ROI
// finding efficiency above 100 MeV). The ROI output is stalled at random.
// Mechanism counters, each of which must be non-zero at the end: multi-strip clusters, input
// stalls (strip_ready low), output stalls, Hough busy cycles, threshold rejection (event B),
// Hough clustering (fewer candidates than over-threshold cells, read inside the engines),
// combiner overflow, clipped ROI windows, second ROIs across z = 0, end-of-event tokens.
`timescale 1ns/1ps
module tb_datcon_top;
  import datcon_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic strip_valid, strip_ready, roi_valid, roi_ready, trk_overflow, hough_busy;
  svd_strip_t strip;
  roi_t roi;

  datcon_top dut (.*);

  localparam real PI2 = 6.28318530717958647692;
  int checks = 0, failures = 0;

  // ---------------------------------------------------------------- mechanism counters
  int n_multi = 0, n_in_stall = 0, n_out_stall = 0, n_busy = 0, n_thresh = 0;
  int n_ovf = 0, n_clip = 0, n_tok = 0, pix_tot = 0, pix_hit = 0, n_cells = 0, n_cands = 0;
  int n_second = 0;

  // ---------------------------------------------------------------- event bookkeeping
  typedef struct {
    int  ntrk;
    bit  check_pix;          // check true pixels (not in the overflow event)
    int  exp_rois;           // -1: use the Hough candidate counts, else exact
    int  lay[$], lad[$], u[$], v[$];
    bit  fwd[$];
  } ev_t;
  ev_t evq[$];
  int  ev_sent = 0;

  // ---------------------------------------------------------------- strip generation
  int keys[$];

  function automatic int iround(real v); return $rtoi($floor(v + 0.5)); endfunction

  // position on the circle at radius r
  function automatic void circ(input real phi0, input real k, input real r, output real x, output real y);
    real p;
    p = phi0 + $asin(r * k / 2.0);
    x = r * $cos(p); y = r * $sin(p);
  endfunction

  function automatic void add_cluster(int l, int lad, int sen, bit ps, real c, int nmax);
    int sz, first;
    sz = $urandom_range(1, 3);
    if (sz > 1) n_multi++;
    first = (sz == 2) ? $rtoi($floor(c)) : iround(c) - (sz == 3 ? 1 : 0);
    for (int i = 0; i < sz; i++) begin
      int s;
      s = first + i;
      if (s >= 0 && s < nmax)
        keys.push_back(((((l * 16 + lad) * 8 + sen) * 2 + (ps ? 0 : 1)) * 1024) + s);
    end
  endfunction

  // SVD strips of one track; layers with bit clear in lmask are left out
  function automatic void track_strips(real phi0, real k, real cot, real z0, int lmask);
    for (int l = 0; l < SVD_LAYERS; l++) begin
      real R, x, y, r, psi, pp, np;
      int nl, best;
      if (!lmask[l]) continue;
      R = SVD_RADIUS[l]; nl = SVD_LADDERS[l];
      pp = SVD_P_PITCH[l] / 10.0; np = SVD_N_PITCH[l] / 10.0;
      circ(phi0, k, R, x, y);
      psi = $atan2(y, x);
      if (psi < 0) psi += PI2;
      best = iround(psi * nl / PI2) % nl;
      for (int dl = 0; dl < 3; dl++) begin
        int lad;
        real cb, sb, uu, d, zz, s_arc, zl;
        lad = (best + (dl == 0 ? 0 : dl == 1 ? 1 : nl - 1)) % nl;
        cb = $cos(PI2 * lad / nl); sb = $sin(PI2 * lad / nl);
        r = R;
        for (int it = 0; it < 8; it++) begin
          circ(phi0, k, r, x, y);
          d = x * cb + y * sb;
          r = r * R / d;
        end
        circ(phi0, k, r, x, y);
        uu = -x * sb + y * cb;
        if (uu < -384.0 * pp || uu >= 384.0 * pp) continue;
        s_arc = 2.0 / k * $asin(r * k / 2.0);
        zz = z0 + s_arc * cot;
        zl = zz + SVD_SENSORS[l] * (SVD_SENSOR_LEN / 2.0);
        if (zl < 0.0 || zl >= SVD_SENSORS[l] * SVD_SENSOR_LEN) break;
        begin
          int sen;
          real zc;
          sen = $rtoi($floor(zl / SVD_SENSOR_LEN));
          zc = (2 * sen - (SVD_SENSORS[l] - 1)) * (SVD_SENSOR_LEN / 2.0);
          add_cluster(l, lad, sen, 1'b1, uu / pp + 383.5, SVD_P_STRIPS);
          add_cluster(l, lad, sen, 1'b0, (zz - zc) / np + (SVD_N_STRIPS[l] - 1) / 2.0, SVD_N_STRIPS[l]);
        end
        break;
      end
    end
  endfunction

  function automatic void noise(int n);
    for (int i = 0; i < n; i++) begin
      int l;
      l = $urandom_range(0, 3);
      keys.push_back(((((l * 16 + $urandom_range(0, SVD_LADDERS[l] - 1)) * 8
                        + $urandom_range(0, SVD_SENSORS[l] - 1)) * 2 + $urandom_range(0, 1)) * 1024)
                     + $urandom_range(0, 511));
    end
  endfunction

  // true crossing pixel on both PXD layers, in the ROI finder's pixel numbering
  // returns 0 if the crossing is too close to a module border to name one module
  function automatic bit pxd_pixels(input real phi0, input real k, input real cot, input real z0,
                                    ref ev_t e);
    for (int l = 0; l < PXD_LAYERS; l++) begin
      real R, psi, ph, zz, fz, pc, lc, vr;
      int lad, u, v;
      R = PXD_RADIUS[l];
      psi = phi0 + $asin(R * k / 2.0);
      psi = psi - PI2 * $floor(psi / PI2);
      ph = psi / PI2 * PXD_LADDERS[l];
      lad = $rtoi($floor(ph));
      u = $rtoi($floor((ph - lad) * PXD_U_PIXELS));
      zz = z0 + 2.0 / k * $asin(R * k / 2.0) * cot;
      fz = (zz < 0 ? -zz : zz) * 10.0;
      pc = PXD_V_PITCH_C[l]; lc = PXD_V_CENTRAL * pc;
      vr = (fz < lc) ? fz / pc : PXD_V_CENTRAL + (fz - lc) / PXD_V_PITCH_O;
      v = $rtoi($floor(vr));
      if (u < 3 || u > PXD_U_PIXELS - 4 || v < 3 || v > PXD_V_PIXELS - 4) return 0;
      e.lay.push_back(l); e.lad.push_back(lad); e.u.push_back(u); e.v.push_back(v);
      e.fwd.push_back(zz >= 0.0);
    end
    return 1;
  endfunction

  // random track inside the acceptance with a clean PXD crossing
  function automatic void rand_track(ref ev_t e, input real phi_lo, input real phi_hi,
                                     input real th_lo, input real th_hi, input real kmax);
    real phi0, k, th, cot, z0;
    ev_t tmp;
    do begin
      tmp.lay.delete(); tmp.lad.delete(); tmp.u.delete(); tmp.v.delete(); tmp.fwd.delete();
      phi0 = (phi_lo + (phi_hi - phi_lo) * $urandom_range(0, 10000) / 10000.0) * PI2 / 360.0;
      k    = kmax * (-1.0 + 2.0 * $urandom_range(0, 10000) / 10000.0) * 1.0e-5;
      if (k > -0.5e-5 && k < 0.5e-5) k = 0.5e-5;
      th   = (th_lo + (th_hi - th_lo) * $urandom_range(0, 10000) / 10000.0) * PI2 / 360.0;
      cot  = $cos(th) / $sin(th);
      z0   = -2000.0 + 4000.0 * $urandom_range(0, 10000) / 10000.0;
    end while (!pxd_pixels(phi0, k, cot, z0, tmp));
    foreach (tmp.lay[i]) begin
      e.lay.push_back(tmp.lay[i]); e.lad.push_back(tmp.lad[i]); e.u.push_back(tmp.u[i]);
      e.v.push_back(tmp.v[i]); e.fwd.push_back(tmp.fwd[i]);
    end
    e.ntrk++;
    track_strips(phi0, k, cot, z0, 4'hf);
  endfunction

  task automatic send_event(ev_t e);
    keys.sort();
    evq.push_back(e);
    for (int i = 0; i < keys.size(); i++) begin
      svd_strip_t s;
      int kk;
      if (i > 0 && keys[i] == keys[i - 1]) continue;
      kk = keys[i];
      s = '0;
      s.strip  = 10'(kk % 1024); kk /= 1024;
      s.pside  = (kk % 2) == 0;  kk /= 2;
      s.sensor = 3'(kk % 8);     kk /= 8;
      s.ladder = 4'(kk % 16);    kk /= 16;
      s.layer  = 2'(kk);
      @(negedge clk); strip_valid = 1; strip = s; #1;
      while (!strip_ready) begin @(negedge clk); #1; end
      @(posedge clk); #1 strip_valid = 0;
    end
    @(negedge clk); strip_valid = 1; strip = '0; strip.eoe = 1; #1;
    while (!strip_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 strip_valid = 0;
    keys.delete();
    ev_sent++;
  endtask

  // ---------------------------------------------------------------- stimulus
  initial begin
    ev_t e;
    strip_valid = 0; strip = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // A: one clean track
    e = '{ntrk: 0, check_pix: 1, exp_rois: -1, default: '{}};
    rand_track(e, 0.0, 360.0, 40.0, 140.0, 1.5);
    send_event(e);

    // B: a track in two layers only, plus noise
    e = '{ntrk: 0, check_pix: 0, exp_rois: 0, default: '{}};
    track_strips(1.1, 3.0e-5, 0.3, 500.0, 4'b0101);
    noise(3);
    send_event(e);

    // C: empty event
    e = '{ntrk: 0, check_pix: 0, exp_rois: 0, default: '{}};
    send_event(e);

    // D: typical events
    for (int n = 1; n <= 10; n++) begin
      e = '{ntrk: 0, check_pix: 1, exp_rois: -1, default: '{}};
      for (int t = 0; t < n; t++) rand_track(e, 0.0, 360.0, 25.0, 145.0, 4.5);
      noise($urandom_range(0, 8));
      send_event(e);
    end

    // E: overflow
    e = '{ntrk: 0, check_pix: 0, exp_rois: -2, default: '{}};
    for (int t = 0; t < 20; t++) rand_track(e, 18.0 * t, 18.0 * t + 6.0, 30.0 + 5.0 * t, 32.0 + 5.0 * t, 4.5);
    send_event(e);
  end

  // ---------------------------------------------------------------- monitors
  int cand_xy = 0, cand_rz = 0, ovf_ev = 0;
  roi_t rois[$];

  always @(posedge clk) roi_ready <= ($urandom_range(0, 3) != 0);
  initial roi_ready = 0;

  always @(posedge clk) if (rst_n) begin
    if (strip_valid && !strip_ready) n_in_stall++;
    if (roi_valid && !roi_ready) n_out_stall++;
    if (hough_busy) n_busy++;
    if (trk_overflow) begin n_ovf++; ovf_ev++; end
    if (dut.cxy_valid && dut.cxy_ready && !dut.cxy.eoe) begin cand_xy++; n_cands++; end
    if (dut.crz_valid && dut.crz_ready && !dut.crz.eoe) begin cand_rz++; n_cands++; end
    // cells over threshold, counted while the engines read out (state 3)
    if (int'(dut.u_hough_phi.state) == 3)   n_cells += $countones(dut.u_hough_phi.pass);
    if (int'(dut.u_hough_theta.state) == 3) n_cells += $countones(dut.u_hough_theta.pass);
  end

  function automatic bit in_roi(ev_t e, int i);
    foreach (rois[j])
      if (int'(rois[j].layer) == e.lay[i] && int'(rois[j].ladder) == e.lad[i] && rois[j].fwd == e.fwd[i]
          && e.u[i] >= int'(rois[j].u_min) && e.u[i] <= int'(rois[j].u_max)
          && e.v[i] >= int'(rois[j].v_min) && e.v[i] <= int'(rois[j].v_max)) return 1;
    return 0;
  endfunction

  always @(posedge clk) if (rst_n && roi_valid && roi_ready) begin
    if (!roi.eoe) begin
      rois.push_back(roi);
      if (roi.u_min == 0 || roi.v_min == 0 || roi.u_max == PXD_U_PIXELS - 1 || roi.v_max == PXD_V_PIXELS - 1)
        n_clip++;
      if (rois.size() > 1 && roi.v_min == 0 && rois[rois.size() - 2].v_min == 0 &&
          roi.fwd != rois[rois.size() - 2].fwd && roi.ladder == rois[rois.size() - 2].ladder) n_second++;
    end else begin
      ev_t e;
      int exp_n;
      n_tok++;
      checks++;
      if (evq.size() == 0) begin failures++; $display("token without event"); end
      else begin
        e = evq.pop_front();
        // candidate counts are complete: the combiner emits only after both token arrive
        exp_n = e.exp_rois >= 0 ? e.exp_rois : 2 * cand_xy * cand_rz;
        if (e.exp_rois == -2) begin
          if (ovf_ev == 0) begin failures++; $display("event %0d: no overflow", n_tok); end
        end else if (ovf_ev == 0 && (rois.size() < exp_n || rois.size() > 2 * exp_n)) begin
          failures++;
          $display("event %0d: %0d ROIs, expected %0d (cand %0d x %0d)", n_tok, rois.size(), exp_n, cand_xy, cand_rz);
        end
        if (e.exp_rois == 0 && e.ntrk == 0 && n_tok == 2 && cand_xy == 0) n_thresh++;
        if (e.check_pix && ovf_ev == 0) foreach (e.lay[i]) begin
          pix_tot++;
          if (in_roi(e, i)) pix_hit++;
          else begin
            if (n_tok == 1) failures++;
            $display("event %0d: PXD L%0d ladder %0d %s u %0d v %0d not covered", n_tok, e.lay[i] + 1,
                     e.lad[i], e.fwd[i] ? "fwd" : "bwd", e.u[i], e.v[i]);
          end
        end
        $display("event %0d: %0d tracks, candidates %0d x %0d, %0d ROIs, %0d dropped", n_tok, e.ntrk,
                 cand_xy, cand_rz, rois.size(), ovf_ev);
      end
      rois.delete();
      cand_xy = 0; cand_rz = 0; ovf_ev = 0;
      if (evq.size() == 0 && ev_sent == 14) finish();
    end
  end

  task automatic mech(string name, int n);
    checks++;
    $display("  %-28s %0d", name, n);
    if (n == 0) begin failures++; $display("  mechanism never exercised: %s", name); end
  endtask

  task automatic finish();
    $display("mechanisms:");
    mech("multi-strip clusters", n_multi);
    mech("input stall cycles", n_in_stall);
    mech("output stall cycles", n_out_stall);
    mech("Hough busy cycles", n_busy);
    mech("threshold rejection", n_thresh);
    mech("Hough clustering", n_cells > n_cands ? n_cells - n_cands : 0);
    mech("candidate overflow", n_ovf);
    mech("clipped ROI windows", n_clip);
    mech("second ROIs across z = 0", n_second);
    mech("end-of-event tokens", n_tok);
    checks++;
    $display("PXD crossing pixels inside an ROI: %0d of %0d", pix_hit, pix_tot);
    if (pix_hit * 10 < pix_tot * 9) begin failures++; $display("ROI finding efficiency below 90 %%"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog: %0d events outstanding", evq.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
